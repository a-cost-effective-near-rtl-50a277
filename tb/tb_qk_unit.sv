// tb_qk_unit: query-key product for a GQA group of two query rows over
// random FP16 queries and keys. Each written score is compared with
// sum_d q[d]*k[j][d] / sqrt(128) computed in real arithmetic. Cycle check:
// each key block takes 512 reads, a 128-cycle transpose, 128 MAC cycles and
// the score writes.
module tb_qk_unit;
  import hilos_pkg::*;
  import tb_pkg::*;
  localparam int DG = 2, LAT = 8;
  logic clk = 0, rst_n = 0, start = 0;
  maddr_t q_addr, k_addr, qk_addr;
  len_t nb;
  logic busy, blk_done, done;
  int checks = 0, failures = 0;

  mem_rd_if rd ();
  mem_wr_if wr ();
  dram_model #(.AWL(14), .LAT(LAT)) u_dram (
    .clk, .rst_n, .rd_valid(rd.req_valid), .rd_ready(rd.req_ready), .rd_addr(rd.req_addr),
    .rsp_valid(rd.rsp_valid), .rsp_data(rd.rsp_data),
    .wr_valid(wr.req_valid), .wr_ready(wr.req_ready), .wr_addr(wr.req_addr), .wr_data(wr.req_data));
  qk_unit #(.DGROUP(DG)) dut (.*);
  always #5 clk = ~clk;

  task automatic run(int nbk);
    int tprev;
    q_addr = maddr_t'(0); k_addr = maddr_t'(64); qk_addr = maddr_t'(8192);
    for (int a = 0; a < 4 * DG; a++)
      for (int e = 0; e < 32; e++) u_dram.mem[a][16*e +: 16] = r2h(urand(-1.0, 1.0));
    for (int a = 0; a < nbk * 512; a++)
      for (int e = 0; e < 32; e++) u_dram.mem[64 + a][16*e +: 16] = r2h(urand(-1.0, 1.0));
    nb = len_t'(nbk);
    @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
    tprev = -1;
    while (!done) begin
      @(posedge clk); #1;
      if (blk_done) begin
        int dt;
        dt = ($time - tprev) / 10;
        if (tprev >= 0) begin
          checks++;
          if (dt < 512 + 128 + 128 + 4 * DG || dt > 512 + LAT + 128 + 128 + 4 * DG + 6) begin
            failures++; $display("FAIL block took %0d cycles", dt);
          end
        end
        tprev = $time;
      end
    end
    for (int g = 0; g < DG; g++)
      for (int j = 0; j < nbk * 128; j++) begin
        real s, got;
        s = 0.0;
        for (int d = 0; d < 128; d++)
          s += h2r(u_dram.mem[g * 4 + d / 32][16 * (d % 32) +: 16]) *
               h2r(u_dram.mem[64 + j * 4 + d / 32][16 * (d % 32) +: 16]);
        s = s / $sqrt(128.0);
        got = h2r(u_dram.mem[8192 + g * nbk * 4 + j / 32][16 * (j % 32) +: 16]);
        checks++;
        if (!close(got, s, 2e-3, 2e-4)) begin
          failures++;
          if (failures < 10) $display("FAIL qk g=%0d j=%0d %g exp %g", g, j, got, s);
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(3);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
