// tb_sv_unit: score-value product for two query rows over random FP16
// scores and values. The testbench releases score blocks one at a time
// (the unit must wait) and compares the written result with
// sum_j score[j]*V[j][d] in real arithmetic. Cycle check: one block takes
// its score and 512 value reads plus 128 MAC cycles.
module tb_sv_unit;
  import hilos_pkg::*;
  import tb_pkg::*;
  localparam int DG = 2, LAT = 8;
  logic clk = 0, rst_n = 0, start = 0;
  maddr_t sc_addr, v_addr, out_addr;
  len_t nb, sc_avail;
  logic busy, blk_done, done;
  int checks = 0, failures = 0, n_wait = 0;

  mem_rd_if rd ();
  mem_wr_if wr ();
  dram_model #(.AWL(14), .LAT(LAT)) u_dram (
    .clk, .rst_n, .rd_valid(rd.req_valid), .rd_ready(rd.req_ready), .rd_addr(rd.req_addr),
    .rsp_valid(rd.rsp_valid), .rsp_data(rd.rsp_data),
    .wr_valid(wr.req_valid), .wr_ready(wr.req_ready), .wr_addr(wr.req_addr), .wr_data(wr.req_data));
  sv_unit #(.DGROUP(DG)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) if (dut.state == 3'd1) n_wait <= n_wait + 1;

  task automatic run(int nbk, bit gradual);
    int tprev;
    sc_addr = maddr_t'(0); v_addr = maddr_t'(256); out_addr = maddr_t'(8192);
    for (int a = 0; a < 4 * DG * nbk; a++)
      for (int e = 0; e < 32; e++) u_dram.mem[a][16*e +: 16] = r2h(urand(0.0, 0.02));
    for (int a = 0; a < nbk * 512; a++)
      for (int e = 0; e < 32; e++) u_dram.mem[256 + a][16*e +: 16] = r2h(urand(-2.0, 2.0));
    nb = len_t'(nbk);
    sc_avail = gradual ? '0 : nb;
    @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
    tprev = $time;
    while (!done) begin
      @(posedge clk); #1;
      if (gradual && ($time / 10) % 1000 == 0 && sc_avail < nb) sc_avail = sc_avail + 1'b1;
      if (blk_done && !gradual) begin
        int dt;
        dt = ($time - tprev) / 10;
        tprev = $time;
        checks++;
        if (dt < 4 * DG + 512 + 128 || dt > 4 * DG + 512 + LAT + 128 + 4) begin
          failures++; $display("FAIL block took %0d cycles", dt);
        end
      end
    end
    for (int g = 0; g < DG; g++)
      for (int d = 0; d < 128; d++) begin
        real s, got;
        s = 0.0;
        for (int j = 0; j < nbk * 128; j++)
          s += h2r(u_dram.mem[g * nbk * 4 + j / 32][16 * (j % 32) +: 16]) *
               h2r(u_dram.mem[256 + j * 4 + d / 32][16 * (d % 32) +: 16]);
        got = h2r(u_dram.mem[8192 + g * 4 + d / 32][16 * (d % 32) +: 16]);
        checks++;
        if (!close(got, s, 2e-3, 2e-4)) begin
          failures++;
          if (failures < 10) $display("FAIL out g=%0d d=%0d %g exp %g", g, d, got, s);
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(3, 1'b1);
    run(2, 1'b0);
    checks++;
    if (n_wait == 0) begin failures++; $display("FAIL unit never waited for scores"); end
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
