// tb_softmax_norm: second softmax pass for two query rows. Scores, host
// scalars and padding are set up as for the first pass; the global max/sum
// given to the unit are computed in the testbench. Every written attention
// score is compared with exp(x - m) / Z (FP16 tolerance), padding must give
// 0, and the per-block cycle count must match load + 64 normalisation
// cycles (2 elements per cycle) + writes.
module tb_softmax_norm;
  import hilos_pkg::*;
  import tb_pkg::*;
  localparam int DG = 2, H = 16, LAT = 8;
  logic clk = 0, rst_n = 0, start = 0;
  maddr_t qk_addr, sc_addr;
  len_t stored_len, valid_len, nb;
  fp32_t gmax [DG], gsum [DG];
  fp32_t host_sc [DG][H];
  logic busy, blk_done, done;
  int checks = 0, failures = 0;

  mem_rd_if rd ();
  mem_wr_if wr ();
  dram_model #(.AWL(14), .LAT(LAT)) u_dram (
    .clk, .rst_n, .rd_valid(rd.req_valid), .rd_ready(rd.req_ready), .rd_addr(rd.req_addr),
    .rsp_valid(rd.rsp_valid), .rsp_data(rd.rsp_data),
    .wr_valid(wr.req_valid), .wr_ready(wr.req_ready), .wr_addr(wr.req_addr), .wr_data(wr.req_data));
  softmax_norm #(.DGROUP(DG), .HBUF(H)) dut (.*);
  always #5 clk = ~clk;

  task automatic run(int sl, int vl);
    real x [DG][1024];
    real m [DG], z [DG];
    int  nbk, tprev;
    nbk = (vl + 127) / 128;
    qk_addr = maddr_t'(256); sc_addr = maddr_t'(4096);
    for (int g = 0; g < DG; g++) begin
      for (int h = 0; h < H; h++) host_sc[g][h] = r2f(urand(-4.0, 8.0));
      for (int i = 0; i < nbk * 128; i++) begin
        logic [15:0] v;
        v = r2h(urand(-6.0, 6.0));
        u_dram.mem[256 + g * nbk * 4 + i / 32][16 * (i % 32) +: 16] = v;
        if (i >= vl) x[g][i] = -1e4;
        else if (i >= sl) x[g][i] = f2r(host_sc[g][i - sl]);
        else x[g][i] = h2r(v);
      end
      m[g] = -1e30; z[g] = 0.0;
      for (int i = 0; i < nbk * 128; i++) if (x[g][i] > m[g]) m[g] = x[g][i];
      for (int i = 0; i < nbk * 128; i++) z[g] += $exp(x[g][i] - m[g]);
      gmax[g] = r2f(m[g]); gsum[g] = r2f(z[g]);
    end
    stored_len = len_t'(sl); valid_len = len_t'(vl); nb = len_t'(nbk);
    @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
    tprev = $time;
    while (!done) begin
      @(posedge clk); #1;
      if (blk_done) begin
        int dt;
        dt = ($time - tprev) / 10;
        tprev = $time;
        checks++;
        if (dt < 4 * DG + 64 + 4 * DG || dt > 4 * DG + LAT + 64 + 4 * DG + 4) begin
          failures++; $display("FAIL block took %0d cycles", dt);
        end
      end
    end
    for (int g = 0; g < DG; g++)
      for (int i = 0; i < nbk * 128; i++) begin
        real e, got;
        e   = $exp(x[g][i] - m[g]) / z[g];
        got = h2r(u_dram.mem[4096 + g * nbk * 4 + i / 32][16 * (i % 32) +: 16]);
        checks++;
        if (!close(got, e, 2e-3, 6e-8)) begin
          failures++;
          if (failures < 10) $display("FAIL score g=%0d i=%0d %g exp %g", g, i, got, e);
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(300, 310);
    run(128, 128);
    run(20, 21);
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
