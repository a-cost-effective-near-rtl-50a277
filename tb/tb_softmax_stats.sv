// tb_softmax_stats: first softmax pass for a GQA group of two query rows.
// Random FP16 scores are placed in the DRAM model; the last tokens are
// replaced by host scalars and the tail of the last block is padding. The
// testbench releases QK blocks one at a time (the unit must wait for each),
// then compares the global max and sum with a direct real-valued computation
// over the masked score vector. Cycle check: with all blocks available, each
// block takes its load plus 32 max cycles, 64 exp/sum cycles and one update.
module tb_softmax_stats;
  import hilos_pkg::*;
  import tb_pkg::*;
  localparam int DG = 2, H = 16, LAT = 8;
  logic clk = 0, rst_n = 0, start = 0;
  maddr_t qk_addr;
  len_t stored_len, valid_len, nb, qk_avail;
  fp32_t host_sc [DG][H];
  logic busy, blk_done, done;
  fp32_t gmax [DG], gsum [DG];
  int checks = 0, failures = 0, n_wait = 0;

  mem_rd_if rd ();
  mem_wr_if wr ();
  assign wr.req_valid = 1'b0; assign wr.req_addr = '0; assign wr.req_data = '0;
  dram_model #(.AWL(14), .LAT(LAT)) u_dram (
    .clk, .rst_n, .rd_valid(rd.req_valid), .rd_ready(rd.req_ready), .rd_addr(rd.req_addr),
    .rsp_valid(rd.rsp_valid), .rsp_data(rd.rsp_data),
    .wr_valid(wr.req_valid), .wr_ready(wr.req_ready), .wr_addr(wr.req_addr), .wr_data(wr.req_data));
  softmax_stats #(.DGROUP(DG), .HBUF(H)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) if (busy && !blk_done && dut.state == 3'd1) n_wait <= n_wait + 1;

  task automatic run(int sl, int vl, bit gradual);
    real x [DG][1024];
    int  nbk, t0, tprev;
    nbk = (vl + 127) / 128;
    qk_addr = maddr_t'(256);
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
    end
    stored_len = len_t'(sl); valid_len = len_t'(vl); nb = len_t'(nbk);
    qk_avail = gradual ? '0 : nb;
    @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
    t0 = $time; tprev = t0;
    while (!done) begin
      @(posedge clk); #1;
      if (blk_done && !gradual) begin
        int dt;
        dt = ($time - tprev) / 10;
        tprev = $time;
        checks++;
        if (dt < 4 * DG + 32 + 64 + 1 || dt > 4 * DG + LAT + 32 + 64 + 4) begin
          failures++; $display("FAIL block took %0d cycles", dt);
        end
      end
      if (gradual && ($time / 10) % 300 == 0 && qk_avail < nb) qk_avail = qk_avail + 1'b1;
    end
    for (int g = 0; g < DG; g++) begin
      real m, z;
      m = -1e30; z = 0.0;
      for (int i = 0; i < nbk * 128; i++) if (x[g][i] > m) m = x[g][i];
      for (int i = 0; i < nbk * 128; i++) z += $exp(x[g][i] - m);
      checks += 2;
      if (f2r(gmax[g]) != m) begin failures++; $display("FAIL gmax[%0d] %g exp %g", g, f2r(gmax[g]), m); end
      if (!close(f2r(gsum[g]), z, 1e-4, 0.0)) begin failures++; $display("FAIL gsum[%0d] %g exp %g", g, f2r(gsum[g]), z); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(300, 310, 1'b1);
    run(128, 128, 1'b0);
    run(500, 512, 1'b0);
    run(37, 41, 1'b0);
    checks++;
    if (n_wait == 0) begin failures++; $display("FAIL unit never waited for QK blocks"); end
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
