// tb_hilos_attn_top: end-to-end test of the attention accelerator at its
// default parameters (one query head per KV head, 16-entry host scalar
// buffer) with a DRAM model that stalls at random.
//
// Each job places a random query, keys and values in DRAM, writes
// host-precomputed scores for the newest tokens (delayed KV write-back) into
// the host scalar buffer, runs the accelerator and compares the 128 outputs
// with a reference computed in real arithmetic. The reference rounds the
// scores and the probabilities to FP16 where the design stores them in DRAM.
// The test counts how often each mechanism occurred and fails if one never
// did: padding mask, host scalars, global max raised / kept by the streaming
// update, the statistics and score-value units waiting on their producers,
// DRAM back-pressure, and read contention between units.
module tb_hilos_attn_top;
  import hilos_pkg::*;
  import tb_pkg::*;
  localparam int LAT = 10;
  localparam int DG  = 1;

  logic clk = 0, rst_n = 0, start = 0;
  attn_job_t job_in;
  logic job_ready, busy, done;
  logic [31:0] last_cycles;
  logic hs_we = 0;
  logic [0:0] hs_g = '0;
  logic [3:0] hs_idx = '0;
  fp32_t hs_data = '0;
  logic m_rd_valid, m_rd_ready, m_rsp_valid, m_wr_valid, m_wr_ready;
  maddr_t m_rd_addr, m_wr_addr;
  mword_t m_rsp_data, m_wr_data;
  int checks = 0, failures = 0;

  hilos_attn_top dut (.*);
  dram_model #(.AWL(16), .LAT(LAT), .STALL(1'b1)) u_dram (
    .clk, .rst_n, .rd_valid(m_rd_valid), .rd_ready(m_rd_ready), .rd_addr(m_rd_addr),
    .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data),
    .wr_valid(m_wr_valid), .wr_ready(m_wr_ready), .wr_addr(m_wr_addr), .wr_data(m_wr_data));
  always #5 clk = ~clk;

  // ---------------- mechanism counters ----------------
  int n_pad = 0, n_host = 0, n_raise = 0, n_keep = 0, n_st_wait = 0, n_sv_wait = 0, n_contend = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (dut.u_st.state == 3'd5 && dut.u_st.blk != 0) begin   // S_UPD after the first block
      if (dut.u_st.g_lane[0].u_upd.upd) n_raise <= n_raise + 1;
      else n_keep <= n_keep + 1;
    end
    if (dut.u_st.state == 3'd1 && !(dut.qk_avail > dut.u_st.blk)) n_st_wait <= n_st_wait + 1;
    if (dut.u_sv.state == 3'd1 && !(dut.sc_avail > dut.u_sv.blk)) n_sv_wait <= n_sv_wait + 1;
    if ((int'(dut.c_rd_valid[0]) + int'(dut.c_rd_valid[1]) + int'(dut.c_rd_valid[2]) + int'(dut.c_rd_valid[3])) > 1)
      n_contend <= n_contend + 1;
  end

  localparam int Q_A = 0, K_A = 64, V_A = 16384, QK_A = 32768, SC_A = 40960, OUT_A = 49152;

  task automatic run_job(int sl, int vl, real hot);
    int  nbk;
    real q [128];
    real x [2048];
    real m, z, p16, out_ref [128];
    nbk = (vl + 127) / 128;
    for (int d = 0; d < 128; d++) begin
      logic [15:0] h;
      h = r2h(urand(-1.0, 1.0));
      u_dram.mem[Q_A + d / 32][16 * (d % 32) +: 16] = h;
      q[d] = h2r(h);
    end
    for (int j = 0; j < nbk * 128; j++)
      for (int d = 0; d < 128; d++) begin
        real kv;
        kv = (j < sl) ? urand(-1.0, 1.0) : 0.0;
        if (j == nbk * 128 - 100 && j < sl) kv = hot * q[d];     // a strong late key
        u_dram.mem[K_A + j * 4 + d / 32][16 * (d % 32) +: 16] = r2h(kv);
        u_dram.mem[V_A + j * 4 + d / 32][16 * (d % 32) +: 16] = (j < vl) ? r2h(urand(-1.0, 1.0)) : 16'h0;
      end
    // host-precomputed scores of the buffered tokens
    for (int i = 0; i < vl - sl; i++) begin
      @(posedge clk); #1;
      hs_we = 1; hs_idx = 4'(i); hs_data = r2f(urand(-2.0, 2.0));
      x[sl + i] = f2r(hs_data);
      n_host++;
    end
    @(posedge clk); #1 hs_we = 0;
    // reference scores
    for (int j = 0; j < sl; j++) begin
      real s;
      s = 0.0;
      for (int d = 0; d < 128; d++) s += q[d] * h2r(u_dram.mem[K_A + j * 4 + d / 32][16 * (d % 32) +: 16]);
      x[j] = h2r(r2h(s / $sqrt(128.0)));
    end
    for (int j = vl; j < nbk * 128; j++) begin x[j] = -1e4; n_pad++; end
    m = -1e30; z = 0.0;
    for (int j = 0; j < nbk * 128; j++) if (x[j] > m) m = x[j];
    for (int j = 0; j < nbk * 128; j++) z += $exp(x[j] - m);
    for (int d = 0; d < 128; d++) out_ref[d] = 0.0;
    for (int j = 0; j < nbk * 128; j++) begin
      p16 = h2r(r2h($exp(x[j] - m) / z));
      for (int d = 0; d < 128; d++)
        out_ref[d] += p16 * h2r(u_dram.mem[V_A + j * 4 + d / 32][16 * (d % 32) +: 16]);
    end
    // run
    job_in = '{q_addr: maddr_t'(Q_A), k_addr: maddr_t'(K_A), v_addr: maddr_t'(V_A),
               qk_addr: maddr_t'(QK_A), sc_addr: maddr_t'(SC_A), out_addr: maddr_t'(OUT_A),
               stored_len: len_t'(sl), valid_len: len_t'(vl)};
    wait (job_ready);
    @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
    while (!done) @(posedge clk);
    #1;
    $display("job sl=%0d vl=%0d blocks=%0d: %0d cycles", sl, vl, nbk, last_cycles);
    // lower bound: per block at least 512 K reads + 2*128 transpose/MAC, plus the other units' tail
    checks++;
    if (last_cycles < 32'(nbk * (512 + 256))) begin failures++; $display("FAIL job faster than the K-read bound"); end
    for (int d = 0; d < 128; d++) begin
      real got;
      got = h2r(u_dram.mem[OUT_A + d / 32][16 * (d % 32) +: 16]);
      checks++;
      if (!close(got, out_ref[d], 5e-3, 2e-3)) begin
        failures++;
        if (failures < 10) $display("FAIL out[%0d] %g exp %g", d, got, out_ref[d]);
      end
    end
  endtask

  initial begin
    for (int a = 0; a < 2**16; a++) u_dram.mem[a] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_job(290, 300, 0.0);     // 3 blocks, 10 host scalars, padding
    run_job(384, 384, 3.0);     // 3 full blocks, strong key in the last block
    run_job(100, 116, 0.0);     // one block, full host buffer
    $display("mechanisms: pad=%0d host=%0d max_raised=%0d max_kept=%0d stats_wait=%0d sv_wait=%0d contention=%0d dram_stalls=%0d",
             n_pad, n_host, n_raise, n_keep, n_st_wait, n_sv_wait, n_contend, u_dram.n_stall);
    checks += 8;
    if (n_pad == 0)     begin failures++; $display("FAIL padding never masked"); end
    if (n_host == 0)    begin failures++; $display("FAIL no host scalars"); end
    if (n_raise == 0)   begin failures++; $display("FAIL global max never raised"); end
    if (n_keep == 0)    begin failures++; $display("FAIL global max never kept"); end
    if (n_st_wait == 0) begin failures++; $display("FAIL statistics unit never waited"); end
    if (n_sv_wait == 0) begin failures++; $display("FAIL score-value unit never waited"); end
    if (n_contend == 0) begin failures++; $display("FAIL no DRAM contention"); end
    if (u_dram.n_stall == 0) begin failures++; $display("FAIL no DRAM back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
