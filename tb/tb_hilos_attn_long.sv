// tb_hilos_attn_long: one long-context decoding step at the accelerator's
// default parameters: a multi-head-attention head of size 112 (zero-padded by
// the host to the fixed head size of 128) over a context of 131,072 tokens (128K),
// 8 of which still sit in the host's write-back buffer. That is 1,024 blocks.
//
// Keys and values are random, and a handful of keys are aligned with the
// query, so that the softmax is dominated by a few tokens spread over the
// context (early, middle and in the last block). The global maximum therefore
// moves several times during the first softmax pass. The 128 outputs are
// compared with a real-arithmetic reference (scores and probabilities rounded
// to FP16 where the design stores them); the 16 padded columns must be exactly
// zero. The job length is reported and checked against the key-read bound of
// 512 words per block.
module tb_hilos_attn_long;
  import hilos_pkg::*;
  import tb_pkg::*;
  localparam int SL  = 131064;
  localparam int VL  = 131072;
  localparam int HD  = 112;
  localparam int NBK = (VL + 127) / 128;
  localparam int Q_A = 0, K_A = 64, V_A = K_A + NBK * 512, QK_A = V_A + NBK * 512;
  localparam int SC_A = QK_A + NBK * 4, OUT_A = SC_A + NBK * 4;

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
  dram_model #(.AWL(21), .LAT(8), .STALL(1'b0)) u_dram (
    .clk, .rst_n, .rd_valid(m_rd_valid), .rd_ready(m_rd_ready), .rd_addr(m_rd_addr),
    .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data),
    .wr_valid(m_wr_valid), .wr_ready(m_wr_ready), .wr_addr(m_wr_addr), .wr_data(m_wr_data));
  always #5 clk = ~clk;

  int n_raise = 0;
  always_ff @(posedge clk)
    if (rst_n && dut.u_st.state == 3'd5 && dut.u_st.blk != 0 && dut.u_st.g_lane[0].u_upd.upd)
      n_raise <= n_raise + 1;

  real q [128];
  real x [NBK*128];
  real out_ref [128];
  int  hot [6] = '{300, 40000, 40001, 90000, 125000, 131000};

  initial begin
    real m, z, p16;
    for (int a = 0; a < 2**21; a++) u_dram.mem[a] = '0;
    for (int d = 0; d < 128; d++) begin
      logic [15:0] h;
      h = (d < HD) ? r2h(urand(-1.0, 1.0)) : 16'h0;
      u_dram.mem[Q_A + d / 32][16 * (d % 32) +: 16] = h;
      q[d] = h2r(h);
    end
    for (int j = 0; j < NBK * 128; j++)
      for (int d = 0; d < HD; d++) begin
        u_dram.mem[K_A + j * 4 + d / 32][16 * (d % 32) +: 16] = (j < SL) ? r2h(urand(-1.0, 1.0)) : 16'h0;
        u_dram.mem[V_A + j * 4 + d / 32][16 * (d % 32) +: 16] = r2h(urand(-1.0, 1.0));
      end
    for (int h = 0; h < 6; h++)
      for (int d = 0; d < HD; d++)
        u_dram.mem[K_A + hot[h] * 4 + d / 32][16 * (d % 32) +: 16] = r2h((2.0 + 0.3 * h) * q[d]);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < VL - SL; i++) begin
      @(posedge clk); #1;
      hs_we = 1; hs_idx = 4'(i); hs_data = r2f(urand(-1.0, 1.0));
      x[SL + i] = f2r(hs_data);
    end
    @(posedge clk); #1 hs_we = 0;
    for (int j = 0; j < SL; j++) begin
      real s;
      s = 0.0;
      for (int d = 0; d < HD; d++) s += q[d] * h2r(u_dram.mem[K_A + j * 4 + d / 32][16 * (d % 32) +: 16]);
      x[j] = h2r(r2h(s / $sqrt(128.0)));
    end
    m = -1e30; z = 0.0;
    for (int j = 0; j < VL; j++) if (x[j] > m) m = x[j];
    for (int j = 0; j < VL; j++) z += $exp(x[j] - m);
    for (int d = 0; d < 128; d++) out_ref[d] = 0.0;
    for (int j = 0; j < VL; j++) begin
      p16 = h2r(r2h($exp(x[j] - m) / z));
      for (int d = 0; d < HD; d++)
        out_ref[d] += p16 * h2r(u_dram.mem[V_A + j * 4 + d / 32][16 * (d % 32) +: 16]);
    end
    job_in = '{q_addr: maddr_t'(Q_A), k_addr: maddr_t'(K_A), v_addr: maddr_t'(V_A),
               qk_addr: maddr_t'(QK_A), sc_addr: maddr_t'(SC_A), out_addr: maddr_t'(OUT_A),
               stored_len: len_t'(SL), valid_len: len_t'(VL)};
    wait (job_ready);
    @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
    while (!done) @(posedge clk);
    #1;
    $display("long job: %0d tokens, %0d blocks, %0d cycles (%0d per block), global max raised %0d times",
             VL, NBK, last_cycles, last_cycles / NBK, n_raise);
    checks++;
    if (last_cycles < 32'(NBK * 512)) begin failures++; $display("FAIL job faster than the K-read bound"); end
    checks++;
    if (n_raise < 3) begin failures++; $display("FAIL global max raised only %0d times", n_raise); end
    for (int d = 0; d < 128; d++) begin
      real got;
      got = h2r(u_dram.mem[OUT_A + d / 32][16 * (d % 32) +: 16]);
      checks++;
      if (d >= HD ? (got != 0.0) : !close(got, out_ref[d], 5e-3, 1e-3)) begin
        failures++;
        if (failures < 10) $display("FAIL out[%0d] %g exp %g", d, got, out_ref[d]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
