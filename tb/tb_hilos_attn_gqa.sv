// tb_hilos_attn_gqa: end-to-end test of a grouped-query build of the
// accelerator (DGROUP = 5 query heads sharing one KV head, the group size of
// a 40-head / 8-KV-head model with head size 128) over a longer context.
//
// One job of 1000 tokens stored in DRAM plus 10 tokens whose keys are still
// in the host's write-back buffer (8 blocks of 128) is run with five
// different queries. Each query gets its own host-precomputed scores. The
// five outputs are compared with a real-arithmetic reference that rounds
// scores and probabilities to FP16 where the design stores them. The test
// also checks that the keys and values were read from DRAM once for the whole
// group, not once per query: that sharing is the point of the GQA build.
module tb_hilos_attn_gqa;
  import hilos_pkg::*;
  import tb_pkg::*;
  localparam int DG  = 5;
  localparam int SL  = 1000;
  localparam int VL  = 1010;
  localparam int NBK = (VL + 127) / 128;

  logic clk = 0, rst_n = 0, start = 0;
  attn_job_t job_in;
  logic job_ready, busy, done;
  logic [31:0] last_cycles;
  logic hs_we = 0;
  logic [$clog2(DG+1)-1:0] hs_g = '0;
  logic [3:0] hs_idx = '0;
  fp32_t hs_data = '0;
  logic m_rd_valid, m_rd_ready, m_rsp_valid, m_wr_valid, m_wr_ready;
  maddr_t m_rd_addr, m_wr_addr;
  mword_t m_rsp_data, m_wr_data;
  int checks = 0, failures = 0;

  hilos_attn_top #(.DGROUP(DG)) dut (.*);
  dram_model #(.AWL(16), .LAT(8), .STALL(1'b1)) u_dram (
    .clk, .rst_n, .rd_valid(m_rd_valid), .rd_ready(m_rd_ready), .rd_addr(m_rd_addr),
    .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data),
    .wr_valid(m_wr_valid), .wr_ready(m_wr_ready), .wr_addr(m_wr_addr), .wr_data(m_wr_data));
  always #5 clk = ~clk;

  localparam int Q_A = 0, K_A = 64, V_A = 16384, QK_A = 32768, SC_A = 40960, OUT_A = 49152;

  int kv_reads = 0;
  always_ff @(posedge clk)
    if (rst_n && m_rd_valid && m_rd_ready && m_rd_addr >= maddr_t'(K_A) && m_rd_addr < maddr_t'(QK_A))
      kv_reads <= kv_reads + 1;

  real q [DG][128];
  real x [DG][NBK*128];
  real out_ref [DG][128];

  initial begin
    real m, z, p16;
    for (int a = 0; a < 2**16; a++) u_dram.mem[a] = '0;
    for (int g = 0; g < DG; g++)
      for (int d = 0; d < 128; d++) begin
        logic [15:0] h;
        h = r2h(urand(-1.0, 1.0));
        u_dram.mem[Q_A + g * 4 + d / 32][16 * (d % 32) +: 16] = h;
        q[g][d] = h2r(h);
      end
    for (int j = 0; j < NBK * 128; j++)
      for (int d = 0; d < 128; d++) begin
        u_dram.mem[K_A + j * 4 + d / 32][16 * (d % 32) +: 16] = (j < SL) ? r2h(urand(-1.0, 1.0)) : 16'h0;
        u_dram.mem[V_A + j * 4 + d / 32][16 * (d % 32) +: 16] = (j < VL) ? r2h(urand(-1.0, 1.0)) : 16'h0;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < DG; g++)
      for (int i = 0; i < VL - SL; i++) begin
        @(posedge clk); #1;
        hs_we = 1; hs_g = ($clog2(DG+1))'(g); hs_idx = 4'(i); hs_data = r2f(urand(-2.0, 2.0));
        x[g][SL + i] = f2r(hs_data);
      end
    @(posedge clk); #1 hs_we = 0;
    for (int g = 0; g < DG; g++) begin
      for (int j = 0; j < SL; j++) begin
        real s;
        s = 0.0;
        for (int d = 0; d < 128; d++) s += q[g][d] * h2r(u_dram.mem[K_A + j * 4 + d / 32][16 * (d % 32) +: 16]);
        x[g][j] = h2r(r2h(s / $sqrt(128.0)));
      end
      for (int j = VL; j < NBK * 128; j++) x[g][j] = -1e4;
      m = -1e30; z = 0.0;
      for (int j = 0; j < NBK * 128; j++) if (x[g][j] > m) m = x[g][j];
      for (int j = 0; j < NBK * 128; j++) z += $exp(x[g][j] - m);
      for (int d = 0; d < 128; d++) out_ref[g][d] = 0.0;
      for (int j = 0; j < NBK * 128; j++) begin
        p16 = h2r(r2h($exp(x[g][j] - m) / z));
        for (int d = 0; d < 128; d++)
          out_ref[g][d] += p16 * h2r(u_dram.mem[V_A + j * 4 + d / 32][16 * (d % 32) +: 16]);
      end
    end
    job_in = '{q_addr: maddr_t'(Q_A), k_addr: maddr_t'(K_A), v_addr: maddr_t'(V_A),
               qk_addr: maddr_t'(QK_A), sc_addr: maddr_t'(SC_A), out_addr: maddr_t'(OUT_A),
               stored_len: len_t'(SL), valid_len: len_t'(VL)};
    wait (job_ready);
    @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
    while (!done) @(posedge clk);
    #1;
    $display("GQA job: %0d queries, %0d blocks, %0d cycles, %0d K/V word reads", DG, NBK, last_cycles, kv_reads);
    for (int g = 0; g < DG; g++)
      for (int d = 0; d < 128; d++) begin
        real got;
        got = h2r(u_dram.mem[OUT_A + g * 4 + d / 32][16 * (d % 32) +: 16]);
        checks++;
        if (!close(got, out_ref[g][d], 5e-3, 2e-3)) begin
          failures++;
          if (failures < 10) $display("FAIL q%0d out[%0d] %g exp %g", g, d, got, out_ref[g][d]);
        end
      end
    // keys and values read once for the whole group: 2 * 512 words per block
    checks++;
    if (kv_reads != NBK * 1024) begin
      failures++; $display("FAIL K/V words read %0d, expected %0d", kv_reads, NBK * 1024);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
