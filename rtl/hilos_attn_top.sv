// hilos_attn_top: the near-storage attention accelerator.
//
// One instance sits next to the SSD in each near-storage device. The host
// writes, into the device DRAM, the query rows of a KV head's query group
// and, through the device's private SSD path, the stored keys and values;
// the accelerator then computes softmax(Q K^T / sqrt(d)) V for the group with
// four units working as a block pipeline through DRAM:
//   qk_unit       Q K^T per 128-token block, with on-chip block transpose
//   softmax_stats pass 1: block-local max/sum merged into global max/sum
//   softmax_norm  pass 2: exp(x - m) / Z, attention scores back to DRAM
//   sv_unit       scores x V, accumulated over blocks, result to DRAM
// attn_ctrl starts the units and enforces the block dependencies, and
// mem_arbiter shares the single 512-bit DRAM port among them.
//
// Delayed KV write-back: the newest tokens' keys are not yet in DRAM; the host
// precomputes their (scaled) QK^T scalars and writes them into the host scalar
// buffer through hs_*, one FP32 value per (query row, buffered token). Token
// index stored_len + i of query row g then uses host_sc[g][i]. Their values
// must already be in DRAM right after the stored value rows.
//
// Ports: job_in/start/job_ready start a job; done pulses at its end and
// last_cycles reports its length. The m_* ports are the DRAM port (read
// requests, in-order read responses, writes), addresses in 512-bit words.
module hilos_attn_top
  import hilos_pkg::*;
#(
  parameter int unsigned DGROUP  = 1,
  parameter int unsigned HBUF    = 16,
  parameter int unsigned EXP_PAR = 2,
  parameter int unsigned MAX_PAR = 4,
  parameter int unsigned MAX_OUT = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  // job control
  input  logic      start,
  input  attn_job_t job_in,
  output logic      job_ready,
  output logic      busy,
  output logic      done,
  output logic [31:0] last_cycles,
  // host-precomputed QK^T scalars of write-back-buffered tokens
  input  logic      hs_we,
  input  logic [$clog2(DGROUP+1)-1:0] hs_g,
  input  logic [$clog2(HBUF)-1:0]     hs_idx,
  input  fp32_t     hs_data,
  // DRAM port
  output logic      m_rd_valid,
  input  logic      m_rd_ready,
  output maddr_t    m_rd_addr,
  input  logic      m_rsp_valid,
  input  mword_t    m_rsp_data,
  output logic      m_wr_valid,
  input  logic      m_wr_ready,
  output maddr_t    m_wr_addr,
  output mword_t    m_wr_data
);
  localparam int unsigned NR = 4;   // qk, stats, norm, sv
  localparam int unsigned NW = 3;   // qk, norm, sv

  // ---------------- host scalar buffer ----------------
  fp32_t host_sc [DGROUP][HBUF];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < DGROUP; g++)
        for (int i = 0; i < HBUF; i++) host_sc[g][i] <= FP32_MASK_VAL;
    end else if (hs_we && int'(hs_g) < DGROUP) begin
      host_sc[hs_g][hs_idx] <= hs_data;
    end
  end

  // ---------------- controller ----------------
  attn_job_t job;
  len_t      nb, qk_avail, sc_avail;
  logic qk_start, st_start, nm_start, sv_start;
  logic qk_blk_done, qk_done, st_blk_done, st_done, nm_blk_done, nm_done, sv_blk_done, sv_done;
  logic qk_busy, st_busy, nm_busy, sv_busy;
  fp32_t gmax [DGROUP], gsum [DGROUP];

  attn_ctrl u_ctrl (
    .clk, .rst_n, .start, .job_in, .job_ready, .job, .nb,
    .qk_start, .st_start, .nm_start, .sv_start,
    .qk_blk_done, .st_done, .nm_blk_done, .sv_done,
    .qk_avail, .sc_avail, .busy, .done, .last_cycles);

  // ---------------- memory channels ----------------
  mem_rd_if rd_if [NR] ();
  mem_wr_if wr_if [NW] ();

  logic   c_rd_valid [NR], c_rd_ready [NR], c_rsp_valid [NR];
  maddr_t c_rd_addr [NR];
  mword_t c_rsp_data;
  logic   c_wr_valid [NW], c_wr_ready [NW];
  maddr_t c_wr_addr [NW];
  mword_t c_wr_data [NW];

  for (genvar i = 0; i < NR; i++) begin : g_rd
    assign c_rd_valid[i]     = rd_if[i].req_valid;
    assign c_rd_addr[i]      = rd_if[i].req_addr;
    assign rd_if[i].req_ready = c_rd_ready[i];
    assign rd_if[i].rsp_valid = c_rsp_valid[i];
    assign rd_if[i].rsp_data  = c_rsp_data;
  end
  for (genvar i = 0; i < NW; i++) begin : g_wr
    assign c_wr_valid[i]     = wr_if[i].req_valid;
    assign c_wr_addr[i]      = wr_if[i].req_addr;
    assign c_wr_data[i]      = wr_if[i].req_data;
    assign wr_if[i].req_ready = c_wr_ready[i];
  end

  mem_arbiter #(.NR(NR), .NW(NW), .MAX_OUT(MAX_OUT)) u_arb (
    .clk, .rst_n,
    .c_rd_valid, .c_rd_ready, .c_rd_addr, .c_rsp_valid, .c_rsp_data,
    .c_wr_valid, .c_wr_ready, .c_wr_addr, .c_wr_data,
    .m_rd_valid, .m_rd_ready, .m_rd_addr, .m_rsp_valid, .m_rsp_data,
    .m_wr_valid, .m_wr_ready, .m_wr_addr, .m_wr_data);

  // ---------------- the four units ----------------
  qk_unit #(.DGROUP(DGROUP)) u_qk (
    .clk, .rst_n, .start(qk_start),
    .q_addr(job.q_addr), .k_addr(job.k_addr), .qk_addr(job.qk_addr), .nb,
    .rd(rd_if[0]), .wr(wr_if[0]),
    .busy(qk_busy), .blk_done(qk_blk_done), .done(qk_done));

  softmax_stats #(.DGROUP(DGROUP), .HBUF(HBUF), .EXP_PAR(EXP_PAR), .MAX_PAR(MAX_PAR)) u_st (
    .clk, .rst_n, .start(st_start),
    .qk_addr(job.qk_addr), .stored_len(job.stored_len), .valid_len(job.valid_len), .nb,
    .qk_avail, .host_sc, .rd(rd_if[1]),
    .busy(st_busy), .blk_done(st_blk_done), .done(st_done), .gmax, .gsum);

  softmax_norm #(.DGROUP(DGROUP), .HBUF(HBUF), .EXP_PAR(EXP_PAR)) u_nm (
    .clk, .rst_n, .start(nm_start),
    .qk_addr(job.qk_addr), .sc_addr(job.sc_addr),
    .stored_len(job.stored_len), .valid_len(job.valid_len), .nb,
    .gmax, .gsum, .host_sc, .rd(rd_if[2]), .wr(wr_if[1]),
    .busy(nm_busy), .blk_done(nm_blk_done), .done(nm_done));

  sv_unit #(.DGROUP(DGROUP)) u_sv (
    .clk, .rst_n, .start(sv_start),
    .sc_addr(job.sc_addr), .v_addr(job.v_addr), .out_addr(job.out_addr), .nb,
    .sc_avail, .rd(rd_if[3]), .wr(wr_if[2]),
    .busy(sv_busy), .blk_done(sv_blk_done), .done(sv_done));

  // The statistics unit must never run ahead of the query-key unit.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin end
    else if (st_blk_done)
      assert (qk_avail != '0) else $error("statistics unit ran ahead of query-key unit");
endmodule
