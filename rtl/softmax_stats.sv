// softmax_stats: softmax statistics aggregation unit, the first of the two
// softmax passes.
//
// For every block of 128 scores of each of the DGROUP query rows it
//   1. LOAD: reads the block's QK^T values (4 words of 32 FP16 per row) from
//      DRAM into SM-Buf, converting to FP32 and passing them through MASK
//      (padding -> -1e4, host-buffered tokens -> host-precomputed scalar);
//   2. MAX: streams SM-Buf through a four-way max tree, 4 elements per cycle,
//      giving the block's local maximum m_b (32 cycles);
//   3. SUM: computes exp(x - m_b) with EXP_PAR exponential lanes (2 per cycle)
//      and accumulates them through the adder tree into s_b (64 cycles);
//   4. UPD: merges (m_b, s_b) into the running global max/sum with the
//      streaming update unit (1 cycle).
// Using the local instead of the global maximum inside a block is what lets the
// global max and sum come out of a single pass over the scores. All DGROUP
// rows are processed by parallel lanes (one SM-Buf row, tree and exp pair per
// query), mirroring the d_group x 128 buffer of the design.
//
// Interface: `start` with job fields (qk_addr, stored_len, valid_len) and nb,
// the number of 128-token blocks. Block b is processed only once
// qk_avail > b, i.e. the query-key unit has written it. `blk_done` pulses per
// finished block; `done` pulses once with gmax/gsum valid (held until the next
// start). Reads use `rd`; at most 4*DGROUP reads are outstanding.
//
// Phases run one after another inside a block (no overlap between the next
// block's load and the current block's compute) - this design's choice.
module softmax_stats
  import hilos_pkg::*;
#(
  parameter int unsigned DGROUP  = 1,
  parameter int unsigned HBUF    = 16,
  parameter int unsigned EXP_PAR = 2,
  parameter int unsigned MAX_PAR = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  maddr_t    qk_addr,
  input  len_t      stored_len,
  input  len_t      valid_len,
  input  len_t      nb,
  input  len_t      qk_avail,
  input  fp32_t     host_sc [DGROUP][HBUF],
  mem_rd_if.client  rd,
  output logic      busy,
  output logic      blk_done,
  output logic      done,
  output fp32_t     gmax [DGROUP],
  output fp32_t     gsum [DGROUP]
);
  localparam int unsigned BLK   = 128;
  localparam int unsigned WPR   = BLK / ELEMS_PER_WORD;   // words per row = 4
  localparam int unsigned NREQ  = WPR * DGROUP;
  localparam int unsigned NMAX  = BLK / MAX_PAR;
  localparam int unsigned NSUM  = BLK / EXP_PAR;

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_LOAD, S_MAX, S_SUM, S_UPD} state_t;
  state_t state;

  fp32_t smbuf [DGROUP][BLK];
  fp32_t mb [DGROUP], sb [DGROUP];
  len_t  blk;
  logic [$clog2(NREQ+1)-1:0] ri, rc;
  logic [7:0] cnt;
  maddr_t row_stride;

  // ---- MASK on the incoming word ----
  len_t  mk_idx [ELEMS_PER_WORD];
  fp32_t mk_x   [ELEMS_PER_WORD];
  fp32_t mk_y   [ELEMS_PER_WORD];
  fp32_t mk_hs  [HBUF];
  int unsigned rsp_g, rsp_w;
  always_comb begin
    rsp_g = int'(rc) / WPR;
    rsp_w = int'(rc) % WPR;
    for (int e = 0; e < ELEMS_PER_WORD; e++) begin
      mk_idx[e] = len_t'(blk * BLK + len_t'(rsp_w * ELEMS_PER_WORD + e));
      mk_x[e]   = fp16_to_fp32(rd.rsp_data[16*e +: 16]);
    end
    for (int h = 0; h < HBUF; h++) mk_hs[h] = host_sc[(rsp_g < DGROUP) ? rsp_g : 0][h];
  end
  mask_unit #(.LANES(ELEMS_PER_WORD), .HBUF(HBUF)) u_mask (
    .idx(mk_idx), .stored_len(stored_len), .valid_len(valid_len),
    .x(mk_x), .host_sc(mk_hs), .y(mk_y));

  // ---- per-query datapath lanes ----
  fp32_t max_out [DGROUP];
  fp32_t sum_out [DGROUP];
  fp32_t m_next [DGROUP], z_next [DGROUP];
  for (genvar g = 0; g < DGROUP; g++) begin : g_lane
    fp32_t max_in [MAX_PAR];
    fp32_t ex_in [EXP_PAR], ex_out [EXP_PAR];
    always_comb begin
      for (int i = 0; i < MAX_PAR; i++) max_in[i] = smbuf[g][(int'(cnt) * MAX_PAR + i) % BLK];
      for (int i = 0; i < EXP_PAR; i++) ex_in[i] = fp32_sub(smbuf[g][(int'(cnt) * EXP_PAR + i) % BLK], mb[g]);
    end
    reduce_tree #(.N(MAX_PAR), .IS_MAX(1'b1)) u_max (.in(max_in), .out(max_out[g]));
    fp32_exp_unit #(.LANES(EXP_PAR)) u_exp (.x(ex_in), .y(ex_out));
    reduce_tree #(.N(EXP_PAR), .IS_MAX(1'b0)) u_add (.in(ex_out), .out(sum_out[g]));
    stream_update u_upd (.m_in(gmax[g]), .z_in(gsum[g]), .m_b(mb[g]), .s_b(sb[g]),
                         .m_out(m_next[g]), .z_out(z_next[g]));
  end

  assign rd.req_valid = (state == S_LOAD) && (ri < NREQ);
  assign rd.req_addr  = qk_addr + maddr_t'(ri / WPR) * row_stride + maddr_t'(blk) * WPR + maddr_t'(ri % WPR);
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      blk <= '0; ri <= '0; rc <= '0; cnt <= '0; row_stride <= '0;
      blk_done <= 1'b0; done <= 1'b0;
      for (int g = 0; g < DGROUP; g++) begin
        gmax[g] <= FP32_NEG_INF; gsum[g] <= FP32_ZERO;
        mb[g] <= FP32_NEG_INF;   sb[g] <= FP32_ZERO;
      end
    end else begin
      blk_done <= 1'b0;
      done     <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          blk <= '0;
          row_stride <= maddr_t'(nb) * WPR;
          for (int g = 0; g < DGROUP; g++) begin
            gmax[g] <= FP32_NEG_INF; gsum[g] <= FP32_ZERO;
          end
          state <= S_WAIT;
        end
        S_WAIT: if (qk_avail > blk) begin
          ri <= '0; rc <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (rd.req_valid && rd.req_ready) ri <= ri + 1'b1;
          if (rd.rsp_valid) begin
            for (int e = 0; e < ELEMS_PER_WORD; e++)
              smbuf[rsp_g][rsp_w * ELEMS_PER_WORD + e] <= mk_y[e];
            rc <= rc + 1'b1;
            if (rc == NREQ - 1) begin
              cnt <= '0;
              for (int g = 0; g < DGROUP; g++) mb[g] <= FP32_NEG_INF;
              state <= S_MAX;
            end
          end
        end
        S_MAX: begin
          for (int g = 0; g < DGROUP; g++) mb[g] <= fp32_max(mb[g], max_out[g]);
          cnt <= cnt + 1'b1;
          if (cnt == NMAX - 1) begin
            cnt <= '0;
            for (int g = 0; g < DGROUP; g++) sb[g] <= FP32_ZERO;
            state <= S_SUM;
          end
        end
        S_SUM: begin
          for (int g = 0; g < DGROUP; g++) sb[g] <= fp32_add(sb[g], sum_out[g]);
          cnt <= cnt + 1'b1;
          if (cnt == NSUM - 1) state <= S_UPD;
        end
        S_UPD: begin
          for (int g = 0; g < DGROUP; g++) begin
            gmax[g] <= m_next[g]; gsum[g] <= z_next[g];
          end
          blk_done <= 1'b1;
          blk <= blk + 1'b1;
          if (blk + 1'b1 == nb) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else state <= S_WAIT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A response must only arrive for a read this unit issued.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin end
    else if (rd.rsp_valid)
      assert (state == S_LOAD && rc < ri) else $error("softmax_stats: unexpected read response");
endmodule
