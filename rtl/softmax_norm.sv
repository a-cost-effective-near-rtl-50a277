// softmax_norm: softmax normalisation unit, the second softmax pass.
//
// Once the statistics unit has produced the global max m and sum Z of every
// query row, this unit walks the blocks again. For each 128-token block it
//   1. LOAD: reads the block's QK^T values of all DGROUP rows into SM-Buf
//      through MASK (same masking as the first pass);
//   2. NORM: y = exp(x - m) / Z with EXP_PAR exponential and divider lanes per
//      row (2 elements per cycle, 64 cycles per block), converting to FP16;
//   3. WRITE: writes the 128 attention scores of each row back to DRAM
//      (4 words per row) at the same position in the score region.
// `blk_done` pulses after a block's last write is accepted, so the
// score-value unit may read it from then on; `done` pulses after the last
// block. gmax/gsum must stay stable while busy.
module softmax_norm
  import hilos_pkg::*;
#(
  parameter int unsigned DGROUP  = 1,
  parameter int unsigned HBUF    = 16,
  parameter int unsigned EXP_PAR = 2
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  maddr_t    qk_addr,
  input  maddr_t    sc_addr,
  input  len_t      stored_len,
  input  len_t      valid_len,
  input  len_t      nb,
  input  fp32_t     gmax [DGROUP],
  input  fp32_t     gsum [DGROUP],
  input  fp32_t     host_sc [DGROUP][HBUF],
  mem_rd_if.client  rd,
  mem_wr_if.client  wr,
  output logic      busy,
  output logic      blk_done,
  output logic      done
);
  localparam int unsigned BLK  = 128;
  localparam int unsigned WPR  = BLK / ELEMS_PER_WORD;
  localparam int unsigned NREQ = WPR * DGROUP;
  localparam int unsigned NNRM = BLK / EXP_PAR;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_NORM, S_WRITE} state_t;
  state_t state;

  fp32_t smbuf [DGROUP][BLK];
  fp16_t obuf  [DGROUP][BLK];
  len_t  blk;
  logic [$clog2(NREQ+1)-1:0] ri, rc, wi;
  logic [7:0] cnt;
  maddr_t row_stride;

  // ---- MASK on the incoming word ----
  len_t  mk_idx [ELEMS_PER_WORD];
  fp32_t mk_x   [ELEMS_PER_WORD];
  fp32_t mk_y   [ELEMS_PER_WORD];
  fp32_t mk_hs  [HBUF];
  int unsigned rsp_g, rsp_w, wr_g, wr_w;
  always_comb begin
    rsp_g = int'(rc) / WPR;
    rsp_w = int'(rc) % WPR;
    wr_g  = int'(wi) / WPR;
    wr_w  = int'(wi) % WPR;
    for (int e = 0; e < ELEMS_PER_WORD; e++) begin
      mk_idx[e] = len_t'(blk * BLK + len_t'(rsp_w * ELEMS_PER_WORD + e));
      mk_x[e]   = fp16_to_fp32(rd.rsp_data[16*e +: 16]);
    end
    for (int h = 0; h < HBUF; h++) mk_hs[h] = host_sc[(rsp_g < DGROUP) ? rsp_g : 0][h];
  end
  mask_unit #(.LANES(ELEMS_PER_WORD), .HBUF(HBUF)) u_mask (
    .idx(mk_idx), .stored_len(stored_len), .valid_len(valid_len),
    .x(mk_x), .host_sc(mk_hs), .y(mk_y));

  // ---- per-query exp + division lanes ----
  fp16_t y16 [DGROUP][EXP_PAR];
  for (genvar g = 0; g < DGROUP; g++) begin : g_lane
    fp32_t ex_in [EXP_PAR], ex_out [EXP_PAR];
    always_comb
      for (int i = 0; i < EXP_PAR; i++)
        ex_in[i] = fp32_sub(smbuf[g][(int'(cnt) * EXP_PAR + i) % BLK], gmax[g]);
    always_comb
      for (int i = 0; i < EXP_PAR; i++)
        y16[g][i] = fp32_to_fp16(fp32_div(ex_out[i], gsum[g]));
    fp32_exp_unit #(.LANES(EXP_PAR)) u_exp (.x(ex_in), .y(ex_out));
  end

  always_comb begin
    wr.req_data = '0;
    for (int e = 0; e < ELEMS_PER_WORD; e++)
      wr.req_data[16*e +: 16] = obuf[(wr_g < DGROUP) ? wr_g : 0][wr_w * ELEMS_PER_WORD + e];
  end
  assign wr.req_valid = (state == S_WRITE);
  assign wr.req_addr  = sc_addr + maddr_t'(wr_g) * row_stride + maddr_t'(blk) * WPR + maddr_t'(wr_w);
  assign rd.req_valid = (state == S_LOAD) && (ri < NREQ);
  assign rd.req_addr  = qk_addr + maddr_t'(ri / WPR) * row_stride + maddr_t'(blk) * WPR + maddr_t'(ri % WPR);
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      blk <= '0; ri <= '0; rc <= '0; wi <= '0; cnt <= '0; row_stride <= '0;
      blk_done <= 1'b0; done <= 1'b0;
    end else begin
      blk_done <= 1'b0;
      done     <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          blk <= '0; ri <= '0; rc <= '0;
          row_stride <= maddr_t'(nb) * WPR;
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
              state <= S_NORM;
            end
          end
        end
        S_NORM: begin
          for (int g = 0; g < DGROUP; g++)
            for (int i = 0; i < EXP_PAR; i++)
              obuf[g][int'(cnt) * EXP_PAR + i] <= y16[g][i];
          cnt <= cnt + 1'b1;
          if (cnt == NNRM - 1) begin
            wi <= '0;
            state <= S_WRITE;
          end
        end
        S_WRITE: if (wr.req_ready) begin
          wi <= wi + 1'b1;
          if (wi == NREQ - 1) begin
            blk_done <= 1'b1;
            blk <= blk + 1'b1;
            ri <= '0; rc <= '0;
            if (blk + 1'b1 == nb) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else state <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin end
    else if (rd.rsp_valid)
      assert (state == S_LOAD && rc < ri) else $error("softmax_norm: unexpected read response");
endmodule
