// qk_unit: query-key product unit (GEMV with online transpose).
//
// At the start of a job the DGROUP query rows (128 FP16 each) are read into
// Q-Buf. Then, for each block of 128 tokens:
//   1. LOAD: the 128x128 key block (128 rows of 4 words) is read into K-Buf;
//   2. TRANS: the online transpose copies it into K^T-Buf (128 cycles);
//   3. MAC: a MAC array of DGROUP x 128 FP32 multiply-accumulate units runs
//      for 128 cycles; in cycle d every unit j of query row g adds
//      Q[g][d] * K^T[d][j]. The K^T row is broadcast to all DGROUP query
//      rows, so a key block shared by a GQA group is read from DRAM once;
//   4. WRITE: the 128 scores of each row are scaled by SCALE (1/sqrt(d)),
//      converted to FP16 and written to the QK^T region (4 words per row).
// `blk_done` pulses once a block's last write is accepted. `done` pulses
// after the last block. Block count nb and the DRAM layout are described in
// hilos_pkg (row stride of the score region is nb*4 words).
// The scaling by 1/sqrt(d) is placed here as this design's choice.
module qk_unit
  import hilos_pkg::*;
#(
  parameter int unsigned DGROUP = 1,
  parameter fp32_t       SCALE  = FP32_INV_SQRT128
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  maddr_t    q_addr,
  input  maddr_t    k_addr,
  input  maddr_t    qk_addr,
  input  len_t      nb,
  mem_rd_if.client  rd,
  mem_wr_if.client  wr,
  output logic      busy,
  output logic      blk_done,
  output logic      done
);
  localparam int unsigned N    = 128;                 // head dim = block length
  localparam int unsigned WPR  = N / ELEMS_PER_WORD;   // 4 words per row
  localparam int unsigned NQ   = WPR * DGROUP;
  localparam int unsigned NK   = WPR * N;              // 512 words per key block

  typedef enum logic [2:0] {S_IDLE, S_LOADQ, S_LOADK, S_TRANS, S_MAC, S_WRITE} state_t;
  state_t state;

  fp16_t qbuf [DGROUP][N];
  fp32_t acc  [DGROUP][N];
  len_t  blk;
  logic [$clog2(NK+1)-1:0] ri, rc;
  logic [$clog2(NQ+1)-1:0] wi;
  logic [$clog2(N)-1:0] d;
  maddr_t row_stride;

  // ---- online transpose ----
  logic  tr_start, tr_busy, tr_done;
  fp16_t kt_row [N];
  online_transpose #(.N(N)) u_tr (
    .clk, .rst_n,
    .wr_en(state == S_LOADK && rd.rsp_valid),
    .wr_row(rc[$clog2(N)+$clog2(WPR)-1:$clog2(WPR)]),
    .wr_word(rc[$clog2(WPR)-1:0]),
    .wr_data(rd.rsp_data),
    .tr_start, .tr_busy, .tr_done,
    .rd_row(d), .rd_data(kt_row));
  assign tr_start = (state == S_TRANS) && !tr_busy && !tr_done;

  // ---- MAC array ----
  fp32_t acc_nxt [DGROUP][N];
  always_comb begin
    for (int g = 0; g < DGROUP; g++)
      for (int j = 0; j < N; j++)
        acc_nxt[g][j] = fp32_add(acc[g][j], fp32_mul(fp16_to_fp32(qbuf[g][d]), fp16_to_fp32(kt_row[j])));
  end

  // ---- write data: scale and convert ----
  int unsigned wr_g, wr_w;
  always_comb begin
    wr_g = int'(wi) / WPR;
    wr_w = int'(wi) % WPR;
    wr.req_data = '0;
    for (int e = 0; e < ELEMS_PER_WORD; e++)
      wr.req_data[16*e +: 16] =
        fp32_to_fp16(fp32_mul(acc[(wr_g < DGROUP) ? wr_g : 0][wr_w * ELEMS_PER_WORD + e], SCALE));
  end
  assign wr.req_valid = (state == S_WRITE);
  assign wr.req_addr  = qk_addr + maddr_t'(wr_g) * row_stride + maddr_t'(blk) * WPR + maddr_t'(wr_w);

  always_comb begin
    rd.req_valid = 1'b0;
    rd.req_addr  = '0;
    if (state == S_LOADQ) begin
      rd.req_valid = (ri < NQ);
      rd.req_addr  = q_addr + maddr_t'(ri);
    end else if (state == S_LOADK) begin
      rd.req_valid = (ri < NK);
      rd.req_addr  = k_addr + maddr_t'(blk) * NK + maddr_t'(ri);
    end
  end
  assign busy = (state != S_IDLE);

  // Accumulators: cleared when the transpose ends, updated while in MAC.
  always_ff @(posedge clk) begin
    if (state == S_TRANS && tr_done) begin
      for (int g = 0; g < DGROUP; g++)
        for (int j = 0; j < N; j++) acc[g][j] <= FP32_ZERO;
    end else if (state == S_MAC) acc <= acc_nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      blk <= '0; ri <= '0; rc <= '0; wi <= '0; d <= '0; row_stride <= '0;
      blk_done <= 1'b0; done <= 1'b0;
    end else begin
      blk_done <= 1'b0;
      done     <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          blk <= '0; ri <= '0; rc <= '0;
          row_stride <= maddr_t'(nb) * WPR;
          state <= S_LOADQ;
        end
        S_LOADQ: begin
          if (rd.req_valid && rd.req_ready) ri <= ri + 1'b1;
          if (rd.rsp_valid) begin
            for (int e = 0; e < ELEMS_PER_WORD; e++)
              qbuf[int'(rc) / WPR][(int'(rc) % WPR) * ELEMS_PER_WORD + e] <= rd.rsp_data[16*e +: 16];
            rc <= rc + 1'b1;
            if (rc == NQ - 1) begin
              ri <= '0; rc <= '0;
              state <= S_LOADK;
            end
          end
        end
        S_LOADK: begin
          if (rd.req_valid && rd.req_ready) ri <= ri + 1'b1;
          if (rd.rsp_valid) begin
            rc <= rc + 1'b1;
            if (rc == NK - 1) state <= S_TRANS;
          end
        end
        S_TRANS: if (tr_done) begin
          d <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          d <= d + 1'b1;
          if (d == $clog2(N)'(N - 1)) begin
            wi <= '0;
            state <= S_WRITE;
          end
        end
        S_WRITE: if (wr.req_ready) begin
          wi <= wi + 1'b1;
          if (wi == NQ - 1) begin
            blk_done <= 1'b1;
            blk <= blk + 1'b1;
            ri <= '0; rc <= '0;
            if (blk + 1'b1 == nb) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else state <= S_LOADK;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin end
    else if (rd.rsp_valid)
      assert ((state == S_LOADQ || state == S_LOADK) && rc < ri) else $error("qk_unit: unexpected read response");
endmodule
