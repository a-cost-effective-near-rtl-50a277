// online_transpose: K-Buf, local block transpose and K^T-Buf of the
// query-key product unit.
//
// Keys are stored token-major (one 128-element row per token) because new
// keys are appended row by row; the query-key GEMV however needs K^T. Instead
// of a global transpose, each 128x128 key block is transposed on chip:
//   * write side: DRAM words (32 FP16) are written into K-Buf at (row, word);
//   * transpose: after `tr_start`, one K-Buf row per cycle is split into its
//     128 elements and steered into the matching column of K^T-Buf
//     (K^T[j][r] = K[r][j]); 128 cycles, `tr_done` pulses at the end;
//   * read side: rd_row selects one K^T-Buf row (the 128 tokens' values of one
//     head dimension), read combinationally by the MAC array.
// K-Buf may be refilled with the next block while the MAC array reads
// K^T-Buf; writes into K-Buf must not happen during a transpose.
module online_transpose
  import hilos_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] wr_row,
  input  logic [$clog2(N/ELEMS_PER_WORD)-1:0] wr_word,
  input  mword_t               wr_data,
  input  logic                 tr_start,
  output logic                 tr_busy,
  output logic                 tr_done,
  input  logic [$clog2(N)-1:0] rd_row,
  output fp16_t                rd_data [N]
);
  fp16_t kbuf  [N][N];
  fp16_t ktbuf [N][N];
  logic [$clog2(N)-1:0] r;

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int e = 0; e < ELEMS_PER_WORD; e++)
        kbuf[wr_row][int'(wr_word) * ELEMS_PER_WORD + e] <= wr_data[16*e +: 16];
    if (tr_busy)
      for (int j = 0; j < N; j++) ktbuf[j][r] <= kbuf[r][j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tr_busy <= 1'b0; tr_done <= 1'b0; r <= '0;
    end else begin
      tr_done <= 1'b0;
      if (tr_start && !tr_busy) begin
        tr_busy <= 1'b1; r <= '0;
      end else if (tr_busy) begin
        r <= r + 1'b1;
        if (r == $clog2(N)'(N - 1)) begin
          tr_busy <= 1'b0; tr_done <= 1'b1;
        end
      end
    end
  end

  always_comb for (int j = 0; j < N; j++) rd_data[j] = ktbuf[rd_row][j];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin end
    else if (tr_busy)
      assert (!wr_en) else $error("online_transpose: K-Buf written during transpose");
endmodule
