// attn_ctrl: dataflow controller of the attention accelerator.
//
// It accepts one attention job (one KV head and its DGROUP query heads) at a
// time, derives the block count nb = ceil(valid_len / 128) and runs the four
// units as a concurrent block pipeline:
//   * query-key, statistics and score-value units start together;
//   * the statistics unit may take block b once the query-key unit has
//     written b blocks + 1 (qk_avail counts written blocks);
//   * the normalisation unit starts when the statistics unit has the global
//     max/sum of all blocks (the softmax dependency);
//   * the score-value unit may take block b once the normalisation unit has
//     written it (sc_avail).
// `done` pulses when the score-value unit has written the result;
// last_cycles holds the job's length in cycles from start to done.
// A start while busy is ignored (job_ready low).
module attn_ctrl
  import hilos_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  attn_job_t job_in,
  output logic      job_ready,
  output attn_job_t job,
  output len_t      nb,
  output logic      qk_start,
  output logic      st_start,
  output logic      nm_start,
  output logic      sv_start,
  input  logic      qk_blk_done,
  input  logic      st_done,
  input  logic      nm_blk_done,
  input  logic      sv_done,
  output len_t      qk_avail,
  output len_t      sc_avail,
  output logic      busy,
  output logic      done,
  output logic [31:0] last_cycles
);
  logic [31:0] cyc;

  assign job_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      job <= '0; nb <= '0;
      qk_start <= 1'b0; st_start <= 1'b0; nm_start <= 1'b0; sv_start <= 1'b0;
      qk_avail <= '0; sc_avail <= '0;
      busy <= 1'b0; done <= 1'b0; cyc <= '0; last_cycles <= '0;
    end else begin
      qk_start <= 1'b0; st_start <= 1'b0; nm_start <= 1'b0; sv_start <= 1'b0;
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          job <= job_in;
          nb  <= (job_in.valid_len + len_t'(127)) >> 7;
          qk_avail <= '0; sc_avail <= '0;
          qk_start <= 1'b1; st_start <= 1'b1; sv_start <= 1'b1;
          busy <= 1'b1;
          cyc  <= 32'd1;
        end
      end else begin
        cyc <= cyc + 1'b1;
        if (qk_blk_done) qk_avail <= qk_avail + 1'b1;
        if (nm_blk_done) sc_avail <= sc_avail + 1'b1;
        if (st_done)     nm_start <= 1'b1;
        if (sv_done) begin
          busy <= 1'b0;
          done <= 1'b1;
          last_cycles <= cyc;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin end
    else if (start && !busy)
      assert (job_in.valid_len != '0) else $error("attn_ctrl: job with valid_len 0");
endmodule
