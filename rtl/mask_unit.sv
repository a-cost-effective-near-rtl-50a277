// mask_unit: the MASK stage of both softmax passes, for LANES elements.
// Element idx of a query's score vector is
//   * the on-chip QK^T value when idx < stored_len (key stored in DRAM),
//   * the host-precomputed QK^T scalar when stored_len <= idx < valid_len
//     (key still held in the host's write-back buffer),
//   * the padding value -1e4 when idx >= valid_len.
// The host scalar for idx is selected from host_sc[idx - stored_len]; entries
// beyond HBUF-1 are never valid (the host spills before that). Timing:
// combinational. LANES defaults to the 32 FP16 elements of one 512-bit DRAM
// word, the granularity at which the softmax units receive scores.
module mask_unit
  import hilos_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned HBUF  = 16
) (
  input  len_t  idx [LANES],
  input  len_t  stored_len,
  input  len_t  valid_len,
  input  fp32_t x   [LANES],
  input  fp32_t host_sc [HBUF],
  output fp32_t y   [LANES]
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      len_t off;
      off = idx[i] - stored_len;
      if (idx[i] >= valid_len)       y[i] = FP32_MASK_VAL;
      else if (idx[i] >= stored_len) y[i] = (off < len_t'(HBUF)) ? host_sc[off[$clog2(HBUF)-1:0]] : FP32_MASK_VAL;
      else                           y[i] = x[i];
    end
  end
endmodule
