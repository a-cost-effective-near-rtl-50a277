// stream_update: the streaming update unit of the first softmax pass.
// Given the running global max m and sum Z, and a block's local max m_b and
// its sum s_b = sum(exp(x - m_b)), it returns the merged statistics:
//   m_b > m : Z' = Z*exp(m - m_b) + s_b,  m' = m_b
//   else    : Z' = Z + s_b*exp(m_b - m),  m' = m
// This is lines 5-9 of the two-pass softmax algorithm. A single exponential
// is needed either way, so one exp lane is shared. Starting from m = -inf,
// Z = 0 the first block passes straight through. Timing: combinational.
module stream_update
  import hilos_pkg::*;
(
  input  fp32_t m_in,
  input  fp32_t z_in,
  input  fp32_t m_b,
  input  fp32_t s_b,
  output fp32_t m_out,
  output fp32_t z_out
);
  logic  upd;
  fp32_t ex_arg, ex_val;

  assign upd    = fp32_gt(m_b, m_in);
  assign ex_arg = upd ? fp32_sub(m_in, m_b) : fp32_sub(m_b, m_in);
  assign ex_val = fp32_exp(ex_arg);
  assign m_out  = upd ? m_b : m_in;
  assign z_out  = upd ? fp32_add(fp32_mul(z_in, ex_val), s_b)
                      : fp32_add(z_in, fp32_mul(s_b, ex_val));
endmodule
