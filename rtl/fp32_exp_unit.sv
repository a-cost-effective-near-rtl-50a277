// fp32_exp_unit: LANES parallel FP32 exponential units (the EXP boxes of both
// softmax passes). Each lane computes y = e^x combinationally with
// hilos_pkg::fp32_exp: x*log2(e) is split into an integer power of two, a
// 16-entry table of 2^(k/16) and a cubic series for the remainder.
// The default of two lanes follows the unroll factor of two that the design
// applies to its exponential units. Timing: purely combinational, zero
// latency (this design's choice; an FPGA build would pipeline it).
module fp32_exp_unit
  import hilos_pkg::*;
#(
  parameter int unsigned LANES = 2
) (
  input  fp32_t x [LANES],
  output fp32_t y [LANES]
);
  always_comb begin
    for (int i = 0; i < LANES; i++) y[i] = fp32_exp(x[i]);
  end
endmodule
