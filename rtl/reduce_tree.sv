// reduce_tree: balanced binary reduction tree over N FP32 inputs, used as
// the max tree (IS_MAX=1) and the adder tree (IS_MAX=0) of the softmax
// statistics unit. N must be a power of two. With the default N=4 the tree has
// two levels, a four-way reduction. Timing: combinational.
module reduce_tree
  import hilos_pkg::*;
#(
  parameter int unsigned N      = 4,
  parameter bit          IS_MAX = 1'b1
) (
  input  fp32_t in [N],
  output fp32_t out
);
  localparam int unsigned LV = $clog2(N);
  fp32_t lvl [LV+1][N];

  always_comb begin
    for (int i = 0; i < N; i++) lvl[0][i] = in[i];
    for (int l = 1; l <= LV; l++) begin
      for (int i = 0; i < N; i++) lvl[l][i] = FP32_ZERO;
      for (int i = 0; i < (N >> l); i++)
        lvl[l][i] = IS_MAX ? fp32_max(lvl[l-1][2*i], lvl[l-1][2*i+1])
                           : fp32_add(lvl[l-1][2*i], lvl[l-1][2*i+1]);
    end
  end
  assign out = lvl[LV][0];

  initial assert (N == (1 << LV)) else $error("reduce_tree: N must be a power of two");
endmodule
