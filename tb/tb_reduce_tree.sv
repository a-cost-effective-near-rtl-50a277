// tb_reduce_tree: a 4-input max tree and an 8-input adder tree against
// real-valued max and sum.
module tb_reduce_tree;
  import hilos_pkg::*;
  import tb_pkg::*;
  fp32_t in4 [4], in8 [8], mx, sm;
  int checks = 0, failures = 0;

  reduce_tree #(.N(4), .IS_MAX(1'b1)) u_max (.in(in4), .out(mx));
  reduce_tree #(.N(8), .IS_MAX(1'b0)) u_add (.in(in8), .out(sm));

  initial begin
    repeat (3000) begin
      real m, s;
      m = -1e30; s = 0.0;
      for (int i = 0; i < 4; i++) begin
        in4[i] = r2f(urand(-100.0, 100.0));
        if (f2r(in4[i]) > m) m = f2r(in4[i]);
      end
      if ($urandom % 8 == 0) in4[$urandom % 4] = 32'hC61C4000;
      m = -1e30;
      for (int i = 0; i < 4; i++) if (f2r(in4[i]) > m) m = f2r(in4[i]);
      for (int i = 0; i < 8; i++) begin
        in8[i] = r2f(urand(0.0, 1.0));
        s += f2r(in8[i]);
      end
      #1;
      checks += 2;
      if (f2r(mx) != m) begin failures++; if (failures < 10) $display("FAIL max %g exp %g", f2r(mx), m); end
      if (!close(f2r(sm), s, 1e-6, 0.0)) begin failures++; if (failures < 10) $display("FAIL sum %g exp %g", f2r(sm), s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
