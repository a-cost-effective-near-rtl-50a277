// tb_fp32_exp_unit: checks the exponential lanes against the real-valued
// exp() over the argument range softmax produces (<= 0, down to the -1e4
// padding value) plus some positive arguments, to a relative error of 2e-6.
module tb_fp32_exp_unit;
  import hilos_pkg::*;
  import tb_pkg::*;
  localparam int L = 2;
  fp32_t x [L], y [L];
  int checks = 0, failures = 0;

  fp32_exp_unit #(.LANES(L)) dut (.x, .y);

  task automatic chk(real xv);
    real e;
    x[0] = r2f(xv); x[1] = r2f(xv / 2.0);
    #1;
    for (int i = 0; i < L; i++) begin
      e = $exp(f2r(x[i]));
      checks++;
      if (!close(f2r(y[i]), e, 2e-6, 1e-37)) begin
        failures++;
        if (failures < 10) $display("FAIL exp(%g) = %g expected %g", f2r(x[i]), f2r(y[i]), e);
      end
    end
  endtask

  initial begin
    chk(0.0); chk(-1.0); chk(1.0); chk(-0.5); chk(-10000.0); chk(-87.0); chk(3.25);
    repeat (2000) chk(urand(-20.0, 0.0));
    repeat (500)  chk(urand(-1e-3, 1e-3));
    repeat (500)  chk(urand(-80.0, 10.0));
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
