// tb_stream_update: feeds sequences of blocks (local max m_b, local sum s_b
// computed in real arithmetic) through the streaming update unit starting from
// (-inf, 0) and compares the final global max and sum with the direct
// three-pass result sum(exp(x - max(x))). Both update branches are counted.
module tb_stream_update;
  import hilos_pkg::*;
  import tb_pkg::*;
  fp32_t m_in, z_in, m_b, s_b, m_out, z_out;
  int checks = 0, failures = 0, n_up = 0, n_keep = 0;

  stream_update dut (.m_in, .z_in, .m_b, .s_b, .m_out, .z_out);

  initial begin
    repeat (300) begin
      real x [8][16];
      real gm, gz;
      int  nblk;
      nblk = 1 + $urandom % 8;
      gm = -1e30;
      for (int b = 0; b < nblk; b++)
        for (int i = 0; i < 16; i++) begin
          x[b][i] = f2r(r2f(urand(-8.0, 8.0)));
          if (x[b][i] > gm) gm = x[b][i];
        end
      gz = 0.0;
      for (int b = 0; b < nblk; b++) for (int i = 0; i < 16; i++) gz += $exp(x[b][i] - gm);
      m_in = FP32_NEG_INF; z_in = FP32_ZERO;
      for (int b = 0; b < nblk; b++) begin
        real lm, ls;
        lm = -1e30; ls = 0.0;
        for (int i = 0; i < 16; i++) if (x[b][i] > lm) lm = x[b][i];
        for (int i = 0; i < 16; i++) ls += $exp(x[b][i] - lm);
        m_b = r2f(lm); s_b = r2f(ls);
        #1;
        if (b > 0) begin
          if (f2r(m_b) > f2r(m_in)) n_up++; else n_keep++;
        end
        m_in = m_out; z_in = z_out;
      end
      checks += 2;
      if (f2r(m_in) != f2r(r2f(gm))) begin failures++; $display("FAIL max %g exp %g", f2r(m_in), gm); end
      if (!close(f2r(z_in), gz, 2e-5, 0.0)) begin failures++; $display("FAIL sum %g exp %g", f2r(z_in), gz); end
    end
    checks++;
    if (n_up == 0 || n_keep == 0) failures++;
    $display("max raised %0d times, kept %0d times", n_up, n_keep);
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
