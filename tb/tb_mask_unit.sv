// tb_mask_unit: random stored/valid lengths and indices; the expected value
// (own score, host scalar, or -1e4 padding) is selected in the testbench.
module tb_mask_unit;
  import hilos_pkg::*;
  import tb_pkg::*;
  localparam int L = 4, H = 16;
  len_t  idx [L], stored_len, valid_len;
  fp32_t x [L], hs [H], y [L];
  int checks = 0, failures = 0;
  int n_own = 0, n_host = 0, n_pad = 0;

  mask_unit #(.LANES(L), .HBUF(H)) dut (.idx, .stored_len, .valid_len, .x, .host_sc(hs), .y);

  initial begin
    repeat (3000) begin
      int unsigned sl, nbuf;
      sl   = $urandom % 1000;
      nbuf = $urandom % (H + 1);
      stored_len = len_t'(sl);
      valid_len  = len_t'(sl + nbuf);
      for (int h = 0; h < H; h++) hs[h] = r2f(real'(h) + 0.5);
      for (int i = 0; i < L; i++) begin
        idx[i] = len_t'($urandom % (sl + nbuf + 40));
        x[i]   = r2f(urand(-5.0, 5.0));
      end
      #1;
      for (int i = 0; i < L; i++) begin
        fp32_t e;
        if (int'(idx[i]) >= sl + nbuf) begin e = 32'hC61C4000; n_pad++; end
        else if (int'(idx[i]) >= sl) begin e = r2f(real'(int'(idx[i]) - sl) + 0.5); n_host++; end
        else begin e = x[i]; n_own++; end
        checks++;
        if (y[i] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL idx=%0d sl=%0d vl=%0d y=%h exp=%h", idx[i], sl, sl+nbuf, y[i], e);
        end
      end
    end
    checks++;
    if (n_own == 0 || n_host == 0 || n_pad == 0) failures++;
    $display("own=%0d host=%0d pad=%0d", n_own, n_host, n_pad);
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
