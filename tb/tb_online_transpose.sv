// tb_online_transpose: writes random 128x128 FP16 key blocks word by word
// into K-Buf, runs the transpose and reads every K^T-Buf row back, checking
// K^T[d][j] == K[j][d]. The transpose must take exactly 128 cycles (one K-Buf
// row per cycle).
module tb_online_transpose;
  import hilos_pkg::*;
  localparam int N = 128;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, tr_start = 0, tr_busy, tr_done;
  logic [6:0] wr_row = 0, rd_row = 0;
  logic [1:0] wr_word = 0;
  mword_t wr_data = '0;
  fp16_t rd_data [N];
  logic [15:0] ref_k [N][N];
  int checks = 0, failures = 0;

  online_transpose #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      int cyc;
      for (int r = 0; r < N; r++)
        for (int w = 0; w < 4; w++) begin
          for (int e = 0; e < 32; e++) begin
            ref_k[r][w*32+e] = 16'($urandom);
            wr_data[16*e +: 16] = ref_k[r][w*32+e];
          end
          wr_en = 1; wr_row = 7'(r); wr_word = 2'(w);
          @(posedge clk); #1;
        end
      wr_en = 0;
      tr_start = 1;
      @(posedge clk); #1;
      tr_start = 0;
      cyc = 1;
      while (!tr_done) begin @(posedge clk); #1; cyc++; end
      checks++;
      if (cyc != N + 1) begin failures++; $display("FAIL transpose took %0d cycles (start to done pulse), expected %0d", cyc, N + 1); end
      for (int d = 0; d < N; d++) begin
        rd_row = 7'(d); #1;
        for (int j = 0; j < N; j++) begin
          checks++;
          if (rd_data[j] !== ref_k[j][d]) begin
            failures++;
            if (failures < 10) $display("FAIL KT[%0d][%0d]=%h exp %h", d, j, rd_data[j], ref_k[j][d]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
