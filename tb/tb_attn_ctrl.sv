// tb_attn_ctrl: the dataflow controller against scripted unit stand-ins.
// The stand-ins emit block-done pulses at random times; the testbench checks
// the derived block count, the start pulses (normalisation only after the
// statistics unit finishes), the qk_avail / sc_avail counters, that a start
// while busy is ignored, and the reported job length.
module tb_attn_ctrl;
  import hilos_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  attn_job_t job_in, job;
  logic job_ready, qk_start, st_start, nm_start, sv_start;
  logic qk_blk_done = 0, st_done = 0, nm_blk_done = 0, sv_done = 0;
  len_t nb, qk_avail, sc_avail;
  logic busy, done;
  logic [31:0] last_cycles;
  int checks = 0, failures = 0;

  attn_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(int vl);
    int exp_nb, t0, n;
    exp_nb = (vl + 127) / 128;
    job_in = '0;
    job_in.valid_len = len_t'(vl);
    job_in.stored_len = len_t'(vl);
    job_in.k_addr = maddr_t'(vl);
    @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
    t0 = $time;
    chk(qk_start && st_start && sv_start && !nm_start, "start pulses");
    chk(nb == len_t'(exp_nb), $sformatf("nb=%0d expected %0d", nb, exp_nb));
    chk(job.k_addr == maddr_t'(vl), "job latched");
    chk(busy && !job_ready, "busy after start");
    // a second start is ignored while busy
    job_in.valid_len = 1; start = 1; @(posedge clk); #1 start = 0;
    chk(nb == len_t'(exp_nb) && !qk_start, "start ignored while busy");
    for (n = 0; n < exp_nb; n++) begin
      repeat ($urandom % 5 + 1) @(posedge clk);
      #1 qk_blk_done = 1; @(posedge clk); #1 qk_blk_done = 0;
      @(posedge clk); #1;
      chk(qk_avail == len_t'(n + 1), "qk_avail count");
      chk(!nm_start, "norm not started before stats done");
    end
    st_done = 1; @(posedge clk); #1 st_done = 0;
    chk(nm_start, "norm started after stats done");
    for (n = 0; n < exp_nb; n++) begin
      repeat ($urandom % 5 + 1) @(posedge clk);
      #1 nm_blk_done = 1; @(posedge clk); #1 nm_blk_done = 0;
      @(posedge clk); #1;
      chk(sc_avail == len_t'(n + 1), "sc_avail count");
    end
    sv_done = 1; @(posedge clk); #1 sv_done = 0;
    chk(done && !busy && job_ready, "done");
    chk(last_cycles == 32'(($time - t0) / 10), $sformatf("last_cycles %0d vs %0d", last_cycles, ($time - t0) / 10));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1); run(128); run(129); run(1000); run(4096);
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
