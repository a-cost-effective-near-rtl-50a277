// tb_mem_arbiter: four read clients and three write clients issue random
// requests against a stalling DRAM model. Each read address encodes the
// client and a sequence number and the model returns data derived from the
// address, so every response is checked for the right client and order. Each
// write must land in DRAM with its data. Also checks that a client waiting
// alone is granted, and that with all clients requesting every client gets a
// share (round robin).
module tb_mem_arbiter;
  import hilos_pkg::*;
  localparam int NR = 4, NW = 3;
  logic clk = 0, rst_n = 0;
  logic   c_rd_valid [NR], c_rd_ready [NR], c_rsp_valid [NR];
  maddr_t c_rd_addr [NR];
  mword_t c_rsp_data;
  logic   c_wr_valid [NW], c_wr_ready [NW];
  maddr_t c_wr_addr [NW];
  mword_t c_wr_data [NW];
  logic   m_rd_valid, m_rd_ready, m_rsp_valid, m_wr_valid, m_wr_ready;
  maddr_t m_rd_addr, m_wr_addr;
  mword_t m_rsp_data, m_wr_data;
  int checks = 0, failures = 0;
  int issued [NR], recvd [NR], wdone [NW];
  int target [NR];

  mem_arbiter #(.NR(NR), .NW(NW), .MAX_OUT(16)) dut (.*);
  dram_model #(.AWL(16), .LAT(6), .STALL(1'b1)) u_dram (
    .clk, .rst_n, .rd_valid(m_rd_valid), .rd_ready(m_rd_ready), .rd_addr(m_rd_addr),
    .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data),
    .wr_valid(m_wr_valid), .wr_ready(m_wr_ready), .wr_addr(m_wr_addr), .wr_data(m_wr_data));
  always #5 clk = ~clk;

  // read address of client i, sequence n: i*4096 + n
  always_comb for (int i = 0; i < NR; i++) c_rd_addr[i] = maddr_t'(i * 4096 + issued[i]);
  always_comb for (int i = 0; i < NW; i++) begin
    c_wr_addr[i] = maddr_t'(32768 + i * 4096 + wdone[i]);
    c_wr_data[i] = {16{32'(i * 100000 + wdone[i])}};
  end

  always_ff @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NR; i++) begin
      if (c_rd_valid[i] && c_rd_ready[i]) issued[i] <= issued[i] + 1;
      if (c_rsp_valid[i]) begin
        checks++;
        if (c_rsp_data !== {16{32'(i * 4096 + recvd[i])}}) begin
          failures++;
          if (failures < 10) $display("FAIL client %0d response %0d data %h", i, recvd[i], c_rsp_data[31:0]);
        end
        recvd[i] <= recvd[i] + 1;
      end
      c_rd_valid[i] <= (issued[i] + ((c_rd_valid[i] && c_rd_ready[i]) ? 1 : 0) < target[i]) && ($urandom % 3 != 0);
    end
    for (int i = 0; i < NW; i++) begin
      if (c_wr_valid[i] && c_wr_ready[i]) wdone[i] <= wdone[i] + 1;
      c_wr_valid[i] <= (wdone[i] + ((c_wr_valid[i] && c_wr_ready[i]) ? 1 : 0) < 50) && ($urandom % 2 == 0);
    end
  end

  initial begin
    for (int i = 0; i < NR; i++) begin issued[i] = 0; recvd[i] = 0; c_rd_valid[i] = 0; target[i] = 200; end
    for (int i = 0; i < NW; i++) begin wdone[i] = 0; c_wr_valid[i] = 0; end
    for (int a = 0; a < 2**16; a++) u_dram.mem[a] = {16{32'(a)}};
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (recvd[0] == 200 && recvd[1] == 200 && recvd[2] == 200 && recvd[3] == 200 &&
          wdone[0] == 50 && wdone[1] == 50 && wdone[2] == 50);
    repeat (10) @(posedge clk);
    for (int i = 0; i < NW; i++)
      for (int n = 0; n < 50; n++) begin
        checks++;
        if (u_dram.mem[32768 + i * 4096 + n] !== {16{32'(i * 100000 + n)}}) begin
          failures++; $display("FAIL write client %0d #%0d", i, n);
        end
      end
    checks++;
    if (u_dram.n_stall == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    $display("DRAM stalls seen: %0d", u_dram.n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // fairness while all read clients are busy: no client may wait more than NR grants
  int wait_cnt [NR];
  always_ff @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NR; i++) begin
      if (c_rd_valid[i] && !c_rd_ready[i] && m_rd_valid && m_rd_ready) wait_cnt[i] <= wait_cnt[i] + 1;
      else if (!c_rd_valid[i] || c_rd_ready[i]) wait_cnt[i] <= 0;
      if (wait_cnt[i] > NR) begin
        failures++; $display("FAIL client %0d starved", i); wait_cnt[i] <= 0;
      end
    end
  end
  initial for (int i = 0; i < NR; i++) wait_cnt[i] = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
