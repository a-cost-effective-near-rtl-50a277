// mem_arbiter: shares the accelerator's single 512-bit DRAM port among the
// units that read and write off-chip memory.
//
// Read channel: NR clients compete round-robin for the DRAM read-request
// channel (valid/ready). Each accepted request pushes the client's index into
// a tag FIFO; DRAM returns read data in request order, so the head of the FIFO
// names the client that gets each response (rsp_valid is steered, data is
// broadcast). At most MAX_OUT reads are outstanding; new reads stall while the
// FIFO is full.
// Write channel: NW clients compete round-robin for the DRAM write channel.
// A write is complete when the DRAM accepts it.
// Timing: grants are combinational from the request valids (no added
// latency); the round-robin pointer moves after each accepted request.
module mem_arbiter
  import hilos_pkg::*;
#(
  parameter int unsigned NR      = 4,
  parameter int unsigned NW      = 3,
  parameter int unsigned MAX_OUT = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  // client read side
  input  logic   c_rd_valid [NR],
  output logic   c_rd_ready [NR],
  input  maddr_t c_rd_addr  [NR],
  output logic   c_rsp_valid [NR],
  output mword_t c_rsp_data,
  // client write side
  input  logic   c_wr_valid [NW],
  output logic   c_wr_ready [NW],
  input  maddr_t c_wr_addr  [NW],
  input  mword_t c_wr_data  [NW],
  // DRAM side
  output logic   m_rd_valid,
  input  logic   m_rd_ready,
  output maddr_t m_rd_addr,
  input  logic   m_rsp_valid,
  input  mword_t m_rsp_data,
  output logic   m_wr_valid,
  input  logic   m_wr_ready,
  output maddr_t m_wr_addr,
  output mword_t m_wr_data
);
  localparam int unsigned RW = (NR > 1) ? $clog2(NR) : 1;
  localparam int unsigned WW = (NW > 1) ? $clog2(NW) : 1;
  localparam int unsigned FW = $clog2(MAX_OUT);

  // ---------------- read arbitration ----------------
  logic [RW-1:0] rr_rd, gnt_rd;
  logic          any_rd;
  logic [RW-1:0] tag_q [MAX_OUT];
  logic [FW-1:0] wp, rp;
  logic [FW:0]   cnt;
  logic          full, push, pop;

  always_comb begin
    any_rd = 1'b0;
    gnt_rd = '0;
    for (int k = 1; k <= NR; k++) begin
      int unsigned i;
      i = (int'(rr_rd) + k) % NR;
      if (!any_rd && c_rd_valid[i]) begin
        any_rd = 1'b1;
        gnt_rd = RW'(i);
      end
    end
  end

  assign full       = (cnt == (FW+1)'(MAX_OUT));
  assign m_rd_valid = any_rd && !full;
  assign m_rd_addr  = c_rd_addr[gnt_rd];
  assign push       = m_rd_valid && m_rd_ready;
  assign pop        = m_rsp_valid;
  always_comb
    for (int i = 0; i < NR; i++) begin
      c_rd_ready[i]  = m_rd_ready && !full && any_rd && (gnt_rd == RW'(i));
      c_rsp_valid[i] = m_rsp_valid && (tag_q[rp] == RW'(i));
    end
  assign c_rsp_data = m_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_rd <= RW'(NR - 1);
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (push) begin
        tag_q[wp] <= gnt_rd;
        wp <= wp + 1'b1;
        rr_rd <= gnt_rd;
      end
      if (pop) rp <= rp + 1'b1;
      cnt <= cnt + (FW+1)'(push) - (FW+1)'(pop);
    end
  end

  // ---------------- write arbitration ----------------
  logic [WW-1:0] rr_wr, gnt_wr;
  logic          any_wr;
  always_comb begin
    any_wr = 1'b0;
    gnt_wr = '0;
    for (int k = 1; k <= NW; k++) begin
      int unsigned i;
      i = (int'(rr_wr) + k) % NW;
      if (!any_wr && c_wr_valid[i]) begin
        any_wr = 1'b1;
        gnt_wr = WW'(i);
      end
    end
  end
  assign m_wr_valid = any_wr;
  assign m_wr_addr  = c_wr_addr[gnt_wr];
  assign m_wr_data  = c_wr_data[gnt_wr];
  always_comb
    for (int i = 0; i < NW; i++) c_wr_ready[i] = m_wr_ready && any_wr && (gnt_wr == WW'(i));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr_wr <= WW'(NW - 1);
    else if (m_wr_valid && m_wr_ready) rr_wr <= gnt_wr;
  end

  // DRAM must not return more data than was requested.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin end
    else if (m_rsp_valid)
      assert (cnt != 0) else $error("mem_arbiter: read response without request");
  initial assert (MAX_OUT == (1 << FW)) else $error("mem_arbiter: MAX_OUT must be a power of two");
endmodule
