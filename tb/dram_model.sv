// dram_model: behavioural model of the accelerator's off-chip DRAM seen
// through its 512-bit port (not synthesizable, testbench only).
// Reads are accepted when rd_ready is high and answered in order exactly LAT
// cycles later; data is sampled at acceptance. Writes take effect at
// acceptance. With STALL=1 both ready signals drop at random (about one cycle
// in four) to exercise back-pressure. The array has 2**AWL words;
// testbenches load and inspect it directly through `mem`.
module dram_model
  import hilos_pkg::*;
#(
  parameter int unsigned AWL   = 16,
  parameter int unsigned LAT   = 8,
  parameter bit          STALL = 1'b0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   rd_valid,
  output logic   rd_ready,
  input  maddr_t rd_addr,
  output logic   rsp_valid,
  output mword_t rsp_data,
  input  logic   wr_valid,
  output logic   wr_ready,
  input  maddr_t wr_addr,
  input  mword_t wr_data
);
  mword_t mem [2**AWL];
  logic   pv [LAT];
  mword_t pd [LAT];
  int unsigned n_rd, n_wr, n_stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ready <= 1'b1; wr_ready <= 1'b1;
    end else begin
      rd_ready <= STALL ? ($urandom % 4 != 0) : 1'b1;
      wr_ready <= STALL ? ($urandom % 4 != 0) : 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pd[i] <= '0; end
      n_rd <= 0; n_wr <= 0; n_stall <= 0;
    end else begin
      pv[0] <= rd_valid && rd_ready;
      pd[0] <= mem[rd_addr[AWL-1:0]];
      for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      if (rd_valid && rd_ready) begin
        n_rd <= n_rd + 1;
        assert (rd_addr < 2**AWL) else $error("dram_model: read address out of range");
      end
      if (wr_valid && wr_ready) begin
        mem[wr_addr[AWL-1:0]] <= wr_data;
        n_wr <= n_wr + 1;
        assert (wr_addr < 2**AWL) else $error("dram_model: write address out of range");
      end
      if ((rd_valid && !rd_ready) || (wr_valid && !wr_ready)) n_stall <= n_stall + 1;
    end
  end
  assign rsp_valid = pv[LAT-1];
  assign rsp_data  = pd[LAT-1];
endmodule
