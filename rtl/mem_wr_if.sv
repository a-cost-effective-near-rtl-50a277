// mem_wr_if: write channel between one accelerator unit and the DRAM arbiter.
// A full 512-bit word (32 FP16 values) is written to req_addr when req_valid
// and req_ready are both high; the write counts as done at that handshake.
// The client holds valid, address and data stable until it is accepted.
interface mem_wr_if;
  import hilos_pkg::*;
  logic   req_valid;
  logic   req_ready;
  maddr_t req_addr;
  mword_t req_data;

  modport client (output req_valid, req_addr, req_data, input req_ready);
  modport server (input req_valid, req_addr, req_data, output req_ready);
endinterface
