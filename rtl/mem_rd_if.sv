// mem_rd_if: read channel between one accelerator unit and the DRAM arbiter.
// A request (req_addr, one 512-bit word) is accepted when req_valid and
// req_ready are both high. Responses come back in request order, one word per
// rsp_valid pulse, and cannot be stalled: a client issues only reads whose
// data it has room for. Addresses count 512-bit words.
interface mem_rd_if;
  import hilos_pkg::*;
  logic   req_valid;
  logic   req_ready;
  maddr_t req_addr;
  logic   rsp_valid;
  mword_t rsp_data;

  modport client (output req_valid, req_addr, input req_ready, rsp_valid, rsp_data);
  modport server (input req_valid, req_addr, output req_ready, rsp_valid, rsp_data);
endinterface
