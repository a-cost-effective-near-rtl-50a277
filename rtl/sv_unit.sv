// sv_unit: score-value product unit.
//
// For each block of 128 tokens, once the normalisation unit has written that
// block's attention scores:
//   1. LOAD: reads the block's scores of all DGROUP query rows into Score-Buf
//      (4 words per row) and the 128x128 value block into V-Buf (128 token
//      rows of 4 words). Values are token-major, so no transpose is needed;
//   2. MAC: a MAC array of DGROUP x 128 FP32 units runs for 128 cycles; in
//      cycle j unit d of query row g adds score[g][j] * V[j][d]. The V-Buf row
//      is broadcast to all DGROUP query rows (GQA sharing).
// The per-query output buffers accumulate across all blocks. After the last
// block they are converted to FP16 and written to the output region
// (4 words per query row), then `done` pulses.
// Block b is started only when sc_avail > b.
module sv_unit
  import hilos_pkg::*;
#(
  parameter int unsigned DGROUP = 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  maddr_t    sc_addr,
  input  maddr_t    v_addr,
  input  maddr_t    out_addr,
  input  len_t      nb,
  input  len_t      sc_avail,
  mem_rd_if.client  rd,
  mem_wr_if.client  wr,
  output logic      busy,
  output logic      blk_done,
  output logic      done
);
  localparam int unsigned N    = 128;
  localparam int unsigned WPR  = N / ELEMS_PER_WORD;
  localparam int unsigned NS   = WPR * DGROUP;         // score words per block
  localparam int unsigned NV   = WPR * N;              // 512 value words per block
  localparam int unsigned NRD  = NS + NV;

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_LOAD, S_MAC, S_WRITE} state_t;
  state_t state;

  fp16_t scbuf [DGROUP][N];
  fp16_t vbuf  [N][N];
  fp32_t acc   [DGROUP][N];
  len_t  blk;
  logic [$clog2(NRD+1)-1:0] ri, rc;
  logic [$clog2(NS+1)-1:0] wi;
  logic [$clog2(N)-1:0] j;
  maddr_t row_stride;

  // ---- MAC array ----
  fp32_t acc_nxt [DGROUP][N];
  always_comb begin
    for (int g = 0; g < DGROUP; g++)
      for (int dd = 0; dd < N; dd++)
        acc_nxt[g][dd] = fp32_add(acc[g][dd], fp32_mul(fp16_to_fp32(scbuf[g][j]), fp16_to_fp32(vbuf[j][dd])));
  end

  int unsigned wr_g, wr_w;
  always_comb begin
    wr_g = int'(wi) / WPR;
    wr_w = int'(wi) % WPR;
    wr.req_data = '0;
    for (int e = 0; e < ELEMS_PER_WORD; e++)
      wr.req_data[16*e +: 16] = fp32_to_fp16(acc[(wr_g < DGROUP) ? wr_g : 0][wr_w * ELEMS_PER_WORD + e]);
  end
  assign wr.req_valid = (state == S_WRITE);
  assign wr.req_addr  = out_addr + maddr_t'(wi);

  always_comb begin
    rd.req_valid = (state == S_LOAD) && (ri < NRD);
    if (ri < NS)
      rd.req_addr = sc_addr + maddr_t'(ri / WPR) * row_stride + maddr_t'(blk) * WPR + maddr_t'(ri % WPR);
    else
      rd.req_addr = v_addr + maddr_t'(blk) * NV + maddr_t'(ri - NS);
  end
  assign busy = (state != S_IDLE);

  // Output accumulators: cleared at job start, updated while in MAC.
  always_ff @(posedge clk) begin
    if (state == S_IDLE && start) begin
      for (int g = 0; g < DGROUP; g++)
        for (int dd = 0; dd < N; dd++) acc[g][dd] <= FP32_ZERO;
    end else if (state == S_MAC) acc <= acc_nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      blk <= '0; ri <= '0; rc <= '0; wi <= '0; j <= '0; row_stride <= '0;
      blk_done <= 1'b0; done <= 1'b0;
    end else begin
      blk_done <= 1'b0;
      done     <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          blk <= '0;
          row_stride <= maddr_t'(nb) * WPR;
          state <= S_WAIT;
        end
        S_WAIT: if (sc_avail > blk) begin
          ri <= '0; rc <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (rd.req_valid && rd.req_ready) ri <= ri + 1'b1;
          if (rd.rsp_valid) begin
            for (int e = 0; e < ELEMS_PER_WORD; e++) begin
              if (rc < NS)
                scbuf[int'(rc) / WPR][(int'(rc) % WPR) * ELEMS_PER_WORD + e] <= rd.rsp_data[16*e +: 16];
              else
                vbuf[(int'(rc) - NS) / WPR][((int'(rc) - NS) % WPR) * ELEMS_PER_WORD + e] <= rd.rsp_data[16*e +: 16];
            end
            rc <= rc + 1'b1;
            if (rc == NRD - 1) begin
              j <= '0;
              state <= S_MAC;
            end
          end
        end
        S_MAC: begin
          j <= j + 1'b1;
          if (j == $clog2(N)'(N - 1)) begin
            blk_done <= 1'b1;
            blk <= blk + 1'b1;
            if (blk + 1'b1 == nb) begin
              wi <= '0;
              state <= S_WRITE;
            end else state <= S_WAIT;
          end
        end
        S_WRITE: if (wr.req_ready) begin
          wi <= wi + 1'b1;
          if (wi == NS - 1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin end
    else if (rd.rsp_valid)
      assert (state == S_LOAD && rc < ri) else $error("sv_unit: unexpected read response");
endmodule
