// uli_tcm: tightly coupled memory used for the extension's tables and stack.
//
// The V5 configuration attaches three of these to the core: the PMP table,
// the budget table and the register spill stack. Port A belongs to the
// extension's bus interface (PMP loader, budget timer, register spiller);
// port B is reached from the core's load/store unit through the external
// multiplexer, which is how the kernel programs the tables. Both ports are
// synchronous single-cycle SRAM ports: a request in cycle t is written at the
// end of t, or read data is valid in cycle t+1. Addresses are byte addresses;
// the low two bits are ignored and only the low $clog2(DEPTH) word-address
// bits decode, so the memory aliases across its window (lint reports the
// other address bits as unused; that is intended). If both ports write
// the same word in one cycle, port A wins. Port B has byte enables.
//
// The paper names the TCMs and their contents but gives no sizes; the
// 256-word default and the two-port organisation are this design's choice.
// Contents are not reset, as in an SRAM macro.
module uli_tcm
  import uli_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic            clk_i,
  // port A: extension
  input  logic            a_req_i,
  input  logic            a_we_i,
  input  logic [XLEN-1:0] a_addr_i,
  input  logic [XLEN-1:0] a_wdata_i,
  output logic [XLEN-1:0] a_rdata_o,
  // port B: system bus
  input  logic            b_req_i,
  input  logic            b_we_i,
  input  logic [3:0]      b_be_i,
  input  logic [XLEN-1:0] b_addr_i,
  input  logic [XLEN-1:0] b_wdata_i,
  output logic [XLEN-1:0] b_rdata_o
);

  logic [XLEN-1:0] mem [DEPTH];

  logic [AW-1:0] a_idx, b_idx;
  assign a_idx = a_addr_i[AW+1:2];
  assign b_idx = b_addr_i[AW+1:2];

  always_ff @(posedge clk_i) begin
    if (b_req_i && b_we_i && !(a_req_i && a_we_i && a_idx == b_idx))
      for (int unsigned b = 0; b < 4; b++)
        if (b_be_i[b]) mem[b_idx][8*b +: 8] <= b_wdata_i[8*b +: 8];
    if (a_req_i && a_we_i) mem[a_idx] <= a_wdata_i;
  end

  always_ff @(posedge clk_i) begin
    if (a_req_i && !a_we_i) a_rdata_o <= mem[a_idx];
    if (b_req_i && !b_we_i) b_rdata_o <= mem[b_idx];
  end

endmodule
