// uli_ext_mux: the core's external multiplexer.
//
// It decodes each request of the core's load/store bus and sends it to one of
// four targets: the PMP table TCM, the budget table TCM, the stack TCM (each
// through its system-side port B) or the rest of the system bus (main SRAM
// and peripherals). This is how the kernel writes the tables while
// registering an interrupt and how it reads back and replenishes budgets.
// Every target answers in the cycle after the request, so the multiplexer
// only registers which target was selected and steers that target's read
// data back in the next cycle.
//
// Address map (this design's choice; the paper draws the multiplexer but
// gives no addresses): each TCM occupies a WIN_BYTES window at its base
// address; everything else goes to the system bus.
//
// The target address, write data, write enable and byte enables are one bus
// shared by all four targets, so those outputs are wires from the inputs
// (synthesis reports them as driven straight from inputs); only the request
// lines and the read-data steering are decoded.
module uli_ext_mux
  import uli_pkg::*;
#(
  parameter logic [XLEN-1:0] PMPT_BASE = 32'h4000_0000,
  parameter logic [XLEN-1:0] BUDT_BASE = 32'h4001_0000,
  parameter logic [XLEN-1:0] STKT_BASE = 32'h4002_0000,
  parameter int unsigned     WIN_BYTES = 32'h0001_0000
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // core load/store bus
  input  logic            lsu_req_i,
  input  logic            lsu_we_i,
  input  logic [3:0]      lsu_be_i,
  input  logic [XLEN-1:0] lsu_addr_i,
  input  logic [XLEN-1:0] lsu_wdata_i,
  output logic [XLEN-1:0] lsu_rdata_o,
  // targets: 0 PMP table, 1 budget table, 2 stack, 3 system bus
  output logic [3:0]      t_req_o,
  output logic            t_we_o,
  output logic [3:0]      t_be_o,
  output logic [XLEN-1:0] t_addr_o,
  output logic [XLEN-1:0] t_wdata_o,
  input  logic [3:0][XLEN-1:0] t_rdata_i
);

  function automatic logic in_win(input logic [XLEN-1:0] a, input logic [XLEN-1:0] base);
    return (a >= base) && (a - base < XLEN'(WIN_BYTES));
  endfunction

  logic [1:0] sel, sel_q;
  always_comb begin
    if (in_win(lsu_addr_i, PMPT_BASE))      sel = 2'd0;
    else if (in_win(lsu_addr_i, BUDT_BASE)) sel = 2'd1;
    else if (in_win(lsu_addr_i, STKT_BASE)) sel = 2'd2;
    else                                    sel = 2'd3;
  end

  always_comb begin
    t_req_o = '0;
    t_req_o[sel] = lsu_req_i;
  end
  assign t_we_o    = lsu_we_i;
  assign t_be_o    = lsu_be_i;
  assign t_addr_o  = lsu_addr_i;
  assign t_wdata_o = lsu_wdata_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)        sel_q <= 2'd3;
    else if (lsu_req_i) sel_q <= sel;
  end

  assign lsu_rdata_o = t_rdata_i[sel_q];

  // exactly one target is selected per request
  always_comb
    if (rst_ni && lsu_req_i) a_onehot: assert ($onehot(t_req_o));

endmodule
