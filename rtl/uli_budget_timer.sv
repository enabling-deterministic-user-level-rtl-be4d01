// uli_budget_timer: execution-budget countdown timer of a user-level handler,
// with its own bus interface (BIU) to the budget table TCM.
//
// A budget is a number of CPU clock cycles. The timer is loaded from the
// handler's budget-table entry while the interrupt is being taken, holds the
// value ("on hold" in the paper's timing diagrams) until the controller starts
// the handler, then counts down one per cycle while run_i is high. When the
// count is zero, expired_o is high: a running handler has used its budget
// and must be forced to return (temporal violation). expired_o does not look
// at run_i, because the controller derives run_i from its own exit decision,
// which in turn uses expired_o; the controller only acts on expired_o while a
// handler runs. On return, and
// when a handler is preempted by another one, the remaining count is written
// back to the handler's entry so that the kernel can account and replenish it.
//
// Operations (pulses from the interrupt controller):
//   load_i  + load_ptr_i : read the entry; with a 1-cycle-latency TCM the
//                           address goes out in the same cycle and the value
//                           lands in the counter at the end of the next cycle,
//                           the cycle in which done_o is high.
//   save_i  + save_ptr_i : write the current count to the entry in this cycle.
//   both at once          : the write goes out first, the read one cycle later.
// done_o is high in the cycle the last requested operation completes (for a
// save alone, the cycle of the write). A budget of N lets a handler run N
// cycles. Budget and timer widths (32 bits) are this design's choice.
module uli_budget_timer
  import uli_pkg::*;
#(
  parameter int unsigned CNTW = 32
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            load_i,
  input  logic [XLEN-1:0] load_ptr_i,
  input  logic            save_i,
  input  logic [XLEN-1:0] save_ptr_i,
  input  logic            run_i,
  output logic            done_o,
  output logic            expired_o,
  output logic [CNTW-1:0] remain_o,
  // budget table TCM port (1-cycle read latency)
  output logic            tcm_req_o,
  output logic            tcm_we_o,
  output logic [XLEN-1:0] tcm_addr_o,
  output logic [XLEN-1:0] tcm_wdata_o,
  input  logic [XLEN-1:0] tcm_rdata_i
);

  logic [CNTW-1:0] cnt_q;
  logic            pend_load_q;   // read deferred behind a write
  logic [XLEN-1:0] pend_ptr_q;
  logic            rvalid_q;      // read data arrives this cycle

  always_comb begin
    tcm_req_o   = 1'b0;
    tcm_we_o    = 1'b0;
    tcm_addr_o  = '0;
    tcm_wdata_o = XLEN'(cnt_q);
    if (save_i) begin
      tcm_req_o  = 1'b1;
      tcm_we_o   = 1'b1;
      tcm_addr_o = save_ptr_i;
    end else if (load_i) begin
      tcm_req_o  = 1'b1;
      tcm_addr_o = load_ptr_i;
    end else if (pend_load_q) begin
      tcm_req_o  = 1'b1;
      tcm_addr_o = pend_ptr_q;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q       <= '0;
      pend_load_q <= 1'b0;
      pend_ptr_q  <= '0;
      rvalid_q    <= 1'b0;
    end else begin
      rvalid_q    <= tcm_req_o && !tcm_we_o;
      pend_load_q <= save_i && load_i;
      if (save_i && load_i) pend_ptr_q <= load_ptr_i;
      if (rvalid_q)
        cnt_q <= CNTW'(tcm_rdata_i);
      else if (run_i && cnt_q != '0)
        cnt_q <= cnt_q - CNTW'(1);
    end
  end

  assign done_o    = rvalid_q || (save_i && !load_i);
  assign expired_o = (cnt_q == '0);
  assign remain_o  = cnt_q;

endmodule
