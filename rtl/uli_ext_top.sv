// uli_ext_top: deterministic user-level interrupt extension, V5 organisation.
//
// This is the part of a small RISC-V real-time core that lets a device
// interrupt run an untrusted, user-level handler directly, confined in space
// (its own PMP configuration) and time (its own cycle budget), with a short
// and fixed entry latency whether or not the handler's process is scheduled.
// The V5 organisation is the lowest-latency one: the interrupt-to-domain map
// is a 16-entry CAM looked up inside the acknowledge cycle, the registers are
// banked (one extra bank, spilling to a dedicated stack TCM beyond that), and
// the PMP table and budget table sit in their own TCMs so that loading them
// never contends with register stacking.
//
// Blocks (all instantiated here):
//   u_intc   interrupt controller and entry/exit sequencer       (uli_intc)
//   u_cam    interrupt identification CAM (IIDU)                  (uli_iid_cam)
//   u_pmp    PMP with kernel shadow set and table loader          (uli_pmp)
//   u_tim    budget countdown timer with table BIU                (uli_budget_timer)
//   u_rf     banked register file with spill BIU                  (uli_regfile)
//   u_xmux   external multiplexer for the load/store bus          (uli_ext_mux)
//   u_pmpt, u_budt, u_stkt   PMP table, budget table, stack TCMs  (uli_tcm)
// The pipeline itself (fetch, decode/execute, LSU, CSR instructions) is not
// part of this module: its side of every connection is a port, so the
// extension can be attached to an in-order core. The core must: read and
// write its GPRs through the rf_* ports, present every fetch and data access
// for checking on if_*/d_*, execute CSR instructions on the csr_* bus, hold
// and squash its pipeline while pipe_flush_o is high, fetch from
// pipe_redirect_pc_o when pipe_redirect_o pulses, run with user privilege
// while uli_active_o is high, report retirement of uiret and any exception
// raised by a handler, and present the PC to resume on pipe_epc_i.
//
// Latency: a user-level interrupt line rising in cycle n is acknowledged in
// cycle n+1 (tables addressed, bank switched at its end), the budget lands in
// the timer in cycle n+2, the last PMP word in cycle n+6, and the handler's
// vector is fetched in cycle n+7, matching the V5 timing diagram (interrupt
// in cycle 2, fetch in cycle 9). All timing is in core clock cycles.
//
// Lint and synthesis notes: the TCM address and write-data outputs of the
// external multiplexer are shared-bus wires from the load/store inputs, so
// the sys_* address, data and byte-enable outputs are driven straight from
// inputs; unused address bits and mtvec mode bits are reported as unused
// (see the blocks' own notes).
module uli_ext_top
  import uli_pkg::*;
#(
  parameter int unsigned NIRQ   = 32,
  parameter int unsigned NENT   = 16,
  parameter int unsigned NPMP   = 4,
  parameter int unsigned NEXTRA = 1,
  parameter int unsigned PMPT_DEPTH = 256,
  parameter int unsigned BUDT_DEPTH = 256,
  parameter int unsigned STKT_DEPTH = 1024,  // 15 spill frames of 35 words: 16 levels
  localparam int unsigned IRQW = (NIRQ > 1) ? $clog2(NIRQ) : 1,
  localparam int unsigned BW   = (NEXTRA > 0) ? $clog2(NEXTRA + 1) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // interrupt lines
  input  logic [NIRQ-1:0] irq_i,
  output logic [NIRQ-1:0] kirq_o,
  // CSR bus from the pipeline
  input  logic            csr_we_i,
  input  logic [11:0]     csr_addr_i,
  input  logic [XLEN-1:0] csr_wdata_i,
  output logic [XLEN-1:0] csr_rdata_o,
  output logic            csr_hit_o,
  // pipeline control
  input  logic [XLEN-1:0] mtvec_i,
  input  logic [XLEN-1:0] pipe_epc_i,
  input  logic            pipe_uiret_i,
  input  logic            pipe_exc_i,
  input  logic [4:0]      pipe_exc_cause_i,
  output logic            pipe_flush_o,
  output logic            pipe_redirect_o,
  output logic [XLEN-1:0] pipe_redirect_pc_o,
  output logic            uli_active_o,
  output logic            systimer_pause_o,
  output logic [7:0]      level_o,
  // register file ports
  input  logic [4:0]      rf_ra1_i,
  input  logic [4:0]      rf_ra2_i,
  output logic [XLEN-1:0] rf_rd1_o,
  output logic [XLEN-1:0] rf_rd2_o,
  input  logic            rf_we_i,
  input  logic [4:0]      rf_wa_i,
  input  logic [XLEN-1:0] rf_wd_i,
  // PMP checks
  input  logic            priv_m_i,
  input  logic            if_req_i,
  input  logic [XLEN-1:0] if_addr_i,
  output logic            if_fault_o,
  input  logic            d_req_i,
  input  logic            d_we_i,
  input  logic [XLEN-1:0] d_addr_i,
  output logic            d_fault_o,
  // load/store bus from the pipeline
  input  logic            lsu_req_i,
  input  logic            lsu_we_i,
  input  logic [3:0]      lsu_be_i,
  input  logic [XLEN-1:0] lsu_addr_i,
  input  logic [XLEN-1:0] lsu_wdata_i,
  output logic [XLEN-1:0] lsu_rdata_o,
  // system bus to main SRAM and peripherals (1-cycle read latency)
  output logic            sys_req_o,
  output logic            sys_we_o,
  output logic [3:0]      sys_be_o,
  output logic [XLEN-1:0] sys_addr_o,
  output logic [XLEN-1:0] sys_wdata_o,
  input  logic [XLEN-1:0] sys_rdata_i,
  // status for debug and kernel accounting
  output logic [XLEN-1:0] budget_remain_o,   // running handler's remaining budget
  output logic [BW-1:0]   rf_bank_o,         // register bank in use
  output logic            rf_spilling_o      // stack TCM traffic in progress
);

  // ---------------------------------------------------------------- nets
  logic [IRQW-1:0] cam_irq;
  logic            cam_hit;
  logic [XLEN-1:0] cam_pmp_ptr, cam_tim_ptr;
  logic [NIRQ-1:0] uli_mask;

  logic            pmp_load, pmp_sel_uli, pmp_done;
  logic [XLEN-1:0] pmp_ptr;
  logic            tim_load, tim_save, tim_run, tim_done, tim_expired;
  logic [XLEN-1:0] tim_load_ptr, tim_save_ptr;
  logic            rf_save, rf_restore, rf_ctrl_en, rf_done;
  logic [7:0]      rf_level;
  logic [NCTRL-1:0][XLEN-1:0] rf_ctrl_to, rf_ctrl_from;
  logic [XLEN-1:0] rf_stk_base;

  logic [XLEN-1:0] csr_rd_ic, csr_rd_cam, csr_rd_pmp;
  logic            csr_hit_ic, csr_hit_cam, csr_hit_pmp;

  // TCM port A nets (extension side)
  logic            pa_req;                    // PMP table: read only
  logic [XLEN-1:0] pa_addr, pa_rdata;
  logic            ba_req, ba_we;             // budget table
  logic [XLEN-1:0] ba_addr, ba_wdata, ba_rdata;
  logic            sa_req, sa_we;             // stack
  logic [XLEN-1:0] sa_addr, sa_wdata, sa_rdata;

  // TCM port B nets (system side)
  logic [3:0]      t_req;
  logic            t_we;
  logic [3:0]      t_be;
  logic [XLEN-1:0] t_addr, t_wdata;
  logic [3:0][XLEN-1:0] t_rdata;

  // ---------------------------------------------------------------- blocks
  uli_intc #(.NIRQ(NIRQ)) u_intc (
    .clk_i, .rst_ni, .irq_i, .kirq_o,
    .csr_we_i, .csr_addr_i, .csr_wdata_i,
    .csr_rdata_o(csr_rd_ic), .csr_hit_o(csr_hit_ic),
    .mtvec_i, .pipe_epc_i, .pipe_uiret_i, .pipe_exc_i, .pipe_exc_cause_i,
    .pipe_flush_o, .pipe_redirect_o, .pipe_redirect_pc_o,
    .uli_active_o, .systimer_pause_o, .level_o,
    .cam_irq_o(cam_irq), .cam_hit_i(cam_hit),
    .cam_pmp_ptr_i(cam_pmp_ptr), .cam_tim_ptr_i(cam_tim_ptr), .uli_mask_i(uli_mask),
    .pmp_load_o(pmp_load), .pmp_ptr_o(pmp_ptr), .pmp_sel_uli_o(pmp_sel_uli),
    .pmp_done_i(pmp_done), .pmp_fault_i(if_fault_o || d_fault_o),
    .tim_load_o(tim_load), .tim_load_ptr_o(tim_load_ptr),
    .tim_save_o(tim_save), .tim_save_ptr_o(tim_save_ptr), .tim_run_o(tim_run),
    .tim_done_i(tim_done), .tim_expired_i(tim_expired),
    .rf_save_o(rf_save), .rf_restore_o(rf_restore), .rf_level_o(rf_level),
    .rf_ctrl_en_o(rf_ctrl_en), .rf_ctrl_o(rf_ctrl_to), .rf_ctrl_i(rf_ctrl_from),
    .rf_stk_base_o(rf_stk_base), .rf_done_i(rf_done)
  );

  uli_iid_cam #(.NENT(NENT), .NIRQ(NIRQ)) u_cam (
    .clk_i, .rst_ni, .csr_we_i, .csr_addr_i, .csr_wdata_i,
    .csr_rdata_o(csr_rd_cam), .csr_hit_o(csr_hit_cam),
    .lookup_irq_i(cam_irq), .lookup_hit_o(cam_hit),
    .lookup_pmp_ptr_o(cam_pmp_ptr), .lookup_tim_ptr_o(cam_tim_ptr),
    .uli_mask_o(uli_mask)
  );

  uli_pmp #(.NPMP(NPMP)) u_pmp (
    .clk_i, .rst_ni, .csr_we_i, .csr_addr_i, .csr_wdata_i,
    .csr_rdata_o(csr_rd_pmp), .csr_hit_o(csr_hit_pmp),
    .load_i(pmp_load), .load_ptr_i(pmp_ptr), .load_done_o(pmp_done),
    .tcm_req_o(pa_req), .tcm_addr_o(pa_addr), .tcm_rdata_i(pa_rdata),
    .sel_uli_i(pmp_sel_uli), .priv_m_i,
    .if_req_i, .if_addr_i, .if_fault_o,
    .d_req_i, .d_we_i, .d_addr_i, .d_fault_o
  );

  uli_budget_timer u_tim (
    .clk_i, .rst_ni,
    .load_i(tim_load), .load_ptr_i(tim_load_ptr),
    .save_i(tim_save), .save_ptr_i(tim_save_ptr),
    .run_i(tim_run), .done_o(tim_done), .expired_o(tim_expired), .remain_o(budget_remain_o),
    .tcm_req_o(ba_req), .tcm_we_o(ba_we), .tcm_addr_o(ba_addr),
    .tcm_wdata_o(ba_wdata), .tcm_rdata_i(ba_rdata)
  );

  uli_regfile #(.NEXTRA(NEXTRA)) u_rf (
    .clk_i, .rst_ni,
    .ra1_i(rf_ra1_i), .ra2_i(rf_ra2_i), .rd1_o(rf_rd1_o), .rd2_o(rf_rd2_o),
    .we_i(rf_we_i), .wa_i(rf_wa_i), .wd_i(rf_wd_i),
    .save_i(rf_save), .restore_i(rf_restore), .level_i(rf_level),
    .ctrl_en_i(rf_ctrl_en), .ctrl_i(rf_ctrl_to), .ctrl_o(rf_ctrl_from),
    .stk_base_i(rf_stk_base), .done_o(rf_done), .bank_o(rf_bank_o), .spilling_o(rf_spilling_o),
    .tcm_req_o(sa_req), .tcm_we_o(sa_we), .tcm_addr_o(sa_addr),
    .tcm_wdata_o(sa_wdata), .tcm_rdata_i(sa_rdata)
  );

  uli_ext_mux u_xmux (
    .clk_i, .rst_ni,
    .lsu_req_i, .lsu_we_i, .lsu_be_i, .lsu_addr_i, .lsu_wdata_i, .lsu_rdata_o,
    .t_req_o(t_req), .t_we_o(t_we), .t_be_o(t_be), .t_addr_o(t_addr),
    .t_wdata_o(t_wdata), .t_rdata_i(t_rdata)
  );

  uli_tcm #(.DEPTH(PMPT_DEPTH)) u_pmpt (
    .clk_i,
    .a_req_i(pa_req), .a_we_i(1'b0), .a_addr_i(pa_addr), .a_wdata_i('0),
    .a_rdata_o(pa_rdata),
    .b_req_i(t_req[0]), .b_we_i(t_we), .b_be_i(t_be), .b_addr_i(t_addr),
    .b_wdata_i(t_wdata), .b_rdata_o(t_rdata[0])
  );

  uli_tcm #(.DEPTH(BUDT_DEPTH)) u_budt (
    .clk_i,
    .a_req_i(ba_req), .a_we_i(ba_we), .a_addr_i(ba_addr), .a_wdata_i(ba_wdata),
    .a_rdata_o(ba_rdata),
    .b_req_i(t_req[1]), .b_we_i(t_we), .b_be_i(t_be), .b_addr_i(t_addr),
    .b_wdata_i(t_wdata), .b_rdata_o(t_rdata[1])
  );

  uli_tcm #(.DEPTH(STKT_DEPTH)) u_stkt (
    .clk_i,
    .a_req_i(sa_req), .a_we_i(sa_we), .a_addr_i(sa_addr), .a_wdata_i(sa_wdata),
    .a_rdata_o(sa_rdata),
    .b_req_i(t_req[2]), .b_we_i(t_we), .b_be_i(t_be), .b_addr_i(t_addr),
    .b_wdata_i(t_wdata), .b_rdata_o(t_rdata[2])
  );

  // system bus
  assign sys_req_o   = t_req[3];
  assign sys_we_o    = t_we;
  assign sys_be_o    = t_be;
  assign sys_addr_o  = t_addr;
  assign sys_wdata_o = t_wdata;
  assign t_rdata[3]  = sys_rdata_i;

  // CSR read-back
  assign csr_hit_o   = csr_hit_ic || csr_hit_cam || csr_hit_pmp;
  assign csr_rdata_o = csr_rd_ic | csr_rd_cam | csr_rd_pmp;

endmodule
