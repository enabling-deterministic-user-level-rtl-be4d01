// uli_intc: interrupt controller extended for deterministic user-level
// interrupts (the "Int Ctrl Logic" with its preempt priorities, enable flags
// and activation logic).
//
// Every interrupt line is either kernel-level (forwarded unchanged on kirq_o
// to the core's ordinary RISC-V interrupt logic) or user-level (claimed by a
// valid entry of the IID CAM). For user-level lines a rising edge sets a
// pending flag. Among pending, enabled user-level interrupts the one with the
// highest priority wins (lowest number on a tie); it is taken when the
// extension is enabled (muictl[0]) and either no handler runs (level 0: it
// preempts the thread or the kernel) or its priority is strictly higher than
// the running handler's.
//
// Taking an interrupt (the paper's steps 1-9). In the cycle the winner is
// chosen, the CAM lookup is already done (combinational), so the controller
// at once flushes the pipeline, captures the resume PC into muiepc and
// launches three things in parallel:
//   * PMP: load the handler's PMP table entry into the user-level PMP set,
//   * timer: load the handler's budget (after writing back the preempted
//     handler's remaining budget when one is preempted),
//   * registers: switch to a fresh zeroised bank, or spill, and push the
//     preempted handler's control words (muiepc, PMP and budget pointers,
//     priority and number) to the context stack when nesting.
// When all three report done ("finish"), the next cycle redirects fetch to the
// handler's vector (mtvec base + 4 * interrupt number) and starts the budget
// countdown. With the default 4-entry PMP this is 6 cycles after the winner is
// chosen: interrupt seen in cycle 2, tables addressed in cycle 3, handler
// fetched in cycle 9, as in the paper's V5 timing diagram.
//
// Returning. A handler ends with uiret (pipe_uiret_i) or is forced to return
// on a PMP fault (spatial violation), budget exhaustion (temporal violation)
// or any other exception; a forced return records its cause in muicause
// ([31] valid, [20:16] exception code, [15:8] interrupt, [3:0] cause) for
// the kernel to read later, instead of trapping into the kernel. A PMP fault
// is registered first and starts the return in the following cycle: the
// fault is combinational from the core's access request, and the core's
// request in turn depends on pipe_flush_o, so using it directly would close
// a combinational loop through the core (the core must squash the faulting
// access itself, as it does for any access fault). The
// remaining budget is written back, the registers are restored (bank switch
// or fill) and, if another handler was preempted, its control words are
// popped and its PMP entry and remaining budget reloaded before fetch
// resumes at the saved PC. While any handler runs the kernel's system timer
// is paused (systimer_pause_o) and kernel-level interrupts are held back.
//
// Paper-given: the roles of muictl/muistk/muiepc, the step order, the forced
// return on violations, budget write-back, system-timer pause, nesting by
// priority. This design's choices: edge-triggered pending flags, CSR numbers
// and layouts of the enable, priority, cause and status CSRs, 4-bit
// priorities, tie-breaking, vector address rule, holding kernel interrupts
// while a handler runs, and muictl[31:2] reading zero (in-memory IID base,
// unused with the CAM).
//
// Lint and synthesis notes: mtvec_i[1:0] (the RISC-V mode field) is unused
// because handlers are always entered vectored; the upper bits of the packed
// {priority, interrupt} control word (rf_ctrl_o[3][31:12]) are constant zero.
module uli_intc
  import uli_pkg::*;
#(
  parameter int unsigned NIRQ = 32,
  localparam int unsigned IRQW = (NIRQ > 1) ? $clog2(NIRQ) : 1,
  localparam int unsigned NPRIOCSR = (NIRQ + 7) / 8
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [NIRQ-1:0] irq_i,
  output logic [NIRQ-1:0] kirq_o,
  // CSR bus
  input  logic            csr_we_i,
  input  logic [11:0]     csr_addr_i,
  input  logic [XLEN-1:0] csr_wdata_i,
  output logic [XLEN-1:0] csr_rdata_o,
  output logic            csr_hit_o,
  // pipeline
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
  // IIDU / CAM
  output logic [IRQW-1:0] cam_irq_o,
  input  logic            cam_hit_i,
  input  logic [XLEN-1:0] cam_pmp_ptr_i,
  input  logic [XLEN-1:0] cam_tim_ptr_i,
  input  logic [NIRQ-1:0] uli_mask_i,
  // PMP
  output logic            pmp_load_o,
  output logic [XLEN-1:0] pmp_ptr_o,
  output logic            pmp_sel_uli_o,
  input  logic            pmp_done_i,
  input  logic            pmp_fault_i,
  // budget timer
  output logic            tim_load_o,
  output logic [XLEN-1:0] tim_load_ptr_o,
  output logic            tim_save_o,
  output logic [XLEN-1:0] tim_save_ptr_o,
  output logic            tim_run_o,
  input  logic            tim_done_i,
  input  logic            tim_expired_i,
  // register file
  output logic            rf_save_o,
  output logic            rf_restore_o,
  output logic [7:0]      rf_level_o,
  output logic            rf_ctrl_en_o,
  output logic [NCTRL-1:0][XLEN-1:0] rf_ctrl_o,
  input  logic [NCTRL-1:0][XLEN-1:0] rf_ctrl_i,
  output logic [XLEN-1:0] rf_stk_base_o,
  input  logic            rf_done_i
);

  typedef enum logic [1:0] {ST_RUN, ST_ENTRY, ST_EXIT_CTX, ST_EXIT_LOAD} ic_state_e;

  ic_state_e       state_q;
  logic [7:0]      level_q;
  uli_rec_t        cur_q;
  logic            en_q;
  logic [XLEN-1:0] stk_q, epc_q, cause_q, ret_pc_q, redir_pc_q;
  logic [NIRQ-1:0] ie_q, pend_q, irq_q;
  logic [NIRQ-1:0][3:0] prio_q;
  logic            redir_q;
  logic            pmp_ok_q, tim_ok_q, rf_ok_q;

  // ---------------------------------------------------------------- arbitration
  logic [NIRQ-1:0] elig;
  logic            cand_v;
  logic [IRQW-1:0] cand;
  logic [3:0]      cand_prio;
  assign elig = pend_q & ie_q & uli_mask_i;

  always_comb begin
    cand_v    = 1'b0;
    cand      = '0;
    cand_prio = '0;
    for (int unsigned i = 0; i < NIRQ; i++) begin
      if (elig[i] && (!cand_v || prio_q[i] > cand_prio)) begin
        cand_v    = 1'b1;
        cand      = IRQW'(i);
        cand_prio = prio_q[i];
      end
    end
  end

  assign cam_irq_o = cand;

  logic in_handler, exit_req, take;
  logic fault_q;     // PMP fault of the previous cycle (see header)
  assign in_handler = (level_q != 8'd0);
  assign exit_req = (state_q == ST_RUN) && in_handler && !redir_q &&
                    (pipe_uiret_i || fault_q || tim_expired_i || pipe_exc_i);
  assign take = (state_q == ST_RUN) && !redir_q && !exit_req && en_q && cand_v &&
                cam_hit_i && level_q != 8'hFF &&
                (!in_handler || cand_prio > cur_q.prio);

  // completion tracking for the parallel operations
  logic pmp_ok, tim_ok, rf_ok;
  assign pmp_ok = pmp_ok_q || pmp_done_i;
  assign tim_ok = tim_ok_q || tim_done_i;
  assign rf_ok  = rf_ok_q  || rf_done_i;

  // ---------------------------------------------------------------- outputs
  uli_rec_t popped;
  assign popped.irq     = rf_ctrl_i[3][7:0];
  assign popped.prio    = rf_ctrl_i[3][11:8];
  assign popped.pmp_ptr = rf_ctrl_i[1];
  assign popped.tim_ptr = rf_ctrl_i[2];

  // exit: registers back, a preempted handler to reload. The budget
  // write-back always completes in the exit_req cycle (tim_ok_q is set on
  // entering ST_EXIT_CTX), so only the register file is waited for here; this
  // also keeps tim_load_o free of a combinational path from tim_done_i.
  logic exit_reload;
  assign exit_reload = (state_q == ST_EXIT_CTX) && rf_ok && level_q > 8'd1;

  always_comb begin
    pmp_load_o     = 1'b0;
    pmp_ptr_o      = cam_pmp_ptr_i;
    tim_load_o     = 1'b0;
    tim_load_ptr_o = cam_tim_ptr_i;
    tim_save_o     = 1'b0;
    tim_save_ptr_o = cur_q.tim_ptr;
    rf_save_o      = 1'b0;
    rf_restore_o   = 1'b0;
    rf_level_o     = level_q + 8'd1;
    rf_ctrl_en_o   = in_handler;
    rf_ctrl_o[0]   = epc_q;
    rf_ctrl_o[1]   = cur_q.pmp_ptr;
    rf_ctrl_o[2]   = cur_q.tim_ptr;
    rf_ctrl_o[3]   = {20'd0, cur_q.prio, cur_q.irq};
    if (take) begin
      pmp_load_o = 1'b1;
      tim_load_o = 1'b1;
      tim_save_o = in_handler;
      rf_save_o  = 1'b1;
    end else if (exit_req) begin
      tim_save_o   = 1'b1;
      rf_restore_o = 1'b1;
      rf_level_o   = level_q;
      rf_ctrl_en_o = level_q > 8'd1;
    end else if (exit_reload) begin
      pmp_load_o     = 1'b1;
      pmp_ptr_o      = popped.pmp_ptr;
      tim_load_o     = 1'b1;
      tim_load_ptr_o = popped.tim_ptr;
    end
  end

  assign pipe_flush_o       = take || exit_req || (state_q != ST_RUN);
  assign pipe_redirect_o    = redir_q;
  assign pipe_redirect_pc_o = redir_pc_q;
  assign tim_run_o          = (state_q == ST_RUN) && in_handler && !exit_req;
  assign pmp_sel_uli_o      = in_handler;
  assign uli_active_o       = in_handler;
  assign systimer_pause_o   = in_handler;
  assign level_o            = level_q;
  assign rf_stk_base_o      = stk_q;
  assign kirq_o = (state_q == ST_RUN && !in_handler && !take) ?
                  (irq_i & ~(en_q ? uli_mask_i : '0)) : '0;

  // vector address of the handler being entered
  logic [XLEN-1:0] vec_pc;
  assign vec_pc = {mtvec_i[XLEN-1:2], 2'b00} + XLEN'({cur_q.irq, 2'b00});

  // forced-return cause
  logic [3:0] fcause;
  always_comb begin
    if (fault_q)          fcause = CAUSE_PMP;
    else if (pipe_exc_i)  fcause = CAUSE_EXC;
    else                  fcause = CAUSE_BUDGET;
  end

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= ST_RUN;
      level_q    <= '0;
      cur_q      <= '0;
      pend_q     <= '0;
      irq_q      <= '0;
      redir_q    <= 1'b0;
      fault_q    <= 1'b0;
      redir_pc_q <= '0;
      ret_pc_q   <= '0;
      pmp_ok_q   <= 1'b0;
      tim_ok_q   <= 1'b0;
      rf_ok_q    <= 1'b0;
      en_q       <= 1'b0;
      stk_q      <= '0;
      epc_q      <= '0;
      cause_q    <= '0;
      ie_q       <= '0;
      prio_q     <= '0;
    end else begin
      irq_q   <= irq_i;
      redir_q <= 1'b0;
      fault_q <= pmp_fault_i && in_handler && state_q == ST_RUN && !redir_q;

      // pending flags: rising edges of enabled-or-not user-level lines
      pend_q <= pend_q | (irq_i & ~irq_q & uli_mask_i);

      // CSR writes (hardware updates below take precedence)
      if (csr_we_i) begin
        unique case (csr_addr_i)
          CSR_MUICTL:   en_q    <= csr_wdata_i[0];
          CSR_MUISTK:   stk_q   <= {csr_wdata_i[XLEN-1:2], 2'b00};
          CSR_MUIEPC:   epc_q   <= csr_wdata_i;
          CSR_MUICAUSE: cause_q <= csr_wdata_i;
          CSR_MUIIE:    ie_q    <= csr_wdata_i[NIRQ-1:0];
          default: ;
        endcase
        for (int unsigned c = 0; c < NPRIOCSR; c++)
          if (csr_addr_i == CSR_MUIPRIO0 + 12'(c))
            for (int unsigned j = 0; j < 8; j++)
              if (8 * c + j < NIRQ) prio_q[8*c+j] <= csr_wdata_i[4*j +: 4];
      end

      pmp_ok_q <= pmp_ok;
      tim_ok_q <= tim_ok;
      rf_ok_q  <= rf_ok;

      unique case (state_q)
        ST_RUN: begin
          pmp_ok_q <= 1'b0;
          tim_ok_q <= 1'b0;
          rf_ok_q  <= 1'b0;
          if (exit_req) begin
            ret_pc_q <= epc_q;
            if (!pipe_uiret_i)
              cause_q <= {1'b1, 10'd0, pipe_exc_cause_i, 8'(cur_q.irq), 4'd0, fcause};
            tim_ok_q <= 1'b1;           // the write-back completes this cycle
            state_q  <= ST_EXIT_CTX;
          end else if (take) begin
            pend_q[cand]    <= 1'b0;
            level_q         <= level_q + 8'd1;
            cur_q.irq       <= 8'(cand);
            cur_q.prio      <= cand_prio;
            cur_q.pmp_ptr   <= cam_pmp_ptr_i;
            cur_q.tim_ptr   <= cam_tim_ptr_i;
            epc_q           <= pipe_epc_i;
            state_q         <= ST_ENTRY;
          end
        end
        ST_ENTRY: begin
          if (pmp_ok && tim_ok && rf_ok) begin
            redir_q    <= 1'b1;
            redir_pc_q <= vec_pc;
            state_q    <= ST_RUN;
          end
        end
        ST_EXIT_CTX: begin
          if (rf_ok) begin
            level_q <= level_q - 8'd1;
            if (level_q == 8'd1) begin
              redir_q    <= 1'b1;
              redir_pc_q <= ret_pc_q;
              state_q    <= ST_RUN;
            end else begin
              cur_q    <= popped;
              epc_q    <= rf_ctrl_i[0];
              pmp_ok_q <= 1'b0;
              tim_ok_q <= 1'b0;
              state_q  <= ST_EXIT_LOAD;
            end
          end
        end
        ST_EXIT_LOAD: begin
          if (pmp_ok && tim_ok) begin
            redir_q    <= 1'b1;
            redir_pc_q <= ret_pc_q;
            state_q    <= ST_RUN;
          end
        end
        default: state_q <= ST_RUN;
      endcase
    end
  end

  // ---------------------------------------------------------------- CSR reads
  always_comb begin
    csr_hit_o   = 1'b1;
    csr_rdata_o = '0;
    unique case (csr_addr_i)
      CSR_MUICTL:   csr_rdata_o = {30'd0, 1'b1, en_q};
      CSR_MUISTK:   csr_rdata_o = stk_q;
      CSR_MUIEPC:   csr_rdata_o = epc_q;
      CSR_MUICAUSE: csr_rdata_o = cause_q;
      CSR_MUIIE:    csr_rdata_o = XLEN'(ie_q);
      CSR_MUISTAT:  csr_rdata_o = XLEN'(level_q);
      default:      csr_hit_o   = 1'b0;
    endcase
    for (int unsigned c = 0; c < NPRIOCSR; c++) begin
      if (csr_addr_i == CSR_MUIPRIO0 + 12'(c)) begin
        csr_hit_o = 1'b1;
        for (int unsigned j = 0; j < 8; j++)
          if (8 * c + j < NIRQ) csr_rdata_o[4*j +: 4] = prio_q[8*c+j];
      end
    end
  end

  // ---------------------------------------------------------------- checks
  // The three parallel operations are only started from the run state.
  // A handler is never entered with the extension disabled.
  always_comb
    if (rst_ni) begin
      a_start_in_run: assert (!rf_save_o || state_q == ST_RUN);
      a_take_enabled: assert (!take || en_q);
    end

endmodule
