// uli_regfile: banked RV32 general-purpose register file with hybrid spilling
// of register context to a dedicated stack TCM.
//
// Bank 0 belongs to the interrupted thread or kernel. NEXTRA further banks
// serve user-level handlers: nesting level L (1 = first handler) uses bank L
// while L <= NEXTRA, so entering a handler costs only a bank switch, and the
// new bank is zeroised in the same clock edge so that a handler never sees
// another domain's registers. Once the banks are exhausted (L > NEXTRA), the
// last bank is reused: its contents (x1..x31) are first spilled to the stack
// TCM, then zeroised; on return they are filled back. This is the paper's
// "register shadow banking" with "hybrid spilling" fallback, giving unbounded
// nesting with bounded area. With NEXTRA = 0 every entry spills.
//
// When a handler is itself preempted, the interrupt controller also pushes
// NCTRL control words (muiepc and the preempted handler's record) through
// this unit, in front of any spilled registers, and pops them on return.
// Stack frame, ascending from the stack pointer, one frame per nesting level:
//   [ctrl0 .. ctrl(NCTRL-1)] if push_ctrl, then [x1 .. x31] if spilled.
// The stack pointer starts at muistk (stk_base_i) when level 1 is entered
// and grows upward. Frame layout and growth direction are this design's.
//
// Timing: save_i/restore_i are one-cycle pulses. Writes go out one per cycle
// starting the cycle after save_i; reads likewise, over a 1-cycle-latency
// port. done_o is a one-cycle pulse the cycle after the last word is written
// or has arrived: W+1 cycles after save_i for a W-word frame, W+2 cycles
// after restore_i, and one cycle after the request when nothing moves. On a
// restore the popped words are valid on ctrl_o from then on. The bank switch on a save without spill
// happens at the clock edge ending the save_i cycle. The pipeline must be
// held (flushed) while a save or restore is in progress.
module uli_regfile
  import uli_pkg::*;
#(
  parameter int unsigned NEXTRA = 1,
  localparam int unsigned NBANK = NEXTRA + 1,
  localparam int unsigned BW = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // pipeline ports: two reads, one write
  input  logic [4:0]      ra1_i,
  input  logic [4:0]      ra2_i,
  output logic [XLEN-1:0] rd1_o,
  output logic [XLEN-1:0] rd2_o,
  input  logic            we_i,
  input  logic [4:0]      wa_i,
  input  logic [XLEN-1:0] wd_i,
  // context control
  input  logic            save_i,
  input  logic            restore_i,
  input  logic [7:0]      level_i,      // level entered (save) / left (restore)
  input  logic            ctrl_en_i,    // push (save) / pop (restore) control words
  input  logic [NCTRL-1:0][XLEN-1:0] ctrl_i,
  output logic [NCTRL-1:0][XLEN-1:0] ctrl_o,
  input  logic [XLEN-1:0] stk_base_i,
  output logic            done_o,
  output logic [BW-1:0]   bank_o,
  output logic            spilling_o,   // this save/restore moves registers
  // stack TCM port
  output logic            tcm_req_o,
  output logic            tcm_we_o,
  output logic [XLEN-1:0] tcm_addr_o,
  output logic [XLEN-1:0] tcm_wdata_o,
  input  logic [XLEN-1:0] tcm_rdata_i
);

  typedef enum logic [1:0] {RF_IDLE, RF_SAVE, RF_RESTORE} rf_state_e;

  localparam int unsigned NGPR = 31;

  logic [NBANK-1:0][31:1][XLEN-1:0] rf_q;
  logic [BW-1:0]   bank_q;
  rf_state_e       state_q;
  logic [XLEN-1:0] sp_q;
  logic [5:0]      nw_q;       // words in this frame
  logic [5:0]      k_q;        // words issued
  logic            nctl_q;     // frame holds control words
  logic            rvalid_q;
  logic [5:0]      ridx_q;     // frame index of the arriving word
  logic            done_q;
  logic [NCTRL-1:0][XLEN-1:0] ctrl_q;

  function automatic logic [BW-1:0] bank_of(input logic [7:0] lvl);
    return (lvl > 8'(NEXTRA)) ? BW'(NEXTRA) : BW'(lvl);
  endfunction

  // a save into level N spills when N > NEXTRA; a restore from N fills then
  logic       spill_now;
  logic [5:0] nw_now;
  assign spill_now = level_i > 8'(NEXTRA);
  assign nw_now    = (ctrl_en_i ? 6'(NCTRL) : 6'd0) + (spill_now ? 6'(NGPR) : 6'd0);
  assign spilling_o = spill_now;

  // ---------------------------------------------------------------- reads
  assign rd1_o  = (ra1_i == 5'd0) ? '0 : rf_q[bank_q][ra1_i];
  assign rd2_o  = (ra2_i == 5'd0) ? '0 : rf_q[bank_q][ra2_i];
  assign bank_o = bank_q;
  assign done_o = done_q;
  assign ctrl_o = ctrl_q;

  // ---------------------------------------------------------------- stack port
  // frame word f: control word f if f < NCTRL (when present), else GPR.
  function automatic logic [XLEN-1:0] frame_word(input logic [5:0] f);
    logic [4:0] g;
    if (nctl_q && f < 6'(NCTRL)) return ctrl_q[f[1:0]];
    g = 5'(nctl_q ? f - 6'(NCTRL) : f);   // 0 -> x1
    return rf_q[BW'(NEXTRA)][g + 5'd1];
  endfunction

  always_comb begin
    tcm_req_o   = 1'b0;
    tcm_we_o    = 1'b0;
    tcm_addr_o  = '0;
    tcm_wdata_o = '0;
    if (state_q == RF_SAVE && k_q < nw_q) begin
      tcm_req_o   = 1'b1;
      tcm_we_o    = 1'b1;
      tcm_addr_o  = sp_q;
      tcm_wdata_o = frame_word(k_q);
    end else if (state_q == RF_RESTORE && k_q < nw_q) begin
      tcm_req_o  = 1'b1;
      tcm_addr_o = sp_q - XLEN'(4);
    end
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rf_q     <= '0;
      bank_q   <= '0;
      state_q  <= RF_IDLE;
      sp_q     <= '0;
      nw_q     <= '0;
      k_q      <= '0;
      nctl_q   <= 1'b0;
      rvalid_q <= 1'b0;
      ridx_q   <= '0;
      done_q   <= 1'b0;
      ctrl_q   <= '0;
    end else begin
      done_q   <= 1'b0;
      rvalid_q <= 1'b0;

      if (we_i && wa_i != 5'd0) rf_q[bank_q][wa_i] <= wd_i;

      unique case (state_q)
        RF_IDLE: begin
          if (save_i) begin
            nw_q   <= nw_now;
            k_q    <= '0;
            nctl_q <= ctrl_en_i;
            ctrl_q <= ctrl_i;
            if (level_i == 8'd1) sp_q <= stk_base_i;
            if (!spill_now) begin
              bank_q <= bank_of(level_i);
              rf_q[bank_of(level_i)] <= '0;
            end
            if (nw_now == '0) done_q <= 1'b1;
            else state_q <= RF_SAVE;
          end else if (restore_i) begin
            nw_q   <= nw_now;
            k_q    <= '0;
            nctl_q <= ctrl_en_i;
            if (!spill_now) bank_q <= bank_of(level_i - 8'd1);
            if (nw_now == '0) done_q <= 1'b1;
            else state_q <= RF_RESTORE;
          end
        end
        RF_SAVE: begin
          k_q  <= k_q + 6'd1;
          sp_q <= sp_q + XLEN'(4);
          if (k_q == nw_q - 6'd1) begin
            state_q <= RF_IDLE;
            done_q  <= 1'b1;
            // zeroise the reused bank once its contents are on the stack
            if (nw_q != (nctl_q ? 6'(NCTRL) : 6'd0)) rf_q[BW'(NEXTRA)] <= '0;
          end
        end
        RF_RESTORE: begin
          if (k_q < nw_q) begin
            k_q      <= k_q + 6'd1;
            sp_q     <= sp_q - XLEN'(4);
            rvalid_q <= 1'b1;
            ridx_q   <= nw_q - 6'd1 - k_q;
          end
          if (rvalid_q) begin
            if (nctl_q && ridx_q < 6'(NCTRL))
              ctrl_q[ridx_q[1:0]] <= tcm_rdata_i;
            else
              rf_q[BW'(NEXTRA)][5'(nctl_q ? ridx_q - 6'(NCTRL) : ridx_q) + 5'd1] <= tcm_rdata_i;
            if (ridx_q == '0) begin
              state_q <= RF_IDLE;
              done_q  <= 1'b1;
            end
          end
        end
        default: state_q <= RF_IDLE;
      endcase
    end
  end

endmodule
