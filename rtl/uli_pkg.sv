// uli_pkg: types and constants shared by the user-level interrupt extension.
//
// The extension lets a device interrupt start a handler that runs confined to
// its own spatial protection domain (a PMP configuration loaded from a table)
// and temporal protection domain (a cycle budget loaded from a table), without
// the kernel being involved, even when the handler's process is not scheduled.
//
// The CSR names (muictl, muistk, muiepc, iidnumX, iidpmpX, iidtimX) and the
// muictl bit layout follow the paper. The CSR numbers, the cause CSR, the
// enable/priority CSRs and every encoding below are this design's own choice:
// the paper gives names and roles, not numbers.
//
// Lint tools run on a single module report the package constants that module
// does not use (UNUSEDPARAM); they are shared definitions, not dead logic.
package uli_pkg;

  localparam int unsigned XLEN = 32;

  // ---------------------------------------------------------------- CSR map
  // Standard RISC-V PMP CSRs (kernel-managed set, shadowed during handlers).
  localparam logic [11:0] CSR_PMPCFG0  = 12'h3A0;
  localparam logic [11:0] CSR_PMPADDR0 = 12'h3B0;   // pmpaddr0..15 follow

  // Extension CSRs, placed in the custom machine-mode read/write space.
  localparam logic [11:0] CSR_MUICTL   = 12'h7C0;   // [1] supported (RO), [0] enable
  localparam logic [11:0] CSR_MUISTK   = 12'h7C1;   // base of the context stack
  localparam logic [11:0] CSR_MUIEPC   = 12'h7C2;   // PC to resume on user-level return
  localparam logic [11:0] CSR_MUICAUSE = 12'h7C3;   // cause of the last forced return
  localparam logic [11:0] CSR_MUIIE    = 12'h7C4;   // per-interrupt enable flags
  localparam logic [11:0] CSR_MUISTAT  = 12'h7C5;   // RO: [7:0] nesting level
  localparam logic [11:0] CSR_MUIPRIO0 = 12'h7C8;   // 8 x 4-bit priorities per CSR
  localparam logic [11:0] CSR_IIDNUM0  = 12'hBC0;   // iidnumX: [31] valid, [7:0] irq
  localparam logic [11:0] CSR_IIDPMP0  = 12'hBD0;   // iidpmpX: PMP table entry address
  localparam logic [11:0] CSR_IIDTIM0  = 12'hBE0;   // iidtimX: budget table entry address

  // Cause codes written to muicause[3:0] when a handler is forced to return.
  typedef enum logic [3:0] {
    CAUSE_NONE   = 4'd0,   // voluntary uiret (muicause is not written)
    CAUSE_PMP    = 4'd1,   // spatial violation: PMP denied an access
    CAUSE_BUDGET = 4'd2,   // temporal violation: budget counted down to zero
    CAUSE_EXC    = 4'd3    // any other exception raised by the handler
  } uli_cause_e;

  // PMP address-matching modes (RISC-V privileged spec encoding of pmpcfg.A).
  typedef enum logic [1:0] {
    PMP_OFF   = 2'd0,
    PMP_TOR   = 2'd1,
    PMP_NA4   = 2'd2,
    PMP_NAPOT = 2'd3
  } pmp_mode_e;

  // One pmpcfg byte, RISC-V layout: L, 00, A[1:0], X, W, R.
  typedef struct packed {
    logic      l;
    logic [1:0] zero;
    pmp_mode_e a;
    logic      x;
    logic      w;
    logic      r;
  } pmp_cfg_t;

  // Record of a running user-level handler. It is held by the interrupt
  // controller and pushed to the context stack when the handler is preempted.
  typedef struct packed {
    logic [7:0]      irq;
    logic [3:0]      prio;
    logic [XLEN-1:0] pmp_ptr;
    logic [XLEN-1:0] tim_ptr;
  } uli_rec_t;

  // Number of 32-bit control words pushed per preempted handler:
  // muiepc, PMP pointer, budget pointer, {prio, irq}.
  localparam int unsigned NCTRL = 4;

endpackage
