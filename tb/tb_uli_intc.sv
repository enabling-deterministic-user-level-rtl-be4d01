// tb_uli_intc: self-checking test of the interrupt controller and its
// entry/exit sequencer.
//
// The CAM, PMP loader, budget timer and register file are replaced by small
// models that answer with the latencies of the real blocks (PMP table load
// done 5 cycles after the request, budget 1 cycle or 2 behind a write-back,
// register save W+1 cycles and restore W+2 cycles for a W-word frame with one
// extra bank). The models also keep the control-word stack so that nested
// returns can be checked. Scenarios:
//   * kernel-level lines pass through, user-level ones do not;
//   * a first-level entry: tables requested the cycle after the line rises,
//     handler fetched 7 cycles after it (cycle 2 -> cycle 9 of the V5 diagram),
//     correct vector, muiepc, system-timer pause;
//   * preemption by a higher-priority handler (budget write-back, control
//     words pushed, spill latency), no preemption by an equal or lower one;
//   * uiret back to the preempted handler (its PMP and budget reloaded, the
//     control words popped) and to the thread;
//   * forced returns on budget exhaustion, PMP fault (one cycle after the
//     fault, which is registered) and exception, each recorded in muicause;
//   * the global enable bit and per-interrupt enables.
module tb_uli_intc;
  import uli_pkg::*;

  localparam int NIRQ = 32;
  localparam int NEXTRA = 1;
  localparam logic [31:0] MTVEC = 32'h0000_0100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NIRQ-1:0] irq, kirq, uli_mask;
  logic        csr_we, csr_hit;
  logic [11:0] csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  logic [31:0] epc, redir_pc;
  logic        uiret, exc, flush, redir, active, pause;
  logic [4:0]  exc_cause;
  logic [7:0]  level;
  logic [4:0]  cam_irq;
  logic        cam_hit;
  logic [31:0] cam_pmp, cam_tim;
  logic        pmp_load, pmp_sel, pmp_done, pmp_fault;
  logic [31:0] pmp_ptr;
  logic        tim_load, tim_save, tim_run, tim_done, tim_exp;
  logic [31:0] tim_lptr, tim_sptr;
  logic        rf_save, rf_restore, rf_cen, rf_done;
  logic [7:0]  rf_level;
  logic [NCTRL-1:0][31:0] rf_cto, rf_cfrom;
  logic [31:0] rf_stk;

  uli_intc #(.NIRQ(NIRQ)) dut (
    .clk_i(clk), .rst_ni(rst_n), .irq_i(irq), .kirq_o(kirq),
    .csr_we_i(csr_we), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata),
    .csr_rdata_o(csr_rdata), .csr_hit_o(csr_hit),
    .mtvec_i(MTVEC), .pipe_epc_i(epc), .pipe_uiret_i(uiret), .pipe_exc_i(exc),
    .pipe_exc_cause_i(exc_cause), .pipe_flush_o(flush), .pipe_redirect_o(redir),
    .pipe_redirect_pc_o(redir_pc), .uli_active_o(active), .systimer_pause_o(pause),
    .level_o(level),
    .cam_irq_o(cam_irq), .cam_hit_i(cam_hit), .cam_pmp_ptr_i(cam_pmp),
    .cam_tim_ptr_i(cam_tim), .uli_mask_i(uli_mask),
    .pmp_load_o(pmp_load), .pmp_ptr_o(pmp_ptr), .pmp_sel_uli_o(pmp_sel),
    .pmp_done_i(pmp_done), .pmp_fault_i(pmp_fault),
    .tim_load_o(tim_load), .tim_load_ptr_o(tim_lptr), .tim_save_o(tim_save),
    .tim_save_ptr_o(tim_sptr), .tim_run_o(tim_run), .tim_done_i(tim_done),
    .tim_expired_i(tim_exp),
    .rf_save_o(rf_save), .rf_restore_o(rf_restore), .rf_level_o(rf_level),
    .rf_ctrl_en_o(rf_cen), .rf_ctrl_o(rf_cto), .rf_ctrl_i(rf_cfrom),
    .rf_stk_base_o(rf_stk), .rf_done_i(rf_done)
  );

  // ------------------------------------------------------------ unit models
  // CAM: user-level interrupts 3, 7, 12 with pointers derived from the number
  function automatic bit is_uli(input int i);
    return i == 3 || i == 7 || i == 12;
  endfunction
  function automatic logic [31:0] pptr(input int i); return 32'h4000_0000 + 32'(i * 20); endfunction
  function automatic logic [31:0] tptr(input int i); return 32'h4001_0000 + 32'(i * 4);  endfunction
  always_comb begin
    for (int i = 0; i < NIRQ; i++) uli_mask[i] = is_uli(i);
    cam_hit = is_uli(int'(cam_irq));
    cam_pmp = pptr(int'(cam_irq));
    cam_tim = tptr(int'(cam_irq));
  end

  int pcnt, tcnt, rcnt;
  logic [NCTRL-1:0][31:0] cstack [$];
  logic [31:0] budget_saves [$];
  always_ff @(posedge clk) begin
    if (pmp_load) pcnt <= 5; else if (pcnt > 0) pcnt <= pcnt - 1;
    if (tim_load) tcnt <= tim_save ? 2 : 1; else if (tcnt > 0) tcnt <= tcnt - 1;
    if (tim_save) budget_saves.push_back(tim_sptr);
    if (rf_save) begin
      rcnt <= 1 + (rf_cen ? NCTRL : 0) + ((rf_level > 8'(NEXTRA)) ? 31 : 0);
      if (rf_cen) cstack.push_back(rf_cto);
    end else if (rf_restore) begin
      automatic int w = (rf_cen ? NCTRL : 0) + ((rf_level > 8'(NEXTRA)) ? 31 : 0);
      rcnt <= (w == 0) ? 1 : w + 2;
      if (rf_cen) rf_cfrom <= cstack.pop_back();
    end else if (rcnt > 0) rcnt <= rcnt - 1;
  end
  assign pmp_done = (pcnt == 1);
  assign tim_done = (tcnt == 1) || (tim_save && !tim_load);
  assign rf_done  = (rcnt == 1);

  // ------------------------------------------------------------ bookkeeping
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic csr_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk);
    csr_we = 0;
  endtask

  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    csr_addr = a; #1;
    d = csr_rdata;
  endtask

  // Raise line n now (at a negative edge) and wait for the redirect.
  // Returns the number of cycles from the cycle the line is high to the
  // cycle the redirect is seen, and checks the first-cycle requests.
  task automatic fire(input int n, input bit expect_take, output int lat);
    int c0;
    @(negedge clk);
    irq[n] = 1;
    c0 = cyc;
    @(negedge clk); #1;
    if (expect_take) begin
      check(pmp_load && pmp_ptr == pptr(n), $sformatf("irq %0d: PMP table requested in ack cycle", n));
      check(tim_load && tim_lptr == tptr(n), $sformatf("irq %0d: budget requested in ack cycle", n));
      check(rf_save, $sformatf("irq %0d: register save in ack cycle", n));
      check(flush, "pipeline flushed from the ack cycle");
    end else begin
      check(!pmp_load && !rf_save, $sformatf("irq %0d: not taken", n));
    end
    irq[n] = 0;
    lat = 0;
    if (expect_take) begin
      while (!redir && cyc - c0 < 200) @(negedge clk);
      lat = cyc - c0;
      check(redir_pc == MTVEC + 32'(4 * n), $sformatf("vector of irq %0d: %h", n, redir_pc));
      check(!flush, "no flush in the fetch cycle");
    end
  endtask

  task automatic wait_redirect(output int lat);
    int c0;
    c0 = cyc;
    while (!redir && cyc - c0 < 200) @(negedge clk);
    lat = cyc - c0;
  endtask

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    logic [31:0] c;
    irq = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0; epc = 32'h1000;
    uiret = 0; exc = 0; exc_cause = 0; pmp_fault = 0; tim_exp = 0;
    pcnt = 0; tcnt = 0; rcnt = 0; rf_cfrom = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    rd(CSR_MUICTL, c);
    check(c == 32'h2, "muictl: supported, disabled");
    // disabled: a user-level line goes to the kernel
    irq[3] = 1; #1;
    check(kirq[3], "extension off: line 3 is a kernel interrupt");
    irq[3] = 0;

    csr_write(CSR_MUISTK, 32'h4002_0000);
    csr_write(CSR_MUIIE, 32'h0000_1088);                     // 3, 7, 12
    csr_write(CSR_MUIPRIO0, 32'h5000_2000);                  // prio(3)=2, prio(7)=5
    csr_write(CSR_MUIPRIO0 + 12'd1, 32'h0000_2000);          // prio(12)=2
    csr_write(CSR_MUICTL, 32'h1);
    rd(CSR_MUICTL, c);
    check(c == 32'h3, "muictl enabled");
    rd(CSR_MUIPRIO0, c);
    check(c == 32'h5000_2000, "priority read-back");

    // kernel line 1 passes, user line 3 does not
    irq[1] = 1; irq[3] = 0; #1;
    check(kirq[1], "kernel line forwarded");
    irq[1] = 0;
    @(negedge clk);

    // ---- first-level entry
    epc = 32'h0000_2000;
    fire(3, 1, lat);
    check(lat == 7, $sformatf("entry latency %0d cycles, expected 7 (cycle 2 -> 9)", lat));
    check(active && pause && pmp_sel && level == 1, "handler active, system timer paused");
    rd(CSR_MUIEPC, c);
    check(c == 32'h2000, "muiepc holds the resume PC");
    @(negedge clk); #1;
    check(tim_run, "budget counts down once the handler runs");
    irq[1] = 1; #1;
    check(kirq == '0, "kernel interrupts held while a handler runs");
    irq[1] = 0;

    // ---- equal priority (12) does not preempt, higher (7) does
    epc = 32'h0000_0300;
    fire(12, 0, lat);
    repeat (3) @(negedge clk);
    check(level == 1, "equal priority does not preempt");
    epc = 32'h0000_0304;
    budget_saves.delete();
    fire(7, 1, lat);
    check(lat == 1 + 1 + NCTRL + 31 + 1, $sformatf("nested entry with spill: %0d cycles", lat));
    check(level == 2, "nested level 2");
    check(budget_saves.size() == 1 && budget_saves[0] == tptr(3), "preempted budget written back");
    check(cstack.size() == 1 && cstack[0][0] == 32'h2000 && cstack[0][1] == pptr(3) &&
          cstack[0][2] == tptr(3) && cstack[0][3][7:0] == 8'd3 && cstack[0][3][11:8] == 4'd2,
          "control words of the preempted handler pushed");
    rd(CSR_MUIEPC, c);
    check(c == 32'h0304, "muiepc of the nested handler");

    // ---- uiret to handler 3: reload its PMP entry and budget
    @(negedge clk);
    uiret = 1; #1;
    check(tim_save && tim_sptr == tptr(7), "handler 7 budget written back on return");
    check(rf_restore && rf_level == 2 && rf_cen, "registers restored with control words");
    @(negedge clk);
    uiret = 0;
    begin
      bit saw_reload;
      int c0;
      saw_reload = 0; c0 = cyc;
      while (!redir && cyc - c0 < 200) begin
        #1;
        if (pmp_load && pmp_ptr == pptr(3) && tim_load && tim_lptr == tptr(3)) saw_reload = 1;
        @(negedge clk);
      end
      check(saw_reload, "preempted handler's PMP entry and budget reloaded");
    end
    check(redir_pc == 32'h0304, $sformatf("resumes handler 3 at %h", redir_pc));
    rd(CSR_MUIEPC, c);
    check(level == 1 && c == 32'h2000, "muiepc popped");
    // 12 is still pending at equal priority: not taken
    repeat (3) @(negedge clk);
    check(level == 1, "pending equal-priority interrupt waits");

    // ---- forced return of handler 3 on budget exhaustion
    tim_exp = 1; #1;
    check(tim_save && rf_restore && !rf_cen, "forced return starts");
    @(negedge clk);
    tim_exp = 0;
    wait_redirect(lat);
    check(redir_pc == 32'h2000, "back to the thread");
    rd(CSR_MUICAUSE, c);
    check(c[31] && c[15:8] == 8'd3 && c[3:0] == CAUSE_BUDGET, $sformatf("muicause budget %h", c));
    check(level == 0 && !pause && !pmp_sel, "thread context: timer running, kernel PMP");
    // now the pending 12 is taken from the thread
    @(negedge clk); #1;
    check(rf_save && pmp_ptr == pptr(12), "pending interrupt 12 taken after return");
    wait_redirect(lat);
    check(redir_pc == MTVEC + 32'(4 * 12), "vector of 12");

    // ---- PMP fault forces return
    @(negedge clk);
    pmp_fault = 1; #1;
    check(!rf_restore, "PMP fault registered first");
    @(negedge clk);
    pmp_fault = 0; #1;
    check(rf_restore, "PMP fault: forced return in the next cycle");
    wait_redirect(lat);
    rd(CSR_MUICAUSE, c);
    check(c[15:8] == 8'd12 && c[3:0] == CAUSE_PMP, "muicause PMP");

    // ---- exception forces return
    epc = 32'h0000_4000;
    fire(3, 1, lat);
    check(lat == 7, "second entry latency");
    @(negedge clk);
    exc = 1; exc_cause = 5'd2; #1;
    check(rf_restore, "exception: forced return");
    @(negedge clk);
    exc = 0;
    wait_redirect(lat);
    rd(CSR_MUICAUSE, c);
    check(c[15:8] == 8'd3 && c[3:0] == CAUSE_EXC && c[20:16] == 5'd2, "muicause exception");
    check(redir_pc == 32'h4000, "resume after exception");

    // ---- per-interrupt enable
    csr_write(CSR_MUIIE, 32'h0000_0080);                      // only 7
    fire(3, 0, lat);
    repeat (4) @(negedge clk);
    check(level == 0, "disabled interrupt not taken");
    csr_write(CSR_MUIIE, 32'h0000_0088);
    wait_redirect(lat);
    check(redir_pc == MTVEC + 32'(4 * 3), "enabling takes the pending interrupt");
    @(negedge clk); uiret = 1; @(negedge clk); uiret = 0;
    wait_redirect(lat);
    check(level == 0, "uiret back to level 0");

    // ---- random stress: random interrupt storms with random returns
    for (int r = 0; r < 200; r++) begin
      int n;
      @(negedge clk);
      n = $urandom_range(0, 3);
      if (n < 3) irq[(n == 0) ? 3 : (n == 1) ? 7 : 12] = 1;
      uiret  = active && !flush && ($urandom_range(0, 3) == 0);
      tim_exp = active && !flush && !uiret && ($urandom_range(0, 15) == 0);
      @(negedge clk);
      irq = '0; uiret = 0; tim_exp = 0;
      check(level <= 8'd3, "nesting bounded by distinct priorities");
    end
    // drain
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      uiret = active && !flush;
      @(negedge clk);
      uiret = 0;
    end
    repeat (50) @(negedge clk);
    check(level == 0 && cstack.size() == 0,
          $sformatf("all handlers returned (level %0d), stack empty (%0d)", level, cstack.size()));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
