// tb_uli_ext_top: end-to-end test of the user-level interrupt extension at
// its default (full-size) parameters.
//
// The testbench plays the part of the core and the kernel. A small pipeline
// model keeps a PC that advances one instruction per cycle unless the
// extension holds the pipeline (pipe_flush_o), fetches the vector when
// pipe_redirect_o pulses, presents each fetch to the PMP, and offers its PC as
// the resume PC. A word-addressed SRAM model sits on the system bus. Like a
// kernel, the testbench fills the PMP and budget tables through the
// load/store bus (external multiplexer into the TCMs), programs the kernel
// PMP, the CAM, priorities, enables and stack base through the CSR bus, and
// then lets three user-level handlers (interrupts 3, 7, 12) and two kernel
// interrupts (1, and 9 which is enabled but has no CAM entry) fire.
//
// Every mechanism of the design is counted; a mechanism that never happened
// is a failure:
//   table_fill        tables written and read back through the multiplexer
//   sys_bus           other addresses forwarded to the system bus
//   kirq_forward      kernel lines (and CAM misses) reach the kernel
//   kirq_hold         kernel lines held while a handler runs
//   uli_entry         user-level entry, latency 7 cycles (line in cycle 2,
//                     vector fetched in cycle 9), vector mtvec + 4*irq
//   systimer_pause    system timer paused exactly while a handler runs
//   bank_switch       handler sees zeroed registers, thread registers intact
//   preemption        strictly higher priority preempts, lower waits
//   spill             nested entry spills the preempted bank and control
//                     words to the stack TCM (checked word by word)
//   budget_writeback  remaining budget written back to the budget table
//   budget_expiry     forced return after exactly the budget, muicause
//   pmp_isolation     handler reaches its own region, not another's
//   pmp_fault_return  forced return on a PMP violation, muicause
//   exc_return        forced return on an exception, muicause
//   uiret             voluntary return, nested and to the thread
//   nested_restore    preempted handler resumes with its registers
//   kernel_pmp        kernel PMP set (with a locked entry) back after return
//   deep_nesting      16 handlers with priorities 0..15 nest 16 levels deep
//                     (15 spill frames), then unwind one uiret at a time,
//                     each level getting back its registers, PC and PMP set
module tb_uli_ext_top;
  import uli_pkg::*;

  localparam logic [31:0] MTVEC = 32'h0000_0100;
  localparam logic [31:0] PMPT  = 32'h4000_0000;
  localparam logic [31:0] BUDT  = 32'h4001_0000;
  localparam logic [31:0] STKT  = 32'h4002_0000;
  localparam int NIRQ = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NIRQ-1:0] irq, kirq;
  logic        csr_we, csr_hit;
  logic [11:0] csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  logic [31:0] epc, redir_pc;
  logic        uiret, exc, flush, redir, active, pause;
  logic [4:0]  exc_cause;
  logic [7:0]  level;
  logic [4:0]  ra1, ra2, wa;
  logic [31:0] rd1, rd2, wd;
  logic        rwe;
  logic        priv_m, if_req, if_fault, d_req, d_we, d_fault;
  logic [31:0] if_addr, d_addr;
  logic        lsu_req, lsu_we;
  logic [3:0]  lsu_be;
  logic [31:0] lsu_addr, lsu_wdata, lsu_rdata;
  logic        sys_req, sys_we;
  logic [3:0]  sys_be;
  logic [31:0] sys_addr, sys_wdata, sys_rdata;
  logic [31:0] remain;
  logic [0:0]  bank;
  logic        spilling;

  uli_ext_top dut (
    .clk_i(clk), .rst_ni(rst_n), .irq_i(irq), .kirq_o(kirq),
    .csr_we_i(csr_we), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata),
    .csr_rdata_o(csr_rdata), .csr_hit_o(csr_hit),
    .mtvec_i(MTVEC), .pipe_epc_i(epc), .pipe_uiret_i(uiret), .pipe_exc_i(exc),
    .pipe_exc_cause_i(exc_cause), .pipe_flush_o(flush), .pipe_redirect_o(redir),
    .pipe_redirect_pc_o(redir_pc), .uli_active_o(active), .systimer_pause_o(pause),
    .level_o(level),
    .rf_ra1_i(ra1), .rf_ra2_i(ra2), .rf_rd1_o(rd1), .rf_rd2_o(rd2),
    .rf_we_i(rwe), .rf_wa_i(wa), .rf_wd_i(wd),
    .priv_m_i(priv_m), .if_req_i(if_req), .if_addr_i(if_addr), .if_fault_o(if_fault),
    .d_req_i(d_req), .d_we_i(d_we), .d_addr_i(d_addr), .d_fault_o(d_fault),
    .lsu_req_i(lsu_req), .lsu_we_i(lsu_we), .lsu_be_i(lsu_be), .lsu_addr_i(lsu_addr),
    .lsu_wdata_i(lsu_wdata), .lsu_rdata_o(lsu_rdata),
    .sys_req_o(sys_req), .sys_we_o(sys_we), .sys_be_o(sys_be), .sys_addr_o(sys_addr),
    .sys_wdata_o(sys_wdata), .sys_rdata_i(sys_rdata),
    .budget_remain_o(remain), .rf_bank_o(bank), .rf_spilling_o(spilling)
  );

  // ------------------------------------------------------------ system SRAM
  logic [31:0] sram [256];
  always_ff @(posedge clk)
    if (sys_req) begin
      if (sys_we) begin
        for (int b = 0; b < 4; b++)
          if (sys_be[b]) sram[sys_addr[9:2]][8*b +: 8] <= sys_wdata[8*b +: 8];
      end else sys_rdata <= sram[sys_addr[9:2]];
    end

  // ------------------------------------------------------------ core model
  logic [31:0] pc;
  int cyc = 0;
  int run_cyc = 0;      // cycles the current handler's budget has counted
  int pause_bad = 0;    // cycles where pause differed from "handler active"
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) pc <= 32'h0000_8000;
    else if (redir) pc <= redir_pc + 4;
    else if (!flush) pc <= pc + 4;
    run_cyc <= redir ? int'(active) : run_cyc + int'(active && !flush);
    if (rst_n && pause != active) pause_bad <= pause_bad + 1;
  end
  assign if_req  = rst_n && !flush;
  assign if_addr = redir ? redir_pc : pc;
  assign epc     = pc;

  // ------------------------------------------------------------ bookkeeping
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int mech [string];
  string mech_names [$] = '{"table_fill", "sys_bus", "kirq_forward", "kirq_hold",
    "uli_entry", "systimer_pause", "bank_switch", "preemption", "spill",
    "budget_writeback", "budget_expiry", "pmp_isolation", "pmp_fault_return",
    "exc_return", "uiret", "nested_restore", "kernel_pmp", "deep_nesting"};
  function automatic void saw(input string m);
    mech[m] = mech.exists(m) ? mech[m] + 1 : 1;
  endfunction

  task automatic csr_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk);
    csr_we = 0;
  endtask
  task automatic csr_read(input logic [11:0] a, output logic [31:0] d);
    csr_addr = a; #1;
    d = csr_rdata;
  endtask

  task automatic lsu_write(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    lsu_req = 1; lsu_we = 1; lsu_be = 4'hF; lsu_addr = a; lsu_wdata = d;
    @(negedge clk);
    lsu_req = 0; lsu_we = 0;
  endtask
  task automatic lsu_read(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    lsu_req = 1; lsu_we = 0; lsu_addr = a;
    @(negedge clk);
    lsu_req = 0; #1;
    d = lsu_rdata;
  endtask

  // registers of the running context
  task automatic reg_write_all(output logic [31:0] v [1:31]);
    for (int r = 1; r < 32; r++) begin
      @(negedge clk);
      rwe = 1; wa = 5'(r); wd = $urandom; v[r] = wd;
    end
    @(negedge clk);
    rwe = 0;
  endtask
  task automatic reg_check(input logic [31:0] v [1:31], input bit zero, output bit ok);
    ok = 1;
    for (int r = 1; r < 32; r++) begin
      ra1 = 5'(r); #1;
      if (rd1 != (zero ? 32'd0 : v[r])) ok = 0;
    end
  endtask

  // data access check by the running context (combinational PMP answer)
  task automatic probe(input logic [31:0] a, input bit wr, output bit fault);
    d_req = 1; d_we = wr; d_addr = a; #1;
    fault = d_fault;
    d_req = 0; #1;
  endtask

  // Raise line n at a negative edge; wait for the handler's vector fetch.
  // lat = cycles from the cycle the line is high to the fetch cycle.
  task automatic fire(input int n, output int lat, output logic [31:0] resume);
    int c0;
    @(negedge clk);
    irq[n] = 1;
    c0 = cyc;
    @(negedge clk); #1;
    resume = pc;
    irq[n] = 0;
    while (!redir && cyc - c0 < 300) @(negedge clk);
    lat = cyc - c0;
  endtask

  task automatic wait_redirect(output int lat);
    int c0;
    c0 = cyc;
    while (!redir && cyc - c0 < 300) @(negedge clk);
    lat = cyc - c0;
  endtask

  // handler-table contents
  function automatic logic [31:0] pptr(input int k); return PMPT + 32'(20 * k); endfunction
  function automatic logic [31:0] tptr(input int k); return BUDT + 32'(4 * k);  endfunction
  function automatic logic [31:0] region(input int k); return 32'h2000_0000 + 32'(k * 256); endfunction
  // NAPOT pmpaddr for a power-of-two region
  function automatic logic [31:0] napot(input logic [31:0] base, input int size);
    return (base >> 2) | 32'((size / 8) - 1);
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int irqs [3] = '{3, 7, 12};
  int prios [3] = '{2, 5, 1};
  int budgets [3] = '{200, 100, 30};

  initial begin
    logic [31:0] thread_regs [1:31], h3_regs [1:31], h7_regs [1:31], junk [1:31];
    logic [31:0] c, d, resume3, resume7, resume_thread;
    int lat, used3, used7;
    bit ok, f;

    irq = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0;
    uiret = 0; exc = 0; exc_cause = 0;
    ra1 = 0; ra2 = 0; wa = 0; wd = 0; rwe = 0;
    priv_m = 1; d_req = 0; d_we = 0; d_addr = 0;
    lsu_req = 0; lsu_we = 0; lsu_be = 0; lsu_addr = 0; lsu_wdata = 0;
    for (int i = 0; i < 256; i++) sram[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---------------------------------------------------- kernel set-up
    // tables, through the load/store bus
    for (int k = 0; k < 3; k++) begin
      lsu_write(pptr(k) + 0,  32'h0000_1B1D);                      // RX code, RW data
      lsu_write(pptr(k) + 4,  napot(32'h0000_0000, 4096));
      lsu_write(pptr(k) + 8,  napot(region(k), 256));
      lsu_write(pptr(k) + 12, 32'h0);
      lsu_write(pptr(k) + 16, 32'h0);
      lsu_write(tptr(k), 32'(budgets[k]));
    end
    ok = 1;
    for (int k = 0; k < 3; k++) begin
      lsu_read(pptr(k) + 8, d); if (d != napot(region(k), 256)) ok = 0;
      lsu_read(tptr(k), d);     if (d != 32'(budgets[k])) ok = 0;
    end
    check(ok, "tables read back through the multiplexer");
    if (ok) saw("table_fill");
    lsu_write(32'h1000_0040, 32'hCAFE_F00D);
    lsu_read(32'h1000_0040, d);
    check(d == 32'hCAFE_F00D && sram[16] == 32'hCAFE_F00D, "system bus pass-through");
    if (d == 32'hCAFE_F00D) saw("sys_bus");

    // kernel PMP: entry 0 locked NAPOT 4 KiB at 0x3000_0000, no permissions
    csr_write(CSR_PMPADDR0, napot(32'h3000_0000, 4096));
    csr_write(CSR_PMPCFG0, 32'h0000_0098);
    for (int k = 0; k < 3; k++) begin
      csr_write(CSR_IIDNUM0 + 12'(k), 32'h8000_0000 | 32'(irqs[k]));
      csr_write(CSR_IIDPMP0 + 12'(k), pptr(k));
      csr_write(CSR_IIDTIM0 + 12'(k), tptr(k));
    end
    csr_write(CSR_MUISTK, STKT);
    csr_write(CSR_MUIIE, (32'd1 << 3) | (32'd1 << 7) | (32'd1 << 12) | (32'd1 << 9));
    csr_write(CSR_MUIPRIO0, 32'h5000_2000);            // prio(3)=2, prio(7)=5
    csr_write(CSR_MUIPRIO0 + 12'd1, 32'h0000_1000);    // prio(12)=1
    csr_write(CSR_MUICTL, 32'h1);
    csr_read(CSR_MUICTL, c);
    check(c == 32'h3, "muictl supported and enabled");

    // thread state
    reg_write_all(thread_regs);
    probe(32'h3000_0010, 0, f);
    check(f, "kernel PMP: locked entry binds machine mode");
    probe(region(1), 1, f);
    check(!f, "kernel PMP: machine mode elsewhere");

    // ---------------------------------------------------- kernel interrupts
    @(negedge clk);
    irq[1] = 1; irq[9] = 1; #1;
    check(kirq[1] && kirq[9] && !kirq[3], "kernel line and CAM miss forwarded");
    if (kirq[1] && kirq[9]) saw("kirq_forward");
    irq[9] = 0;
    // line 1 stays high (level-sensitive kernel device) through the handlers

    // ---------------------------------------------------- handler 3
    fire(3, lat, resume_thread);
    check(lat == 7, $sformatf("entry latency %0d cycles, expected 7", lat));
    check(redir_pc == MTVEC + 32'(4 * 3), "vector of irq 3");
    if (lat == 7 && redir_pc == MTVEC + 32'(4 * 3)) saw("uli_entry");
    check(level == 1 && active && pause, "handler 3 active, system timer paused");
    csr_read(CSR_MUIEPC, c);
    check(c == resume_thread, "muiepc = thread resume PC");
    check(kirq == '0, "kernel line held during a handler");
    if (kirq == '0) saw("kirq_hold");
    reg_check(junk, 1, ok);
    check(ok, "handler 3 starts with zeroed registers");
    if (ok) saw("bank_switch");
    reg_write_all(h3_regs);
    probe(region(0), 1, f);
    check(!f, "handler 3 writes its own region");
    probe(region(1), 0, f);
    check(f, "handler 3 cannot read handler 7's region");
    if (f) saw("pmp_isolation");
    d_req = 0;

    // ---------------------------------------------------- preemption by 7
    used3 = run_cyc;
    fire(7, lat, resume3);
    check(lat == 1 + (NCTRL + 31) + 1 + 1, $sformatf("nested entry latency %0d", lat));
    check(redir_pc == MTVEC + 32'(4 * 7) && level == 2, "handler 7 preempts handler 3");
    if (level == 2) saw("preemption");
    reg_check(junk, 1, ok);
    check(ok, "handler 7 starts with zeroed registers");
    reg_write_all(h7_regs);
    // lower priority 12 must wait
    @(negedge clk); irq[12] = 1; @(negedge clk); irq[12] = 0;
    repeat (3) @(negedge clk);
    check(level == 2, "lower priority does not preempt");
    // spill frame: control words then handler 3's registers
    ok = 1;
    lsu_read(STKT + 0, d);  if (d != resume_thread) ok = 0;
    lsu_read(STKT + 4, d);  if (d != pptr(0)) ok = 0;
    lsu_read(STKT + 8, d);  if (d != tptr(0)) ok = 0;
    lsu_read(STKT + 12, d); if (d[7:0] != 8'd3 || d[11:8] != 4'd2) ok = 0;
    for (int r = 1; r < 32; r++) begin
      lsu_read(STKT + 32'(4 * (NCTRL + r - 1)), d);
      if (d != h3_regs[r]) ok = 0;
    end
    check(ok, "spill frame in the stack TCM");
    if (ok) saw("spill");
    lsu_read(tptr(0), d);
    check(d == 32'(200 - used3) || d == 32'(200 - used3 - 1) || d == 32'(200 - used3 - 2),
          $sformatf("handler 3 budget written back: %0d (ran ~%0d)", d, used3));

    // ---------------------------------------------------- uiret from 7
    @(negedge clk);
    used7 = run_cyc;
    uiret = 1;
    @(negedge clk);
    uiret = 0;
    wait_redirect(lat);
    check(redir_pc == resume3 && level == 1, $sformatf("uiret resumes handler 3 at %h", redir_pc));
    if (redir_pc == resume3) saw("uiret");
    lsu_read(tptr(1), d);
    check(d == 32'(100 - used7), $sformatf("handler 7 budget written back: %0d, expected %0d",
                                           d, 100 - used7));
    if (d == 32'(100 - used7)) saw("budget_writeback");
    reg_check(h3_regs, 0, ok);
    csr_read(CSR_MUIEPC, c);
    check(ok && c == resume_thread, "handler 3 registers and muiepc restored");
    if (ok) saw("nested_restore");
    probe(region(0), 0, f);
    check(!f, "handler 3 PMP set reloaded");
    check(level == 1, "pending lower priority still waits");

    // ---------------------------------------------------- PMP fault in 3
    @(negedge clk);
    d_req = 1; d_we = 1; d_addr = region(2);
    @(negedge clk);
    d_req = 0;
    wait_redirect(lat);
    check(redir_pc == resume_thread, "forced return to the thread");
    csr_read(CSR_MUICAUSE, c);
    check(c[31] && c[15:8] == 8'd3 && c[3:0] == CAUSE_PMP, $sformatf("muicause PMP %h", c));
    if (c[3:0] == CAUSE_PMP) saw("pmp_fault_return");

    // ---------------------------------------------------- pending 12 runs out
    @(negedge clk); #1;
    check(flush, "pending interrupt 12 taken after the return");
    wait_redirect(lat);
    check(redir_pc == MTVEC + 32'(4 * 12), "vector of 12");
    begin
      int c0;
      c0 = cyc;
      @(negedge clk);
      while (!flush && cyc - c0 < 300) @(negedge clk);
      check(run_cyc == 30, $sformatf("budget 30: handler ran %0d cycles", run_cyc));
      ok = (run_cyc == 30);
    end
    wait_redirect(lat);
    csr_read(CSR_MUICAUSE, c);
    check(c[15:8] == 8'd12 && c[3:0] == CAUSE_BUDGET, $sformatf("muicause budget %h", c));
    if (c[3:0] == CAUSE_BUDGET && ok) saw("budget_expiry");
    @(negedge clk); #1;
    check(level == 0 && !active, "back in the thread");
    lsu_read(tptr(2), d);
    check(d == 0, "expired budget written back as 0");

    // ---------------------------------------------------- thread intact
    reg_check(thread_regs, 0, ok);
    check(ok, "thread registers intact after two handler episodes");
    probe(32'h3000_0010, 0, f);
    check(f, "kernel PMP locked entry back");
    probe(region(2), 1, d[0]);
    check(!d[0], "machine mode reaches memory again");
    if (f && !d[0]) saw("kernel_pmp");
    #1;
    check(kirq[1], "held kernel line delivered after the handlers");
    irq[1] = 0;

    // ---------------------------------------------------- exception in 3
    fire(3, lat, resume_thread);
    check(lat == 7, "entry latency again 7");
    repeat (5) @(negedge clk);
    exc = 1; exc_cause = 5'd2;
    @(negedge clk);
    exc = 0;
    wait_redirect(lat);
    csr_read(CSR_MUICAUSE, c);
    check(c[15:8] == 8'd3 && c[3:0] == CAUSE_EXC && c[20:16] == 5'd2, "muicause exception");
    check(redir_pc == resume_thread, "exception returns to the thread");
    if (c[3:0] == CAUSE_EXC) saw("exc_return");

    // ---------------------------------------------------- uiret to thread
    fire(7, lat, resume_thread);
    check(lat == 7, "entry latency of 7");
    repeat (4) @(negedge clk);
    uiret = 1; @(negedge clk); uiret = 0;
    wait_redirect(lat);
    check(redir_pc == resume_thread, "uiret to the thread");
    @(negedge clk); #1;
    check(level == 0, "level 0 after uiret");
    if (redir_pc == resume_thread) saw("uiret");

    // ---------------------------------------------------- random entries
    for (int r = 0; r < 30; r++) begin
      int k;
      k = $urandom_range(0, 2);
      lsu_write(tptr(k), 32'($urandom_range(20, 80)));
      fire(irqs[k], lat, resume_thread);
      check(lat == 7, $sformatf("random entry %0d latency %0d", r, lat));
      repeat ($urandom_range(1, 10)) @(negedge clk);
      uiret = 1; @(negedge clk); uiret = 0;
      wait_redirect(lat);
      check(redir_pc == resume_thread, "random: return to thread");
      @(negedge clk);
    end

    // ---------------------------------------------------- 16 levels deep
    // CAM entry k now claims line 16+k with priority k; each preemption
    // spills the previous level.
    begin
      logic [31:0] lv_regs [16][1:31];
      logic [31:0] lv_resume [16];
      logic [31:0] tmp [1:31];
      bit deep_ok;
      deep_ok = 1;
      for (int k = 0; k < 16; k++) begin
        csr_write(CSR_IIDNUM0 + 12'(k), 32'h8000_0000 | 32'(16 + k));
        csr_write(CSR_IIDPMP0 + 12'(k), pptr(k % 3));
        csr_write(CSR_IIDTIM0 + 12'(k), tptr(3 + k));
        lsu_write(tptr(3 + k), 32'd10000);
      end
      csr_write(CSR_MUIPRIO0 + 12'd2, 32'h7654_3210);
      csr_write(CSR_MUIPRIO0 + 12'd3, 32'hFEDC_BA98);
      csr_write(CSR_MUIIE, 32'hFFFF_0000);
      for (int k = 0; k < 16; k++) begin
        fire(16 + k, lat, lv_resume[k]);
        check(lat == (k == 0 ? 7 : 38), $sformatf("level %0d entry latency %0d", k + 1, lat));
        check(level == 8'(k + 1) && redir_pc == MTVEC + 32'(4 * (16 + k)),
              $sformatf("level %0d reached", k + 1));
        if (lat != (k == 0 ? 7 : 38) || level != 8'(k + 1)) deep_ok = 0;
        reg_check(junk, 1, ok);
        check(ok, $sformatf("level %0d starts with zeroed registers", k + 1));
        reg_write_all(tmp);
        lv_regs[k] = tmp;
      end
      check(spilling && bank == 1'b1, "deepest level runs in the extra bank, beyond the banks");
      for (int k = 15; k >= 0; k--) begin
        @(negedge clk);
        uiret = 1; @(negedge clk); uiret = 0;
        wait_redirect(lat);
        check(redir_pc == lv_resume[k], $sformatf("uiret from level %0d resumes at %h", k + 1, redir_pc));
        @(negedge clk); #1;
        check(level == 8'(k), $sformatf("back at level %0d", k));
        if (redir_pc != lv_resume[k] || level != 8'(k)) deep_ok = 0;
        if (k > 0) begin
          tmp = lv_regs[k - 1];
          reg_check(tmp, 0, ok);
          check(ok, $sformatf("level %0d registers restored", k));
          if (!ok) deep_ok = 0;
          probe(region((k - 1) % 3), 1, f);
          check(!f, $sformatf("level %0d PMP set reloaded", k));
          if (f) deep_ok = 0;
        end
      end
      reg_check(thread_regs, 0, ok);
      check(ok, "thread registers intact after 16 levels");
      if (deep_ok && ok) saw("deep_nesting");
    end

    check(pause_bad == 0, $sformatf("system timer pause mismatched in %0d cycles", pause_bad));
    if (pause_bad == 0) saw("systimer_pause");

    foreach (mech_names[i]) begin
      int n;
      n = mech.exists(mech_names[i]) ? mech[mech_names[i]] : 0;
      $display("mechanism %-18s %0d", mech_names[i], n);
      check(n > 0, $sformatf("mechanism %s never happened", mech_names[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
