// tb_uli_workloads: the evaluation scenarios of the design, run on the whole
// extension (uli_ext_top at its default parameters).
//
// The core and the kernel are played by the testbench, with the same simple
// pipeline model as tb_uli_ext_top: the PC advances one instruction per
// cycle unless pipe_flush_o holds it, and jumps when pipe_redirect_o pulses.
// A handler's body is modelled as a number of cycles of work followed by a
// uiret (or, for a malicious handler, by an illegal access or no uiret at
// all). At a 50 MHz core clock, one cycle is 20 ns.
//
// 1. Periodic timer latency. A device raises interrupt 12 every 4,000
//    cycles. Each entry latency (line high to vector fetch) is recorded
//    with the target process active and inactive. The kernel switches
//    between two processes after each handler by rewriting the kernel PMP
//    and the privilege. The latency must be 7 cycles every time, with no
//    spread.
// 2. Isolation. A malicious handler (interrupt 7, priority 5) makes an
//    illegal access, or loops past its budget. It does so preempting a user
//    thread, the kernel, and another handler (interrupt 3, priority 2). Each
//    time it must be forced back to exactly the context it preempted, with
//    the cause recorded. The preempted handler must go on with its own
//    registers, PMP set and remaining budget.
// 3. Pulse train output. The device fires every 200 cycles (250 kHz at
//    50 MHz) and every 5,000 cycles (10 kHz). The handler reprograms the
//    next period (modelled as 30 cycles of work) while the process
//    switching of scenario 1 goes on. No pulse may be missed, and the jitter
//    (spread of the entry latency) must be zero.
// 4. Modbus-RTU. One interrupt per received 11-bit character at 115.2 kbit/s,
//    1 Mbit/s and 2.5 Mbit/s (4774, 550 and 220 cycles). The handler stores
//    the byte (modelled as 40 cycles of work). A background task runs in
//    the thread. No character may be lost or overrun, and the overhead per
//    character (cycles the thread loses beyond the handler's own work) must
//    be the same constant at every rate. The background task's share of the
//    core is printed for each rate.
//
// The handler work lengths are this testbench's own choices. The timer
// period, the rates and the 50 MHz clock are the evaluation's.
module tb_uli_workloads;
  import uli_pkg::*;

  localparam logic [31:0] MTVEC = 32'h0000_0100;
  localparam logic [31:0] PMPT  = 32'h4000_0000;
  localparam logic [31:0] BUDT  = 32'h4001_0000;
  localparam logic [31:0] STKT  = 32'h4002_0000;
  localparam int NIRQ = 32;
  localparam int DEV  = 12;          // periodic device line

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NIRQ-1:0] irq, irq_main, irq_dev, kirq;
  logic        csr_we, csr_hit;
  logic [11:0] csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  logic [31:0] epc, redir_pc;
  logic        uiret, uiret_main, uiret_auto, exc, flush, redir, active, pause;
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

  assign irq   = irq_main | irq_dev;
  assign uiret = uiret_main | uiret_auto;

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

  // system bus: nothing lives there in these scenarios
  always_ff @(posedge clk) sys_rdata <= sys_addr ^ 32'h5A5A_5A5A;

  // ------------------------------------------------------------ core model
  logic [31:0] pc;
  int cyc = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) pc <= 32'h0000_8000;
    else if (redir) pc <= redir_pc + 4;
    else if (!flush) pc <= pc + 4;
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

  // ------------------------------------------------ periodic device + handler
  // The device raises DEV for one cycle every dev_period cycles. The handler
  // for DEV works hwork cycles (cycles it is not held) and then executes
  // uiret. Everything is sampled at the negative edge.
  bit dev_on = 0, dev_fire = 0;
  int dev_period, dev_cnt, hwork;
  int fire_cyc, sent, entries, returns, overruns, forced, lat_min, lat_max;
  int work_left;
  bit h_on;
  int thread_cyc, handler_cyc, win_cyc;
  event h_done;

  always @(negedge clk) begin
    uiret_auto = 0;
    irq_dev = '0;
    if (dev_on) begin
      win_cyc++;
      if (!flush && !active) thread_cyc++;
      if (dev_cnt == 0 && dev_fire) begin
        irq_dev[DEV] = 1;
        fire_cyc = cyc;
        sent++;
        if (h_on) overruns++;
        dev_cnt = dev_period - 1;
      end else dev_cnt--;
      if (redir && redir_pc == MTVEC + 32'(4 * DEV)) begin
        int lat;
        lat = cyc - fire_cyc;
        if (lat < lat_min) lat_min = lat;
        if (lat > lat_max) lat_max = lat;
        entries++;
        h_on = 1;
        work_left = hwork;
      end else if (h_on && active && !flush) begin
        handler_cyc++;
        work_left--;
        if (work_left == 0) begin
          uiret_auto = 1;
          h_on = 0;
          returns++;
          -> h_done;
        end
      end else if (h_on && !active && !flush) begin
        forced++;                                  // ended by the hardware
        h_on = 0;
      end
    end
  end

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
  task automatic reg_write_all(output logic [31:0] v [1:31]);
    for (int r = 1; r < 32; r++) begin
      @(negedge clk);
      rwe = 1; wa = 5'(r); wd = $urandom; v[r] = wd;
    end
    @(negedge clk);
    rwe = 0;
  endtask
  task automatic reg_check(input logic [31:0] v [1:31], output bit ok);
    ok = 1;
    for (int r = 1; r < 32; r++) begin
      ra1 = 5'(r); #1;
      if (rd1 != v[r]) ok = 0;
    end
  endtask
  task automatic probe(input logic [31:0] a, input bit wr, output bit fault);
    d_req = 1; d_we = wr; d_addr = a; #1;
    fault = d_fault;
    d_req = 0; #1;
  endtask

  // raise a line from the main process, wait for the vector fetch
  task automatic fire(input int n, output int lat, output logic [31:0] resume);
    int c0;
    @(negedge clk);
    irq_main[n] = 1;
    c0 = cyc;
    @(negedge clk); #1;
    resume = pc;
    irq_main[n] = 0;
    while (!redir && cyc - c0 < 300) @(negedge clk);
    lat = cyc - c0;
  endtask
  task automatic wait_redirect(output int lat);
    int c0;
    c0 = cyc;
    while (!redir && cyc - c0 < 600) @(negedge clk);
    lat = cyc - c0;
  endtask

  // process switch by the kernel: a different kernel PMP set and privilege
  task automatic switch_process(input int p);
    csr_write(CSR_PMPADDR0, napot(32'h3000_0000 + 32'(p * 4096), 4096));
    csr_write(CSR_PMPCFG0, p[0] ? 32'h0000_001B : 32'h0000_0018);
    priv_m = (p % 3 == 0);
  endtask

  function automatic logic [31:0] pptr(input int k); return PMPT + 32'(20 * k); endfunction
  function automatic logic [31:0] tptr(input int k); return BUDT + 32'(4 * k);  endfunction
  function automatic logic [31:0] region(input int k); return 32'h2000_0000 + 32'(k * 256); endfunction
  function automatic logic [31:0] napot(input logic [31:0] base, input int size);
    return (base >> 2) | 32'((size / 8) - 1);
  endfunction

  // Run the periodic device for n interrupts; switch processes after each
  // handler when mixed is set, or keep process p.
  task automatic run_device(input int period, input int work, input int n, input bit mixed,
                            input int p);
    dev_period = period; hwork = work;
    dev_cnt = $urandom_range(0, period - 1);
    sent = 0; entries = 0; returns = 0; overruns = 0; forced = 0;
    lat_min = 1 << 30; lat_max = 0;
    thread_cyc = 0; handler_cyc = 0; win_cyc = 0;
    h_on = 0;
    switch_process(p);
    dev_on = 1; dev_fire = 1;
    while (returns < n) begin
      @(h_done);
      // the kernel replenishes the handler's budget after each run
      lsu_write(tptr(2), 32'd100000);
      if (mixed) switch_process($urandom_range(0, 5));
    end
    // stop the device, let a last pending interrupt run, then stop
    dev_fire = 0;
    repeat (4) @(negedge clk);
    while (h_on || active || flush) @(negedge clk);
    dev_on = 0;
    @(negedge clk);
    check(forced == 0, $sformatf("device handler never forced out (%0d)", forced));
  endtask

  initial begin
    #400000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // handlers: index 0 = irq 3 (victim), 1 = irq 7 (malicious), 2 = irq 12 (device)
  int irqs [3] = '{3, 7, DEV};

  initial begin
    logic [31:0] thread_regs [1:31], victim_regs [1:31];
    logic [31:0] c, d, resume, resume_v;
    int lat, ovh [3];
    bit ok, f;

    irq_main = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0;
    uiret_main = 0; exc = 0; exc_cause = 0;
    ra1 = 0; ra2 = 0; wa = 0; wd = 0; rwe = 0;
    priv_m = 1; d_req = 0; d_we = 0; d_addr = 0;
    lsu_req = 0; lsu_we = 0; lsu_be = 0; lsu_addr = 0; lsu_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---------------------------------------------------- kernel set-up
    for (int k = 0; k < 3; k++) begin
      lsu_write(pptr(k) + 0,  32'h0000_1B1D);       // entry 0 NAPOT RX, entry 1 NAPOT RW
      lsu_write(pptr(k) + 4,  napot(32'h0000_0000, 4096));
      lsu_write(pptr(k) + 8,  napot(region(k), 256));
      lsu_write(pptr(k) + 12, 32'h0);
      lsu_write(pptr(k) + 16, 32'h0);
      lsu_write(tptr(k), 32'd10000);
      csr_write(CSR_IIDNUM0 + 12'(k), 32'h8000_0000 | 32'(irqs[k]));
      csr_write(CSR_IIDPMP0 + 12'(k), pptr(k));
      csr_write(CSR_IIDTIM0 + 12'(k), tptr(k));
    end
    csr_write(CSR_MUISTK, STKT);
    csr_write(CSR_MUIIE, (32'd1 << 3) | (32'd1 << 7) | (32'd1 << DEV));
    csr_write(CSR_MUIPRIO0, 32'h5000_2000);            // prio(3)=2, prio(7)=5
    csr_write(CSR_MUIPRIO0 + 12'd1, 32'h0004_0000);    // prio(12)=4
    csr_write(CSR_MUICTL, 32'h1);
    reg_write_all(thread_regs);

    // ---------------------------------------------------- 1. raw latency
    run_device(4000, 10, 20, 0, 1);                    // target process active
    $display("latency, process active:   min %0d max %0d cycles over %0d interrupts",
             lat_min, lat_max, entries);
    check(lat_min == 7 && lat_max == 7, "latency 7 cycles with the process active");
    run_device(4000, 10, 20, 0, 4);                    // another process running
    $display("latency, process inactive: min %0d max %0d cycles over %0d interrupts",
             lat_min, lat_max, entries);
    check(lat_min == 7 && lat_max == 7, "latency 7 cycles with the process inactive");
    run_device(4000, 10, 20, 1, 0);                    // mixed
    check(lat_min == 7 && lat_max == 7 && overruns == 0, "latency 7 cycles, mixed processes");
    reg_check(thread_regs, ok);
    check(ok, "thread registers intact after the periodic interrupts");

    // ---------------------------------------------------- 2. isolation
    for (int scen = 0; scen < 3; scen++) begin
      for (int kind = 0; kind < 2; kind++) begin
        int used_v, left_v, exp_level;
        string what;
        what = $sformatf("%s, %s", scen == 0 ? "preempting a user thread" :
                                   scen == 1 ? "preempting the kernel" : "preempting a handler",
                         kind == 0 ? "illegal access" : "endless loop");
        lsu_write(tptr(0), 32'd5000);
        lsu_write(tptr(1), 32'(kind == 0 ? 5000 : 60));
        priv_m = (scen == 1);
        exp_level = (scen == 2) ? 1 : 0;
        if (scen == 2) begin
          fire(3, lat, resume);
          check(lat == 7, "victim entry");
          reg_write_all(victim_regs);
          repeat (20) @(negedge clk);
        end
        used_v = 0;
        fire(7, lat, resume);
        check(lat == (scen == 2 ? 38 : 7), $sformatf("%s: malicious entry latency %0d", what, lat));
        check(level == 8'(exp_level + 1), $sformatf("%s: level", what));
        if (kind == 0) begin
          repeat (3) @(negedge clk);
          // reach into the victim's region, then into the kernel's
          d_req = 1; d_we = 1; d_addr = (scen == 2) ? region(0) : 32'h3000_0000;
          #1;
          check(d_fault, $sformatf("%s: access denied", what));
          @(negedge clk);
          d_req = 0;
          wait_redirect(lat);
          check(lat <= (scen == 2 ? 50 : 3), $sformatf("%s: forced return took %0d cycles", what, lat));
        end else begin
          int c0;
          c0 = cyc;
          @(negedge clk);
          wait_redirect(lat);                           // no uiret: the budget ends it
          check(cyc - c0 >= 60 && cyc - c0 <= 60 + 50, $sformatf("%s: ran %0d cycles on a budget of 60",
                                                                  what, cyc - c0));
        end
        csr_read(CSR_MUICAUSE, c);
        check(c[31] && c[15:8] == 8'd7 && c[3:0] == (kind == 0 ? CAUSE_PMP : CAUSE_BUDGET),
              $sformatf("%s: muicause %h", what, c));
        check(redir_pc == resume, $sformatf("%s: back at the preempted PC", what));
        @(negedge clk); #1;
        check(level == 8'(exp_level), $sformatf("%s: back at level %0d", what, exp_level));
        if (scen == 2) begin
          reg_check(victim_regs, ok);
          check(ok, "victim handler's registers restored");
          probe(region(0), 1, f);
          check(!f, "victim handler's PMP set reloaded");
          probe(region(1), 0, f);
          check(f, "malicious handler's PMP set gone");
          lsu_read(tptr(0), d);
          left_v = int'(d);
          check(left_v < 5000 && left_v > 5000 - 200 && remain <= d,
                $sformatf("victim budget continues: table %0d, timer %0d", left_v, remain));
          uiret_main = 1; @(negedge clk); uiret_main = 0;
          wait_redirect(lat);
          @(negedge clk); #1;
          check(level == 0, "victim returns to the thread");
        end
        reg_check(thread_regs, ok);
        check(ok, $sformatf("%s: thread registers intact", what));
        if (scen == 1) begin
          probe(32'h3000_0000 + 32'h10, 1, f);
          check(!f, "kernel reaches memory again");
        end
      end
    end
    priv_m = 1;

    // ---------------------------------------------------- 3. pulse train output
    lsu_write(tptr(2), 32'd10000);
    run_device(200, 30, 200, 1, 0);
    $display("PTO 250 kHz: %0d pulses, %0d handled, latency %0d..%0d, overruns %0d",
             sent, entries, lat_min, lat_max, overruns);
    check(entries == sent && overruns == 0, "PTO 250 kHz: every pulse handled in time");
    check(lat_max == lat_min, "PTO 250 kHz: zero jitter");
    run_device(5000, 30, 20, 1, 0);
    check(entries == sent && overruns == 0 && lat_max == lat_min, "PTO 10 kHz: no jitter, no miss");

    // ---------------------------------------------------- 4. Modbus-RTU
    begin
      int periods [3] = '{4774, 550, 220};
      string names [3] = '{"115.2 kbit/s", "1 Mbit/s", "2.5 Mbit/s"};
      for (int i = 0; i < 3; i++) begin
        real share;
        run_device(periods[i], 40, i == 0 ? 20 : 200, 0, 2);
        share = real'(thread_cyc) / real'(win_cyc);
        ovh[i] = (win_cyc - thread_cyc - handler_cyc) / entries;
        $display("Modbus %s: %0d characters, %0d handled, background share %0.1f%%, overhead %0d cycles/char",
                 names[i], sent, entries, 100.0 * share, ovh[i]);
        check(entries == sent && overruns == 0, $sformatf("Modbus %s: no character lost", names[i]));
      end
      check(ovh[0] == ovh[1] && ovh[1] == ovh[2], "Modbus: the same overhead per character at every rate");
    end

    reg_check(thread_regs, ok);
    check(ok, "thread registers intact at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
