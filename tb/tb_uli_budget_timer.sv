// tb_uli_budget_timer: self-checking test of the budget countdown timer.
//
// A model of the budget table TCM (1-cycle read latency) backs the timer.
// Checked: the table is addressed in the load cycle and done comes one cycle
// later (budget address in cycle 3, "on hold" from cycle 5 in the V5 timing
// diagram); the count holds while run is low; a budget of N lets the handler
// run exactly N cycles before expired rises; the remaining count is written
// back to the right entry on save; save+load writes first and reads one
// cycle later (preemption of one handler by another). Random budgets and
// run patterns are compared with a cycle counter kept by the testbench.
module tb_uli_budget_timer;
  import uli_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        load, save, run, done, expired;
  logic [31:0] load_ptr, save_ptr, remain;
  logic        tcm_req, tcm_we;
  logic [31:0] tcm_addr, tcm_wdata, tcm_rdata;

  uli_budget_timer dut (
    .clk_i(clk), .rst_ni(rst_n),
    .load_i(load), .load_ptr_i(load_ptr), .save_i(save), .save_ptr_i(save_ptr),
    .run_i(run), .done_o(done), .expired_o(expired), .remain_o(remain),
    .tcm_req_o(tcm_req), .tcm_we_o(tcm_we), .tcm_addr_o(tcm_addr),
    .tcm_wdata_o(tcm_wdata), .tcm_rdata_i(tcm_rdata)
  );

  logic [31:0] tmem [64];
  always_ff @(posedge clk)
    if (tcm_req) begin
      if (tcm_we) tmem[tcm_addr[7:2]] <= tcm_wdata;
      else        tcm_rdata <= tmem[tcm_addr[7:2]];
    end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // load entry at ptr; returns after done
  task automatic do_load(input logic [31:0] ptr, input logic [31:0] val);
    tmem[ptr[7:2]] = val;
    @(negedge clk);
    load = 1; load_ptr = ptr; #1;
    check(tcm_req && !tcm_we && tcm_addr == ptr, "budget read addressed in load cycle");
    check(!done, "no done in the load cycle");
    @(negedge clk);
    load = 0; #1;
    check(done, "done one cycle after load");
    @(negedge clk);
    check(remain == val, $sformatf("loaded %0d, got %0d", val, remain));
  endtask

  // run for exactly n cycles (run high), counting expiry
  task automatic run_cycles(input int n, output int first_exp);
    first_exp = -1;
    for (int k = 0; k < n; k++) begin
      run = 1; #1;
      if (expired && first_exp < 0) first_exp = k;
      @(negedge clk);
    end
    run = 0;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fe;
    logic [31:0] b;
    load = 0; save = 0; run = 0; load_ptr = 0; save_ptr = 0;
    for (int i = 0; i < 64; i++) tmem[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // load 10, hold, then run
    do_load(32'h10, 10);
    repeat (5) @(negedge clk);
    check(remain == 10, "count holds while not running");
    check(!expired, "not expired while holding a non-zero count");
    run_cycles(4, fe);
    check(remain == 6, $sformatf("after 4 cycles remain 6, got %0d", remain));
    check(fe < 0, "no early expiry");
    run_cycles(7, fe);
    check(fe == 6, $sformatf("budget 10 expires after 10 run cycles, saw %0d", fe + 4));

    // write-back of the remaining budget
    do_load(32'h20, 25);
    run_cycles(9, fe);
    @(negedge clk);
    save = 1; save_ptr = 32'h20; #1;
    check(tcm_req && tcm_we && tcm_addr == 32'h20 && tcm_wdata == 16, "write-back of 16");
    check(done, "save alone completes in its cycle");
    @(negedge clk);
    save = 0;
    check(tmem[8] == 16, "table holds remaining budget");

    // preemption: save old, load new in one request
    tmem[12] = 77;
    @(negedge clk);
    save = 1; save_ptr = 32'h40; load = 1; load_ptr = 32'h30; #1;
    check(tcm_we && tcm_addr == 32'h40, "save goes first");
    check(!done, "no done while a load is pending");
    @(negedge clk);
    save = 0; load = 0; #1;
    check(tcm_req && !tcm_we && tcm_addr == 32'h30, "load follows one cycle later");
    check(!done, "not done yet");
    @(negedge clk); #1;
    check(done, "done two cycles after save+load");
    @(negedge clk);
    check(remain == 77, "new budget loaded");
    check(tmem[16] == 16, "preempted budget saved");

    // zero budget expires at once
    do_load(32'h44, 0);
    run_cycles(1, fe);
    check(fe == 0, "zero budget expires in the first run cycle");

    // random budgets with random hold gaps
    for (int r = 0; r < 40; r++) begin
      int used;
      b = $urandom_range(1, 60);
      do_load(32'(r % 16) << 2, b);
      used = 0; fe = -1;
      while (fe < 0 && used < 200) begin
        int g;
        if ($urandom_range(0, 3) == 0) begin
          g = $urandom_range(1, 3);
          repeat (g) @(negedge clk);
        end
        run = 1; #1;
        if (expired) fe = used;
        else check(remain == b - 32'(used), "remaining count tracks run cycles");
        @(negedge clk);
        run = 0;
        used++;
      end
      check(fe == int'(b), $sformatf("budget %0d expired after %0d", b, fe));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
