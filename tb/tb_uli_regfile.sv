// tb_uli_regfile: self-checking test of the banked register file with
// hybrid spilling.
//
// With one extra bank, the test nests handlers four levels deep and back:
// level 1 is a pure bank switch, levels 2-4 spill the previous level's
// registers to a model of the stack TCM. At every level it checks that the
// registers read as zero on entry (zeroisation), fills them with random
// values, and after each return checks that the level's values are back.
// The control words pushed with each nested entry must come back unchanged
// on ctrl_o. Cycle counts are checked against the frame sizes: a bank switch
// completes the cycle after the request, a frame of W words W+1 cycles after
// a save and W+2 after a restore (read latency). The stack contents written by a spill are compared with
// the registers word by word.
//
// A random walk then moves up and down between levels 0 and 8 in random
// order, with random register writes at each level in between, checking
// the same properties against a reference stack of register sets.
module tb_uli_regfile;
  import uli_pkg::*;

  localparam int NEXTRA = 1;
  localparam logic [31:0] STK = 32'h4002_0100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [4:0]  ra1, ra2, wa;
  logic [31:0] rd1, rd2, wd;
  logic        we, save, restore, ctrl_en, done, spilling;
  logic [7:0]  level;
  logic [NCTRL-1:0][31:0] ctrl_in, ctrl_out;
  logic [0:0]  bank;
  logic        tcm_req, tcm_we;
  logic [31:0] tcm_addr, tcm_wdata, tcm_rdata;

  uli_regfile #(.NEXTRA(NEXTRA)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .ra1_i(ra1), .ra2_i(ra2), .rd1_o(rd1), .rd2_o(rd2),
    .we_i(we), .wa_i(wa), .wd_i(wd),
    .save_i(save), .restore_i(restore), .level_i(level), .ctrl_en_i(ctrl_en),
    .ctrl_i(ctrl_in), .ctrl_o(ctrl_out), .stk_base_i(STK), .done_o(done),
    .bank_o(bank), .spilling_o(spilling),
    .tcm_req_o(tcm_req), .tcm_we_o(tcm_we), .tcm_addr_o(tcm_addr),
    .tcm_wdata_o(tcm_wdata), .tcm_rdata_i(tcm_rdata)
  );

  logic [31:0] smem [1024];
  always_ff @(posedge clk)
    if (tcm_req) begin
      if (tcm_we) smem[tcm_addr[11:2]] <= tcm_wdata;
      else        tcm_rdata <= smem[tcm_addr[11:2]];
    end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [31:0] ref_regs [0:8][1:31];
  logic [NCTRL-1:0][31:0] ref_ctrl [0:8];

  task automatic read_all(input int lvl, input bit expect_zero, input string tag);
    bit ok;
    ok = 1;
    for (int r = 0; r < 32; r += 2) begin
      ra1 = 5'(r); ra2 = 5'(r + 1); #1;
      if (r == 0) begin
        if (rd1 != 0) ok = 0;
      end else if (rd1 != (expect_zero ? 32'd0 : ref_regs[lvl][r])) ok = 0;
      if (rd2 != (expect_zero ? 32'd0 : ref_regs[lvl][r+1])) ok = 0;
    end
    check(ok, $sformatf("%s: registers at level %0d", tag, lvl));
  endtask

  task automatic fill(input int lvl);
    for (int r = 0; r < 32; r++) begin
      @(negedge clk);
      we = 1; wa = 5'(r); wd = $urandom;
      if (r != 0) ref_regs[lvl][r] = wd;
    end
    @(negedge clk);
    we = 0;
  endtask

  // returns the number of cycles from request to done
  task automatic request(input bit is_save, input int lvl, input bit c_en, output int cyc);
    @(negedge clk);
    save = is_save; restore = !is_save; level = 8'(lvl); ctrl_en = c_en;
    for (int i = 0; i < NCTRL; i++) ctrl_in[i] = $urandom;
    if (is_save) ref_ctrl[lvl] = ctrl_in;
    @(negedge clk);
    save = 0; restore = 0;
    cyc = 1;
    while (!done && cyc < 100) begin
      @(negedge clk);
      cyc++;
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, depth;
    ra1 = 0; ra2 = 0; wa = 0; wd = 0; we = 0; save = 0; restore = 0;
    level = 0; ctrl_en = 0; ctrl_in = '0;
    for (int i = 0; i < 1024; i++) smem[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    read_all(0, 1, "after reset");
    fill(0);
    read_all(0, 0, "bank 0 written");
    // x0 stays zero
    @(negedge clk); we = 1; wa = 0; wd = 32'hDEAD_BEEF; @(negedge clk); we = 0;
    ra1 = 0; #1; check(rd1 == 0, "x0 reads zero");

    for (int round = 0; round < 3; round++) begin
      depth = 2 + round;     // 2, 3, 4 levels
      // ---- enter
      for (int l = 1; l <= depth; l++) begin
        int words;
        bit sp;
        sp = (l > NEXTRA);
        words = ((l > 1) ? NCTRL : 0) + (sp ? 31 : 0);
        request(1, l, l > 1, cyc);
        check(cyc == words + 1, $sformatf("save to level %0d: %0d cycles, expected %0d",
                                          l, cyc, words + 1));
        check(bank == 1'(l > NEXTRA ? NEXTRA : l), "bank selection");
        if (sp) begin
          // the spilled registers of level l-1 sit above the control words
          logic [31:0] base;
          bit ok;
          base = STK;
          for (int k = 2; k < l; k++) base += 4 * (NCTRL + ((k > NEXTRA) ? 31 : 0));
          ok = 1;
          for (int i = 0; i < NCTRL; i++)
            if (smem[(base[9:2]) + i] != ref_ctrl[l][i]) ok = 0;
          for (int r = 1; r < 32; r++)
            if (smem[(base[9:2]) + NCTRL + r - 1] != ref_regs[l-1][r]) ok = 0;
          check(ok, $sformatf("spill frame of level %0d", l - 1));
        end
        read_all(l, 1, "zeroised on entry");
        fill(l);
      end
      // ---- return
      for (int l = depth; l >= 1; l--) begin
        int words;
        words = ((l > 1) ? NCTRL : 0) + ((l > NEXTRA) ? 31 : 0);
        request(0, l, l > 1, cyc);
        check(cyc == ((words == 0) ? 1 : words + 2),
              $sformatf("restore from level %0d: %0d cycles", l, cyc));
        if (l > 1) check(ctrl_out == ref_ctrl[l], $sformatf("control words of level %0d", l));
        read_all(l - 1, 0, "restored");
      end
      check(bank == 0, "back in bank 0");
    end

    // ---- random walk over levels 0..8
    depth = 0;
    for (int step = 0; step < 120; step++) begin
      bit up;
      up = (depth == 0) || (depth < 8 && $urandom_range(0, 1) == 1);
      if (up) begin
        int l, words;
        l = depth + 1;
        words = ((l > 1) ? NCTRL : 0) + ((l > NEXTRA) ? 31 : 0);
        request(1, l, l > 1, cyc);
        check(cyc == words + 1, $sformatf("walk: save to level %0d took %0d cycles", l, cyc));
        read_all(l, 1, "walk: zeroised on entry");
        for (int r = 1; r < 32; r++) ref_regs[l][r] = 32'd0;
        depth = l;
      end else begin
        int l, words;
        l = depth;
        words = ((l > 1) ? NCTRL : 0) + ((l > NEXTRA) ? 31 : 0);
        request(0, l, l > 1, cyc);
        check(cyc == ((words == 0) ? 1 : words + 2),
              $sformatf("walk: restore from level %0d took %0d cycles", l, cyc));
        if (l > 1) check(ctrl_out == ref_ctrl[l], $sformatf("walk: control words of level %0d", l));
        depth = l - 1;
        read_all(depth, 0, "walk: restored");
      end
      // a few random writes at the current level
      repeat ($urandom_range(0, 6)) begin
        @(negedge clk);
        we = 1; wa = 5'($urandom_range(1, 31)); wd = $urandom;
        ref_regs[depth][wa] = wd;
        @(negedge clk);
        we = 0;
      end
      check(bank == 1'(depth > NEXTRA ? NEXTRA : depth), "walk: bank selection");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
