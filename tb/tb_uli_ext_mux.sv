// tb_uli_ext_mux: self-checking test of the external multiplexer.
//
// Random load/store requests, aimed at each TCM window, at their edges and at
// the rest of the address space, are checked for the right target request,
// the forwarded write fields, and the read data steered back one cycle later
// from the target that was selected (each target returns different data).
module tb_uli_ext_mux;
  import uli_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req, we;
  logic [3:0]  be;
  logic [31:0] addr, wdata, rdata;
  logic [3:0]  t_req;
  logic        t_we;
  logic [3:0]  t_be;
  logic [31:0] t_addr, t_wdata;
  logic [3:0][31:0] t_rdata;

  uli_ext_mux dut (
    .clk_i(clk), .rst_ni(rst_n),
    .lsu_req_i(req), .lsu_we_i(we), .lsu_be_i(be), .lsu_addr_i(addr),
    .lsu_wdata_i(wdata), .lsu_rdata_o(rdata),
    .t_req_o(t_req), .t_we_o(t_we), .t_be_o(t_be), .t_addr_o(t_addr),
    .t_wdata_o(t_wdata), .t_rdata_i(t_rdata)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int target(input logic [31:0] a);
    if (a >= 32'h4000_0000 && a <= 32'h4000_FFFF) return 0;
    if (a >= 32'h4001_0000 && a <= 32'h4001_FFFF) return 1;
    if (a >= 32'h4002_0000 && a <= 32'h4002_FFFF) return 2;
    return 3;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev_t;
    bit prev_rd;
    req = 0; we = 0; be = 0; addr = 0; wdata = 0; t_rdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    prev_rd = 0; prev_t = 3;
    for (int k = 0; k < 2000; k++) begin
      int t;
      case ($urandom_range(0, 5))
        0: addr = 32'h4000_0000 + 32'($urandom_range(0, 32'hFFFF));
        1: addr = 32'h4001_0000 + 32'($urandom_range(0, 32'hFFFF));
        2: addr = 32'h4002_0000 + 32'($urandom_range(0, 32'hFFFF));
        3: addr = 32'h4003_0000 - 32'($urandom_range(1, 4));    // edge of stack window
        4: addr = 32'h4000_0000 - 32'($urandom_range(1, 4));    // just below
        default: addr = $urandom;
      endcase
      req = 1'($urandom_range(0, 3) != 0);
      we = 1'($urandom_range(0, 1)); be = 4'($urandom); wdata = $urandom;
      for (int i = 0; i < 4; i++) t_rdata[i] = $urandom;
      #1;
      // read data of the previous request comes from its target
      if (prev_rd) check(rdata == t_rdata[prev_t], $sformatf("read data from target %0d", prev_t));
      t = target(addr);
      check(t_req == (req ? 4'(1 << t) : 4'b0), $sformatf("request %h to target %0d", addr, t));
      check(t_addr == addr && t_we == we && t_be == be && t_wdata == wdata, "forwarded fields");
      @(negedge clk);
      prev_rd = req && !we; prev_t = t;
      // targets answer in the cycle after the request
      for (int i = 0; i < 4; i++) t_rdata[i] = $urandom;
      req = 0; addr = $urandom; #1;
      if (prev_rd) check(rdata == t_rdata[prev_t], $sformatf("read data from target %0d", prev_t));
      prev_rd = 0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
