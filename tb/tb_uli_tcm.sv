// tb_uli_tcm: self-checking test of the two-port tightly coupled memory.
//
// Random traffic on both ports is compared with a reference array: port A
// word writes, port B byte-enabled writes, reads on either port returning
// the word one cycle later, and port A winning a same-cycle write to the
// same word. The memory is first filled through port B, as the kernel
// fills the tables.
module tb_uli_tcm;
  import uli_pkg::*;

  localparam int DEPTH = 64;

  logic clk = 0;
  always #5 clk = ~clk;

  logic        a_req, a_we, b_req, b_we;
  logic [3:0]  b_be;
  logic [31:0] a_addr, a_wdata, a_rdata, b_addr, b_wdata, b_rdata;

  uli_tcm #(.DEPTH(DEPTH)) dut (
    .clk_i(clk),
    .a_req_i(a_req), .a_we_i(a_we), .a_addr_i(a_addr), .a_wdata_i(a_wdata),
    .a_rdata_o(a_rdata),
    .b_req_i(b_req), .b_we_i(b_we), .b_be_i(b_be), .b_addr_i(b_addr),
    .b_wdata_i(b_wdata), .b_rdata_o(b_rdata)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [31:0] ref_mem [DEPTH];

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_req = 0; a_we = 0; b_req = 0; b_we = 0; b_be = 0;
    a_addr = 0; a_wdata = 0; b_addr = 0; b_wdata = 0;
    @(negedge clk);
    // fill through port B
    for (int i = 0; i < DEPTH; i++) begin
      b_req = 1; b_we = 1; b_be = 4'hF; b_addr = 32'h4000_0000 + 32'(4 * i);
      b_wdata = $urandom; ref_mem[i] = b_wdata;
      @(negedge clk);
    end
    b_req = 0;
    for (int k = 0; k < 3000; k++) begin
      int ia, ib;
      logic [31:0] na, nb;
      ia = $urandom_range(0, DEPTH - 1);
      ib = (k % 7 == 0) ? ia : $urandom_range(0, DEPTH - 1);
      a_req = 1'($urandom_range(0, 1)); a_we = 1'($urandom_range(0, 1));
      b_req = 1'($urandom_range(0, 1)); b_we = 1'($urandom_range(0, 1));
      b_be = 4'($urandom);
      a_addr = 32'(4 * ia); b_addr = 32'(4 * ib) | 32'($urandom_range(0, 3));
      a_wdata = $urandom; b_wdata = $urandom;
      // reads see the memory before this cycle's writes
      na = ref_mem[ia]; nb = ref_mem[ib];
      if (b_req && b_we && !(a_req && a_we && ia == ib))
        for (int b = 0; b < 4; b++)
          if (b_be[b]) ref_mem[ib][8*b +: 8] = b_wdata[8*b +: 8];
      if (a_req && a_we) ref_mem[ia] = a_wdata;
      @(negedge clk);
      // the word read in that cycle is on the output at the following edge
      if (a_req && !a_we) check(a_rdata == na, $sformatf("port A read %0d", k));
      if (b_req && !b_we) check(b_rdata == nb, $sformatf("port B read %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
