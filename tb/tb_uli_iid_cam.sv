// tb_uli_iid_cam: self-checking test of the interrupt identification CAM.
//
// Programs entries through the CSR bus, including duplicate interrupt numbers
// and invalid entries, then compares lookups and the user-level mask against
// a reference model kept in plain arrays: the lowest-numbered valid entry
// that matches must win. Also checks CSR read-back, pointer alignment and
// that a lookup answers in the same cycle (no clock between request and
// result). Ends with a randomised pass over all entries.
module tb_uli_iid_cam;
  import uli_pkg::*;

  localparam int NENT = 16;
  localparam int NIRQ = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        csr_we;
  logic [11:0] csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  logic        csr_hit;
  logic [4:0]  lk_irq;
  logic        lk_hit;
  logic [31:0] lk_pmp, lk_tim;
  logic [NIRQ-1:0] mask;

  uli_iid_cam #(.NENT(NENT), .NIRQ(NIRQ)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .csr_we_i(csr_we), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata),
    .csr_rdata_o(csr_rdata), .csr_hit_o(csr_hit),
    .lookup_irq_i(lk_irq), .lookup_hit_o(lk_hit),
    .lookup_pmp_ptr_o(lk_pmp), .lookup_tim_ptr_o(lk_tim), .uli_mask_o(mask)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference model
  bit          rv [NENT];
  logic [7:0]  rn [NENT];
  logic [31:0] rp [NENT], rt [NENT];

  task automatic csr_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk);
    csr_we = 0;
  endtask

  task automatic set_entry(input int e, input bit v, input int num,
                           input logic [31:0] p, input logic [31:0] t);
    csr_write(CSR_IIDNUM0 + 12'(e), {v, 23'd0, 8'(num)});
    csr_write(CSR_IIDPMP0 + 12'(e), p);
    csr_write(CSR_IIDTIM0 + 12'(e), t);
    rv[e] = v; rn[e] = 8'(num); rp[e] = {p[31:2], 2'b00}; rt[e] = {t[31:2], 2'b00};
  endtask

  task automatic check_all_lookups();
    for (int i = 0; i < NIRQ; i++) begin
      bit eh; logic [31:0] ep, et; bit em;
      eh = 0; ep = 0; et = 0; em = 0;
      for (int e = 0; e < NENT; e++)
        if (rv[e] && rn[e] == 8'(i)) begin
          em = 1;
          if (!eh) begin eh = 1; ep = rp[e]; et = rt[e]; end
        end
      lk_irq = 5'(i);
      #1;   // combinational: no clock edge
      check(lk_hit == eh, $sformatf("hit for irq %0d", i));
      if (eh) begin
        check(lk_pmp == ep, $sformatf("pmp ptr for irq %0d: %h vs %h", i, lk_pmp, ep));
        check(lk_tim == et, $sformatf("tim ptr for irq %0d: %h vs %h", i, lk_tim, et));
      end
      check(mask[i] == em, $sformatf("mask bit %0d", i));
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    csr_we = 0; csr_addr = 0; csr_wdata = 0; lk_irq = 0;
    for (int e = 0; e < NENT; e++) begin rv[e] = 0; rn[e] = 0; rp[e] = 0; rt[e] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // after reset nothing is user-level
    check(mask == '0, "mask empty after reset");

    // directed: duplicates and an invalid entry
    set_entry(0, 1, 5, 32'h4000_0100, 32'h4001_0040);
    set_entry(3, 1, 5, 32'h4000_0200, 32'h4001_0080);   // loses to entry 0
    set_entry(2, 1, 9, 32'h4000_0303, 32'h4001_00C2);   // low bits dropped
    set_entry(1, 0, 7, 32'h4000_0400, 32'h4001_0100);   // invalid
    check_all_lookups();

    // read-back
    csr_addr = CSR_IIDNUM0 + 12'd3; #1;
    check(csr_hit && csr_rdata == 32'h8000_0005, "iidnum3 read-back");
    csr_addr = CSR_IIDPMP0 + 12'd2; #1;
    check(csr_hit && csr_rdata == 32'h4000_0300, "iidpmp2 read-back aligned");
    csr_addr = CSR_IIDTIM0 + 12'd2; #1;
    check(csr_hit && csr_rdata == 32'h4001_00C0, "iidtim2 read-back aligned");
    csr_addr = 12'h123; #1;
    check(!csr_hit, "no hit outside CAM CSRs");

    // deleting entry 0 exposes entry 3
    set_entry(0, 0, 5, 32'h4000_0100, 32'h4001_0040);
    check_all_lookups();

    // random fill, several rounds
    for (int r = 0; r < 6; r++) begin
      for (int e = 0; e < NENT; e++)
        set_entry(e, 1'($urandom_range(0, 1)), int'($urandom_range(0, NIRQ - 1)),
                  $urandom, $urandom);
      check_all_lookups();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
