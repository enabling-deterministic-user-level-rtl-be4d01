// tb_uli_pmp: self-checking test of the PMP unit with its shadow kernel set
// and table-loaded user-level set.
//
// The reference model turns every entry into a byte range [lo, hi) with
// 64-bit arithmetic (TOR, NA4, NAPOT by counting trailing ones) and applies
// the first-match and privilege rules, which is a different formulation from
// the mask compare in the design. The test
//   * programs the kernel set by CSR and checks machine and user accesses,
//   * loads a user-level set from a model of the PMP table TCM, checking the
//     address sequence and that load_done comes NWORDS cycles after load
//     (cycle 3 -> cycle 8 in the V5 timing diagram, 5 words for 4 entries),
//   * checks that the kernel set is untouched by the load (shadowing),
//   * repeats both with random configurations.
module tb_uli_pmp;
  import uli_pkg::*;

  localparam int NPMP = 4;
  localparam int NWORDS = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        csr_we;
  logic [11:0] csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  logic        csr_hit;
  logic        load, load_done, tcm_req;
  logic [31:0] load_ptr, tcm_addr, tcm_rdata;
  logic        sel_uli, priv_m, if_req, d_req, d_we, if_fault, d_fault;
  logic [31:0] if_addr, d_addr;

  uli_pmp #(.NPMP(NPMP)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .csr_we_i(csr_we), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata),
    .csr_rdata_o(csr_rdata), .csr_hit_o(csr_hit),
    .load_i(load), .load_ptr_i(load_ptr), .load_done_o(load_done),
    .tcm_req_o(tcm_req), .tcm_addr_o(tcm_addr), .tcm_rdata_i(tcm_rdata),
    .sel_uli_i(sel_uli), .priv_m_i(priv_m),
    .if_req_i(if_req), .if_addr_i(if_addr), .if_fault_o(if_fault),
    .d_req_i(d_req), .d_we_i(d_we), .d_addr_i(d_addr), .d_fault_o(d_fault)
  );

  // PMP table TCM model: 1-cycle read latency
  logic [31:0] tmem [64];
  always_ff @(posedge clk) if (tcm_req) tcm_rdata <= tmem[tcm_addr[7:2]];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference sets: [0] kernel, [1] user-level
  logic [7:0]  rcfg [2][NPMP];
  logic [31:0] raddr[2][NPMP];

  function automatic bit ref_denied(input int s, input bit user, input logic [31:0] a,
                                    input bit r, input bit w, input bit x);
    longint unsigned lo, hi, aa, sz;
    int t;
    aa = longint'(a);
    for (int i = 0; i < NPMP; i++) begin
      logic [1:0] mode;
      mode = rcfg[s][i][4:3];
      lo = 0; hi = 0;
      if (mode == 2'd1) begin
        lo = (i == 0) ? 0 : longint'(raddr[s][i-1]) * 4;
        hi = longint'(raddr[s][i]) * 4;
      end else if (mode == 2'd2) begin
        lo = longint'(raddr[s][i]) * 4; hi = lo + 4;
      end else if (mode == 2'd3) begin
        t = 0;
        while (t < 32 && raddr[s][i][t]) t++;
        sz = 64'd8 << t;
        lo = (longint'(raddr[s][i]) * 4) & ~(sz - 1);
        hi = lo + sz;
      end
      if (mode != 2'd0 && aa >= lo && aa < hi) begin
        if (!user && !rcfg[s][i][7]) return 0;
        return (r && !rcfg[s][i][0]) || (w && !rcfg[s][i][1]) || (x && !rcfg[s][i][2]);
      end
    end
    return user;
  endfunction

  task automatic csr_write(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk);
    csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk);
    csr_we = 0;
  endtask

  task automatic set_kernel(input logic [7:0] c [NPMP], input logic [31:0] ad [NPMP]);
    logic [31:0] w;
    for (int i = 0; i < NPMP; i++) begin
      csr_write(CSR_PMPADDR0 + 12'(i), ad[i]);
      raddr[0][i] = ad[i];
    end
    w = {c[3], c[2], c[1], c[0]};
    csr_write(CSR_PMPCFG0, w);
    for (int i = 0; i < NPMP; i++) rcfg[0][i] = c[i] & 8'h9F;
  endtask

  // load a user-level entry at byte address ptr and time it
  task automatic load_user(input logic [31:0] ptr, input logic [7:0] c [NPMP],
                           input logic [31:0] ad [NPMP]);
    int cyc;
    bit seq_ok;
    tmem[ptr[7:2]] = {c[3], c[2], c[1], c[0]};
    for (int i = 0; i < NPMP; i++) tmem[ptr[7:2] + 1 + i] = ad[i];
    @(negedge clk);
    load = 1; load_ptr = ptr;
    #1;
    check(tcm_req && tcm_addr == ptr, "first table address in the load cycle");
    @(negedge clk);
    load = 0; #1;
    cyc = 1; seq_ok = 1;
    while (!load_done && cyc < 20) begin
      if (cyc < NWORDS && !(tcm_req && tcm_addr == ptr + 32'(4 * cyc))) seq_ok = 0;
      @(negedge clk);
      cyc++;
    end
    check(seq_ok, "table addresses issued one word per cycle");
    check(cyc == NWORDS, $sformatf("load_done after %0d cycles, expected %0d", cyc, NWORDS));
    for (int i = 0; i < NPMP; i++) begin rcfg[1][i] = c[i] & 8'h9F; raddr[1][i] = ad[i]; end
    @(negedge clk);
  endtask

  task automatic probe(input int s, input bit pm, input logic [31:0] a, input string tag);
    bit user;
    sel_uli = (s == 1); priv_m = pm;
    user = (s == 1) || !pm;
    if_req = 1; d_req = 1; if_addr = a; d_addr = a;
    d_we = 0; #1;
    check(if_fault == ref_denied(s, user, a, 0, 0, 1), $sformatf("%s fetch %h", tag, a));
    check(d_fault  == ref_denied(s, user, a, 1, 0, 0), $sformatf("%s read %h", tag, a));
    d_we = 1; #1;
    check(d_fault  == ref_denied(s, user, a, 0, 1, 0), $sformatf("%s write %h", tag, a));
    if_req = 0; d_req = 0; #1;
    check(!if_fault && !d_fault, "no fault without a request");
  endtask

  function automatic logic [31:0] napot(input logic [31:0] base, input int size);
    return (base >> 2) | 32'((size / 8) - 1);
  endfunction

  logic [7:0]  kc [NPMP], uc [NPMP];
  logic [31:0] ka [NPMP], ua [NPMP];

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    csr_we = 0; csr_addr = 0; csr_wdata = 0; load = 0; load_ptr = 0;
    sel_uli = 0; priv_m = 1; if_req = 0; d_req = 0; d_we = 0; if_addr = 0; d_addr = 0;
    for (int i = 0; i < 64; i++) tmem[i] = 0;
    for (int s = 0; s < 2; s++) for (int i = 0; i < NPMP; i++) begin rcfg[s][i] = 0; raddr[s][i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // kernel set: RW NAPOT 4 KiB at 0x2000_0000, X TOR [0x0, 0x1000_0000),
    // R NA4 at 0x3000_0010, locked no-access NAPOT 256 B at 0x2000_0100 (shadowed by 0)
    kc[0] = 8'h1B; ka[0] = napot(32'h2000_0000, 4096);
    kc[1] = 8'h0C; ka[1] = 32'h1000_0000 >> 2;
    kc[2] = 8'h11; ka[2] = 32'h3000_0010 >> 2;
    kc[3] = 8'h98; ka[3] = napot(32'h5000_0000, 256);
    set_kernel(kc, ka);
    csr_addr = CSR_PMPCFG0; #1;
    check(csr_hit && csr_rdata == 32'h9811_0C1B, "pmpcfg0 read-back");
    foreach (ka[i]) begin
      csr_addr = CSR_PMPADDR0 + 12'(i); #1;
      check(csr_hit && csr_rdata == ka[i], "pmpaddr read-back");
    end
    // the locked entry ignores further writes
    csr_write(CSR_PMPADDR0 + 12'd3, 32'h0);
    csr_addr = CSR_PMPADDR0 + 12'd3; #1;
    check(csr_rdata == ka[3], "locked pmpaddr3 keeps its value");

    foreach (ka[i]) begin
      probe(0, 0, 32'h2000_0000, "K/U"); probe(0, 0, 32'h2000_0FFC, "K/U");
      probe(0, 0, 32'h2000_1000, "K/U"); probe(0, 0, 32'h0000_0400, "K/U");
      probe(0, 0, 32'h3000_0010, "K/U"); probe(0, 0, 32'h3000_0014, "K/U");
      probe(0, 1, 32'h5000_0080, "K/M locked"); probe(0, 1, 32'h7000_0000, "K/M");
    end

    // user-level set from the table
    uc[0] = 8'h0B; ua[0] = napot(32'h6000_0000, 1024);     // RW, NAPOT
    uc[1] = 8'h0D; ua[1] = 32'h0000_8000 >> 2;            // RX TOR from 0
    uc[2] = 8'h00; ua[2] = 32'h0;
    uc[3] = 8'h13; ua[3] = 32'h4000_0004 >> 2;            // RW NA4
    load_user(32'h40, uc, ua);
    for (int k = 0; k < 40; k++) begin
      logic [31:0] a;
      case (k % 5)
        0: a = 32'h6000_0000 + 32'($urandom_range(0, 2047));
        1: a = 32'($urandom_range(0, 32'h9000));
        2: a = 32'h4000_0000 + 32'($urandom_range(0, 15));
        3: a = 32'h2000_0000 + 32'($urandom_range(0, 8191));
        default: a = $urandom;
      endcase
      a[1:0] = 2'b00;
      probe(1, 1'($urandom_range(0, 1)), a, "ULI");
      probe(0, 0, a, "K/U after load");   // kernel set untouched
    end

    // random user-level sets
    for (int r = 0; r < 30; r++) begin
      for (int i = 0; i < NPMP; i++) begin
        uc[i] = 8'($urandom) & 8'h1F;
        ua[i] = $urandom_range(0, 32'h00FF_FFFF);
      end
      load_user(32'($urandom_range(0, 40)) << 2, uc, ua);
      for (int k = 0; k < 20; k++) begin
        logic [31:0] a;
        int e;
        e = $urandom_range(0, NPMP - 1);
        a = (ua[e] << 2) + 32'($urandom_range(0, 64)) - 32'd32;
        a[1:0] = 2'b00;
        probe(1, 0, a, "ULI random");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
