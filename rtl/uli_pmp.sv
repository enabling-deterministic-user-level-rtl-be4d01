// uli_pmp: physical memory protection with a shadowed kernel set and a
// table-loaded user-level set.
//
// Two complete register sets exist. The kernel set is the ordinary
// RISC-V pmpcfg/pmpaddr CSR set that the kernel programs for the running
// process. The user-level set is never written by CSR instructions: when a
// user-level interrupt is taken, its bus interface (BIU) reads the handler's
// entry from the PMP table TCM and writes it into this set. sel_uli_i picks
// the set that checks accesses, so the kernel's settings survive a handler
// untouched (the paper's "shadow PMP registers", adopted in all its variants).
//
// PMP table entry layout (this design's choice; the paper does not give one):
//   word 0 .. NCFGW-1 : pmpcfg words, four 8-bit cfg fields each (RISC-V layout)
//   word NCFGW ..     : pmpaddr0 .. pmpaddr(NPMP-1)
// With NPMP = 4 an entry is 5 words. Loading is pipelined one word per cycle
// over a 1-cycle-latency TCM port: load_i in cycle t drives the first address
// in that same cycle, data word k arrives in cycle t+1+k and is written at the
// end of that cycle, and load_done_o is high in cycle t+NWORDS, the cycle the
// last word arrives. With t = 3 this reproduces the V5 timing diagram: table
// address in cycle 3, reads in cycles 4-8, the new set active from cycle 9.
//
// Checking follows the RISC-V PMP rules: OFF/TOR/NA4/NAPOT matching, the
// lowest-numbered matching entry decides, R/W/X permissions, locked entries
// also bind machine mode, and a user access matching nothing is denied. A
// handler always runs with user privilege, so with sel_uli_i set the checks
// ignore priv_m_i. Faults are combinational (*_fault_o) from the addresses.
// PMP granularity is 4 bytes (pmpaddr holds address bits [33:2]), so the
// checks ignore address bits [1:0]; lint reports them as unused.
module uli_pmp
  import uli_pkg::*;
#(
  parameter int unsigned NPMP = 4,
  localparam int unsigned NCFGW  = (NPMP + 3) / 4,
  localparam int unsigned NWORDS = NCFGW + NPMP
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // CSR bus (kernel set)
  input  logic            csr_we_i,
  input  logic [11:0]     csr_addr_i,
  input  logic [XLEN-1:0] csr_wdata_i,
  output logic [XLEN-1:0] csr_rdata_o,
  output logic            csr_hit_o,
  // table load
  input  logic            load_i,
  input  logic [XLEN-1:0] load_ptr_i,
  output logic            load_done_o,
  output logic            tcm_req_o,
  output logic [XLEN-1:0] tcm_addr_o,
  input  logic [XLEN-1:0] tcm_rdata_i,
  // set select and checks
  input  logic            sel_uli_i,
  input  logic            priv_m_i,
  input  logic            if_req_i,
  input  logic [XLEN-1:0] if_addr_i,
  output logic            if_fault_o,
  input  logic            d_req_i,
  input  logic            d_we_i,
  input  logic [XLEN-1:0] d_addr_i,
  output logic            d_fault_o
);

  localparam int unsigned CW = (NWORDS > 1) ? $clog2(NWORDS + 1) : 1;

  pmp_cfg_t  [NPMP-1:0]           kcfg_q, ucfg_q;
  logic      [NPMP-1:0][XLEN-1:0] kaddr_q, uaddr_q;

  // ---------------------------------------------------------------- kernel CSRs
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      kcfg_q  <= '0;
      kaddr_q <= '0;
    end else if (csr_we_i) begin
      for (int unsigned i = 0; i < NPMP; i++) begin
        if (csr_addr_i == CSR_PMPCFG0 + 12'(i / 4) && !kcfg_q[i].l)
          kcfg_q[i] <= pmp_cfg_t'(csr_wdata_i[8*(i%4) +: 8] & 8'h9F);
        if (csr_addr_i == CSR_PMPADDR0 + 12'(i) && !kcfg_q[i].l)
          kaddr_q[i] <= csr_wdata_i;
      end
    end
  end

  always_comb begin
    csr_rdata_o = '0;
    csr_hit_o   = 1'b0;
    for (int unsigned w = 0; w < NCFGW; w++) begin
      if (csr_addr_i == CSR_PMPCFG0 + 12'(w)) begin
        csr_hit_o = 1'b1;
        for (int unsigned b = 0; b < 4; b++)
          if (4 * w + b < NPMP) csr_rdata_o[8*b +: 8] = kcfg_q[4*w+b];
      end
    end
    for (int unsigned i = 0; i < NPMP; i++) begin
      if (csr_addr_i == CSR_PMPADDR0 + 12'(i)) begin
        csr_hit_o   = 1'b1;
        csr_rdata_o = kaddr_q[i];
      end
    end
  end

  // ---------------------------------------------------------------- table BIU
  logic          busy_q;       // addresses still to issue
  logic [CW-1:0] acnt_q;       // next word to address
  logic [XLEN-1:0] base_q;
  logic          rvalid_q;     // a read word arrives this cycle
  logic [CW-1:0] rcnt_q;       // which word arrives

  always_comb begin
    tcm_req_o  = 1'b0;
    tcm_addr_o = '0;
    if (load_i) begin
      tcm_req_o  = 1'b1;
      tcm_addr_o = load_ptr_i;
    end else if (busy_q) begin
      tcm_req_o  = 1'b1;
      tcm_addr_o = base_q + XLEN'({acnt_q, 2'b00});
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q   <= 1'b0;
      acnt_q   <= '0;
      base_q   <= '0;
      rvalid_q <= 1'b0;
      rcnt_q   <= '0;
    end else begin
      rvalid_q <= tcm_req_o;
      if (load_i) begin
        base_q <= load_ptr_i;
        acnt_q <= CW'(1);
        busy_q <= (NWORDS > 1);
        rcnt_q <= '0;
      end else begin
        if (busy_q) begin
          acnt_q <= acnt_q + CW'(1);
          if (acnt_q == CW'(NWORDS - 1)) busy_q <= 1'b0;
        end
        if (rvalid_q) rcnt_q <= rcnt_q + CW'(1);
      end
    end
  end

  assign load_done_o = rvalid_q && (rcnt_q == CW'(NWORDS - 1));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ucfg_q  <= '0;
      uaddr_q <= '0;
    end else if (rvalid_q) begin
      for (int unsigned i = 0; i < NPMP; i++) begin
        if (rcnt_q == CW'(i / 4))
          ucfg_q[i] <= pmp_cfg_t'(tcm_rdata_i[8*(i%4) +: 8] & 8'h9F);
        if (rcnt_q == CW'(NCFGW + i))
          uaddr_q[i] <= tcm_rdata_i;
      end
    end
  end

  // ---------------------------------------------------------------- checker
  pmp_cfg_t  [NPMP-1:0]           cfg;
  logic      [NPMP-1:0][XLEN-1:0] paddr;
  assign cfg   = sel_uli_i ? ucfg_q  : kcfg_q;
  assign paddr = sel_uli_i ? uaddr_q : kaddr_q;

  logic user_mode;
  assign user_mode = sel_uli_i || !priv_m_i;

  // Returns 1 when an access of the given kind to addr is denied.
  function automatic logic denied(input logic [XLEN-1:0] addr,
                                  input logic want_r, input logic want_w,
                                  input logic want_x);
    logic [XLEN-1:0] wa;       // word address, addr[33:2] with addr[33:32] = 0
    logic [XLEN-1:0] lo, m;
    logic            hit, done, deny;
    wa   = {2'b00, addr[XLEN-1:2]};
    done = 1'b0;
    deny = user_mode;          // no match: user denied, machine allowed
    for (int unsigned i = 0; i < NPMP; i++) begin
      lo = (i == 0) ? '0 : paddr[(i == 0) ? 0 : i - 1];
      m  = paddr[i] ^ (paddr[i] + XLEN'(1));
      unique case (cfg[i].a)
        PMP_TOR:   hit = (wa >= lo) && (wa < paddr[i]);
        PMP_NA4:   hit = (wa == paddr[i]);
        PMP_NAPOT: hit = ((wa ^ paddr[i]) & ~m) == '0;
        default:   hit = 1'b0;
      endcase
      if (hit && !done) begin
        done = 1'b1;
        if (!user_mode && !cfg[i].l) deny = 1'b0;
        else deny = (want_r && !cfg[i].r) || (want_w && !cfg[i].w) ||
                    (want_x && !cfg[i].x);
      end
    end
    return deny;
  endfunction

  assign if_fault_o = if_req_i && denied(if_addr_i, 1'b0, 1'b0, 1'b1);
  assign d_fault_o  = d_req_i  && denied(d_addr_i, !d_we_i, d_we_i, 1'b0);

endmodule
