// uli_iid_cam: Interrupt Identification Data Unit (IIDU) with its CAM.
//
// Each of the NENT entries holds three CSRs, as the paper names them:
//   iidnumX  interrupt number matched in parallel against a request
//            (this design adds bit 31 as the entry's valid flag, bits [7:0]
//            hold the number),
//   iidpmpX  address of the handler's entry in the PMP table,
//   iidtimX  address of the handler's entry in the budget table.
// A lookup compares the requested interrupt number with every valid entry at
// once; the lowest-numbered matching entry wins ("the first matching entry",
// as in the paper) and its two pointers are output. The lookup is purely
// combinational so it completes inside the interrupt controller's acknowledge
// cycle, which is how the V5 variant hides the IID lookup (zero extra cycles).
// uli_mask_o tells, for every interrupt line, whether some valid entry claims
// it; the controller uses it to split user-level from kernel-level interrupts.
//
// CSR access: a write in a cycle with csr_we_i updates the entry on the next
// clock edge; csr_rdata_o/csr_hit_o are combinational. Pointers are word
// aligned: bits [1:0] of iidpmpX/iidtimX read as zero. Reset clears all
// valid flags; the other fields reset to zero. The 16-entry size is the
// paper's; the valid bit, CSR numbers and reset behaviour are this design's.
module uli_iid_cam
  import uli_pkg::*;
#(
  parameter int unsigned NENT = 16,
  parameter int unsigned NIRQ = 32,
  localparam int unsigned IRQW = (NIRQ > 1) ? $clog2(NIRQ) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // CSR bus
  input  logic            csr_we_i,
  input  logic [11:0]     csr_addr_i,
  input  logic [XLEN-1:0] csr_wdata_i,
  output logic [XLEN-1:0] csr_rdata_o,
  output logic            csr_hit_o,
  // lookup
  input  logic [IRQW-1:0] lookup_irq_i,
  output logic            lookup_hit_o,
  output logic [XLEN-1:0] lookup_pmp_ptr_o,
  output logic [XLEN-1:0] lookup_tim_ptr_o,
  // which interrupt lines are user-level
  output logic [NIRQ-1:0] uli_mask_o
);

  logic [NENT-1:0]       valid_q;
  logic [NENT-1:0][7:0]  num_q;
  logic [NENT-1:0][XLEN-1:0] pmp_q, tim_q;

  // ---------------------------------------------------------------- CSRs
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
      num_q   <= '0;
      pmp_q   <= '0;
      tim_q   <= '0;
    end else if (csr_we_i) begin
      for (int unsigned e = 0; e < NENT; e++) begin
        if (csr_addr_i == CSR_IIDNUM0 + 12'(e)) begin
          valid_q[e] <= csr_wdata_i[31];
          num_q[e]   <= csr_wdata_i[7:0];
        end
        if (csr_addr_i == CSR_IIDPMP0 + 12'(e)) pmp_q[e] <= {csr_wdata_i[XLEN-1:2], 2'b00};
        if (csr_addr_i == CSR_IIDTIM0 + 12'(e)) tim_q[e] <= {csr_wdata_i[XLEN-1:2], 2'b00};
      end
    end
  end

  always_comb begin
    csr_rdata_o = '0;
    csr_hit_o   = 1'b0;
    for (int unsigned e = 0; e < NENT; e++) begin
      if (csr_addr_i == CSR_IIDNUM0 + 12'(e)) begin
        csr_hit_o   = 1'b1;
        csr_rdata_o = {valid_q[e], 23'd0, num_q[e]};
      end
      if (csr_addr_i == CSR_IIDPMP0 + 12'(e)) begin
        csr_hit_o   = 1'b1;
        csr_rdata_o = pmp_q[e];
      end
      if (csr_addr_i == CSR_IIDTIM0 + 12'(e)) begin
        csr_hit_o   = 1'b1;
        csr_rdata_o = tim_q[e];
      end
    end
  end

  // ---------------------------------------------------------------- lookup
  logic [NENT-1:0] match;
  always_comb begin
    for (int unsigned e = 0; e < NENT; e++)
      match[e] = valid_q[e] && (num_q[e] == 8'(lookup_irq_i));
  end

  // first (lowest-index) matching entry
  always_comb begin
    lookup_hit_o     = 1'b0;
    lookup_pmp_ptr_o = '0;
    lookup_tim_ptr_o = '0;
    for (int e = int'(NENT) - 1; e >= 0; e--) begin
      if (match[e]) begin
        lookup_hit_o     = 1'b1;
        lookup_pmp_ptr_o = pmp_q[e];
        lookup_tim_ptr_o = tim_q[e];
      end
    end
  end

  always_comb begin
    uli_mask_o = '0;
    for (int unsigned i = 0; i < NIRQ; i++)
      for (int unsigned e = 0; e < NENT; e++)
        if (valid_q[e] && num_q[e] == 8'(i)) uli_mask_o[i] = 1'b1;
  end

endmodule
