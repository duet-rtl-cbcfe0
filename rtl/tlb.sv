// tlb: the Memory Hub's translation look-aside buffer for accelerator memory accesses.
//
// Following the paper: it can be turned off (en = 0) when the accelerator may use
// physical addresses; otherwise every request address is translated. A miss is a page
// fault: the TLB raises an interrupt to a processor (fault_irq) and reports the faulting
// address; kernel software then writes the missing entry over MMIO (fill_*), which
// clears the interrupt, or kills the accelerator. The lookup is combinational, in the
// same cycle the Proxy Cache sees the request, standing in for the paper's "translated
// by the TLB while being speculatively processed by the Proxy Cache".
// This design's own choices: fully associative, ENTRIES entries, 4 KB pages, round-robin
// replacement (a fill whose VPN is already present overwrites that entry), whole-TLB flush.
// Timing: lookup is combinational; fill, flush and fault capture take effect at the edge.
module tlb
  import duet_pkg::*;
#(
  parameter int unsigned ENTRIES = 8   // assumed: the paper gives no TLB size
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  // lookup
  input  logic               lookup_valid,
  input  logic [VADDR_W-1:0] vaddr,
  output logic               hit,        // always 1 when en = 0
  output logic [PADDR_W-1:0] paddr,
  // software maintenance
  input  logic               fill_en,
  input  logic [VPN_W-1:0]   fill_vpn,
  input  logic [PPN_W-1:0]   fill_ppn,
  input  logic               flush,
  // page fault report
  output logic               fault_irq,
  output logic [VADDR_W-1:0] fault_vaddr
);
  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic             valid [ENTRIES];
  logic [VPN_W-1:0] vpn   [ENTRIES];
  logic [PPN_W-1:0] ppn   [ENTRIES];
  logic [IW-1:0]    victim;

  logic [VPN_W-1:0] req_vpn;
  logic             match;
  logic [PPN_W-1:0] match_ppn;
  logic             fill_match;
  logic [IW-1:0]    fill_idx;

  assign req_vpn = vaddr[VADDR_W-1:PAGE_OFF_W];

  always_comb begin
    match = 1'b0; match_ppn = '0;
    fill_match = 1'b0; fill_idx = victim;
    for (int i = 0; i < int'(ENTRIES); i++) begin
      if (valid[i] && vpn[i] == req_vpn) begin
        match = 1'b1; match_ppn = ppn[i];
      end
      if (valid[i] && vpn[i] == fill_vpn) begin
        fill_match = 1'b1; fill_idx = IW'(i);
      end
    end
  end

  assign hit   = !en || match;
  assign paddr = en ? {match_ppn, vaddr[PAGE_OFF_W-1:0]} : PADDR_W'(vaddr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(ENTRIES); i++) begin
        valid[i] <= 1'b0; vpn[i] <= '0; ppn[i] <= '0;
      end
      victim      <= '0;
      fault_irq   <= 1'b0;
      fault_vaddr <= '0;
    end else begin
      if (flush) begin
        for (int i = 0; i < int'(ENTRIES); i++) valid[i] <= 1'b0;
        fault_irq <= 1'b0;
      end else if (fill_en) begin
        valid[fill_idx] <= 1'b1;
        vpn[fill_idx]   <= fill_vpn;
        ppn[fill_idx]   <= fill_ppn;
        if (!fill_match) victim <= (victim == IW'(ENTRIES - 1)) ? '0 : victim + 1'b1;
        fault_irq <= 1'b0;
      end else if (lookup_valid && en && !match && !fault_irq) begin
        fault_irq   <= 1'b1;
        fault_vaddr <= vaddr;
      end
    end
  end
endmodule
