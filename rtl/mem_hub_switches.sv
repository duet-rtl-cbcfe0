// mem_hub_switches: the Memory Hub's feature switches and its MMIO register map.
//
// The paper has processors configure each Memory Hub through MMIO switches: deactivate it
// (e.g. during eFPGA reconfiguration), forward invalidations into the eFPGA when a soft
// cache is used, enable the TLB, pick write-allocate or write-no-allocate soft-cache
// support, and set the exception handler (timeout limit, clearing logged errors). It is
// also the path by which the kernel updates the TLB after a page fault.
//
// CSR map (64-bit registers, offset = 8 * index; this design's choice):
//   0 CTRL    [0] active, [1] forward invalidations, [2] TLB enable, [3] write-allocate
//             (reset: all 0, hub inactive)
//   1 TIMEOUT timeout limit in processor cycles, 0 = off (reset 1024)
//   2 ERROR   read: error code; write: clear it
//   3 FAULT   read: {irq at bit 63, faulting virtual address}
//   4 TLBFILL write: {ppn in [54:27], vpn in [26:0]}
//   5 TLBFLUSH write: invalidate all TLB entries
// Timing: always ready; the response follows one cycle after the request.
module mem_hub_switches
  import duet_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               csr_valid,
  output logic               csr_ready,
  input  mmio_req_t          csr_req,
  output logic               csr_resp_valid,
  output logic [WORD_W-1:0]  csr_rdata,
  // switches
  output logic               sw_active,
  output logic               sw_fwd_inv,
  output logic               sw_tlb_en,
  output logic               sw_write_alloc,
  output logic [31:0]        timeout_limit,
  output logic               err_clear,
  // TLB maintenance
  output logic               tlb_fill,
  output logic [VPN_W-1:0]   tlb_fill_vpn,
  output logic [PPN_W-1:0]   tlb_fill_ppn,
  output logic               tlb_flush,
  // status inputs
  input  err_code_e          err_code,
  input  logic               fault_irq,
  input  logic [VADDR_W-1:0] fault_vaddr
);
  localparam logic [2:0] R_CTRL = 3'd0, R_TIMEOUT = 3'd1, R_ERROR = 3'd2, R_FAULT = 3'd3,
                         R_TLBFILL = 3'd4, R_TLBFLUSH = 3'd5;
  logic [2:0] ridx;
  logic       wr, rd;

  assign csr_ready = 1'b1;
  assign ridx      = csr_req.addr[5:3];
  assign wr        = csr_valid && csr_req.we;
  assign rd        = csr_valid && !csr_req.we;

  assign err_clear    = wr && ridx == R_ERROR;
  assign tlb_fill     = wr && ridx == R_TLBFILL;
  assign tlb_fill_vpn = csr_req.wdata[VPN_W-1:0];
  assign tlb_fill_ppn = csr_req.wdata[VPN_W +: PPN_W];
  assign tlb_flush    = wr && ridx == R_TLBFLUSH;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sw_active      <= 1'b0;
      sw_fwd_inv     <= 1'b0;
      sw_tlb_en      <= 1'b0;
      sw_write_alloc <= 1'b0;
      timeout_limit  <= 32'd1024;
      csr_resp_valid <= 1'b0;
      csr_rdata      <= '0;
    end else begin
      csr_resp_valid <= csr_valid;
      if (wr && ridx == R_CTRL)
        {sw_write_alloc, sw_tlb_en, sw_fwd_inv, sw_active} <= csr_req.wdata[3:0];
      if (wr && ridx == R_TIMEOUT)
        timeout_limit <= csr_req.wdata[31:0];
      if (rd) begin
        case (ridx)
          R_CTRL:    csr_rdata <= {60'd0, sw_write_alloc, sw_tlb_en, sw_fwd_inv, sw_active};
          R_TIMEOUT: csr_rdata <= {32'd0, timeout_limit};
          R_ERROR:   csr_rdata <= {62'd0, err_code};
          R_FAULT:   csr_rdata <= {fault_irq, (WORD_W - 1 - VADDR_W)'(0), fault_vaddr};
          default:   csr_rdata <= '0;
        endcase
      end
    end
  end
endmodule
