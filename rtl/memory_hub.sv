// memory_hub: gives the soft accelerator coherent access to memory through one NoC port.
//
// As the paper lays it out, a Memory Hub is a Proxy Cache plus a set of feature switches,
// an exception handler and a TLB, with asynchronous FIFOs between it and the eFPGA.
// The request path, all in the processor clock domain: a request leaves the eFPGA-to-hub
// FIFO, is parity-checked, is translated by the TLB (when enabled), and is then presented
// to the Proxy Cache until it is served. Answers and forwarded invalidations from the
// Proxy Cache go, in order, into the hub-to-eFPGA FIFO.
//
// Containment (paper): when deactivated, by software or because an exception was logged
// here or in another hub of the same adapter (deact_in), the hub stops accepting requests
// from the eFPGA (they are drained and dropped, this design's choice) while the Proxy
// Cache keeps answering coherence traffic; what it would have sent to the eFPGA is then
// dropped so a stuck eFPGA cannot block the NoC. The exception handler times out when
// the hub has a request or an answer pending while the eFPGA leaves the hub-to-eFPGA
// FIFO full (this design's reading of "timeout checks to monitor eFPGA outputs") and
// flags requests whose parity bit is wrong.
// A TLB miss holds the request and raises fault_irq until software writes the entry.
// CSR map: see mem_hub_switches. Latency: see proxy_cache, plus the two FIFO crossings.
// rst_n is an asynchronous reset throughout; lint may also see it as a synchronous
// input, but that use is only the disable iff of the handshake assertions (here or in
// the blocks below), which are not part of the circuit.
module memory_hub
  import duet_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 8192,
  parameter int unsigned TLB_ENTRIES = 8,
  parameter int unsigned CDC_DEPTH   = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               fpga_clk,
  // MMIO to the feature switches
  input  logic               csr_valid,
  output logic               csr_ready,
  input  mmio_req_t          csr_req,
  output logic               csr_resp_valid,
  output logic [WORD_W-1:0]  csr_rdata,
  // adapter-wide deactivation
  input  logic               deact_in,
  output logic               err_out,
  output err_code_e          err_code,
  output logic               fault_irq,
  // NoC side of the Proxy Cache
  output logic               noc_req_valid,
  input  logic               noc_req_ready,
  output noc_req_t           noc_req,
  input  logic               noc_resp_valid,
  input  noc_resp_t          noc_resp,
  input  logic               noc_fwd_valid,
  output logic               noc_fwd_ready,
  input  noc_fwd_t           noc_fwd,
  output logic               noc_fwd_ack_valid,
  input  logic               noc_fwd_ack_ready,
  output noc_fwd_ack_t       noc_fwd_ack,
  // eFPGA side (fpga_clk)
  input  logic               mreq_valid,
  output logic               mreq_ready,
  input  mreq_t              mreq,
  output logic               mresp_valid,
  input  logic               mresp_ready,
  output mresp_t             mresp
);
  logic sw_active, sw_fwd_inv, sw_tlb_en, sw_write_alloc, err_clear;
  logic [31:0] timeout_limit;
  logic tlb_fill, tlb_flush;
  logic [VPN_W-1:0] tlb_fill_vpn;
  logic [PPN_W-1:0] tlb_fill_ppn;
  logic [VADDR_W-1:0] fault_vaddr;
  logic active;

  mem_hub_switches u_sw (
    .clk, .rst_n,
    .csr_valid, .csr_ready, .csr_req, .csr_resp_valid, .csr_rdata,
    .sw_active, .sw_fwd_inv, .sw_tlb_en, .sw_write_alloc,
    .timeout_limit, .err_clear,
    .tlb_fill, .tlb_fill_vpn, .tlb_fill_ppn, .tlb_flush,
    .err_code, .fault_irq, .fault_vaddr
  );

  // ---------------- eFPGA -> hub ----------------
  logic  rq_valid, rq_ready;
  mreq_t rq;
  async_fifo #(.WIDTH($bits(mreq_t)), .DEPTH(CDC_DEPTH)) u_req_fifo (
    .wclk (fpga_clk), .rclk (clk), .rst_n,
    .wvalid (mreq_valid), .wready (mreq_ready), .wdata (mreq),
    .rvalid (rq_valid), .rready (rq_ready), .rdata (rq)
  );

  logic parity_ok;
  assign parity_ok = (^{rq.typ, rq.addr, rq.data, rq.be}) == rq.parity;

  logic tlb_hit;
  logic [PADDR_W-1:0] paddr;
  tlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk, .rst_n,
    .en (sw_tlb_en),
    .lookup_valid (rq_valid && active && parity_ok),
    .vaddr (rq.addr),
    .hit (tlb_hit),
    .paddr,
    .fill_en (tlb_fill), .fill_vpn (tlb_fill_vpn), .fill_ppn (tlb_fill_ppn),
    .flush (tlb_flush),
    .fault_irq, .fault_vaddr
  );

  // ---------------- Proxy Cache ----------------
  logic   pc_req_valid, pc_req_ready, pc_resp_valid, pc_resp_ready;
  mresp_t pc_resp;
  logic   rs_wready;

  assign pc_req_valid = rq_valid && active && parity_ok && tlb_hit;
  assign rq_ready     = pc_req_ready || (rq_valid && (!active || !parity_ok));
  assign pc_resp_ready = rs_wready || !active;

  proxy_cache #(.SIZE_BYTES(CACHE_BYTES)) u_proxy (
    .clk, .rst_n,
    .fwd_inv (sw_fwd_inv), .write_alloc (sw_write_alloc),
    .req_valid (pc_req_valid), .req_ready (pc_req_ready),
    .req_typ (rq.typ), .req_vaddr (rq.addr), .req_paddr (paddr),
    .req_data (rq.data), .req_be (rq.be),
    .resp_valid (pc_resp_valid), .resp_ready (pc_resp_ready), .resp (pc_resp),
    .noc_req_valid, .noc_req_ready, .noc_req,
    .noc_resp_valid, .noc_resp,
    .noc_fwd_valid, .noc_fwd_ready, .noc_fwd,
    .noc_fwd_ack_valid, .noc_fwd_ack_ready, .noc_fwd_ack
  );

  // ---------------- hub -> eFPGA ----------------
  async_fifo #(.WIDTH($bits(mresp_t)), .DEPTH(CDC_DEPTH)) u_resp_fifo (
    .wclk (clk), .rclk (fpga_clk), .rst_n,
    .wvalid (pc_resp_valid && active), .wready (rs_wready), .wdata (pc_resp),
    .rvalid (mresp_valid), .rready (mresp_ready), .rdata (mresp)
  );

  // ---------------- exception handler ----------------
  logic err;
  exception_handler #(.TIMEOUT_W(32)) u_exc (
    .clk, .rst_n,
    .chk_valid     (rq_valid && rq_ready && active),
    .chk_parity_ok (parity_ok),
    .wait_active   ((pc_resp_valid || rq_valid) && !rs_wready && active),
    .timeout_limit,
    .clear         (err_clear),
    .err_code,
    .err
  );

  assign err_out = err;
  assign active  = sw_active && !err && !deact_in;
endmodule
