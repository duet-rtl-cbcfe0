// duet_adapter: the Duet Adapter of a Dolly-P2M2 system, the hardware that joins one
// embedded FPGA to a cache-coherent manycore NoC.
//
// It holds one Control Hub (the FPGA Manager and the Soft Register Interface, reached by
// MMIO) and NUM_MEM_HUBS Memory Hubs (each a Proxy Cache with its own NoC port). In the
// paper's prototype the Control Hub and the first Memory Hub share a "C-Tile" and every
// further Memory Hub sits in an "M-Tile"; the tiles' L2/L3/router sockets are outside this
// RTL, so each Memory Hub's NoC-side coherence port and the MMIO port are brought out.
// Everything runs on the processor clock except the eFPGA-side ports, which are timed by
// fpga_clk, the clock this adapter generates for the eFPGA.
//
// Adapter-level behaviour:
//   * MMIO window decode (this design's choice): offset[15:13] = 0 selects the Control Hub,
//     1 + i selects Memory Hub i's feature switches. One MMIO is in flight at a time, so
//     accesses are answered in order.
//   * An exception in any Memory Hub deactivates all Memory Hubs of the adapter (paper).
//   * Interrupts: one TLB page-fault line per Memory Hub.
// The default NUM_MEM_HUBS = 2 is the paper's Dolly-P2M2 example instance.
// rst_n is an asynchronous reset throughout; lint may also see it as a synchronous
// input, but that use is only the disable iff of the handshake assertions (here or in
// the blocks below), which are not part of the circuit.
module duet_adapter
  import duet_pkg::*;
#(
  parameter int unsigned NUM_MEM_HUBS = 2,      // paper: Dolly-P2M2
  parameter int unsigned CACHE_BYTES  = 8192,   // paper: 8KB L2 per tile
  parameter int unsigned TLB_ENTRIES  = 8,      // assumed
  parameter int unsigned CDC_DEPTH    = 4,      // assumed
  parameter int unsigned NUM_SREGS    = 16,     // assumed
  parameter int unsigned CFG_ADDR_W   = 16      // assumed
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // processor MMIO
  input  logic                  mmio_valid,
  output logic                  mmio_ready,
  input  mmio_req_t             mmio_req,
  output logic                  mmio_resp_valid,
  output logic [WORD_W-1:0]     mmio_rdata,
  // interrupts / status
  output logic [NUM_MEM_HUBS-1:0] fault_irq,
  output logic                  ctrl_active,
  // NoC ports, one per Memory Hub
  output logic                  noc_req_valid     [NUM_MEM_HUBS],
  input  logic                  noc_req_ready     [NUM_MEM_HUBS],
  output noc_req_t              noc_req           [NUM_MEM_HUBS],
  input  logic                  noc_resp_valid    [NUM_MEM_HUBS],
  input  noc_resp_t             noc_resp          [NUM_MEM_HUBS],
  input  logic                  noc_fwd_valid     [NUM_MEM_HUBS],
  output logic                  noc_fwd_ready     [NUM_MEM_HUBS],
  input  noc_fwd_t              noc_fwd           [NUM_MEM_HUBS],
  output logic                  noc_fwd_ack_valid [NUM_MEM_HUBS],
  input  logic                  noc_fwd_ack_ready [NUM_MEM_HUBS],
  output noc_fwd_ack_t          noc_fwd_ack       [NUM_MEM_HUBS],
  // eFPGA side
  output logic                  fpga_clk,
  output logic                  fpga_rst,
  output logic                  cfg_we,
  output logic [CFG_ADDR_W-1:0] cfg_addr,
  output logic [63:0]           cfg_wdata,
  input  logic                  cfg_ready,
  output logic                  sr_down_valid,
  input  logic                  sr_down_ready,
  output sr_down_t              sr_down,
  input  logic                  sr_up_valid,
  output logic                  sr_up_ready,
  input  sr_up_t                sr_up,
  input  logic                  mreq_valid  [NUM_MEM_HUBS],
  output logic                  mreq_ready  [NUM_MEM_HUBS],
  input  mreq_t                 mreq        [NUM_MEM_HUBS],
  output logic                  mresp_valid [NUM_MEM_HUBS],
  input  logic                  mresp_ready [NUM_MEM_HUBS],
  output mresp_t                mresp       [NUM_MEM_HUBS]
);
  logic [2:0] sel;
  logic       busy;
  logic       ch_ready, ch_resp_valid;
  logic [WORD_W-1:0] ch_rdata;
  err_code_e  ch_err;
  logic       mh_ready [NUM_MEM_HUBS];
  logic       mh_resp_valid [NUM_MEM_HUBS];
  logic [WORD_W-1:0] mh_rdata [NUM_MEM_HUBS];
  logic [NUM_MEM_HUBS-1:0] mh_err;
  err_code_e  mh_err_code [NUM_MEM_HUBS];

  assign sel = mmio_req.addr[15:13];

  always_comb begin
    mmio_ready = 1'b1;   // unmapped windows are answered with zero
    if (sel == 3'd0) mmio_ready = ch_ready;
    for (int i = 0; i < int'(NUM_MEM_HUBS); i++)
      if (sel == 3'(i + 1)) mmio_ready = mh_ready[i];
    mmio_ready = mmio_ready && !busy;
  end

  // unmapped-window answer
  logic unmapped_resp;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      unmapped_resp <= 1'b0;
    end else begin
      unmapped_resp <= mmio_valid && mmio_ready && sel > 3'(NUM_MEM_HUBS);
      if (mmio_valid && mmio_ready) busy <= 1'b1;
      else if (mmio_resp_valid)     busy <= 1'b0;
    end
  end

  always_comb begin
    mmio_resp_valid = ch_resp_valid || unmapped_resp;
    mmio_rdata      = ch_resp_valid ? ch_rdata : '0;
    for (int i = 0; i < int'(NUM_MEM_HUBS); i++)
      if (mh_resp_valid[i]) begin
        mmio_resp_valid = 1'b1;
        mmio_rdata      = mh_rdata[i];
      end
  end

  control_hub #(.NUM_SREGS(NUM_SREGS), .CDC_DEPTH(CDC_DEPTH), .CFG_ADDR_W(CFG_ADDR_W)) u_ctrl (
    .clk, .rst_n,
    .mmio_valid      (mmio_valid && !busy && sel == 3'd0),
    .mmio_ready      (ch_ready),
    .mmio_req,
    .mmio_resp_valid (ch_resp_valid),
    .mmio_rdata      (ch_rdata),
    .active          (ctrl_active),
    .err_code        (ch_err),
    .fpga_clk, .fpga_rst,
    .sr_down_valid, .sr_down_ready, .sr_down,
    .sr_up_valid, .sr_up_ready, .sr_up,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_ready
  );

  for (genvar g = 0; g < int'(NUM_MEM_HUBS); g++) begin : g_mh
    memory_hub #(.CACHE_BYTES(CACHE_BYTES), .TLB_ENTRIES(TLB_ENTRIES), .CDC_DEPTH(CDC_DEPTH)) u_mh (
      .clk, .rst_n, .fpga_clk,
      .csr_valid      (mmio_valid && !busy && sel == 3'(g + 1)),
      .csr_ready      (mh_ready[g]),
      .csr_req        (mmio_req),
      .csr_resp_valid (mh_resp_valid[g]),
      .csr_rdata      (mh_rdata[g]),
      .deact_in       ((mh_err & ~(NUM_MEM_HUBS'(1) << g)) != '0),
      .err_out        (mh_err[g]),
      .err_code       (mh_err_code[g]),
      .fault_irq      (fault_irq[g]),
      .noc_req_valid     (noc_req_valid[g]),
      .noc_req_ready     (noc_req_ready[g]),
      .noc_req           (noc_req[g]),
      .noc_resp_valid    (noc_resp_valid[g]),
      .noc_resp          (noc_resp[g]),
      .noc_fwd_valid     (noc_fwd_valid[g]),
      .noc_fwd_ready     (noc_fwd_ready[g]),
      .noc_fwd           (noc_fwd[g]),
      .noc_fwd_ack_valid (noc_fwd_ack_valid[g]),
      .noc_fwd_ack_ready (noc_fwd_ack_ready[g]),
      .noc_fwd_ack       (noc_fwd_ack[g]),
      .mreq_valid  (mreq_valid[g]),
      .mreq_ready  (mreq_ready[g]),
      .mreq        (mreq[g]),
      .mresp_valid (mresp_valid[g]),
      .mresp_ready (mresp_ready[g]),
      .mresp       (mresp[g])
    );
  end

  initial begin
    assert (NUM_MEM_HUBS >= 1 && NUM_MEM_HUBS <= 7) else $error("duet_adapter: 1..7 Memory Hubs fit the MMIO window");
  end
endmodule
