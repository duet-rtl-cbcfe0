// control_hub: presents the eFPGA to processors as an MMIO device.
//
// It joins the FPGA Manager (feature switches, programming engine, clock generator,
// exception handler) and the Soft Register Interface (with its Shadow Registers), and
// owns the two asynchronous FIFOs of the soft-register path: NoC->FPGA for writes, reads
// and syncs, FPGA->NoC for acks, read data and pushes. The hub generates the eFPGA clock
// itself (fpga_clk) and the FPGA-side ports below are timed by it.
//
// MMIO window (this design's choice): offset bit 12 clear selects the FPGA Manager's
// CSRs (see fpga_manager), bit 12 set selects soft register number offset[6:3].
// One MMIO is handled at a time and answered in order: mmio_ready is low from the
// accepted request until its response (mmio_resp_valid), so CSR and soft register
// accesses keep their program order.
// rst_n is an asynchronous reset throughout; lint may also see it as a synchronous
// input, but that use is only the disable iff of the handshake assertions (here or in
// the blocks below), which are not part of the circuit.
module control_hub
  import duet_pkg::*;
#(
  parameter int unsigned NUM_SREGS   = 16,
  parameter int unsigned SR_FIFO_DEPTH = 4,   // shadow CPU-bound FIFO depth (assumed)
  parameter int unsigned CDC_DEPTH   = 4,     // async FIFO depth (assumed)
  parameter int unsigned CFG_ADDR_W  = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // processor MMIO
  input  logic                  mmio_valid,
  output logic                  mmio_ready,
  input  mmio_req_t             mmio_req,
  output logic                  mmio_resp_valid,
  output logic [WORD_W-1:0]     mmio_rdata,
  // status
  output logic                  active,
  output err_code_e             err_code,
  // eFPGA side
  output logic                  fpga_clk,
  output logic                  fpga_rst,
  output logic                  sr_down_valid,
  input  logic                  sr_down_ready,
  output sr_down_t              sr_down,
  input  logic                  sr_up_valid,
  output logic                  sr_up_ready,
  input  sr_up_t                sr_up,
  output logic                  cfg_we,
  output logic [CFG_ADDR_W-1:0] cfg_addr,
  output logic [63:0]           cfg_wdata,
  input  logic                  cfg_ready
);
  logic busy;
  logic is_sreg;
  logic csr_ready, csr_resp_valid, sri_req_ready, sri_resp_valid;
  logic [WORD_W-1:0] csr_rdata, sri_rdata;
  logic chk_valid, chk_parity_ok, wait_active;
  logic [31:0] timeout_limit;
  sreg_type_e sreg_type [NUM_SREGS];

  logic     dn_wvalid, dn_wready, up_rvalid, up_rready;
  sr_down_t dn_wdata;
  sr_up_t   up_rdata;

  assign is_sreg    = mmio_req.addr[12];
  assign mmio_ready = !busy && (is_sreg ? sri_req_ready : csr_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  busy <= 1'b0;
    else if (mmio_valid && mmio_ready) busy <= 1'b1;
    else if (mmio_resp_valid)    busy <= 1'b0;
  end

  assign mmio_resp_valid = csr_resp_valid || sri_resp_valid;
  assign mmio_rdata      = csr_resp_valid ? csr_rdata : sri_rdata;

  fpga_manager #(.CFG_ADDR_W(CFG_ADDR_W), .NUM_SREGS(NUM_SREGS)) u_mgr (
    .clk, .rst_n,
    .csr_valid      (mmio_valid && !busy && !is_sreg),
    .csr_ready,
    .csr_req        (mmio_req),
    .csr_resp_valid,
    .csr_rdata,
    .chk_valid, .chk_parity_ok, .wait_active,
    .active, .err_code, .timeout_limit, .sreg_type,
    .fpga_clk, .fpga_rst,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_ready
  );

  soft_reg_intf #(.NUM_SREGS(NUM_SREGS), .FIFO_DEPTH(SR_FIFO_DEPTH)) u_sri (
    .clk, .rst_n, .active, .sreg_type,
    .req_valid  (mmio_valid && !busy && is_sreg),
    .req_ready  (sri_req_ready),
    .req_we     (mmio_req.we),
    .req_idx    (mmio_req.addr[3 +: SREG_IDX_W]),
    .req_wdata  (mmio_req.wdata),
    .resp_valid (sri_resp_valid),
    .resp_rdata (sri_rdata),
    .down_valid (dn_wvalid),
    .down_ready (dn_wready),
    .down       (dn_wdata),
    .up_valid   (up_rvalid),
    .up_ready   (up_rready),
    .up         (up_rdata),
    .chk_valid, .chk_parity_ok, .wait_active
  );

  async_fifo #(.WIDTH($bits(sr_down_t)), .DEPTH(CDC_DEPTH)) u_down_fifo (
    .wclk (clk), .rclk (fpga_clk), .rst_n,
    .wvalid (dn_wvalid), .wready (dn_wready), .wdata (dn_wdata),
    .rvalid (sr_down_valid), .rready (sr_down_ready), .rdata (sr_down)
  );

  async_fifo #(.WIDTH($bits(sr_up_t)), .DEPTH(CDC_DEPTH)) u_up_fifo (
    .wclk (fpga_clk), .rclk (clk), .rst_n,
    .wvalid (sr_up_valid), .wready (sr_up_ready), .wdata (sr_up),
    .rvalid (up_rvalid), .rready (up_rready), .rdata (up_rdata)
  );
endmodule
