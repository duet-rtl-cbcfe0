// fpga_manager: the Control Hub's half that programs and monitors the eFPGA.
//
// It holds the Control Hub's feature switches (a small register file reached by
// processor MMIOs), the programming engine, the programmable clock generator and the
// Control Hub's exception handler. The paper names these four parts and says the
// switches set the timeout limit, reset the soft accelerator and clear logged error
// codes; this design also keeps here the per-register shadow type of the 16 soft
// registers, since those too are set by software when an accelerator is loaded.
//
// CSR map (64-bit registers, offset = 8 * index; the map is this design's choice):
//   0 CTRL      [0] hub active, [1] soft-accelerator reset (reset value: inactive, in reset)
//   1 TIMEOUT   timeout limit in processor cycles, 0 = off (reset 1024)
//   2 ERROR     read: error code; write: clear the logged error
//   3 CLKDIV    eFPGA clock = system clock / CLKDIV (reset 2)
//   4 PSTART    write: start a bitstream load
//   5 PDATA     write: one 64-bit bitstream word (stalls while the config memory is busy)
//   6 PCHECK    write: expected CRC-32, compared at once; read: {.., bad, ok}
//   7 PCRC      read: {word count, CRC-32 so far}
//   8..23 STYPE soft register i's shadow type (sreg_type_e)
// Timing: csr_ready is high except for a PDATA write the config memory cannot take; the
// response (csr_resp_valid, csr_rdata) follows one cycle after the accepted request.
// active is low while CTRL[0] is clear or an error is logged.
module fpga_manager
  import duet_pkg::*;
#(
  parameter int unsigned CFG_ADDR_W = 16,
  parameter int unsigned NUM_SREGS  = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // processor CSR access
  input  logic                  csr_valid,
  output logic                  csr_ready,
  input  mmio_req_t             csr_req,
  output logic                  csr_resp_valid,
  output logic [WORD_W-1:0]     csr_rdata,
  // monitoring of the Soft Register Interface's eFPGA traffic
  input  logic                  chk_valid,
  input  logic                  chk_parity_ok,
  input  logic                  wait_active,
  output logic                  active,
  output err_code_e             err_code,
  output logic [31:0]           timeout_limit,
  output sreg_type_e            sreg_type [NUM_SREGS],
  // eFPGA side
  output logic                  fpga_clk,
  output logic                  fpga_rst,
  output logic                  cfg_we,
  output logic [CFG_ADDR_W-1:0] cfg_addr,
  output logic [63:0]           cfg_wdata,
  input  logic                  cfg_ready
);
  localparam int unsigned R_CTRL = 0, R_TIMEOUT = 1, R_ERROR = 2, R_CLKDIV = 3,
                          R_PSTART = 4, R_PDATA = 5, R_PCHECK = 6, R_PCRC = 7, R_STYPE = 8;

  logic        sw_active;
  logic [7:0]  clkdiv;
  logic        err;
  logic [4:0]  ridx;
  logic [$clog2(NUM_SREGS)-1:0] sidx;
  logic        wr, rd;
  logic        pe_ready, pe_ok, pe_bad;
  logic [31:0] pe_crc;
  logic [CFG_ADDR_W:0] pe_count;

  assign ridx      = csr_req.addr[7:3];
  assign sidx      = $bits(sidx)'(ridx - 5'(R_STYPE));
  assign csr_ready = !(csr_valid && csr_req.we && ridx == 5'(R_PDATA) && !pe_ready);
  assign wr        = csr_valid && csr_ready && csr_req.we;
  assign rd        = csr_valid && csr_ready && !csr_req.we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sw_active      <= 1'b0;
      fpga_rst       <= 1'b1;
      timeout_limit  <= 32'd1024;
      clkdiv         <= 8'd2;
      csr_resp_valid <= 1'b0;
      csr_rdata      <= '0;
      for (int i = 0; i < int'(NUM_SREGS); i++) sreg_type[i] <= SREG_NORMAL;
    end else begin
      csr_resp_valid <= wr || rd;
      if (wr) begin
        case (ridx)
          5'(R_CTRL):    begin sw_active <= csr_req.wdata[0]; fpga_rst <= csr_req.wdata[1]; end
          5'(R_TIMEOUT): timeout_limit <= csr_req.wdata[31:0];
          5'(R_CLKDIV):  clkdiv <= csr_req.wdata[7:0];
          default: begin
            if (ridx >= 5'(R_STYPE) && ridx < 5'(R_STYPE + NUM_SREGS))
              sreg_type[sidx] <= sreg_type_e'(csr_req.wdata[2:0]);
          end
        endcase
      end
      if (rd) begin
        case (ridx)
          5'(R_CTRL):    csr_rdata <= {62'd0, fpga_rst, sw_active};
          5'(R_TIMEOUT): csr_rdata <= {32'd0, timeout_limit};
          5'(R_ERROR):   csr_rdata <= {62'd0, err_code};
          5'(R_CLKDIV):  csr_rdata <= {56'd0, clkdiv};
          5'(R_PCHECK):  csr_rdata <= {62'd0, pe_bad, pe_ok};
          5'(R_PCRC):    csr_rdata <= {(32 - CFG_ADDR_W - 1)'(0), pe_count, pe_crc};
          default: begin
            if (ridx >= 5'(R_STYPE) && ridx < 5'(R_STYPE + NUM_SREGS))
              csr_rdata <= {61'd0, sreg_type[sidx]};
            else
              csr_rdata <= '0;
          end
        endcase
      end
    end
  end

  exception_handler #(.TIMEOUT_W(32)) u_exc (
    .clk, .rst_n,
    .chk_valid, .chk_parity_ok, .wait_active,
    .timeout_limit,
    .clear    (wr && ridx == 5'(R_ERROR)),
    .err_code,
    .err
  );

  assign active = sw_active && !err;

  programming_engine #(.CFG_ADDR_W(CFG_ADDR_W)) u_prog (
    .clk, .rst_n,
    .start        (wr && ridx == 5'(R_PSTART)),
    .word_valid   (csr_valid && csr_req.we && ridx == 5'(R_PDATA)),
    .word_ready   (pe_ready),
    .word         (csr_req.wdata),
    .check        (wr && ridx == 5'(R_PCHECK)),
    .expected_crc (csr_req.wdata[31:0]),
    .crc          (pe_crc),
    .word_count   (pe_count),
    .status_ok    (pe_ok),
    .status_bad   (pe_bad),
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_ready
  );

  clock_divider #(.RATIO_W(8)) u_clkgen (
    .clk, .rst_n,
    .ratio (clkdiv),
    .clk_o (fpga_clk)
  );
endmodule
