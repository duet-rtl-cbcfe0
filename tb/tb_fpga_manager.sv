// tb_fpga_manager: drives the FPGA Manager through its CSRs as a processor would:
// switches (active, soft-accelerator reset, timeout), the eFPGA clock ratio (period of
// fpga_clk measured), a bitstream load with CRC check, shadow-type registers, and the
// exception path (a parity error and a timeout deactivate the hub; ERROR clears it).
module tb_fpga_manager;
  import duet_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #0.1 rst_n = 0;   // a real falling edge resets every asynchronously reset flop, clocked or not
  logic csr_valid = 0, csr_ready, csr_resp_valid;
  mmio_req_t csr_req;
  logic [63:0] csr_rdata;
  logic chk_valid = 0, chk_parity_ok = 1, wait_active = 0;
  logic active; err_code_e err_code; logic [31:0] timeout_limit;
  sreg_type_e sreg_type [16];
  logic fpga_clk, fpga_rst, cfg_we; logic [15:0] cfg_addr; logic [63:0] cfg_wdata; logic cfg_ready = 1;
  int checks = 0, failures = 0, cyc = 0, ncfg = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (cfg_we) ncfg++;
  fpga_manager dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic csr(input bit we, input int idx, input logic [63:0] wd, output logic [63:0] rd);
    @(negedge clk);
    csr_valid = 1; csr_req = '{we: we, addr: 16'(idx * 8), wdata: wd};
    @(posedge clk); while (!csr_ready) @(posedge clk);
    @(negedge clk); csr_valid = 0;
    while (!csr_resp_valid) @(posedge clk);
    rd = csr_rdata;
  endtask

  logic [63:0] r;
  initial begin
    csr_req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    csr(0, 0, 0, r); check(r[1:0] == 2'b10, "reset: inactive, accelerator in reset");
    check(!active && fpga_rst, "reset outputs");
    csr(1, 0, 64'h1, r); csr(0, 0, 0, r);
    check(r[1:0] == 2'b01 && active && !fpga_rst, "activate, release reset");
    csr(1, 1, 64'd77, r); check(timeout_limit == 77, "timeout limit switch");
    // clock ratio
    csr(1, 3, 64'd6, r);
    begin
      int t0, t1;
      repeat (2) @(posedge fpga_clk);
      t0 = cyc; @(posedge fpga_clk); t1 = cyc;
      check(t1 - t0 == 6, $sformatf("fpga clock period %0d, expected 6", t1 - t0));
    end
    // bitstream load: 3 words of "12345678" style data, CRC checked
    csr(1, 4, 0, r);
    csr(1, 5, 64'h3837_3635_3433_3231, r);
    check(ncfg == 1, "config memory written");
    csr(1, 6, 64'h9AE0_DAAF, r);
    csr(0, 6, 0, r); check(r[1:0] == 2'b01, "integrity ok");
    csr(0, 7, 0, r); check(r[31:0] == 32'h9AE0_DAAF && r[48:32] == 1, "CRC and word count readback");
    // stalled bitstream word
    cfg_ready = 0;
    fork
      begin csr(1, 5, 64'h1, r); end
      begin repeat (5) @(posedge clk); check(ncfg == 1, "no write while config memory busy"); @(negedge clk); cfg_ready = 1; end
    join
    check(ncfg == 2 && cfg_addr == 16'd2, $sformatf("write after stall ncfg=%0d addr=%0d", ncfg, cfg_addr));
    // shadow types
    csr(1, 8 + 3, 64'(SREG_CPU_FIFO), r);
    csr(1, 8 + 15, 64'(SREG_TOKEN_FIFO), r);
    csr(0, 8 + 3, 0, r);
    check(r[2:0] == 3'(SREG_CPU_FIFO) && sreg_type[3] == SREG_CPU_FIFO && sreg_type[15] == SREG_TOKEN_FIFO
          && sreg_type[0] == SREG_NORMAL, "shadow types");
    // exception: parity
    @(negedge clk); chk_valid = 1; chk_parity_ok = 0; @(negedge clk); chk_valid = 0; chk_parity_ok = 1;
    check(!active && err_code == ERR_PARITY, "parity error deactivates");
    csr(0, 2, 0, r); check(r[1:0] == 2'(ERR_PARITY), "ERROR readback");
    csr(1, 2, 0, r); check(active && err_code == ERR_NONE, "clear re-activates");
    // exception: timeout of 77 cycles
    @(negedge clk); wait_active = 1;
    repeat (76) @(negedge clk); check(active, "no timeout before the limit");
    @(negedge clk); check(!active && err_code == ERR_TIMEOUT, "timeout deactivates");
    wait_active = 0;
    csr(1, 2, 0, r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
