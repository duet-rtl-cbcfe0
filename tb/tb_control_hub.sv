// tb_control_hub: the Control Hub with its generated eFPGA clock and a modelled soft
// controller. Checks, as a processor sees them: programming a bitstream (config memory
// writes and CRC status), the eFPGA clock ratio, a normal soft-register write and read
// crossing both async FIFOs, the shorter latency of shadowed writes and reads (answered
// one cycle after acceptance, the SYNC arriving in the eFPGA later), a CPU-bound FIFO fed
// by the accelerator, and a hung accelerator: the timeout fires, the processor gets
// bogus data instead of stalling, and clearing the error re-activates the hub.
module tb_control_hub;
  import duet_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #0.1 rst_n = 0;   // a real falling edge resets every asynchronously reset flop, clocked or not
  logic mmio_valid = 0, mmio_ready, mmio_resp_valid; mmio_req_t mmio_req; logic [63:0] mmio_rdata;
  logic active; err_code_e err_code;
  logic fpga_clk, fpga_rst, sr_down_valid, sr_down_ready, sr_up_valid, sr_up_ready;
  sr_down_t sr_down; sr_up_t sr_up;
  logic cfg_we; logic [15:0] cfg_addr; logic [63:0] cfg_wdata; logic cfg_ready = 1;
  logic answer_en = 1, push_valid = 0; logic [3:0] push_idx = 0; logic [63:0] push_data = 0;
  int checks = 0, failures = 0, ncfg = 0;

  always #5 clk = ~clk;
  // messages seen on the eFPGA side of the crossing
  int n_sync = 0, n_wr = 0; logic [63:0] last_sync = 0;
  always @(posedge fpga_clk)
    if (sr_down_valid && sr_down_ready) begin
      if (sr_down.typ == SR_SYNC) begin n_sync <= n_sync + 1; last_sync <= sr_down.data; end
      if (sr_down.typ == SR_WR) n_wr <= n_wr + 1;
    end
  always @(posedge clk) if (cfg_we) ncfg++;

  control_hub dut (.*);
  efpga_sr_model #(.ANSWER_DELAY(1)) u_efpga (
    .clk (fpga_clk), .rst_n, .answer_en, .hold (1'b0),
    .down_valid (sr_down_valid), .down_ready (sr_down_ready), .down (sr_down),
    .up_valid (sr_up_valid), .up_ready (sr_up_ready), .up (sr_up),
    .push_valid, .push_idx, .push_data
  );

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  // MMIO with latency in processor cycles (1 = answered right after acceptance)
  task automatic mmio(input bit we, input logic [15:0] addr, input logic [63:0] wd,
                      output logic [63:0] rd, output int lat);
    realtime t0;
    @(negedge clk); mmio_valid = 1; mmio_req = '{we: we, addr: addr, wdata: wd}; #1;
    while (!mmio_ready) begin @(negedge clk); #1; end
    @(posedge clk); t0 = $realtime;
    @(negedge clk); mmio_valid = 0;
    while (!mmio_resp_valid) @(negedge clk);
    rd = mmio_rdata; lat = int'(($realtime - t0 + 5) / 10);
  endtask
  function automatic logic [15:0] csr_a(input int i); return 16'(i * 8); endfunction
  function automatic logic [15:0] sreg_a(input int i); return 16'h1000 | 16'(i * 8); endfunction
  task automatic fpga_push(input int idx, input logic [63:0] d);
    @(negedge fpga_clk); push_valid = 1; push_idx = 4'(idx); push_data = d;
    @(negedge fpga_clk); push_valid = 0;
  endtask

  logic [63:0] r; int lat, lat_normal_wr, lat_normal_rd;
  initial begin
    mmio_req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // program the eFPGA
    mmio(1, csr_a(4), 0, r, lat);
    for (int i = 0; i < 8; i++) mmio(1, csr_a(5), 64'h3837_3635_3433_3231, r, lat);
    check(ncfg == 8 && cfg_addr == 16'd8, "bitstream words written to config memory");
    mmio(0, csr_a(7), 0, r, lat);
    mmio(1, csr_a(6), {32'd0, r[31:0]}, r, lat);
    mmio(0, csr_a(6), 0, r, lat); check(r[1:0] == 2'b01, "bitstream integrity ok");
    // clock ratio 4, activate, release accelerator reset, shadow types
    mmio(1, csr_a(3), 4, r, lat);
    mmio(1, csr_a(0), 64'b01, r, lat);
    check(active && !fpga_rst, "hub active, accelerator out of reset");
    mmio(1, csr_a(8 + 1), 64'(SREG_PLAIN), r, lat);
    mmio(1, csr_a(8 + 2), 64'(SREG_FPGA_FIFO), r, lat);
    mmio(1, csr_a(8 + 3), 64'(SREG_CPU_FIFO), r, lat);
    mmio(1, csr_a(1), 200, r, lat);
    begin
      realtime t0, t1;
      @(posedge fpga_clk); t0 = $realtime; @(posedge fpga_clk); t1 = $realtime;
      check(t1 - t0 == 40, "eFPGA clock = system clock / 4");
    end
    // normal register
    mmio(1, sreg_a(0), 64'h1234, r, lat_normal_wr);
    check(u_efpga.regs[0] == 64'h1234 && n_wr == 1, "normal write reached the eFPGA");
    mmio(0, sreg_a(0), 0, r, lat_normal_rd);
    check(r == 64'h1234, "normal read returns the eFPGA's value");
    // crossing twice at ratio 4 with 2-stage synchronizers costs well over 8 cycles
    check(lat_normal_wr >= 8 && lat_normal_rd >= 8,
          $sformatf("normal access pays the crossings (wr %0d, rd %0d)", lat_normal_wr, lat_normal_rd));
    // shadowed
    mmio(1, sreg_a(1), 64'h55, r, lat);
    check(lat == 1, $sformatf("shadowed write answered in %0d cycle", lat));
    check(n_sync == 0, "answered before the eFPGA has seen it");
    repeat (30) @(posedge clk);
    check(n_sync == 1 && u_efpga.regs[1] == 64'h55, "SYNC reached the soft register");
    mmio(0, sreg_a(1), 0, r, lat);
    check(lat == 1 && r == 64'h55, "shadowed read served in the fast domain");
    for (int i = 0; i < 3; i++) mmio(1, sreg_a(2), 64'(100 + i), r, lat);
    repeat (40) @(posedge clk);
    check(n_sync == 4 && last_sync == 102, "FPGA-bound FIFO writes arrive in order");
    fpga_push(3, 64'hAB); fpga_push(3, 64'hCD);
    repeat (20) @(posedge clk);
    mmio(0, sreg_a(3), 0, r, lat); check(r == 64'hAB && lat == 1, "CPU-bound FIFO first");
    mmio(0, sreg_a(3), 0, r, lat); check(r == 64'hCD, "CPU-bound FIFO second");
    // hung accelerator
    answer_en = 0;
    mmio(0, sreg_a(0), 0, r, lat);
    check(r == BOGUS_DATA && lat >= 200 && lat <= 204, $sformatf("timeout after %0d cycles gives bogus data", lat));
    check(!active && err_code == ERR_TIMEOUT, "hub deactivated with a timeout error");
    mmio(0, sreg_a(1), 0, r, lat); check(r == BOGUS_DATA && lat == 1, "inactive hub answers at once");
    mmio(0, csr_a(2), 0, r, lat); check(r == 64'(ERR_TIMEOUT), "error code readable");
    answer_en = 1;
    mmio(1, csr_a(2), 0, r, lat); check(active, "clear re-activates");
    mmio(1, sreg_a(5), 64'h9, r, lat); check(u_efpga.regs[5] == 64'h9, "works again after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
