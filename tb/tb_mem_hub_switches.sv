// tb_mem_hub_switches: writes and reads every Memory Hub CSR and checks the switch
// outputs, the one-cycle pulses for TLB fill / flush / error clear, the field split of a
// TLB fill, and the status read-back (error code, page-fault interrupt and address).
module tb_mem_hub_switches;
  import duet_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #0.1 rst_n = 0;   // a real falling edge resets every asynchronously reset flop, clocked or not
  logic csr_valid = 0, csr_ready, csr_resp_valid; mmio_req_t csr_req; logic [63:0] csr_rdata;
  logic sw_active, sw_fwd_inv, sw_tlb_en, sw_write_alloc, err_clear, tlb_fill, tlb_flush;
  logic [31:0] timeout_limit; logic [VPN_W-1:0] tlb_fill_vpn; logic [PPN_W-1:0] tlb_fill_ppn;
  err_code_e err_code = ERR_NONE; logic fault_irq = 0; logic [VADDR_W-1:0] fault_vaddr = '0;
  int checks = 0, failures = 0, n_fill = 0, n_flush = 0, n_clear = 0;
  logic [VPN_W-1:0] last_vpn; logic [PPN_W-1:0] last_ppn;

  always #5 clk = ~clk;
  mem_hub_switches dut (.*);
  always @(posedge clk) begin
    if (tlb_fill) begin n_fill++; last_vpn = tlb_fill_vpn; last_ppn = tlb_fill_ppn; end
    if (tlb_flush) n_flush++;
    if (err_clear) n_clear++;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic csr(input bit we, input int idx, input logic [63:0] wd, output logic [63:0] rd);
    @(negedge clk); csr_valid = 1; csr_req = '{we: we, addr: 16'(idx * 8), wdata: wd};
    @(negedge clk); csr_valid = 0;
    check(csr_resp_valid, "response one cycle after the request");
    rd = csr_rdata;
  endtask

  logic [63:0] r;
  initial begin
    csr_req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    csr(0, 0, 0, r); check(r == 0 && !sw_active, "reset: inactive");
    csr(0, 1, 0, r); check(r == 1024, "reset timeout");
    csr(1, 0, 64'b1011, r);
    check(sw_active && sw_fwd_inv && !sw_tlb_en && sw_write_alloc, "CTRL switches");
    csr(0, 0, 0, r); check(r[3:0] == 4'b1011, "CTRL readback");
    csr(1, 0, 64'b0100, r); check(!sw_active && sw_tlb_en, "CTRL rewrite");
    csr(1, 1, 64'd500, r); check(timeout_limit == 500, "TIMEOUT");
    err_code = ERR_TIMEOUT;
    csr(0, 2, 0, r); check(r == 64'(ERR_TIMEOUT), "ERROR readback");
    csr(1, 2, 0, r); check(n_clear == 1, "ERROR write clears (one pulse)");
    fault_irq = 1; fault_vaddr = 39'h7F_0000_1234;
    csr(0, 3, 0, r); check(r[63] && r[38:0] == 39'h7F_0000_1234, "FAULT readback");
    csr(1, 4, {9'd0, 28'hABCDEF1, 27'h1234567}, r);
    check(n_fill == 1 && last_vpn == 27'h1234567 && last_ppn == 28'hABCDEF1, "TLB fill fields");
    csr(1, 5, 0, r); check(n_flush == 1 && n_fill == 1, "TLB flush pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
