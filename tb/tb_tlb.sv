// tb_tlb: checks translation against a reference page table, bypass when disabled, the
// page-fault interrupt and address on a miss, its clearing by a fill, refill of an
// existing VPN in place, round-robin replacement of ENTRIES entries, and flush.
module tb_tlb;
  import duet_pkg::*;
  localparam int E = 4;
  logic clk = 0, rst_n = 1, en = 1, lookup_valid = 0, fill_en = 0, flush = 0;
  initial #0.1 rst_n = 0;   // a real falling edge resets every asynchronously reset flop, clocked or not
  logic [VADDR_W-1:0] vaddr = '0, fault_vaddr;
  logic hit, fault_irq;
  logic [PADDR_W-1:0] paddr;
  logic [VPN_W-1:0] fill_vpn = '0; logic [PPN_W-1:0] fill_ppn = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  tlb #(.ENTRIES(E)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic fill(input logic [VPN_W-1:0] v, input logic [PPN_W-1:0] p);
    @(negedge clk); fill_en = 1; fill_vpn = v; fill_ppn = p; @(negedge clk); fill_en = 0;
  endtask
  function automatic logic [PADDR_W-1:0] xl(input logic [VADDR_W-1:0] va, input logic [PPN_W-1:0] p);
    return {p, va[11:0]};
  endfunction

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // miss -> fault
    @(negedge clk); vaddr = {27'h123, 12'hABC}; lookup_valid = 1; #1;
    check(!hit, "miss before fill");
    @(negedge clk); lookup_valid = 0;
    check(fault_irq && fault_vaddr == {27'h123, 12'hABC}, "page fault raised with address");
    fill(27'h123, 28'h0777);
    check(!fault_irq, "fill clears the interrupt");
    vaddr = {27'h123, 12'hABC}; #1;
    check(hit && paddr == xl(vaddr, 28'h0777), "translation after fill");
    // fill E entries, check all
    for (int i = 0; i < E; i++) fill(27'(i + 10), 28'(i * 3 + 100));
    for (int i = 0; i < E; i++) begin
      @(negedge clk); vaddr = {27'(i + 10), 12'(i * 16)}; #1;
      check(hit && paddr == xl(vaddr, 28'(i * 3 + 100)), $sformatf("entry %0d", i));
    end
    // 0x123 was evicted by round robin (E fills after it)
    @(negedge clk); vaddr = {27'h123, 12'h0}; #1; check(!hit, "round-robin evicted oldest");
    // refill in place
    fill(27'd11, 28'h5555);
    @(negedge clk); vaddr = {27'd11, 12'h8}; #1; check(hit && paddr == xl(vaddr, 28'h5555), "refill in place");
    @(negedge clk); vaddr = {27'd10, 12'h8}; #1; check(hit, "refill did not evict another entry");
    // disabled: physical
    en = 0; @(negedge clk); vaddr = 39'h12_3456_789A; #1;
    check(hit && paddr == 40'h12_3456_789A, "bypass when disabled");
    en = 1;
    // flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    vaddr = {27'd10, 12'h8}; #1; check(!hit, "flush");
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
