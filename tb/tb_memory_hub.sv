// tb_memory_hub: one Memory Hub between a modelled LLC (llc_model) and a modelled soft
// accelerator running on its own, unrelated eFPGA clock. The testbench drives the
// accelerator side (Load/Store requests, LoadAck/StoreAck/Inv answers) and the MMIO
// switches, and plays the directory by sending forwarded invalidations. It checks:
// requests are dropped while the hub is inactive (reset state); a load miss goes to the
// LLC and a repeat load hits without NoC traffic; a store gets ownership and its data
// reaches the LLC when the line is invalidated, with an Inv forwarded to the accelerator;
// with the TLB on, a miss raises the fault interrupt and the request completes once the
// entry is written; a bad parity bit logs an error and deactivates the hub while the
// Proxy Cache still answers the directory; a deactivation from another hub (deact_in)
// has the same effect; an accelerator that stops taking answers trips the timeout.
module tb_memory_hub;
  import duet_pkg::*;
  logic clk = 0, fpga_clk = 0, rst_n = 1;
  initial #0.1 rst_n = 0;   // a real falling edge resets every asynchronously reset flop, clocked or not
  logic csr_valid = 0, csr_ready, csr_resp_valid; mmio_req_t csr_req = '0; logic [63:0] csr_rdata;
  logic deact_in = 0, err_out, fault_irq; err_code_e err_code;
  logic noc_req_valid, noc_req_ready; noc_req_t noc_req;
  logic noc_resp_valid; noc_resp_t noc_resp;
  logic noc_fwd_valid = 0, noc_fwd_ready; noc_fwd_t noc_fwd = '0;
  logic noc_fwd_ack_valid, noc_fwd_ack_ready; noc_fwd_ack_t noc_fwd_ack;
  logic mreq_valid = 0, mreq_ready; mreq_t mreq = '0;
  logic mresp_valid, mresp_ready = 1; mresp_t mresp;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;          // 100 MHz-like processor clock (10 time units)
  always #17 fpga_clk = ~fpga_clk;  // unrelated, slower eFPGA clock

  memory_hub dut (.*);
  llc_model #(.LAT(5)) u_llc (.*);

  // NoC and accelerator-side monitors
  int n_gets = 0, n_getm = 0, n_putm = 0, n_resp = 0;
  noc_req_t last_noc;
  mresp_t rq[$];
  always @(posedge clk) if (noc_req_valid && noc_req_ready) begin
    last_noc <= noc_req;
    case (noc_req.typ) NOC_GETS: n_gets <= n_gets + 1; NOC_GETM: n_getm <= n_getm + 1; default: n_putm <= n_putm + 1; endcase
  end
  always @(posedge fpga_clk) if (rst_n && mresp_valid && mresp_ready) begin rq.push_back(mresp); n_resp <= n_resp + 1; end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic csr(input bit we, input int idx, input logic [63:0] wd, output logic [63:0] rd);
    @(negedge clk); csr_valid = 1; csr_req = '{we: we, addr: 16'(idx * 8), wdata: wd};
    @(negedge clk); csr_valid = 0;
    while (!csr_resp_valid) @(negedge clk);
    rd = csr_rdata;
  endtask
  task automatic send(input mreq_type_e t, input logic [VADDR_W-1:0] a, input logic [63:0] d, input bit bad_parity);
    @(negedge fpga_clk);
    mreq_valid = 1;
    mreq = '{typ: t, addr: a, data: d, be: (t == MREQ_STORE) ? 8'hFF : 8'h00, parity: 1'b0};
    mreq.parity = (^{mreq.typ, mreq.addr, mreq.data, mreq.be}) ^ bad_parity;
    #1;
    while (!mreq_ready) begin @(negedge fpga_clk); #1; end
    @(negedge fpga_clk); mreq_valid = 0;
  endtask
  // wait for the next answer of the accelerator side (in eFPGA cycles), 0 on timeout
  task automatic get(output mresp_t m, output bit ok, input int max_cyc);
    ok = 0;
    for (int i = 0; i < max_cyc && !ok; i++) begin
      if (rq.size() != 0) begin m = rq.pop_front(); ok = 1; end
      else @(negedge fpga_clk);
    end
  endtask
  task automatic fwd(input noc_fwd_type_e t, input logic [PADDR_W-1:0] a);
    @(negedge clk); noc_fwd_valid = 1; noc_fwd = '{typ: t, addr: a}; #1;
    while (!noc_fwd_ready) begin @(negedge clk); #1; end
    @(negedge clk); noc_fwd_valid = 0;
  endtask

  logic [63:0] r; mresp_t m; bit ok; int g;
  localparam logic [VADDR_W-1:0] A  = 39'h00_1234_5670;
  localparam logic [VADDR_W-1:0] VA = 39'h00_7777_7120;   // mapped by the TLB test
  localparam logic [PPN_W-1:0]  PPN = 28'h0AB_CDE;
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // inactive after reset: dropped
    send(MREQ_LOAD, A, 0, 0);
    get(m, ok, 40);
    check(!ok && n_gets == 0, "request dropped while the hub is inactive");
    // activate, forward invalidations, TLB off
    csr(1, 0, 64'b0011, r);
    send(MREQ_LOAD, A, 0, 0);
    get(m, ok, 60);
    check(ok && m.typ == MRESP_LOAD_ACK && m.data == u_llc.init_line({1'b0, A}) && n_gets == 1,
          "load miss fetched from the LLC");
    g = n_gets;
    send(MREQ_LOAD, A + 8, 0, 0);
    get(m, ok, 60);
    check(ok && m.data == u_llc.init_line({1'b0, A}) && n_gets == g, "second load hits");
    send(MREQ_STORE, A, 64'hFEED_F00D_0000_0001, 0);
    get(m, ok, 60);
    check(ok && m.typ == MRESP_STORE_ACK && n_getm == 1, "store obtains ownership");
    fwd(FWD_INV, {1'b0, A});
    get(m, ok, 60);
    check(ok && m.typ == MRESP_INV && m.addr == A, "directory invalidation forwarded to the soft cache");
    check(u_llc.rd({1'b0, A})[63:0] == 64'hFEED_F00D_0000_0001, "dirty data returned to the LLC");
    // TLB
    csr(1, 0, 64'b0111, r);
    send(MREQ_LOAD, VA, 0, 0);
    repeat (20) @(posedge clk);
    check(fault_irq, "TLB miss raises the page-fault interrupt");
    csr(0, 3, 0, r);
    check(r[63] && r[VADDR_W-1:0] == VA, "faulting address readable");
    csr(1, 4, {9'd0, PPN, VA[38:12]}, r);
    get(m, ok, 60);
    check(ok && !fault_irq && last_noc.addr == {PPN, VA[11:4], 4'h0} &&
          m.data == u_llc.init_line({PPN, VA[11:4], 4'h0}), "request completes with the translated address");
    // parity error
    send(MREQ_LOAD, VA, 0, 1);
    repeat (20) @(posedge clk);
    check(err_out && err_code == ERR_PARITY, "bad parity logged");
    send(MREQ_LOAD, VA, 0, 0);
    get(m, ok, 40);
    check(!ok, "deactivated hub drops requests");
    fwd(FWD_INV, {PPN, VA[11:4], 4'h0});
    check(1, "Proxy Cache still answers the directory while deactivated");
    get(m, ok, 20);
    check(!ok, "nothing sent to the eFPGA while deactivated");
    csr(1, 2, 0, r);
    check(!err_out, "error cleared");
    csr(1, 0, 64'b0011, r);   // TLB off again
    // deactivation by another hub
    deact_in = 1;
    send(MREQ_LOAD, A, 0, 0);
    get(m, ok, 40);
    check(!ok, "deactivated by another hub's exception");
    deact_in = 0;
    send(MREQ_LOAD, A, 0, 0);
    get(m, ok, 60);
    check(ok && m.typ == MRESP_LOAD_ACK, "works again");
    // timeout: accelerator stops taking answers
    csr(1, 1, 100, r);
    mresp_ready = 0;
    for (int i = 0; i < 8; i++) send(MREQ_LOAD, A, 0, 0);
    repeat (150) @(posedge clk);
    check(err_out && err_code == ERR_TIMEOUT, "timeout on a stuck accelerator");
    mresp_ready = 1;
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
