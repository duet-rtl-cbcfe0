// tb_soft_reg_intf: the Soft Register Interface against a modelled eFPGA soft controller
// that answers normal accesses after EF_DELAY cycles. Checks: normal write/read latency
// and data, one-cycle answers for shadowed writes and reads, the SYNC sent after a
// shadowed write, strict ordering of a shadowed write behind a normal one (the paper's
// ordering example), a blocking CPU-bound FIFO read, token reads, dropped bad-parity
// messages, and bogus answers when inactive.
module tb_soft_reg_intf;
  import duet_pkg::*;
  localparam int EF_DELAY = 6;
  logic clk = 0, rst_n = 1, active = 1;
  initial #0.1 rst_n = 0;   // a real falling edge resets every asynchronously reset flop, clocked or not
  sreg_type_e sreg_type [16];
  logic req_valid = 0, req_ready, req_we = 0, resp_valid;
  logic [3:0] req_idx = 0; logic [63:0] req_wdata = 0, resp_rdata;
  logic down_valid, down_ready = 1; sr_down_t down;
  logic up_valid = 0, up_ready; sr_up_t up;
  logic chk_valid, chk_parity_ok, wait_active;
  int checks = 0, failures = 0, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  soft_reg_intf dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---- eFPGA model: soft registers, answers normal accesses after EF_DELAY cycles ----
  logic [63:0] sreg_val [16];
  sr_down_t seen[$];           // every message that reached the eFPGA, in order
  sr_up_t   upq[$];
  int       up_due[$];
  always @(posedge clk) if (rst_n && down_valid && down_ready) begin
    seen.push_back(down);
    if (down.typ == SR_WR || down.typ == SR_SYNC) sreg_val[down.idx] = down.data;
    if (down.typ != SR_SYNC) begin
      sr_up_t u;
      u.typ = (down.typ == SR_WR) ? SR_ACK : SR_RDATA; u.idx = down.idx; u.data = sreg_val[down.idx];
      u.parity = ^{u.typ, u.idx, u.data};
      upq.push_back(u); up_due.push_back(cyc + EF_DELAY);
    end
  end
  always @(negedge clk) begin
    if (up_valid && up_ready) begin void'(upq.pop_front()); void'(up_due.pop_front()); end
    up_valid = (upq.size() != 0) && (up_due[0] <= cyc);
    if (up_valid) up = upq[0];
  end
  task automatic efpga_push(input int idx, input logic [63:0] d, input bit bad_parity);
    sr_up_t u;
    u.typ = SR_PUSH; u.idx = 4'(idx); u.data = d; u.parity = (^{u.typ, u.idx, u.data}) ^ bad_parity;
    upq.push_back(u); up_due.push_back(cyc);
  endtask

  // ---- processor ----
  task automatic access(input bit we, input int idx, input logic [63:0] wd,
                        output logic [63:0] rd, output int lat);
    realtime t0;
    // all sampling at falling edges, so no race with the design's rising-edge updates
    @(negedge clk); req_valid = 1; req_we = we; req_idx = 4'(idx); req_wdata = wd;
    while (!req_ready) @(negedge clk);
    @(posedge clk); t0 = $realtime;   // accepted at this edge
    @(negedge clk); req_valid = 0;
    while (!resp_valid) @(negedge clk);
    rd = resp_rdata; lat = int'(($realtime - t0 + 5) / 10);   // 1 = answered right after acceptance
  endtask

  logic [63:0] r; int lat;
  initial begin
    foreach (sreg_type[i]) sreg_type[i] = SREG_NORMAL;
    foreach (sreg_val[i]) sreg_val[i] = '0;
    sreg_type[1] = SREG_PLAIN; sreg_type[2] = SREG_FPGA_FIFO;
    sreg_type[3] = SREG_CPU_FIFO; sreg_type[4] = SREG_TOKEN_FIFO;
    up = '0;
    repeat (2) @(posedge clk); rst_n = 1;

    // normal write: acked only after the eFPGA's ack
    access(1, 0, 64'hA, r, lat);
    check(lat >= EF_DELAY, $sformatf("normal write waits for eFPGA (%0d cycles)", lat));
    check(sreg_val[0] == 64'hA, "normal write reached the eFPGA");
    access(0, 0, 0, r, lat);
    check(r == 64'hA && lat >= EF_DELAY, "normal read returns eFPGA data");
    // plain write: one-cycle ack, then SYNC
    seen = {};
    access(1, 1, 64'h55, r, lat);
    check(lat == 1, $sformatf("shadowed write acked in %0d cycle(s)", lat));
    repeat (2) @(posedge clk);
    check(seen.size() == 1 && seen[0].typ == SR_SYNC && seen[0].data == 64'h55, "SYNC forwarded");
    access(0, 1, 0, r, lat); check(r == 64'h55 && lat == 1, "plain read served locally");
    efpga_push(1, 64'h66, 0); repeat (3) @(posedge clk);
    access(0, 1, 0, r, lat); check(r == 64'h66, "accelerator write updates plain shadow");
    // ordering: normal WR:A then shadowed WR:B
    seen = {};
    fork
      access(1, 5, 64'h1, r, lat);
      begin
        int tb;
        repeat (4) @(posedge clk);   // B is issued while A is outstanding
        access(1, 2, 64'h2, r, lat); tb = cyc;
        check(seen.size() >= 1 && seen[0].typ == SR_WR && seen[0].idx == 5, "A reaches the eFPGA first");
      end
    join
    repeat (2) @(posedge clk);
    check(seen.size() == 2 && seen[1].typ == SR_SYNC && seen[1].idx == 2, "B synced after A");
    // blocking CPU-bound FIFO read
    fork
      access(0, 3, 0, r, lat);
      begin repeat (10) @(posedge clk); efpga_push(3, 64'hCAFE, 0); end
    join
    check(r == 64'hCAFE && lat >= 10, $sformatf("blocking read waits for push (%0d)", lat));
    check(!wait_active, "not waiting after completion");
    // token
    access(0, 4, 0, r, lat); check(r == 0 && lat == 1, "token empty");
    efpga_push(4, 0, 0); repeat (3) @(posedge clk);
    access(0, 4, 0, r, lat); check(r == 1, "token consumed");
    // bad parity push is dropped and flagged
    begin
      int flagged; flagged = 0;
      efpga_push(1, 64'hBAD, 1);
      repeat (3) begin @(posedge clk); if (chk_valid && !chk_parity_ok) flagged++; end
      check(flagged == 1, "parity error flagged");
      access(0, 1, 0, r, lat); check(r == 64'h66, "bad-parity push dropped");
    end
    // inactive: bogus data at once, nothing forwarded
    active = 0; seen = {};
    access(0, 0, 0, r, lat); check(r == BOGUS_DATA && lat == 1, "bogus read when inactive");
    access(0, 3, 0, r, lat); check(r == BOGUS_DATA, "blocking read does not block when inactive");
    check(seen.size() == 0, "nothing forwarded when inactive");
    // deactivation while waiting on the eFPGA releases the processor
    active = 1;
    fork
      access(0, 3, 0, r, lat);
      begin repeat (8) @(posedge clk); check(wait_active, "waiting on the eFPGA"); @(negedge clk); active = 0; end
    join
    check(r == BOGUS_DATA, "deactivation ends a blocked read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
