// tb_duet_adapter: end-to-end test of the Duet Adapter at its default (paper) size,
// Dolly-P2M2: one Control Hub and two Memory Hubs, 8 KB Proxy Caches, 16 soft registers.
//
// Around the adapter: a processor issuing MMIOs (this initial block), a modelled soft
// accelerator on the adapter-generated eFPGA clock (efpga_sr_model for the soft-register
// side, tasks below for the two memory ports), and one LLC/directory model per Memory
// Hub NoC port (llc_model), with the testbench acting as the directory when it sends
// forwarded invalidations.
//
// The run follows the life of an accelerator: program the bitstream and check its CRC,
// pick the eFPGA clock ratio, activate, type the shadow registers, then run a Popcount
// kernel (the paper's P1M1 example at a 512-bit vector): the processor passes the vector
// address through a plain shadowed register and blocks on a CPU-bound FIFO register while
// the accelerator loads the four lines through Memory Hub 0, counts the bits and pushes
// the result. Then coherence (hit, store upgrade, directory invalidation forwarded to
// the soft cache, eviction with write-back, synonym), virtual memory on Memory Hub 1 (page
// fault interrupt, kernel TLB fill over MMIO), and containment (a parity error in Hub 0
// deactivates Hub 1 too while its Proxy Cache keeps answering the directory; a hung
// accelerator makes the Control Hub time out and return bogus data).
// Every mechanism is counted; one that never happened is a failure. The processor sees
// cycle-exact shadowed-register latency (answered the cycle after acceptance).
module tb_duet_adapter;
  import duet_pkg::*;
  localparam int NH = 2;
  logic clk = 0, rst_n = 1;
  initial #0.1 rst_n = 0;   // a real falling edge resets every asynchronously reset flop, clocked or not
  logic mmio_valid = 0, mmio_ready, mmio_resp_valid; mmio_req_t mmio_req = '0; logic [63:0] mmio_rdata;
  logic [NH-1:0] fault_irq; logic ctrl_active;
  logic noc_req_valid [NH], noc_req_ready [NH]; noc_req_t noc_req [NH];
  logic noc_resp_valid [NH]; noc_resp_t noc_resp [NH];
  logic noc_fwd_valid [NH], noc_fwd_ready [NH]; noc_fwd_t noc_fwd [NH];
  logic noc_fwd_ack_valid [NH], noc_fwd_ack_ready [NH]; noc_fwd_ack_t noc_fwd_ack [NH];
  logic fpga_clk, fpga_rst, cfg_we, cfg_ready = 1; logic [15:0] cfg_addr; logic [63:0] cfg_wdata;
  logic sr_down_valid, sr_down_ready, sr_up_valid, sr_up_ready; sr_down_t sr_down; sr_up_t sr_up;
  logic mreq_valid [NH], mreq_ready [NH]; mreq_t mreq [NH];
  logic mresp_valid [NH], mresp_ready [NH]; mresp_t mresp [NH];
  logic answer_en = 1, push_valid = 0; logic [3:0] push_idx = 0; logic [63:0] push_data = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;   // processor clock, 10 time units

  duet_adapter dut (.*);

  efpga_sr_model #(.ANSWER_DELAY(2)) u_efpga (
    .clk (fpga_clk), .rst_n, .answer_en, .hold (1'b0),
    .down_valid (sr_down_valid), .down_ready (sr_down_ready), .down (sr_down),
    .up_valid (sr_up_valid), .up_ready (sr_up_ready), .up (sr_up),
    .push_valid, .push_idx, .push_data
  );

  // ---------------- mechanisms ----------------
  typedef enum int {
    M_PROG, M_CLKDIV, M_NORMAL_RW, M_SHADOW_WR, M_SHADOW_RD, M_FPGA_FIFO, M_CPU_FIFO_BLOCK,
    M_TOKEN_EMPTY, M_TOKEN, M_LOAD_MISS, M_LOAD_HIT, M_STORE_UPGRADE, M_FWD_INV,
    M_EVICT_WB, M_SYNONYM, M_TLB_FAULT, M_TLB_FILL, M_PARITY_ERR, M_DEACT_ALL,
    M_PROXY_WHILE_DEACT, M_TIMEOUT, M_BOGUS, M_UNMAPPED, M_NUM
  } mech_e;
  int mech [M_NUM];

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic saw(input mech_e m, input bit cond, input string msg);
    check(cond, msg);
    if (cond) mech[m]++;
  endtask

  // ---------------- LLC / NoC side ----------------
  int n_gets [NH], n_getm [NH], n_putm [NH];
  mresp_t rq [NH][$];
  for (genvar g = 0; g < NH; g++) begin : g_side
    llc_model #(.LAT(6)) u_llc (
      .clk, .rst_n,
      .noc_req_valid (noc_req_valid[g]), .noc_req_ready (noc_req_ready[g]), .noc_req (noc_req[g]),
      .noc_resp_valid (noc_resp_valid[g]), .noc_resp (noc_resp[g]),
      .noc_fwd_ack_valid (noc_fwd_ack_valid[g]), .noc_fwd_ack_ready (noc_fwd_ack_ready[g]),
      .noc_fwd_ack (noc_fwd_ack[g])
    );
    always @(posedge clk) if (rst_n && noc_req_valid[g] && noc_req_ready[g])
      case (noc_req[g].typ)
        NOC_GETS: n_gets[g] <= n_gets[g] + 1;
        NOC_GETM: n_getm[g] <= n_getm[g] + 1;
        default:  n_putm[g] <= n_putm[g] + 1;
      endcase
    always @(posedge fpga_clk) if (rst_n && mresp_valid[g] && mresp_ready[g]) rq[g].push_back(mresp[g]);
  end

  function automatic logic [LINE_W-1:0] init_line(input logic [PADDR_W-1:0] a);
    return {4{a[31:0] ^ 32'h5A5A_0000}};
  endfunction

  // ---------------- processor MMIO ----------------
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
  function automatic logic [15:0] ch_csr(input int i); return 16'(i * 8); endfunction
  function automatic logic [15:0] sreg(input int i);   return 16'h1000 | 16'(i * 8); endfunction
  function automatic logic [15:0] mh_csr(input int h, input int i); return 16'((h + 1) << 13) | 16'(i * 8); endfunction

  // ---------------- accelerator memory ports ----------------
  task automatic send(input int h, input mreq_type_e t, input logic [VADDR_W-1:0] a,
                      input logic [63:0] d, input bit bad_parity);
    mreq_t q;
    q = '{typ: t, addr: a, data: d, be: (t == MREQ_STORE) ? 8'hFF : 8'h00, parity: 1'b0};
    q.parity = (^{q.typ, q.addr, q.data, q.be}) ^ bad_parity;
    @(negedge fpga_clk); mreq_valid[h] = 1; mreq[h] = q; #1;
    while (!mreq_ready[h]) begin @(negedge fpga_clk); #1; end
    @(negedge fpga_clk); mreq_valid[h] = 0;
  endtask
  task automatic get(input int h, output mresp_t m, output bit ok, input int max_cyc);
    ok = 0;
    for (int i = 0; i < max_cyc && !ok; i++) begin
      if (rq[h].size() != 0) begin m = rq[h].pop_front(); ok = 1; end
      else @(negedge fpga_clk);
    end
  endtask
  task automatic fwd(input int h, input noc_fwd_type_e t, input logic [PADDR_W-1:0] a, output bit acked);
    acked = 0;
    @(negedge clk); noc_fwd_valid[h] = 1; noc_fwd[h] = '{typ: t, addr: a}; #1;
    for (int i = 0; i < 50 && !noc_fwd_ready[h]; i++) begin @(negedge clk); #1; end
    acked = noc_fwd_ready[h];
    @(negedge clk); noc_fwd_valid[h] = 0;
  endtask
  task automatic fpga_push(input int idx, input logic [63:0] d);
    @(negedge fpga_clk); push_valid = 1; push_idx = 4'(idx); push_data = d;
    @(negedge fpga_clk); push_valid = 0;
  endtask

  // Popcount kernel of the accelerator: waits for the vector address in soft register 1,
  // loads 512 bits through Memory Hub 0, pushes the bit count into soft register 3.
  int popcount_result = -1;
  task automatic popcount_kernel();
    logic [63:0] base; mresp_t m; bit ok; int cnt;
    while (u_efpga.regs[1] == 0) @(posedge fpga_clk);
    base = u_efpga.regs[1]; cnt = 0;
    for (int i = 0; i < 4; i++) begin
      send(0, MREQ_LOAD, VADDR_W'(base + 64'(16 * i)), 0, 0);
      get(0, m, ok, 200);
      if (ok && m.typ == MRESP_LOAD_ACK) cnt += $countones(m.data);
    end
    popcount_result = cnt;
    repeat (5) @(posedge fpga_clk);
    fpga_push(3, 64'(cnt));
  endtask

  // ---------------- test ----------------
  logic [63:0] r; int lat, expect_cnt, nsync; mresp_t m; bit ok, acked;
  realtime t0, t1;
  localparam logic [VADDR_W-1:0] VEC = 39'h00_0010_0400;
  localparam logic [VADDR_W-1:0] VA1 = 39'h00_4444_4010;
  localparam logic [VADDR_W-1:0] VA2 = 39'h00_5555_5010;   // synonym of VA1
  localparam logic [PPN_W-1:0]   PPN = 28'h012_3456;
  int ncfg = 0;
  always @(posedge clk) if (cfg_we) ncfg <= ncfg + 1;
  always @(posedge fpga_clk) if (sr_down_valid && sr_down_ready && sr_down.typ == SR_SYNC) nsync <= nsync + 1;

  initial begin
    nsync = 0;
    foreach (mech[i]) mech[i] = 0;
    for (int h = 0; h < NH; h++) begin
      n_gets[h] = 0; n_getm[h] = 0; n_putm[h] = 0;
      mreq_valid[h] = 0; mreq[h] = '0; mresp_ready[h] = 1;
      noc_fwd_valid[h] = 0; noc_fwd[h] = '0;
    end
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- program the eFPGA ----
    mmio(1, ch_csr(4), 0, r, lat);
    for (int i = 0; i < 16; i++) mmio(1, ch_csr(5), {$urandom, $urandom}, r, lat);
    mmio(0, ch_csr(7), 0, r, lat);
    check(r[63:32] == 16, "16 bitstream words counted");
    mmio(1, ch_csr(6), {32'd0, r[31:0]}, r, lat);
    mmio(0, ch_csr(6), 0, r, lat);
    saw(M_PROG, r[1:0] == 2'b01 && ncfg == 16, "bitstream loaded and CRC matched");

    // ---- clock ratio ----
    @(posedge fpga_clk); t0 = $realtime; @(posedge fpga_clk); t1 = $realtime;
    check(t1 - t0 == 20, "reset eFPGA clock = system / 2");
    mmio(1, ch_csr(3), 5, r, lat);
    repeat (3) @(posedge fpga_clk);
    @(posedge fpga_clk); t0 = $realtime; @(posedge fpga_clk); t1 = $realtime;
    saw(M_CLKDIV, t1 - t0 == 50, "eFPGA clock = system / 5 after reprogramming");

    // ---- activate and type the shadow registers ----
    mmio(1, ch_csr(0), 64'b01, r, lat);
    check(ctrl_active && !fpga_rst, "Control Hub active, accelerator out of reset");
    mmio(1, ch_csr(8 + 1), 64'(SREG_PLAIN), r, lat);
    mmio(1, ch_csr(8 + 2), 64'(SREG_FPGA_FIFO), r, lat);
    mmio(1, ch_csr(8 + 3), 64'(SREG_CPU_FIFO), r, lat);
    mmio(1, ch_csr(8 + 4), 64'(SREG_TOKEN_FIFO), r, lat);
    mmio(1, mh_csr(0, 0), 64'b0011, r, lat);   // hub 0: active, forward invalidations
    mmio(1, mh_csr(1, 0), 64'b0111, r, lat);   // hub 1: active, forward invalidations, TLB

    // ---- soft registers ----
    mmio(1, sreg(0), 64'hC0FFEE, r, lat);
    mmio(0, sreg(0), 0, r, lat);
    saw(M_NORMAL_RW, r == 64'hC0FFEE && lat > 4, $sformatf("normal soft register round trip (%0d cycles)", lat));
    for (int i = 0; i < 3; i++) mmio(1, sreg(2), 64'(7 + i), r, lat);
    repeat (80) @(posedge clk);
    saw(M_FPGA_FIFO, nsync == 3 && u_efpga.regs[2] == 9, "FPGA-bound FIFO writes delivered in order");
    mmio(0, sreg(4), 0, r, lat);
    saw(M_TOKEN_EMPTY, r == 0 && lat == 1, "token FIFO reads empty at once");
    fpga_push(4, 0);
    repeat (30) @(posedge clk);
    mmio(0, sreg(4), 0, r, lat);
    saw(M_TOKEN, r == 1 && lat == 1, "token consumed");

    // ---- Popcount kernel ----
    expect_cnt = 0;
    for (int i = 0; i < 4; i++) expect_cnt += $countones(init_line({1'b0, VEC} + 40'(16 * i)));
    fork
      popcount_kernel();
      begin
        mmio(1, sreg(1), 64'(VEC), r, lat);
        saw(M_SHADOW_WR, lat == 1, "shadowed write answered the cycle after acceptance");
        mmio(0, sreg(1), 0, r, lat);
        saw(M_SHADOW_RD, lat == 1 && r == 64'(VEC), "shadowed read served from the copy");
        mmio(0, sreg(3), 0, r, lat);
        saw(M_CPU_FIFO_BLOCK, r == 64'(expect_cnt) && lat > 20,
            $sformatf("blocking read of the result (%0d, %0d cycles)", r, lat));
      end
    join
    check(popcount_result == expect_cnt, "accelerator computed the popcount");
    saw(M_LOAD_MISS, n_gets[0] == 4, "four line fills from the LLC");

    // ---- coherence on hub 0 ----
    send(0, MREQ_LOAD, VEC + 8, 0, 0); get(0, m, ok, 100);
    saw(M_LOAD_HIT, ok && m.data == init_line({1'b0, VEC}) && n_gets[0] == 4, "hit without NoC traffic");
    send(0, MREQ_STORE, VEC, 64'h1111_2222_3333_4444, 0); get(0, m, ok, 100);
    saw(M_STORE_UPGRADE, ok && m.typ == MRESP_STORE_ACK && n_getm[0] == 1, "store upgrade to M");
    fwd(0, FWD_INV, {1'b0, VEC}, acked); get(0, m, ok, 100);
    saw(M_FWD_INV, acked && ok && m.typ == MRESP_INV && m.addr == VEC &&
        g_side[0].u_llc.rd({1'b0, VEC})[63:0] == 64'h1111_2222_3333_4444, "directory Inv forwarded, dirty data returned");
    send(0, MREQ_STORE, VEC + 16, 64'h5, 0); get(0, m, ok, 100);
    send(0, MREQ_LOAD, VEC + 16 + 8192, 0, 0);
    get(0, m, ok, 100);
    check(ok && m.typ == MRESP_INV && m.addr == VEC + 16, "soft cache told to drop the victim");
    get(0, m, ok, 100);
    saw(M_EVICT_WB, ok && m.typ == MRESP_LOAD_ACK && n_putm[0] == 1 &&
        g_side[0].u_llc.rd({1'b0, VEC} + 16)[63:0] == 64'h5, "dirty victim written back");

    // ---- virtual memory on hub 1 ----
    send(1, MREQ_LOAD, VA1, 0, 0);
    repeat (30) @(posedge clk);
    saw(M_TLB_FAULT, fault_irq[1] && !fault_irq[0], "page fault interrupt from hub 1");
    mmio(0, mh_csr(1, 3), 0, r, lat);
    mmio(1, mh_csr(1, 4), {9'd0, PPN, r[38:12]}, r, lat);
    get(1, m, ok, 100);
    saw(M_TLB_FILL, ok && !fault_irq[1] && m.data == init_line({PPN, VA1[11:4], 4'h0}), "request completes after the kernel fill");
    mmio(1, mh_csr(1, 4), {9'd0, PPN, VA2[38:12]}, r, lat);
    send(1, MREQ_LOAD, VA2, 0, 0);
    get(1, m, ok, 100);
    check(ok && m.typ == MRESP_INV && m.addr == {VA1[38:4], 4'h0}, "old virtual alias invalidated");
    get(1, m, ok, 100);
    saw(M_SYNONYM, ok && m.typ == MRESP_LOAD_ACK, "synonym served after the alias was dropped");

    // ---- containment ----
    send(0, MREQ_LOAD, VEC, 0, 1);
    repeat (30) @(posedge clk);
    mmio(0, mh_csr(0, 2), 0, r, lat);
    saw(M_PARITY_ERR, r == 64'(ERR_PARITY), "parity error logged in hub 0");
    send(1, MREQ_LOAD, VA2, 0, 0);
    get(1, m, ok, 60);
    saw(M_DEACT_ALL, !ok, "hub 1 deactivated by hub 0's exception");
    fwd(1, FWD_INV, {PPN, VA2[11:4], 4'h0}, acked);
    saw(M_PROXY_WHILE_DEACT, acked, "deactivated hub's Proxy Cache still answers the directory");
    mmio(1, mh_csr(0, 2), 0, r, lat);
    send(1, MREQ_LOAD, VA2, 0, 0);
    get(1, m, ok, 100);
    check(ok && m.typ == MRESP_LOAD_ACK, "hub 1 works again after the error is cleared");
    mmio(1, ch_csr(1), 300, r, lat);
    answer_en = 0;
    mmio(0, sreg(0), 0, r, lat);
    saw(M_TIMEOUT, r == BOGUS_DATA && lat >= 300 && lat <= 305, $sformatf("Control Hub timeout after %0d cycles", lat));
    mmio(0, sreg(5), 0, r, lat);
    saw(M_BOGUS, r == BOGUS_DATA && lat == 1 && !ctrl_active, "inactive Control Hub answers with bogus data");
    answer_en = 1;
    mmio(1, ch_csr(2), 0, r, lat);
    check(ctrl_active, "Control Hub re-activated");
    mmio(0, 16'hE000, 0, r, lat);
    saw(M_UNMAPPED, r == 0, "unmapped window reads as zero");

    for (int i = 0; i < M_NUM; i++) begin
      mech_e e;
      e = mech_e'(i);
      $display("mechanism %-20s %0d", e.name(), mech[i]);
      check(mech[i] > 0, $sformatf("mechanism %s never happened", e.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
