// tb_workload_synthetic: the single-processor bandwidth study of the paper on the full
// adapter at its default parameters: 512 quad-word (8-byte) integers are passed from a
// processor to the accelerator and fetched back, once through soft registers and once
// through shared memory.
//
// Soft registers: the processor writes the 512 integers one by one into an FPGA-bound FIFO
// shadow register; the accelerator collects them and pushes them back through a CPU-bound
// FIFO shadow register, which the processor reads one by one. Checked: order and values,
// each shadowed write answered the cycle after it is accepted, and a shadowed write cheaper
// than a normal one.
// Shared memory: the array sits in a 4 KB buffer A (its lines preloaded into the LLC model,
// as if the processor had stored them); the processor passes the addresses of A and of a
// second 4 KB buffer B through two plain shadow registers, then reads a normal soft
// register, which the accelerator answers only when done. The accelerator loads all 256
// lines of A through Memory Hub 0 (requests pipelined, one per eFPGA cycle), stores the
// array into B with two 8-byte stores per line, and releases the processor. The processor
// side then pulls B back: the testbench, as directory, downgrades every line of B and the
// LLC must end up with the whole array. A second pass over A, now all hits, must load one
// line per eFPGA cycle (plus a fixed pipeline latency), the peak rate the paper states.
module tb_workload_synthetic;
  import duet_pkg::*;
  localparam int NH = 2, N = 512, LINES = N / 2;
  localparam logic [PADDR_W-1:0] BUF_A = 40'h0001_0000, BUF_B = 40'h0001_1000;
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
  logic hold = 0, push_valid = 0; logic [3:0] push_idx = 0; logic [63:0] push_data = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  duet_adapter dut (.*);
  efpga_sr_model #(.ANSWER_DELAY(1)) u_efpga (
    .clk (fpga_clk), .rst_n, .answer_en (1'b1), .hold,
    .down_valid (sr_down_valid), .down_ready (sr_down_ready), .down (sr_down),
    .up_valid (sr_up_valid), .up_ready (sr_up_ready), .up (sr_up),
    .push_valid, .push_idx, .push_data
  );
  for (genvar g = 0; g < NH; g++) begin : g_side
    llc_model #(.LAT(6)) u_llc (
      .clk, .rst_n,
      .noc_req_valid (noc_req_valid[g]), .noc_req_ready (noc_req_ready[g]), .noc_req (noc_req[g]),
      .noc_resp_valid (noc_resp_valid[g]), .noc_resp (noc_resp[g]),
      .noc_fwd_ack_valid (noc_fwd_ack_valid[g]), .noc_fwd_ack_ready (noc_fwd_ack_ready[g]),
      .noc_fwd_ack (noc_fwd_ack[g])
    );
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // the array
  logic [63:0] arr [N];
  // what the accelerator sees of FPGA-bound writes
  logic [63:0] got [$];
  always @(posedge fpga_clk)
    if (rst_n && sr_down_valid && sr_down_ready && sr_down.typ == SR_SYNC && sr_down.idx == 2) got.push_back(sr_down.data);
  // accelerator memory-port answers, with the eFPGA cycle they arrived in
  mresp_t rq [$]; int rq_cyc [$]; int fcyc = 0;
  always @(posedge fpga_clk) begin
    fcyc <= fcyc + 1;
    if (rst_n && mresp_valid[0] && mresp_ready[0]) begin rq.push_back(mresp[0]); rq_cyc.push_back(fcyc); end
  end
  int n_gets = 0;
  always @(posedge clk) if (rst_n && noc_req_valid[0] && noc_req_ready[0] && noc_req[0].typ == NOC_GETS) n_gets <= n_gets + 1;

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
  function automatic logic [15:0] sreg(input int i); return 16'h1000 | 16'(i * 8); endfunction
  // issue one request on Memory Hub 0 from the accelerator (one per eFPGA cycle when accepted)
  task automatic issue(input mreq_type_e t, input logic [VADDR_W-1:0] a, input logic [63:0] d, input logic [7:0] be);
    mreq_t q;
    q = '{typ: t, addr: a, data: d, be: be, parity: 1'b0};
    q.parity = ^{q.typ, q.addr, q.data, q.be};
    @(negedge fpga_clk); mreq_valid[0] = 1; mreq[0] = q; #1;
    while (!mreq_ready[0]) begin @(negedge fpga_clk); #1; end
    @(posedge fpga_clk); #1 mreq_valid[0] = 0;
  endtask
  task automatic wait_answers(input int n, output bit ok);
    ok = 1;
    for (int i = 0; i < 20000 && rq.size() < n; i++) @(posedge fpga_clk);
    if (rq.size() < n) ok = 0;
  endtask

  logic [63:0] r, scratch [N]; int lat, sum_shadow, sum_normal, first_cyc, last_cyc; bit ok;
  initial begin
    for (int i = 0; i < NH; i++) begin
      mreq_valid[i] = 0; mreq[i] = '0; mresp_ready[i] = 1; noc_fwd_valid[i] = 0; noc_fwd[i] = '0;
    end
    foreach (arr[i]) arr[i] = {$urandom, $urandom};
    repeat (3) @(posedge clk); rst_n = 1;
    mmio(1, 16'h0018, 4, r, lat);                       // eFPGA at 1/4 of the system clock
    mmio(1, 16'h0008, 0, r, lat);                       // no Control Hub timeout: the processor waits by design
    mmio(1, 16'h0000, 64'b01, r, lat);                  // Control Hub active
    mmio(1, 16'h0040 + 8 * 1, 64'(SREG_PLAIN), r, lat);
    mmio(1, 16'h0040 + 8 * 2, 64'(SREG_FPGA_FIFO), r, lat);
    mmio(1, 16'h0040 + 8 * 3, 64'(SREG_CPU_FIFO), r, lat);
    mmio(1, 16'h0040 + 8 * 5, 64'(SREG_PLAIN), r, lat);
    mmio(1, 16'h2000, 64'b0011, r, lat);                // Memory Hub 0 active, forwarding on

    // ---------------- soft registers ----------------
    sum_shadow = 0;
    for (int i = 0; i < N; i++) begin
      mmio(1, sreg(2), arr[i], r, lat);
      sum_shadow += lat;
      if (lat != 1) check(0, $sformatf("shadowed write %0d took %0d cycles", i, lat));
    end
    check(1, "512 shadowed writes answered in one cycle each");
    for (int i = 0; i < 2000 && got.size() < N; i++) @(posedge fpga_clk);
    check(got.size() == N, $sformatf("accelerator received %0d of 512", got.size()));
    begin
      int bad = 0;
      for (int i = 0; i < N && i < got.size(); i++) if (got[i] != arr[i]) bad++;
      check(bad == 0, $sformatf("FPGA-bound FIFO order and values (%0d wrong)", bad));
    end
    fork
      for (int i = 0; i < N; i++) begin
        @(negedge fpga_clk); push_valid = 1; push_idx = 4'd3; push_data = got[i];
        @(negedge fpga_clk); push_valid = 0;
      end
      begin
        int bad = 0;
        for (int i = 0; i < N; i++) begin
          mmio(0, sreg(3), 0, r, lat);
          if (r != arr[i]) bad++;
        end
        check(bad == 0, $sformatf("CPU-bound FIFO returned the array in order (%0d wrong)", bad));
      end
    join
    sum_normal = 0;
    for (int i = 0; i < 16; i++) begin mmio(1, sreg(0), arr[i], r, lat); sum_normal += lat; end
    $display("soft registers: shadowed write %0d cycle(s), normal write %0d cycles on average", sum_shadow / N, sum_normal / 16);
    check(sum_normal / 16 > 4 * sum_shadow / N,
          $sformatf("normal write %0d cycles on average, shadowed %0d", sum_normal / 16, sum_shadow / N));

    // ---------------- shared memory ----------------
    for (int l = 0; l < LINES; l++) g_side[0].u_llc.mem[BUF_A + 40'(16 * l)] = {arr[2 * l + 1], arr[2 * l]};
    mmio(1, sreg(1), 64'(BUF_A), r, lat);
    mmio(1, sreg(5), 64'(BUF_B), r, lat);
    hold = 1;
    fork
      begin   // processor: wake the accelerator and block on a normal read
        mmio(0, sreg(0), 0, r, lat);
        check(lat > 2 * LINES, $sformatf("processor blocked %0d cycles until the accelerator finished", lat));
        $display("shared memory: processor blocked %0d cycles for 256 line loads and 512 stores", lat);
      end
      begin   // accelerator
        logic [PADDR_W-1:0] a, b;
        // the two plain registers reach the accelerator by SYNC messages, after the crossing
        while (u_efpga.regs[1] != 64'(BUF_A) || u_efpga.regs[5] != 64'(BUF_B)) @(posedge fpga_clk);
        a = PADDR_W'(u_efpga.regs[1]); b = PADDR_W'(u_efpga.regs[5]);
        rq.delete(); rq_cyc.delete();
        for (int l = 0; l < LINES; l++) issue(MREQ_LOAD, VADDR_W'(a + 40'(16 * l)), 0, 8'h00);
        wait_answers(LINES, ok);
        check(ok && n_gets == LINES, $sformatf("%0d lines loaded with %0d fills", rq.size(), n_gets));
        for (int l = 0; l < LINES && l < rq.size(); l++) begin
          scratch[2 * l] = rq[l].data[63:0]; scratch[2 * l + 1] = rq[l].data[127:64];
        end
        rq.delete(); rq_cyc.delete();
        for (int i = 0; i < N; i++) issue(MREQ_STORE, VADDR_W'(b + 40'(8 * i)), scratch[i], 8'hFF);
        wait_answers(N, ok);
        check(ok, "all 512 stores acknowledged");
        // peak rate: a second pass over A hits in the Proxy Cache
        rq.delete(); rq_cyc.delete();
        first_cyc = fcyc;
        for (int l = 0; l < LINES; l++) issue(MREQ_LOAD, VADDR_W'(a + 40'(16 * l)), 0, 8'h00);
        wait_answers(LINES, ok);
        last_cyc = rq_cyc[LINES - 1];
        $display("peak: 256 hit loads answered within %0d eFPGA cycles", last_cyc - first_cyc);
        check(ok && last_cyc - first_cyc <= LINES + 16,
              $sformatf("256 hits in %0d eFPGA cycles (one line per cycle + pipeline)", last_cyc - first_cyc));
        hold = 0;
      end
    join
    // processor pulls B back: the directory downgrades every line of B
    for (int l = 0; l < LINES; l++) begin
      @(negedge clk); noc_fwd_valid[0] = 1; noc_fwd[0] = '{typ: FWD_DOWNGRADE, addr: BUF_B + 40'(16 * l)}; #1;
      while (!noc_fwd_ready[0]) begin @(negedge clk); #1; end
      @(negedge clk); noc_fwd_valid[0] = 0;
    end
    begin
      int bad = 0;
      for (int l = 0; l < LINES; l++)
        if (g_side[0].u_llc.rd(BUF_B + 40'(16 * l)) != {arr[2 * l + 1], arr[2 * l]}) bad++;
      check(bad == 0, $sformatf("buffer B holds the array after the processor's pull (%0d lines wrong)", bad));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
