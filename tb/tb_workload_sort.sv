// tb_workload_sort: the paper's Sort workload (one processor, two Memory Hubs) on the full
// adapter at its default parameters, for the three evaluated array sizes: 32, 64 and 128
// 4-byte integers. The input array sits in memory behind Memory Hub 0's NoC port (its lines
// preloaded into that port's LLC model, as if the processor had stored them). The
// processor passes the input and output addresses and the length through plain shadow
// registers and blocks on a CPU-bound FIFO register. The modelled accelerator, as the
// paper describes it, reads the input through Memory Hub 0, sorts it (here a behavioural
// sort stands in for the sorting network built in the eFPGA), writes the result through
// Memory Hub 1 with 8-byte stores, and pushes a completion value that releases the
// processor. The processor then pulls the output: the testbench, as directory, invalidates
// every output line at Memory Hub 1, and that port's LLC model must hold the sorted array.
// Also checked: input lines each fetched once (16 bytes = four integers per line) and the
// output written with one ownership request per line.
module tb_workload_sort;
  import duet_pkg::*;
  localparam int NH = 2;
  localparam logic [PADDR_W-1:0] IN_BASE = 40'h0002_0000, OUT_BASE = 40'h0003_0000;
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
  logic push_valid = 0; logic [3:0] push_idx = 0; logic [63:0] push_data = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  duet_adapter dut (.*);
  efpga_sr_model #(.ANSWER_DELAY(1)) u_efpga (
    .clk (fpga_clk), .rst_n, .answer_en (1'b1), .hold (1'b0),
    .down_valid (sr_down_valid), .down_ready (sr_down_ready), .down (sr_down),
    .up_valid (sr_up_valid), .up_ready (sr_up_ready), .up (sr_up),
    .push_valid, .push_idx, .push_data
  );
  int n_gets [NH], n_getm [NH];
  mresp_t rq [NH][$];
  for (genvar g = 0; g < NH; g++) begin : g_side
    llc_model #(.LAT(6)) u_llc (
      .clk, .rst_n,
      .noc_req_valid (noc_req_valid[g]), .noc_req_ready (noc_req_ready[g]), .noc_req (noc_req[g]),
      .noc_resp_valid (noc_resp_valid[g]), .noc_resp (noc_resp[g]),
      .noc_fwd_ack_valid (noc_fwd_ack_valid[g]), .noc_fwd_ack_ready (noc_fwd_ack_ready[g]),
      .noc_fwd_ack (noc_fwd_ack[g])
    );
    always @(posedge clk) if (rst_n && noc_req_valid[g] && noc_req_ready[g]) begin
      if (noc_req[g].typ == NOC_GETS) n_gets[g] <= n_gets[g] + 1;
      if (noc_req[g].typ == NOC_GETM) n_getm[g] <= n_getm[g] + 1;
    end
    always @(posedge fpga_clk) if (rst_n && mresp_valid[g] && mresp_ready[g]) rq[g].push_back(mresp[g]);
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
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
  task automatic issue(input int h, input mreq_type_e t, input logic [VADDR_W-1:0] a, input logic [63:0] d);
    mreq_t q;
    q = '{typ: t, addr: a, data: d, be: (t == MREQ_STORE) ? 8'hFF : 8'h00, parity: 1'b0};
    q.parity = ^{q.typ, q.addr, q.data, q.be};
    @(negedge fpga_clk); mreq_valid[h] = 1; mreq[h] = q; #1;
    while (!mreq_ready[h]) begin @(negedge fpga_clk); #1; end
    @(posedge fpga_clk); #1 mreq_valid[h] = 0;
  endtask
  task automatic wait_answers(input int h, input int n);
    for (int i = 0; i < 20000 && rq[h].size() < n; i++) @(posedge fpga_clk);
  endtask

  // the accelerator: read n integers at src via hub 0, sort, write to dst via hub 1
  task automatic sort_kernel(input int n, input int run);
    logic [PADDR_W-1:0] src, dst; logic [31:0] v [$];
    while (u_efpga.regs[6] != 64'(run)) @(posedge fpga_clk);   // run number written last
    src = PADDR_W'(u_efpga.regs[1]); dst = PADDR_W'(u_efpga.regs[5]);
    rq[0].delete(); rq[1].delete();
    for (int l = 0; l < n / 4; l++) issue(0, MREQ_LOAD, VADDR_W'(src + 40'(16 * l)), 0);
    wait_answers(0, n / 4);
    for (int l = 0; l < n / 4 && l < rq[0].size(); l++)
      for (int k = 0; k < 4; k++) v.push_back(rq[0][l].data[32 * k +: 32]);
    v.sort();
    for (int i = 0; i < n / 2; i++) issue(1, MREQ_STORE, VADDR_W'(dst + 40'(8 * i)), {v[2 * i + 1], v[2 * i]});
    wait_answers(1, n / 2);
    @(negedge fpga_clk); push_valid = 1; push_idx = 4'd3; push_data = 64'(n);
    @(negedge fpga_clk); push_valid = 0;
  endtask

  logic [63:0] r; int lat, g0, m1;
  initial begin
    for (int i = 0; i < NH; i++) begin
      mreq_valid[i] = 0; mreq[i] = '0; mresp_ready[i] = 1; noc_fwd_valid[i] = 0; noc_fwd[i] = '0;
      n_gets[i] = 0; n_getm[i] = 0;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    mmio(1, 16'h0018, 4, r, lat);                    // eFPGA at 1/4 of the system clock (228-234 MHz in the paper at 1 GHz)
    mmio(1, 16'h0008, 0, r, lat);                    // the processor waits as long as the sort takes
    mmio(1, 16'h0000, 64'b01, r, lat);
    foreach (u_efpga.regs[i]) if (i == 1 || i == 5 || i == 6) mmio(1, 16'h0040 + 16'(8 * i), 64'(SREG_PLAIN), r, lat);
    mmio(1, 16'h0040 + 8 * 3, 64'(SREG_CPU_FIFO), r, lat);
    mmio(1, 16'h2000, 64'b0001, r, lat);             // hub 0: reads
    mmio(1, 16'h4000, 64'b0001, r, lat);             // hub 1: writes
    for (int run = 1; run <= 3; run++) begin
      int n; logic [31:0] a [$]; logic [31:0] s [$];
      logic [PADDR_W-1:0] ib, ob;
      n = 16 << run;                                 // 32, 64, 128
      a.delete();                                    // block-level variables here are static
      ib = IN_BASE + 40'(run << 12); ob = OUT_BASE + 40'(run << 12);
      for (int i = 0; i < n; i++) a.push_back($urandom);
      for (int l = 0; l < n / 4; l++) g_side[0].u_llc.mem[ib + 40'(16 * l)] = {a[4 * l + 3], a[4 * l + 2], a[4 * l + 1], a[4 * l]};
      s = a; s.sort();
      g0 = n_gets[0]; m1 = n_getm[1];
      fork
        sort_kernel(n, run);
        begin
          mmio(1, sreg(1), 64'(ib), r, lat);
          mmio(1, sreg(5), 64'(ob), r, lat);
          mmio(1, sreg(6), 64'(run), r, lat);
          mmio(0, sreg(3), 0, r, lat);
          check(r == 64'(n), $sformatf("sort/%0d: processor released by the accelerator", n));
          $display("sort/%0d: processor blocked %0d cycles", n, lat);
        end
      join
      check(n_gets[0] - g0 == n / 4, $sformatf("sort/%0d: input read as %0d line fills", n, n_gets[0] - g0));
      check(n_getm[1] - m1 == n / 4, $sformatf("sort/%0d: output written with %0d ownership requests", n, n_getm[1] - m1));
      for (int l = 0; l < n / 4; l++) begin
        @(negedge clk); noc_fwd_valid[1] = 1; noc_fwd[1] = '{typ: FWD_INV, addr: ob + 40'(16 * l)}; #1;
        while (!noc_fwd_ready[1]) begin @(negedge clk); #1; end
        @(negedge clk); noc_fwd_valid[1] = 0;
      end
      begin
        int bad = 0;
        for (int l = 0; l < n / 4; l++)
          if (g_side[1].u_llc.rd(ob + 40'(16 * l)) != {s[4 * l + 3], s[4 * l + 2], s[4 * l + 1], s[4 * l]}) bad++;
        check(bad == 0, $sformatf("sort/%0d: output in memory is the sorted input (%0d lines wrong)", n, bad));
      end
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
