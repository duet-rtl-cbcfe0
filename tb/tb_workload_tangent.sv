// tb_workload_tangent: the paper's Tangent workload (one processor, no Memory Hub) on the full
// adapter at its default parameters. As in the paper, the processor passes each argument to
// the accelerator through an FPGA-bound FIFO register (reg 2), which also starts it, and
// takes the result from a CPU-bound FIFO register (reg 3); a read of the empty FIFO blocks
// until the result has arrived. The accelerator itself (an HLS piece-wise linear tangent in
// the paper) is not part of the adapter; here the modelled eFPGA computes it with $tan,
// a few eFPGA cycles after the argument arrives, and pushes the IEEE-754 double back. The
// 32 arguments are random, in (-1.5, 1.5). Checked: every result is the tangent of its own
// argument, in order; the argument write is answered one cycle after it is accepted (no
// round trip to the eFPGA); the blocking read returns only after the result could have
// crossed back (more than the eFPGA's own delay at a clock ratio of 4).
module tb_workload_tangent;
  import duet_pkg::*;
  localparam int NH = 2, N = 32;
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
  // hubs stay off: no memory traffic in this workload
  for (genvar g = 0; g < NH; g++) begin : g_side
    assign noc_req_ready[g] = 1'b1;
    assign noc_resp_valid[g] = 1'b0;
    assign noc_resp[g] = '0;
    assign noc_fwd_valid[g] = 1'b0;
    assign noc_fwd[g] = '0;
    assign noc_fwd_ack_ready[g] = 1'b1;
    assign mreq_valid[g] = 1'b0;
    assign mreq[g] = '0;
    assign mresp_ready[g] = 1'b1;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  semaphore port = new(1);
  task automatic mmio(input bit we, input logic [15:0] addr, input logic [63:0] wd,
                      output logic [63:0] rd, output int lat);
    realtime t0;
    port.get(1);
    @(negedge clk); mmio_valid = 1; mmio_req = '{we: we, addr: addr, wdata: wd}; #1;
    while (!mmio_ready) begin @(negedge clk); #1; end
    @(posedge clk); t0 = $realtime;
    @(negedge clk); mmio_valid = 0;
    while (!mmio_resp_valid) @(negedge clk);
    rd = mmio_rdata; lat = int'(($realtime - t0 + 5) / 10);
    port.put(1);
  endtask
  function automatic logic [15:0] sreg(input int i); return 16'h1000 | 16'(i * 8); endfunction

  // the eFPGA side: compute and push back
  real args [$];
  always @(posedge fpga_clk)
    if (rst_n && sr_down_valid && sr_down_ready && sr_down.typ == SR_SYNC && sr_down.idx == 2)
      args.push_back($bitstoreal(sr_down.data));
  initial forever begin
    real x;
    @(posedge fpga_clk);
    if (args.size() != 0) begin
      x = args.pop_front();
      repeat (4) @(negedge fpga_clk);                // the accelerator's pipeline, assumed
      push_valid = 1; push_idx = 4'd3; push_data = $realtobits($tan(x));
      @(negedge fpga_clk); push_valid = 0;
    end
  end

  logic [63:0] r; int lat;
  initial begin
    int bad = 0, wr_max = 0, rd_min = 1000;
    real x;
    repeat (3) @(posedge clk); rst_n = 1;
    mmio(1, 16'h0018, 4, r, lat);                    // eFPGA at 1/4 of the system clock
    mmio(1, 16'h0008, 0, r, lat);
    mmio(1, 16'h0000, 64'b01, r, lat);
    mmio(1, 16'h0040 + 8 * 2, 64'(SREG_FPGA_FIFO), r, lat);
    mmio(1, 16'h0040 + 8 * 3, 64'(SREG_CPU_FIFO), r, lat);
    for (int i = 0; i < N; i++) begin
      x = (real'($urandom_range(2999)) - 1499.0) / 1000.0;
      mmio(1, sreg(2), $realtobits(x), r, lat);
      if (lat > wr_max) wr_max = lat;
      mmio(0, sreg(3), 0, r, lat);
      if (lat < rd_min) rd_min = lat;
      if (r != $realtobits($tan(x))) begin
        bad++;
        $display("tan(%f): got %f", x, $bitstoreal(r));
      end
    end
    check(bad == 0, $sformatf("%0d of %0d results are the tangent of their argument", N - bad, N));
    check(wr_max == 1, $sformatf("argument write answered in %0d cycle(s), shadowed", wr_max));
    check(rd_min > 16, $sformatf("blocking result read took at least %0d cycles", rd_min));
    $display("tangent: %0d calls, argument write %0d cycle, result read at least %0d cycles", N, wr_max, rd_min);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
