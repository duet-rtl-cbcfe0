// tb_workload_bfs: the paper's BFS workload (several processors, no Memory Hub) on the full
// adapter at its default parameters. Parallel breadth-first search over a random graph
// uses a lock-free work queue kept in the eFPGA, reached only through shadow registers:
//   reg 2 (FPGA-bound FIFO)  a processor enqueues a vertex it has reached;
//   reg 7 (token FIFO)       a processor asks for work: 1 = a vertex is waiting, 0 = empty,
//                            answered at once and never blocking;
//   reg 3 (CPU-bound FIFO)   after taking a token the processor pops the vertex itself.
// The modelled eFPGA drops vertices it has seen before (the visited set), and for each new
// one pushes the vertex to reg 3 and then a token to reg 7, in that order, so a token
// always has its vertex ahead of it. Four processor threads share the one MMIO port, as
// cores share the adapter through the NoC; the queue needs no software lock. The graph
// and its size (64 vertices, 3 random edges each) are this testbench's own; the paper
// gives none. Checked: every vertex reachable from vertex 0 is handed out exactly once and
// no other vertex is; "empty" answers happened and every token read was answered one cycle
// after it was accepted (the shadow copy, not a round trip to the eFPGA).
module tb_workload_bfs;
  import duet_pkg::*;
  localparam int NH = 2, NV = 64, DEG = 3, NT = 4;
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

  // the graph and the reference reachable set
  int adj [NV][DEG];
  bit reach [NV];
  // the eFPGA side: visited filter and queue feed
  bit visited [NV];
  int enq_count = 0, n_dup = 0;
  int incoming [$];
  always @(posedge fpga_clk)
    if (rst_n && sr_down_valid && sr_down_ready && sr_down.typ == SR_SYNC && sr_down.idx == 2)
      incoming.push_back(int'(sr_down.data[7:0]));
  task automatic push(input int idx, input logic [63:0] d);
    @(negedge fpga_clk); push_valid = 1; push_idx = 4'(idx); push_data = d;
    @(negedge fpga_clk); push_valid = 0;
  endtask
  initial forever begin
    int u;
    @(posedge fpga_clk);
    while (incoming.size() != 0) begin
      u = incoming.pop_front();
      if (visited[u]) n_dup++;
      else begin
        visited[u] = 1; enq_count++;
        push(3, 64'(u));
        push(7, 64'd1);
      end
    end
  end

  // processor threads
  int taken [NV];
  int expanded = 0, n_empty = 0, n_tok = 0, max_tok_lat = 0;
  int per_thread [NT];
  bit done = 0;
  task automatic worker(input int t);
    logic [63:0] r; int lat, v;
    while (!done) begin
      mmio(0, sreg(7), 0, r, lat);
      if (lat > max_tok_lat) max_tok_lat = lat;
      if (r == 0) begin n_empty++; repeat (5 + t) @(posedge clk); end
      else begin
        n_tok++;
        mmio(0, sreg(3), 0, r, lat);
        v = int'(r[7:0]);
        taken[v]++; per_thread[t]++;
        for (int k = 0; k < DEG; k++) mmio(1, sreg(2), 64'(adj[v][k]), r, lat);
        expanded++;
      end
    end
  endtask

  logic [63:0] r0; int l0;
  initial begin
    int q [$];
    for (int v = 0; v < NV; v++) for (int k = 0; k < DEG; k++) adj[v][k] = int'($urandom_range(NV - 1));
    reach[0] = 1; q.push_back(0);
    while (q.size() != 0) begin
      int v;
      v = q.pop_front();
      for (int k = 0; k < DEG; k++) if (!reach[adj[v][k]]) begin reach[adj[v][k]] = 1; q.push_back(adj[v][k]); end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    mmio(1, 16'h0018, 4, r0, l0);                    // eFPGA at 1/4 of the system clock
    mmio(1, 16'h0008, 0, r0, l0);
    mmio(1, 16'h0000, 64'b01, r0, l0);
    mmio(1, 16'h0040 + 8 * 2, 64'(SREG_FPGA_FIFO), r0, l0);
    mmio(1, 16'h0040 + 8 * 3, 64'(SREG_CPU_FIFO), r0, l0);
    mmio(1, 16'h0040 + 8 * 7, 64'(SREG_TOKEN_FIFO), r0, l0);
    mmio(1, sreg(2), 64'd0, r0, l0);                 // the source vertex
    for (int t = 0; t < NT; t++) begin
      automatic int tt = t;
      fork worker(tt); join_none
    end
    // finished when every vertex handed out has been expanded and nothing new arrives
    begin
      int quiet = 0;
      while (quiet < 400) begin
        @(posedge clk);
        if (enq_count != 0 && expanded == enq_count && incoming.size() == 0) quiet++; else quiet = 0;
      end
    end
    done = 1;
    repeat (200) @(posedge clk);
    begin
      int bad = 0, nreach = 0;
      for (int v = 0; v < NV; v++) begin
        if (reach[v]) nreach++;
        if (taken[v] != (reach[v] ? 1 : 0)) bad++;
      end
      check(bad == 0, $sformatf("every reachable vertex handed out exactly once (%0d wrong)", bad));
      check(enq_count == nreach, $sformatf("queue took %0d vertices, %0d reachable", enq_count, nreach));
      check(n_tok == nreach, $sformatf("%0d tokens consumed for %0d vertices", n_tok, nreach));
      check(n_empty > 0, "token FIFO answered empty");
      check(max_tok_lat == 1, $sformatf("token read answered in %0d cycle(s), shadowed", max_tok_lat));
      check(n_dup > 0, "visited filter dropped repeated vertices");
      $display("bfs: %0d of %0d vertices reached, %0d repeats dropped, %0d empty polls, per thread %0d/%0d/%0d/%0d",
               nreach, NV, n_dup, n_empty, per_thread[0], per_thread[1], per_thread[2], per_thread[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
