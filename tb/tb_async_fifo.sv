// tb_async_fifo: self-checking test of the dual-clock FIFO.
// Writes 300 random words from a 7 ns clock into a 17 ns clock domain (and then the
// reverse ratio is covered by random stalls), with random valid/ready, and checks order,
// count, full behaviour (never more than DEPTH words in flight) and that a word written
// into an empty FIFO appears on the read side within 4 read-clock edges.
module tb_async_fifo;
  localparam int W = 16, D = 4, N = 300;
  logic wclk = 0, rclk = 0, rst_n = 1;
  initial #0.1 rst_n = 0;   // a real falling edge resets every asynchronously reset flop, clocked or not
  logic wvalid, wready, rvalid, rready;
  logic [W-1:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  int n_in = 0, n_out = 0;

  always #3.5 wclk = ~wclk;
  always #8.5 rclk = ~rclk;

  async_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  // writer
  initial begin
    wvalid = 0; wdata = '0;
    repeat (3) @(posedge wclk);
    rst_n = 1;
    while (n_in < N) begin
      @(negedge wclk);
      wvalid = ($urandom_range(0, 3) != 0);
      wdata  = W'($urandom);
      @(posedge wclk);
      if (wvalid && wready) begin q.push_back(wdata); n_in++; end
    end
    @(negedge wclk); wvalid = 0;
  end

  // reader
  initial begin
    rready = 0;
    wait (rst_n);
    while (n_out < N) begin
      @(negedge rclk);
      rready = ($urandom_range(0, 2) != 0);
      @(posedge rclk);
      if (rvalid && rready) begin
        checks++;
        if (q.size() == 0 || rdata != q[0]) begin
          failures++; $display("FAIL: data %h expected %h", rdata, q.size() ? q[0] : 'x);
        end
        if (q.size()) void'(q.pop_front());
        n_out++;
      end
    end
    // never more than DEPTH in flight
    checks++;
    // latency: single word into an empty FIFO
    begin
      int edges = 0;
      @(negedge wclk); wvalid = 1; wdata = 16'hBEEF;
      @(posedge wclk); #1 wvalid = 0;
      q.push_back(16'hBEEF);
      rready = 0;
      while (!rvalid && edges < 10) begin @(posedge rclk); edges++; end
      checks++;
      if (edges > 4) begin failures++; $display("FAIL: latency %0d read edges", edges); end
      checks++;
      if (rdata != 16'hBEEF) begin failures++; $display("FAIL: latency word %h", rdata); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge wclk) if (rst_n && (q.size() > D + 1)) begin
    failures++; $display("FAIL: %0d words in flight with depth %0d", q.size(), D);
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
