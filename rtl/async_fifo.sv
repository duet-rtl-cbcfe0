// async_fifo: dual-clock FIFO used for every crossing between the processor clock and
// the eFPGA clock.
//
// As in the paper's prototype, it is built from a dual-clock RAM and Gray-coded pointers
// passed through 2-stage synchronizers. Messages leave in the order they entered, which
// the Proxy Cache relies on (invalidations, fills and acks reach the soft cache in order).
//
// Interface: write side (wclk) has wvalid/wready/wdata, read side (rclk) has
// rvalid/rready/rdata in first-word-fall-through style. A word written at a wclk edge
// becomes visible on the read side after two to three rclk edges; freed space is seen
// on the write side after two to three wclk edges.
// DEPTH must be a power of two. rst_n is asserted asynchronously in both domains
// (this design's choice; the paper does not discuss reset).
module async_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4   // assumed: the paper says async FIFOs "typically take two to four stages"
) (
  input  logic             wclk,
  input  logic             rclk,
  input  logic             rst_n,
  input  logic             wvalid,
  output logic             wready,
  input  logic [WIDTH-1:0] wdata,
  output logic             rvalid,
  input  logic             rready,
  output logic [WIDTH-1:0] rdata
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer synchronised into wclk
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer synchronised into rclk

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write domain ----------------
  logic [AW:0] wbin_next;
  assign wready    = ((wbin - gray2bin(rgray_w2)) != (AW+1)'(DEPTH));
  assign wbin_next = wbin + (AW+1)'(wvalid && wready);

  always_ff @(posedge wclk or negedge rst_n) begin
    if (!rst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin <= wbin_next;
      wgray <= bin2gray(wbin_next);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge wclk) begin
    if (wvalid && wready) mem[wbin[AW-1:0]] <= wdata;
  end

  // ---------------- read domain ----------------
  logic [AW:0] rbin_next;
  assign rvalid    = (rgray != wgray_r2);
  assign rbin_next = rbin + (AW+1)'(rvalid && rready);
  assign rdata     = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rst_n) begin
    if (!rst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin <= rbin_next;
      rgray <= bin2gray(rbin_next);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  initial begin
    assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0) else $error("async_fifo: DEPTH must be a power of two >= 2");
  end
endmodule
