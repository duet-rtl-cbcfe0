// llc_model: behavioural model of the shared last-level cache and directory as seen by one
// Proxy Cache NoC port, used by testbenches. Every GETS/GETM/PUTM is answered with the line
// LAT cycles after it is accepted (one request at a time); a PUTM or a dirty forward ack
// updates the memory image. The initial image of a line is a function of its address
// (init_line), so every test knows what a first load must return. The model does not
// issue forwarded requests itself: the testbench drives those to exercise coherence.
// While rst_n is low it takes nothing and drops what it had pending.
module llc_model
  import duet_pkg::*;
#(
  parameter int LAT = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         noc_req_valid,
  output logic         noc_req_ready,
  input  noc_req_t     noc_req,
  output logic         noc_resp_valid,
  output noc_resp_t    noc_resp,
  input  logic         noc_fwd_ack_valid,
  output logic         noc_fwd_ack_ready,
  input  noc_fwd_ack_t noc_fwd_ack
);
  logic [LINE_W-1:0] mem [logic [PADDR_W-1:0]];
  int       pend = -1;
  noc_req_t pend_req;

  function automatic logic [LINE_W-1:0] init_line(input logic [PADDR_W-1:0] a);
    return {4{a[31:0] ^ 32'h5A5A_0000}};
  endfunction
  function automatic logic [LINE_W-1:0] rd(input logic [PADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : init_line(a);
  endfunction

  assign noc_req_ready     = (pend < 0);
  assign noc_fwd_ack_ready = 1'b1;

  initial begin noc_resp_valid = 1'b0; noc_resp = '0; end

  always @(posedge clk) begin
    noc_resp_valid <= 1'b0;
    if (!rst_n) pend = -1;
    if (pend > 0) pend = pend - 1;
    else if (pend == 0) begin
      noc_resp_valid <= 1'b1;
      noc_resp.data  <= rd(pend_req.addr);
      pend = -1;
    end
    if (rst_n && noc_req_valid && noc_req_ready) begin
      if (noc_req.typ == NOC_PUTM) mem[noc_req.addr] = noc_req.data;
      pend_req = noc_req; pend = LAT - 1;
    end
    if (rst_n && noc_fwd_ack_valid && noc_fwd_ack_ready && noc_fwd_ack.dirty)
      mem[noc_fwd_ack.addr] = noc_fwd_ack.data;
  end
endmodule
