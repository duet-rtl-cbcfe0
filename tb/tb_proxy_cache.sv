// tb_proxy_cache: the Proxy Cache between a modelled LLC/directory (answers every NoC
// request after LLC_LAT cycles and keeps the memory image) and a modelled soft cache.
// Directed checks: miss then hit, hit latency, store upgrade, prompt answers to NoC
// invalidations and downgrades (with dirty data), invalidations forwarded with the
// virtual address, no forwarding when switched off, answers to the NoC even while the
// eFPGA is not draining, dirty eviction (write-back + Inv of the victim), synonym
// handling, write-allocate StoreAck data. Then a random run of loads, stores and NoC
// coherence requests, checked against a flat reference memory.
module tb_proxy_cache;
  import duet_pkg::*;
  localparam int LLC_LAT = 5;
  localparam int SIZE = 8192;
  logic clk = 0, rst_n = 1, fwd_inv = 1, write_alloc = 0;
  initial #0.1 rst_n = 0;   // a real falling edge resets every asynchronously reset flop, clocked or not
  logic req_valid = 0, req_ready; mreq_type_e req_typ = MREQ_LOAD;
  logic [VADDR_W-1:0] req_vaddr = '0; logic [PADDR_W-1:0] req_paddr = '0;
  logic [63:0] req_data = '0; logic [7:0] req_be = '0;
  logic resp_valid, resp_ready = 1; mresp_t resp;
  logic noc_req_valid, noc_req_ready = 1; noc_req_t noc_req;
  logic noc_resp_valid = 0; noc_resp_t noc_resp = '0;
  logic noc_fwd_valid = 0, noc_fwd_ready; noc_fwd_t noc_fwd = '0;
  logic noc_fwd_ack_valid, noc_fwd_ack_ready = 1; noc_fwd_ack_t noc_fwd_ack;
  int checks = 0, failures = 0, cyc = 0;
  int n_gets = 0, n_getm = 0, n_putm = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  proxy_cache #(.SIZE_BYTES(SIZE)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // ---------------- LLC model ----------------
  logic [LINE_W-1:0] llc [logic [PADDR_W-1:0]];
  function automatic logic [LINE_W-1:0] llc_rd(input logic [PADDR_W-1:0] a);
    return llc.exists(a) ? llc[a] : {4{a[31:0] ^ 32'h5A5A_0000}};   // initial image
  endfunction
  int pend = -1; noc_req_t pend_req;
  always @(posedge clk) begin
    noc_resp_valid <= 1'b0;
    if (pend > 0) pend--;
    else if (pend == 0) begin
      noc_resp_valid <= 1'b1;
      noc_resp.data  <= llc_rd(pend_req.addr);
      pend = -1;
    end
    if (noc_req_valid && noc_req_ready) begin
      pend_req = noc_req; pend = LLC_LAT - 1;
      case (noc_req.typ)
        NOC_GETS: n_gets++;
        NOC_GETM: n_getm++;
        default: begin n_putm++; llc[noc_req.addr] = noc_req.data; end
      endcase
    end
    if (noc_fwd_ack_valid && noc_fwd_ack_ready && noc_fwd_ack.dirty)
      llc[noc_fwd_ack.addr] = noc_fwd_ack.data;
  end

  // ---------------- soft-cache side monitor ----------------
  mresp_t got[$];
  always @(posedge clk) if (resp_valid && resp_ready) got.push_back(resp);

  // ---------------- reference memory ----------------
  logic [LINE_W-1:0] refm [logic [PADDR_W-1:0]];
  function automatic logic [LINE_W-1:0] ref_rd(input logic [PADDR_W-1:0] a);
    return refm.exists(a) ? refm[a] : {4{a[31:0] ^ 32'h5A5A_0000}};
  endfunction

  // issue one request; returns cycles from presenting to acceptance
  task automatic issue(input mreq_type_e t, input logic [VADDR_W-1:0] va, input logic [PADDR_W-1:0] pa,
                       input logic [63:0] d, input logic [7:0] be, output int lat);
    int t0;
    @(negedge clk);
    req_valid = 1; req_typ = t; req_vaddr = va; req_paddr = pa; req_data = d; req_be = be;
    t0 = cyc; #1;
    while (!req_ready) begin @(negedge clk); #1; end
    lat = cyc - t0;
    if (t == MREQ_STORE) begin
      logic [PADDR_W-1:0] la; logic [LINE_W-1:0] l;
      la = {pa[PADDR_W-1:4], 4'h0}; l = ref_rd(la);
      for (int b = 0; b < 8; b++) if (be[b]) l[{pa[3], 3'(b), 3'd0} +: 8] = d[8*b +: 8];
      refm[la] = l;
    end
    @(negedge clk); req_valid = 0;
  endtask

  // coherence request from the NoC; returns the ack and the cycles it took
  task automatic fwd(input noc_fwd_type_e t, input logic [PADDR_W-1:0] a, output noc_fwd_ack_t ack, output int lat);
    int t0;
    @(negedge clk); noc_fwd_valid = 1; noc_fwd = '{typ: t, addr: a}; t0 = cyc; #1;
    while (!noc_fwd_ready) begin @(negedge clk); #1; end
    ack = noc_fwd_ack; lat = cyc - t0;
    @(negedge clk); noc_fwd_valid = 0;
  endtask

  int lat; noc_fwd_ack_t ack; mresp_t m;
  logic [PADDR_W-1:0] A; logic [VADDR_W-1:0] VA;
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    A = 40'h00_1234_5670; VA = {27'h0000AB, A[11:0]};
    // 1. load miss
    got = {};
    issue(MREQ_LOAD, VA, A, 0, 0, lat);
    check(n_gets == 1, "load miss sends GETS");
    check(lat >= LLC_LAT && lat <= LLC_LAT + 4, $sformatf("miss latency %0d", lat));
    check(got.size() == 1 && got[0].typ == MRESP_LOAD_ACK && got[0].data == ref_rd(A) &&
          got[0].addr == VA, "LoadAck with memory data and virtual address");
    // 2. load hit, same cycle
    got = {};
    issue(MREQ_LOAD, VA, A, 0, 0, lat);
    check(lat == 0 && n_gets == 1 && got.size() == 1 && got[0].data == ref_rd(A), $sformatf("hit served at once lat=%0d gets=%0d got=%0d", lat, n_gets, got.size()));
    // 3. store to a shared line: upgrade
    issue(MREQ_STORE, VA | 39'h8, A | 40'h8, 64'h1122_3344_5566_7788, 8'hFF, lat);
    check(n_getm == 1, "store to S line sends GETM");
    got = {};
    issue(MREQ_STORE, VA, A, 64'hAAAA, 8'h03, lat);
    check(lat == 0 && n_getm == 1, "store to M line hits");
    check(got.size() == 1 && got[0].typ == MRESP_STORE_ACK && got[0].data == '0, "StoreAck without data (no write-allocate)");
    // 4. downgrade: dirty data returned at once, line stays readable
    fwd(FWD_DOWNGRADE, A, ack, lat);
    check(lat == 0 && ack.dirty && ack.data == ref_rd(A), "downgrade answered at once with dirty data");
    got = {};
    issue(MREQ_LOAD, VA, A, 0, 0, lat);
    check(lat == 0 && got[0].data == ref_rd(A), "still a hit after downgrade");
    // 5. invalidation: ack at once, Inv to the soft cache with the virtual address
    got = {};
    fwd(FWD_INV, A, ack, lat);
    check(lat == 0 && !ack.dirty, "invalidation of a clean line answered at once");
    @(negedge clk);
    check(got.size() == 1 && got[0].typ == MRESP_INV && got[0].addr == VA, "Inv forwarded with the virtual address");
    got = {};
    issue(MREQ_LOAD, VA, A, 0, 0, lat);
    check(n_gets == 2 && got[0].data == ref_rd(A), "reload after invalidation");
    // 6. no forwarding when switched off; NoC answered while the eFPGA is not draining
    fwd_inv = 0; resp_ready = 0; got = {};
    fwd(FWD_INV, A, ack, lat);
    check(lat == 0, "answered although the eFPGA queue is blocked");
    resp_ready = 1; @(negedge clk);
    check(got.size() == 0, "no Inv forwarded when switched off");
    fwd_inv = 1;
    // 7. dirty eviction
    issue(MREQ_STORE, VA, A, 64'h77, 8'h01, lat);
    got = {};
    issue(MREQ_LOAD, VA + 39'(SIZE), A + 40'(SIZE), 0, 0, lat);
    check(n_putm == 1 && llc[A[39:4] << 4] == ref_rd({A[39:4], 4'h0}), "dirty victim written back");
    check(got.size() == 2 && got[0].typ == MRESP_INV && got[0].addr == VA &&
          got[1].typ == MRESP_LOAD_ACK, "victim invalidated in the soft cache before the fill answer");
    // 8. synonym: same physical line through another virtual page
    got = {};
    issue(MREQ_LOAD, {27'h0000CD, A[11:0]} + 39'(SIZE), A + 40'(SIZE), 0, 0, lat);
    check(got.size() == 2 && got[0].typ == MRESP_INV && got[0].addr == VA + 39'(SIZE) &&
          got[1].typ == MRESP_LOAD_ACK && got[1].addr == {27'h0000CD, A[11:0]} + 39'(SIZE),
          "synonym: old virtual line invalidated first");
    // 9. write-allocate StoreAck carries the line
    write_alloc = 1; got = {};
    issue(MREQ_STORE, VA, A, 64'hFEED, 8'h0F, lat);
    check(got[$].typ == MRESP_STORE_ACK && got[$].data == ref_rd({A[39:4], 4'h0}), "write-allocate StoreAck data");
    write_alloc = 0;
    // 10. random run vs reference memory
    fwd_inv = 0;
    for (int i = 0; i < 600; i++) begin
      logic [PADDR_W-1:0] pa;
      pa = {20'h00001, 4'($urandom_range(0, 3)), 9'($urandom_range(0, 7)), 3'($urandom_range(0, 1)) << 3, 4'h0};
      pa = pa | 40'($urandom_range(0, 1) << 3);
      case ($urandom_range(0, 3))
        0, 1: begin
          got = {};
          issue(MREQ_LOAD, 39'(pa), pa, 0, 0, lat);
          check(got.size() == 1 && got[0].data == ref_rd({pa[39:4], 4'h0}), $sformatf("random load %h", pa));
        end
        2: issue(MREQ_STORE, 39'(pa), pa, {$urandom, $urandom}, 8'($urandom), lat);
        default: fwd($urandom_range(0, 1) ? FWD_INV : FWD_DOWNGRADE, {pa[39:4], 4'h0}, ack, lat);
      endcase
    end
    $display("GETS=%0d GETM=%0d PUTM=%0d", n_gets, n_getm, n_putm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
