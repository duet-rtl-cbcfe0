// proxy_cache: the Memory Hub's private hard cache, which takes part in system-wide
// coherence on the eFPGA's behalf and serves the soft accelerator through a simple
// Load/Store interface in the processor clock domain.
//
// What follows the paper:
//   * The eFPGA issues only Load and Store and receives LoadAck, StoreAck and Inv.
//   * Coherence requests from the NoC (invalidate, downgrade) are answered at once from
//     the hard cache. When invalidation forwarding is on (soft cache in use), an Inv for
//     the line is queued towards the soft cache in the same cycle, but no acknowledgement
//     is expected or accepted from it. The soft cache must be write-through, so the hard
//     copy is always up to date.
//   * Responses and invalidations leave through one in-order queue, so the soft cache
//     sees them in the order the Proxy Cache produced them.
//   * Each line stores the virtual page number it was last requested with, so an
//     invalidation can be sent with the address the (virtually tagged) soft cache knows.
//     A request that hits a line under a different virtual page first invalidates the old
//     virtual address in the soft cache (no synonyms in the soft cache).
//   * When a line is evicted while forwarding is on, the soft cache is told to drop it, so
//     the soft cache stays a subset of the hard cache (required for the forwarding to be
//     complete; the paper does not spell this out).
//   * A StoreAck carries the updated line when write-allocate is selected, for a
//     write-allocate soft cache; otherwise it carries no data.
//   * 8 KB capacity, 16-byte lines, write-back to the LLC, 8-byte stores.
// This design's own simplifications (the paper reuses the unmodified OpenPiton P-Mesh L2,
// whose protocol it does not give): a direct-mapped organisation; a simplified MSI-style
// NoC protocol (GETS / GETM / PUTM requests answered by one response each, and forwarded
// INV / DOWNGRADE answered by an ack carrying dirty data); one outstanding miss at a time;
// no atomic operations.
//
// Timing: a hit is answered in the cycle it is presented (req_ready and resp_valid in the
// same cycle); a miss costs one NoC round trip (plus a write-back round trip for a dirty
// victim) and is then answered as a hit. A coherence request is acked in the cycle it
// is presented, unless the ack or the Inv cannot be queued.
// rst_n is an asynchronous reset throughout; lint may also see it as a synchronous
// input, but that use is only the disable iff of the handshake assertions (here or in
// the blocks below), which are not part of the circuit.
module proxy_cache
  import duet_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 8192   // paper: 8KB private L2 per tile
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               fwd_inv,      // forward invalidations to the soft cache
  input  logic               write_alloc,  // StoreAck carries the line
  // accelerator side (already translated)
  input  logic               req_valid,
  output logic               req_ready,
  input  mreq_type_e         req_typ,
  input  logic [VADDR_W-1:0] req_vaddr,
  input  logic [PADDR_W-1:0] req_paddr,
  input  logic [WORD_W-1:0]  req_data,
  input  logic [7:0]         req_be,
  output logic               resp_valid,
  input  logic               resp_ready,
  output mresp_t             resp,
  // NoC side
  output logic               noc_req_valid,
  input  logic               noc_req_ready,
  output noc_req_t           noc_req,
  input  logic               noc_resp_valid,
  input  noc_resp_t          noc_resp,
  input  logic               noc_fwd_valid,
  output logic               noc_fwd_ready,
  input  noc_fwd_t           noc_fwd,
  output logic               noc_fwd_ack_valid,
  input  logic               noc_fwd_ack_ready,
  output noc_fwd_ack_t       noc_fwd_ack
);
  localparam int unsigned SETS  = SIZE_BYTES / LINE_BYTES;
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = PADDR_W - IDX_W - OFF_W;

  typedef enum logic [2:0] { S_IDLE, S_SYN_INV, S_EVICT, S_WB_REQ, S_WB_WAIT, S_MISS_REQ, S_MISS_WAIT } state_e;
  state_e state;

  logic              valid [SETS];
  logic              dirty [SETS];
  logic [TAG_W-1:0]  tag   [SETS];
  logic [VPN_W-1:0]  vpn   [SETS];
  logic [LINE_W-1:0] data  [SETS];

  // ---------------- request lookup ----------------
  // Outside IDLE the FSM works on a latched copy of the request, so a miss in flight
  // completes coherently even if the request at the input changes or is withdrawn.
  mreq_type_e         m_typ, c_typ;
  logic [VADDR_W-1:0] m_vaddr, c_vaddr;
  logic [PADDR_W-1:0] m_paddr, c_paddr;
  assign c_typ   = (state == S_IDLE) ? req_typ   : m_typ;
  assign c_vaddr = (state == S_IDLE) ? req_vaddr : m_vaddr;
  assign c_paddr = (state == S_IDLE) ? req_paddr : m_paddr;

  logic [IDX_W-1:0] r_idx;
  logic [TAG_W-1:0] r_tag;
  logic [VPN_W-1:0] r_vpn;
  logic             r_hit, r_vpn_ok, r_owned;
  assign r_idx    = c_paddr[OFF_W +: IDX_W];
  assign r_tag    = c_paddr[PADDR_W-1 -: TAG_W];
  assign r_vpn    = c_vaddr[VADDR_W-1:PAGE_OFF_W];
  assign r_hit    = valid[r_idx] && tag[r_idx] == r_tag;
  assign r_vpn_ok = !fwd_inv || vpn[r_idx] == r_vpn;
  assign r_owned  = dirty[r_idx];

  // store merge into the line
  logic [LINE_W-1:0] merged;
  always_comb begin
    merged = data[r_idx];
    for (int b = 0; b < 8; b++) begin
      if (req_be[b]) merged[{req_vaddr[3], 3'(b), 3'd0} +: 8] = req_data[8*b +: 8];
    end
  end

  // Address of a line as the soft cache knows it: stored virtual page + page offset.
  function automatic logic [VADDR_W-1:0] soft_addr(input logic [VPN_W-1:0] v, input logic [PAGE_OFF_W-1:0] off);
    return {v, off[PAGE_OFF_W-1:OFF_W], OFF_W'(0)};
  endfunction

  // ---------------- coherence requests from the NoC ----------------
  logic [IDX_W-1:0] f_idx;
  logic             f_hit, f_need_inv, fwd_allowed, fwd_fire;
  assign f_idx       = noc_fwd.addr[OFF_W +: IDX_W];
  assign f_hit       = valid[f_idx] && tag[f_idx] == noc_fwd.addr[PADDR_W-1 -: TAG_W];
  assign f_need_inv  = f_hit && fwd_inv && noc_fwd.typ == FWD_INV;
  // coherence requests are served in any state in which the FSM itself neither uses the
  // response queue nor writes the arrays
  assign fwd_allowed = (state == S_WB_REQ || state == S_WB_WAIT || state == S_MISS_REQ ||
                        (state == S_MISS_WAIT && !noc_resp_valid) ||
                        (state == S_IDLE));
  assign fwd_fire    = noc_fwd_valid && fwd_allowed && noc_fwd_ack_ready && (!f_need_inv || resp_ready);

  assign noc_fwd_ready     = fwd_fire;
  assign noc_fwd_ack_valid = noc_fwd_valid && fwd_allowed && (!f_need_inv || resp_ready);
  assign noc_fwd_ack.addr  = {noc_fwd.addr[PADDR_W-1:OFF_W], OFF_W'(0)};
  assign noc_fwd_ack.dirty = f_hit && dirty[f_idx];
  assign noc_fwd_ack.data  = data[f_idx];

  // ---------------- main request path ----------------
  logic [PADDR_W-1:0] victim_addr;
  logic [LINE_W-1:0]  wb_data;
  logic [PADDR_W-1:0] wb_addr;
  logic               hit_fire;
  logic [PADDR_W-1:0] line_paddr;

  assign line_paddr  = {c_paddr[PADDR_W-1:OFF_W], OFF_W'(0)};
  assign victim_addr = {tag[r_idx], r_idx, OFF_W'(0)};

  // A hit is served in IDLE when no coherence request competes for the arrays/queue.
  assign hit_fire  = (state == S_IDLE) && req_valid && !noc_fwd_valid && r_hit && r_vpn_ok &&
                     (req_typ == MREQ_LOAD || r_owned) && resp_ready;
  assign req_ready = hit_fire;

  always_comb begin
    resp_valid = 1'b0;
    resp       = '{typ: MRESP_LOAD_ACK, addr: {req_vaddr[VADDR_W-1:OFF_W], OFF_W'(0)}, data: data[r_idx]};
    if (fwd_fire && f_need_inv) begin
      resp_valid = 1'b1;
      resp       = '{typ: MRESP_INV, addr: soft_addr(vpn[f_idx], noc_fwd.addr[PAGE_OFF_W-1:0]), data: '0};
    end else if (hit_fire) begin
      resp_valid = 1'b1;
      if (req_typ == MREQ_STORE)
        resp = '{typ: MRESP_STORE_ACK, addr: {req_vaddr[VADDR_W-1:OFF_W], OFF_W'(0)},
                 data: write_alloc ? merged : '0};
    end else if (state == S_SYN_INV || (state == S_EVICT && fwd_inv)) begin
      resp_valid = 1'b1;
      resp       = '{typ: MRESP_INV, addr: soft_addr(vpn[r_idx], victim_addr[PAGE_OFF_W-1:0]), data: '0};
    end
  end

  always_comb begin
    noc_req_valid = (state == S_WB_REQ) || (state == S_MISS_REQ);
    noc_req       = '{typ: NOC_PUTM, addr: wb_addr, data: wb_data};
    if (state == S_MISS_REQ)
      noc_req = '{typ: (c_typ == MREQ_STORE) ? NOC_GETM : NOC_GETS, addr: line_paddr, data: '0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      wb_data <= '0;
      wb_addr <= '0;
      m_typ   <= MREQ_LOAD;
      m_vaddr <= '0;
      m_paddr <= '0;
      for (int i = 0; i < int'(SETS); i++) begin
        valid[i] <= 1'b0;
        dirty[i] <= 1'b0;
      end
    end else begin
      if (state == S_IDLE) begin
        m_typ <= req_typ; m_vaddr <= req_vaddr; m_paddr <= req_paddr;
      end
      // coherence requests
      if (fwd_fire && f_hit) begin
        if (noc_fwd.typ == FWD_INV) valid[f_idx] <= 1'b0;
        dirty[f_idx] <= 1'b0;
      end
      case (state)
        S_IDLE: begin
          if (hit_fire && req_typ == MREQ_STORE) begin
            // data written in the array block below
          end else if (req_valid && !noc_fwd_valid && !hit_fire) begin
            if (r_hit && !r_vpn_ok)                  state <= S_SYN_INV;
            else if (r_hit && req_typ == MREQ_STORE && !r_owned) state <= S_MISS_REQ; // upgrade
            else if (!r_hit && valid[r_idx])         state <= S_EVICT;
            else if (!r_hit)                         state <= S_MISS_REQ;
          end
        end
        S_SYN_INV: if (resp_ready) state <= S_IDLE;   // vpn updated below
        S_EVICT: if (!fwd_inv || resp_ready) begin
          valid[r_idx] <= 1'b0;
          dirty[r_idx] <= 1'b0;
          wb_data      <= data[r_idx];
          wb_addr      <= victim_addr;
          state        <= dirty[r_idx] ? S_WB_REQ : S_MISS_REQ;
        end
        S_WB_REQ:    if (noc_req_ready) state <= S_WB_WAIT;
        S_WB_WAIT:   if (noc_resp_valid) state <= S_MISS_REQ;
        S_MISS_REQ:  if (noc_req_ready) state <= S_MISS_WAIT;
        S_MISS_WAIT: if (noc_resp_valid) begin
          valid[r_idx] <= 1'b1;
          dirty[r_idx] <= (c_typ == MREQ_STORE);
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // tag / vpn / data arrays (not reset: guarded by valid)
  always_ff @(posedge clk) begin
    if (state == S_MISS_WAIT && noc_resp_valid) begin
      tag[r_idx]  <= r_tag;
      vpn[r_idx]  <= r_vpn;
      data[r_idx] <= noc_resp.data;
    end else if (state == S_SYN_INV && resp_ready) begin
      vpn[r_idx]  <= r_vpn;
    end else if (hit_fire && req_typ == MREQ_STORE) begin
      data[r_idx] <= merged;
    end
  end

  // Rules of the interfaces
  a_noc_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (noc_req_valid && !noc_req_ready) |=> noc_req_valid);
  a_no_resp_when_idle_wait: assert property (@(posedge clk) disable iff (!rst_n)
    noc_resp_valid |-> (state == S_WB_WAIT || state == S_MISS_WAIT));
endmodule
