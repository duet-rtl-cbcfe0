// soft_reg_intf: the Control Hub's Soft Register Interface (processor-clock side).
//
// Processors reach the soft accelerator's "device registers" by MMIO. This block serves
// those MMIOs strictly one at a time, in arrival order, so I/O ordering holds across
// shadowed and normal registers (a shadowed access waits behind an outstanding normal
// one, as in the paper's ordering example).
//   * Normal register: the write or read is sent to the eFPGA over the down FIFO and the
//     processor is answered only when the eFPGA's ACK or RDATA comes back.
//   * Plain / FPGA-bound FIFO register, write: the plain copy is updated, a SYNC carrying
//     the value is queued for the eFPGA, and the processor is answered at once.
//   * Plain register read: answered from the shadow copy. Token FIFO read: answered at
//     once with 1 (a token consumed) or 0 (empty). CPU-bound FIFO read: answered as soon
//     as a value is present; it blocks until the eFPGA pushes one or the timeout fires.
//   * Writes to CPU-bound and token FIFO registers are acknowledged and dropped (this
//     design's choice; the paper does not define them).
// The eFPGA's PUSH messages update shadow registers at any time. Every message from
// the eFPGA carries a parity bit, checked here (a bad message is dropped); waits on the
// eFPGA are reported to the exception handler as wait_active. When the hub is inactive
// (switched off or after an exception) every access is answered at once, reads with
// BOGUS_DATA, so a broken accelerator cannot stall a processor.
// Timing: a request is accepted in IDLE; a locally served access is answered on the
// next cycle (resp_valid), a normal access when the eFPGA's answer has crossed back.
// rst_n is an asynchronous reset throughout; lint may also see it as a synchronous
// input, but that use is only the disable iff of the handshake assertions (here or in
// the blocks below), which are not part of the circuit.
module soft_reg_intf
  import duet_pkg::*;
#(
  parameter int unsigned NUM_SREGS  = 16,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  active,
  input  sreg_type_e            sreg_type [NUM_SREGS],
  // processor side
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic                  req_we,
  input  logic [SREG_IDX_W-1:0] req_idx,
  input  logic [WORD_W-1:0]     req_wdata,
  output logic                  resp_valid,
  output logic [WORD_W-1:0]     resp_rdata,
  // towards the eFPGA (write side of the NoC->FPGA async FIFO)
  output logic                  down_valid,
  input  logic                  down_ready,
  output sr_down_t              down,
  // from the eFPGA (read side of the FPGA->NoC async FIFO)
  input  logic                  up_valid,
  output logic                  up_ready,
  input  sr_up_t                up,
  // exception monitoring
  output logic                  chk_valid,
  output logic                  chk_parity_ok,
  output logic                  wait_active
);
  typedef enum logic [1:0] { S_IDLE, S_SEND, S_WAIT_EFPGA, S_WAIT_FIFO } state_e;
  state_e state;

  logic                  cur_we;
  logic [SREG_IDX_W-1:0] cur_idx;
  logic [WORD_W-1:0]     cur_wdata;

  // shadow register file
  logic [SREG_IDX_W-1:0] sh_rd_idx;
  logic                  sh_rd_avail, sh_rd_pop, sh_wr_en, sh_push_ready;
  logic [WORD_W-1:0]     sh_rd_data;

  logic       up_par_ok, up_is_push;
  sreg_type_e req_type;

  assign req_type   = sreg_type[req_idx];
  assign up_par_ok  = (^{up.typ, up.idx, up.data}) == up.parity;
  assign up_is_push = (up.typ == SR_PUSH);

  // An eFPGA message is taken when it is a push the shadow file can hold, or any other
  // message (answers complete the outstanding access; stray ones are dropped).
  assign up_ready      = !(up_is_push && up_par_ok && !sh_push_ready);
  assign chk_valid     = up_valid && up_ready;
  assign chk_parity_ok = up_par_ok;
  assign wait_active   = (state == S_WAIT_EFPGA) || (state == S_WAIT_FIFO);

  // Request acceptance: only in IDLE; a shadowed write must be able to queue its SYNC.
  logic needs_sync;
  assign needs_sync = req_we && (req_type == SREG_PLAIN || req_type == SREG_FPGA_FIFO);
  assign req_ready  = (state == S_IDLE) && (!active || !needs_sync || down_ready);

  always_comb begin
    sh_rd_idx = (state == S_IDLE) ? req_idx : cur_idx;
    sh_rd_pop = 1'b0;
    sh_wr_en  = 1'b0;
    down_valid = 1'b0;
    down       = '{typ: SR_SYNC, idx: req_idx, data: req_wdata};
    if (state == S_IDLE && req_valid && req_ready && active) begin
      if (!req_we && (req_type == SREG_TOKEN_FIFO || (req_type == SREG_CPU_FIFO && sh_rd_avail)))
        sh_rd_pop = 1'b1;
      if (needs_sync) begin
        sh_wr_en   = (req_type == SREG_PLAIN);
        down_valid = 1'b1;
      end
    end else if (state == S_SEND) begin
      down_valid = 1'b1;
      down       = '{typ: cur_we ? SR_WR : SR_RD, idx: cur_idx, data: cur_wdata};
    end else if (state == S_WAIT_FIFO && active && sh_rd_avail) begin
      sh_rd_pop = 1'b1;
    end
  end

  shadow_regs #(.NUM_SREGS(NUM_SREGS), .FIFO_DEPTH(FIFO_DEPTH)) u_shadow (
    .clk, .rst_n, .sreg_type,
    .rd_idx    (sh_rd_idx),
    .rd_avail  (sh_rd_avail),
    .rd_data   (sh_rd_data),
    .rd_pop    (sh_rd_pop),
    .wr_en     (sh_wr_en),
    .wr_idx    (req_idx),
    .wr_data   (req_wdata),
    .push_en   (up_valid && up_is_push && up_par_ok),
    .push_idx  (up.idx),
    .push_data (up.data),
    .push_ready(sh_push_ready)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cur_we     <= 1'b0;
      cur_idx    <= '0;
      cur_wdata  <= '0;
      resp_valid <= 1'b0;
      resp_rdata <= '0;
    end else begin
      resp_valid <= 1'b0;
      case (state)
        S_IDLE: if (req_valid && req_ready) begin
          cur_we    <= req_we;
          cur_idx   <= req_idx;
          cur_wdata <= req_wdata;
          if (!active) begin
            resp_valid <= 1'b1;
            resp_rdata <= req_we ? '0 : BOGUS_DATA;
          end else if (req_type == SREG_NORMAL) begin
            state <= S_SEND;
          end else if (req_we) begin
            resp_valid <= 1'b1;            // shadowed write: acknowledged at once
            resp_rdata <= '0;
          end else if (req_type == SREG_CPU_FIFO && !sh_rd_avail) begin
            state <= S_WAIT_FIFO;          // blocking read
          end else begin
            resp_valid <= 1'b1;
            resp_rdata <= sh_rd_data;
          end
        end
        S_SEND: begin
          if (!active) begin
            state <= S_IDLE; resp_valid <= 1'b1; resp_rdata <= cur_we ? '0 : BOGUS_DATA;
          end else if (down_ready) begin
            state <= S_WAIT_EFPGA;
          end
        end
        S_WAIT_EFPGA: begin
          if (!active) begin
            state <= S_IDLE; resp_valid <= 1'b1; resp_rdata <= cur_we ? '0 : BOGUS_DATA;
          end else if (up_valid && up_par_ok && !up_is_push &&
                       up.typ == (cur_we ? SR_ACK : SR_RDATA) && up.idx == cur_idx) begin
            state <= S_IDLE; resp_valid <= 1'b1; resp_rdata <= cur_we ? '0 : up.data;
          end
        end
        S_WAIT_FIFO: begin
          if (!active) begin
            state <= S_IDLE; resp_valid <= 1'b1; resp_rdata <= BOGUS_DATA;
          end else if (sh_rd_avail) begin
            state <= S_IDLE; resp_valid <= 1'b1; resp_rdata <= sh_rd_data;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Handshake rules
  a_one_at_a_time: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && req_ready) |-> (state == S_IDLE));
  a_down_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_SEND && !down_ready && active) |=> (down_valid && down.typ != SR_SYNC));
endmodule
