// efpga_sr_model: behavioural model of a soft accelerator's register controller, used by
// testbenches on the eFPGA side of the Soft Register Interface (runs on the eFPGA clock).
// It holds 16 soft registers: a WR is stored and acknowledged, a RD is answered with the
// register value, a SYNC (shadowed write) is stored without an answer. Answers are sent
// ANSWER_DELAY eFPGA cycles after the request arrives, and not while hold is high (an
// accelerator that answers a read only when its work is done); with answer_en low it
// ignores normal accesses (a hung accelerator). push_* lets the testbench make the accelerator
// push a value into a shadowed register (plain sync, CPU-bound FIFO or token).
module efpga_sr_model
  import duet_pkg::*;
#(
  parameter int ANSWER_DELAY = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  answer_en,
  input  logic                  hold,
  input  logic                  down_valid,
  output logic                  down_ready,
  input  sr_down_t              down,
  output logic                  up_valid,
  input  logic                  up_ready,
  output sr_up_t                up,
  input  logic                  push_valid,
  input  logic [SREG_IDX_W-1:0] push_idx,
  input  logic [WORD_W-1:0]     push_data
);
  // counters, read by the testbench hierarchically
  int                n_wr, n_rd, n_sync;
  logic [WORD_W-1:0] last_sync;
  logic [WORD_W-1:0] regs [16];
  sr_up_t q[$];
  int     due[$];
  int     cyc;

  assign down_ready = 1'b1;
  initial begin up_valid = 1'b0; up = '0; end

  function automatic sr_up_t mk(input sr_up_type_e t, input logic [SREG_IDX_W-1:0] i, input logic [WORD_W-1:0] d);
    sr_up_t u;
    u.typ = t; u.idx = i; u.data = d; u.parity = ^{t, i, d};
    return u;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      foreach (regs[i]) regs[i] = '0;
      q.delete(); due.delete();
      n_wr = 0; n_rd = 0; n_sync = 0; last_sync = '0; cyc = 0;
      up_valid <= 1'b0; up <= '0;
    end else begin
      cyc = cyc + 1;
      if (up_valid && up_ready) begin void'(q.pop_front()); void'(due.pop_front()); end
      if (down_valid && down_ready) begin
        if (down.typ == SR_WR) begin
          n_wr = n_wr + 1;
          regs[down.idx] = down.data;
          if (answer_en) begin q.push_back(mk(SR_ACK, down.idx, '0)); due.push_back(cyc + ANSWER_DELAY - 1); end
        end else if (down.typ == SR_RD) begin
          n_rd = n_rd + 1;
          if (answer_en) begin q.push_back(mk(SR_RDATA, down.idx, regs[down.idx])); due.push_back(cyc + ANSWER_DELAY - 1); end
        end else begin
          n_sync = n_sync + 1;
          regs[down.idx] = down.data;
          last_sync = down.data;
        end
      end
      if (push_valid) begin q.push_back(mk(SR_PUSH, push_idx, push_data)); due.push_back(cyc); end
      up_valid <= (q.size() != 0) && (due[0] <= cyc) && !(hold && q[0].typ != SR_PUSH);
      if (q.size() != 0) up <= q[0];
    end
  end
endmodule
