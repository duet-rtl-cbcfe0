// shadow_regs: processor-clock copies of shadowed soft registers.
//
// Each of the NUM_SREGS soft registers has a type set by software (sreg_type_e):
//   PLAIN      keeps only the last value written by either side;
//   FPGA_FIFO  processor writes go straight on to the eFPGA (nothing is stored here);
//   CPU_FIFO   the eFPGA pushes values, processor reads pop them in order (a read of an
//              empty FIFO is not available: the caller blocks);
//   TOKEN_FIFO dataless: the eFPGA pushes tokens, a processor read consumes one and
//              returns 1, or returns 0 ("empty") at once when there is none.
// These four types and their semantics are the paper's. The FIFO depth, the token counter
// width, and what reads of FPGA_FIFO registers return (0) are this design's choices.
//
// Interface: the read port is combinational (rd_avail/rd_data for rd_idx) and rd_pop
// commits it at the clock edge; wr_* updates a plain register; push_* takes a value from
// the eFPGA, push_ready is low while the target FIFO or token counter is full so the
// caller can hold the message back. All in the processor clock domain.
module shadow_regs
  import duet_pkg::*;
#(
  parameter int unsigned NUM_SREGS  = 16,
  parameter int unsigned FIFO_DEPTH = 4,   // assumed: depth of each CPU-bound FIFO
  parameter int unsigned TOKEN_W    = 8    // assumed: token counter width
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  sreg_type_e               sreg_type [NUM_SREGS],
  // processor read
  input  logic [SREG_IDX_W-1:0]    rd_idx,
  output logic                     rd_avail,
  output logic [WORD_W-1:0]        rd_data,
  input  logic                     rd_pop,
  // processor write to a plain register
  input  logic                     wr_en,
  input  logic [SREG_IDX_W-1:0]    wr_idx,
  input  logic [WORD_W-1:0]        wr_data,
  // eFPGA push / sync
  input  logic                     push_en,
  input  logic [SREG_IDX_W-1:0]    push_idx,
  input  logic [WORD_W-1:0]        push_data,
  output logic                     push_ready
);
  localparam int unsigned PW = $clog2(FIFO_DEPTH);

  logic [WORD_W-1:0]  value  [NUM_SREGS];
  logic [WORD_W-1:0]  fifo   [NUM_SREGS][FIFO_DEPTH];
  logic [PW-1:0]      head   [NUM_SREGS];
  logic [PW:0]        count  [NUM_SREGS];
  logic [TOKEN_W-1:0] tokens [NUM_SREGS];

  // read port
  always_comb begin
    rd_avail = 1'b1;
    rd_data  = '0;
    case (sreg_type[rd_idx])
      SREG_PLAIN:      rd_data = value[rd_idx];
      SREG_CPU_FIFO: begin
        rd_avail = (count[rd_idx] != '0);
        rd_data  = fifo[rd_idx][head[rd_idx]];
      end
      SREG_TOKEN_FIFO: rd_data = {63'd0, tokens[rd_idx] != '0};
      default:         rd_data = '0;
    endcase
  end

  // push readiness
  always_comb begin
    case (sreg_type[push_idx])
      SREG_CPU_FIFO:   push_ready = (count[push_idx] != (PW+1)'(FIFO_DEPTH)) ||
                                    (rd_pop && rd_idx == push_idx);
      SREG_TOKEN_FIFO: push_ready = (tokens[push_idx] != '1) ||
                                    (rd_pop && rd_idx == push_idx);
      default:         push_ready = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NUM_SREGS); i++) begin
        value[i]  <= '0;
        head[i]   <= '0;
        count[i]  <= '0;
        tokens[i] <= '0;
      end
    end else begin
      for (int i = 0; i < int'(NUM_SREGS); i++) begin
        logic do_pop, do_push;
        do_pop  = rd_pop && rd_avail && rd_idx == SREG_IDX_W'(i);
        do_push = push_en && push_ready && push_idx == SREG_IDX_W'(i);
        case (sreg_type[i])
          SREG_PLAIN: begin
            // an eFPGA sync and a processor write in the same cycle: processor wins (assumed)
            if (wr_en && wr_idx == SREG_IDX_W'(i)) value[i] <= wr_data;
            else if (do_push)                       value[i] <= push_data;
          end
          SREG_CPU_FIFO: begin
            if (do_pop) head[i] <= head[i] + 1'b1;
            count[i] <= count[i] + (PW+1)'(do_push) - (PW+1)'(do_pop);
          end
          SREG_TOKEN_FIFO: begin
            tokens[i] <= tokens[i] + TOKEN_W'(do_push)
                         - TOKEN_W'(do_pop && tokens[i] != '0);
          end
          default: ;
        endcase
      end
    end
  end

  // FIFO storage (no reset needed: only entries counted as valid are read)
  always_ff @(posedge clk) begin
    for (int i = 0; i < int'(NUM_SREGS); i++) begin
      if (push_en && push_ready && push_idx == SREG_IDX_W'(i) && sreg_type[i] == SREG_CPU_FIFO)
        fifo[i][PW'(head[i] + PW'(count[i]))] <= push_data;
    end
  end
endmodule
