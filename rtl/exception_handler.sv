// exception_handler: watches what the eFPGA sends into a hub and deactivates the hub
// when the eFPGA misbehaves.
//
// Two checks, as the paper lists them: a parity check on every message the eFPGA hands
// over (chk_valid/chk_parity_ok), and a timeout on any wait for the eFPGA (wait_active
// counts processor-clock cycles; reaching timeout_limit is an error, a limit of 0 turns
// the timeout off). The first error is latched in err_code until software writes the
// clear switch; while an error is latched, err is high and the owning hub treats itself
// as deactivated. The encoding of the error code and the "first error wins" policy are
// this design's choice. Everything is in the processor clock domain; err rises one cycle
// after the offending event.
module exception_handler
  import duet_pkg::*;
#(
  parameter int unsigned TIMEOUT_W = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 chk_valid,      // an eFPGA message is being accepted this cycle
  input  logic                 chk_parity_ok,  // its parity matched
  input  logic                 wait_active,    // the hub is waiting on the eFPGA
  input  logic [TIMEOUT_W-1:0] timeout_limit,  // 0 = no timeout
  input  logic                 clear,          // software clears the logged error
  output err_code_e            err_code,
  output logic                 err
);
  logic [TIMEOUT_W-1:0] wait_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_cnt <= '0;
      err_code <= ERR_NONE;
    end else begin
      wait_cnt <= wait_active ? wait_cnt + 1'b1 : '0;
      if (clear) begin
        err_code <= ERR_NONE;
        wait_cnt <= '0;
      end else if (err_code == ERR_NONE) begin
        if (chk_valid && !chk_parity_ok)
          err_code <= ERR_PARITY;
        else if (wait_active && timeout_limit != '0 && wait_cnt + 1'b1 >= timeout_limit)
          err_code <= ERR_TIMEOUT;
      end
    end
  end

  assign err = (err_code != ERR_NONE);
endmodule
