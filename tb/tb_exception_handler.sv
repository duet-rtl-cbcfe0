// tb_exception_handler: checks parity and timeout detection, the exact timeout cycle,
// "timeout off" at limit 0, first-error-wins and clearing.
module tb_exception_handler;
  import duet_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #0.1 rst_n = 0;   // a real falling edge resets every asynchronously reset flop, clocked or not
  logic chk_valid = 0, chk_parity_ok = 1, wait_active = 0, clear = 0;
  logic [31:0] timeout_limit = 0;
  err_code_e err_code;
  logic err;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  exception_handler dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (err_code=%0d)", msg, err_code); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    check(!err && err_code == ERR_NONE, "idle after reset");
    // parity error
    chk_valid = 1; chk_parity_ok = 0; @(posedge clk); #1; chk_valid = 0; chk_parity_ok = 1;
    check(err && err_code == ERR_PARITY, "parity error latched");
    // a good message does not disturb, a timeout does not overwrite the first error
    timeout_limit = 3; wait_active = 1; repeat (5) @(posedge clk); #1; wait_active = 0;
    check(err_code == ERR_PARITY, "first error wins");
    clear = 1; @(posedge clk); #1; clear = 0;
    check(!err, "cleared");
    // timeout exactly after `limit` waiting cycles
    for (int lim = 1; lim <= 20; lim += 7) begin
      int n;
      n = 0;
      timeout_limit = 32'(lim);
      wait_active = 1;
      while (!err && n < 100) begin @(posedge clk); #1; n++; end
      wait_active = 0;
      check(err_code == ERR_TIMEOUT, "timeout code");
      check(n == lim, $sformatf("timeout after %0d cycles, expected %0d", n, lim));
      clear = 1; @(posedge clk); #1; clear = 0;
    end
    // interrupted waits do not accumulate
    timeout_limit = 4;
    repeat (5) begin
      wait_active = 1; repeat (3) @(posedge clk); #1; wait_active = 0; @(posedge clk); #1;
    end
    check(!err, "short waits below the limit");
    // limit 0 = off
    timeout_limit = 0; wait_active = 1; repeat (50) @(posedge clk); #1; wait_active = 0;
    check(!err, "timeout disabled at limit 0");
    // good parity never flags
    chk_valid = 1; chk_parity_ok = 1; repeat (5) @(posedge clk); #1; chk_valid = 0;
    check(!err, "good parity");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
