// tb_clock_divider: measures the divided clock's period and high time, in system clock
// cycles, for several ratios, including a change of ratio while running and ratios
// below 2 (treated as 2).
module tb_clock_divider;
  logic clk = 0, rst_n = 1;
  initial #0.1 rst_n = 0;   // a real falling edge resets every asynchronously reset flop, clocked or not
  logic [7:0] ratio = 2;
  logic clk_o;
  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  clock_divider dut (.*);

  task automatic measure(input int exp_ratio);
    int t_rise0, t_fall, t_rise1;
    // sync to two rising edges so the new ratio is in force
    repeat (2) @(posedge clk_o);
    t_rise0 = cyc;
    @(negedge clk_o); t_fall = cyc;
    @(posedge clk_o); t_rise1 = cyc;
    checks++;
    if (t_rise1 - t_rise0 != exp_ratio) begin
      failures++; $display("FAIL: ratio %0d period %0d", exp_ratio, t_rise1 - t_rise0);
    end
    checks++;
    if (t_fall - t_rise0 != exp_ratio / 2) begin
      failures++; $display("FAIL: ratio %0d high time %0d", exp_ratio, t_fall - t_rise0);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    measure(2);
    ratio = 5;  measure(5);
    ratio = 50; measure(50);   // 1 GHz / 50 = 20 MHz, the slowest point swept in the paper
    ratio = 10; measure(10);
    ratio = 3;  measure(3);
    ratio = 0;  measure(2);
    ratio = 1;  measure(2);
    ratio = 255; measure(255);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
