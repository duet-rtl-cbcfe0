// tb_shadow_regs: checks the four shadow register types against a reference model:
// plain (last write from either side wins), CPU-bound FIFO (order, blocking when empty,
// back-pressure when full), token FIFO (consume or "empty"), FPGA-bound (nothing stored).
module tb_shadow_regs;
  import duet_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #0.1 rst_n = 0;   // a real falling edge resets every asynchronously reset flop, clocked or not
  sreg_type_e sreg_type [16];
  logic [3:0] rd_idx = 0, wr_idx = 0, push_idx = 0;
  logic rd_avail, rd_pop = 0, wr_en = 0, push_en = 0, push_ready;
  logic [63:0] rd_data, wr_data = 0, push_data = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  shadow_regs #(.FIFO_DEPTH(4)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic push(input int idx, input logic [63:0] d);
    @(negedge clk); push_en = 1; push_idx = 4'(idx); push_data = d;
    @(negedge clk); push_en = 0;
  endtask
  task automatic write(input int idx, input logic [63:0] d);
    @(negedge clk); wr_en = 1; wr_idx = 4'(idx); wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask
  // read and pop; returns availability and data seen before the pop
  task automatic read(input int idx, output logic av, output logic [63:0] d);
    @(negedge clk); rd_idx = 4'(idx); #1; av = rd_avail; d = rd_data; rd_pop = 1;
    @(negedge clk); rd_pop = 0;
  endtask

  logic av; logic [63:0] d; logic [63:0] model[$];
  initial begin
    foreach (sreg_type[i]) sreg_type[i] = SREG_NORMAL;
    sreg_type[1] = SREG_PLAIN; sreg_type[2] = SREG_FPGA_FIFO;
    sreg_type[3] = SREG_CPU_FIFO; sreg_type[4] = SREG_TOKEN_FIFO;
    repeat (2) @(posedge clk); rst_n = 1;
    // plain
    write(1, 64'h11); read(1, av, d); check(av && d == 64'h11, "plain: processor write");
    push(1, 64'h22); read(1, av, d); check(av && d == 64'h22, "plain: eFPGA sync");
    read(1, av, d); check(d == 64'h22, "plain: read is not destructive");
    // fpga-bound: nothing stored
    write(2, 64'h33); read(2, av, d); check(av && d == 0, "fpga-bound: reads 0");
    // cpu-bound FIFO
    read(3, av, d); check(!av, "cpu fifo: empty blocks");
    for (int i = 0; i < 4; i++) begin
      logic [63:0] v; v = {$urandom, $urandom};
      @(negedge clk); push_idx = 3; #1; check(push_ready, "cpu fifo: room");
      push(3, v); model.push_back(v);
    end
    @(negedge clk); push_idx = 3; #1; check(!push_ready, "cpu fifo: full back-pressure");
    for (int i = 0; i < 4; i++) begin
      read(3, av, d); check(av && d == model.pop_front(), $sformatf("cpu fifo: order %0d", i));
    end
    read(3, av, d); check(!av, "cpu fifo: empty again");
    // token fifo
    read(4, av, d); check(av && d == 0, "token: empty answers 0 at once");
    push(4, 0); push(4, 0);
    read(4, av, d); check(av && d == 1, "token: consume 1");
    read(4, av, d); check(av && d == 1, "token: consume 2");
    read(4, av, d); check(av && d == 0, "token: empty after two");
    // normal registers are not shadowed
    read(0, av, d); check(d == 0, "normal: nothing shadowed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
