// tb_programming_engine: loads bitstreams and checks the configuration-memory writes
// (address, data, back-pressure), the CRC-32 against a known value (CRC-32 of the ASCII
// bytes "12345678" is 0x9AE0DAAF) and against a byte-serial reference model, and the
// ok / bad integrity status.
module tb_programming_engine;
  logic clk = 0, rst_n = 1;
  initial #0.1 rst_n = 0;   // a real falling edge resets every asynchronously reset flop, clocked or not
  logic start = 0, word_valid = 0, word_ready, check = 0;
  logic [63:0] word = '0;
  logic [31:0] expected_crc = '0, crc;
  logic [16:0] word_count;
  logic status_ok, status_bad;
  logic cfg_we; logic [15:0] cfg_addr; logic [63:0] cfg_wdata; logic cfg_ready = 1;
  int checks = 0, failures = 0;
  logic [63:0] cfgmem [int];

  always #5 clk = ~clk;
  programming_engine dut (.*);

  always @(posedge clk) if (cfg_we) cfgmem[int'(cfg_addr)] = cfg_wdata;

  // byte-serial reference CRC-32 (reflected, poly 0xEDB88320)
  function automatic logic [31:0] ref_crc(input logic [63:0] words[$]);
    logic [31:0] c = 32'hFFFF_FFFF;
    foreach (words[w]) for (int b = 0; b < 8; b++) begin
      c ^= 32'(words[w][8*b +: 8]);
      for (int k = 0; k < 8; k++) c = c[0] ? (c >> 1) ^ 32'hEDB8_8320 : (c >> 1);
    end
    return ~c;
  endfunction

  task automatic check_(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic load(input logic [63:0] words[$], input bit stall);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    foreach (words[i]) begin
      word_valid = 1; word = words[i];
      cfg_ready = stall ? ($urandom_range(0, 1) == 1) : 1'b1;
      @(posedge clk);
      while (!word_ready) begin @(negedge clk); cfg_ready = 1; @(posedge clk); end
      @(negedge clk);
    end
    word_valid = 0; cfg_ready = 1;
  endtask

  initial begin
    logic [63:0] ws[$];
    repeat (2) @(posedge clk); rst_n = 1;
    // known vector
    ws = '{64'h3837_3635_3433_3231};
    load(ws, 0);
    check_(crc == 32'h9AE0_DAAF, $sformatf("CRC of \"12345678\" = %h", crc));
    @(negedge clk); check = 1; expected_crc = 32'h9AE0_DAAF; @(negedge clk); check = 0;
    check_(status_ok && !status_bad, "status ok on good CRC");
    // random bitstream with back-pressure
    ws = {};
    for (int i = 0; i < 40; i++) ws.push_back({$urandom, $urandom});
    cfgmem.delete();
    load(ws, 1);
    check_(word_count == 17'd40, "word count");
    check_(crc == ref_crc(ws), "CRC of random stream vs reference");
    foreach (ws[i]) check_(cfgmem.exists(i) && cfgmem[i] == ws[i], $sformatf("cfg word %0d", i));
    @(negedge clk); check = 1; expected_crc = ref_crc(ws) ^ 32'h1; @(negedge clk); check = 0;
    check_(!status_ok && status_bad, "status bad on corrupted CRC");
    // restart clears status
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    check_(!status_ok && !status_bad && word_count == 0, "start clears");
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
