// programming_engine: loads an eFPGA bitstream into the configuration memory and checks
// its integrity.
//
// Software starts a load (start), then streams 64-bit bitstream words (word_valid /
// word_ready). Each accepted word is written to the configuration memory at consecutive
// word addresses in the same cycle (cfg_we/cfg_addr/cfg_wdata, cfg_ready stalls the
// stream) and is folded into a running CRC-32. Writing the expected CRC (check) compares
// it with the running value: status_ok or status_bad is then set until the next start.
// The paper only says the engine "loads the bitstream into the configuration memory, and
// performs integrity checks to detect data corruption": the word width, sequential
// addressing and the use of CRC-32 (IEEE 802.3 polynomial, reflected, init and final XOR
// all ones, bytes of each word taken least significant first) are this design's choice.
module programming_engine #(
  parameter int unsigned CFG_ADDR_W = 16   // assumed: 64K words of configuration memory
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  word_valid,
  output logic                  word_ready,
  input  logic [63:0]           word,
  input  logic                  check,
  input  logic [31:0]           expected_crc,
  output logic [31:0]           crc,          // CRC-32 of the words loaded so far
  output logic [CFG_ADDR_W:0]   word_count,
  output logic                  status_ok,
  output logic                  status_bad,
  output logic                  cfg_we,
  output logic [CFG_ADDR_W-1:0] cfg_addr,
  output logic [63:0]           cfg_wdata,
  input  logic                  cfg_ready
);
  logic [31:0] crc_state;   // un-inverted running register

  function automatic logic [31:0] crc32_word(input logic [31:0] c_in, input logic [63:0] d);
    logic [31:0] c;
    c = c_in;
    for (int i = 0; i < 64; i++) begin
      c = (c[0] ^ d[i]) ? ((c >> 1) ^ 32'hEDB8_8320) : (c >> 1);
    end
    return c;
  endfunction

  assign word_ready = cfg_ready;
  assign cfg_we     = word_valid && cfg_ready;
  assign cfg_addr   = word_count[CFG_ADDR_W-1:0];
  assign cfg_wdata  = word;
  assign crc        = ~crc_state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crc_state  <= 32'hFFFF_FFFF;
      word_count <= '0;
      status_ok  <= 1'b0;
      status_bad <= 1'b0;
    end else if (start) begin
      crc_state  <= 32'hFFFF_FFFF;
      word_count <= '0;
      status_ok  <= 1'b0;
      status_bad <= 1'b0;
    end else begin
      if (word_valid && cfg_ready) begin
        crc_state  <= crc32_word(crc_state, word);
        word_count <= word_count + 1'b1;
      end
      if (check) begin
        status_ok  <= (~crc_state == expected_crc);
        status_bad <= (~crc_state != expected_crc);
      end
    end
  end
endmodule
