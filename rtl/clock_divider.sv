// clock_divider: the Control Hub's programmable clock generator in its clock-divider form.
//
// The paper says the generator "either divides the system clock, or integrates a separate
// PLL"; this block is the divider (the PLL option is analog and not built). The output
// clock has a period of exactly `ratio` system-clock cycles, high for floor(ratio/2) of
// them. Ratios below 2 are treated as 2. A new ratio is taken at the start of the next
// output period, so the output never glitches. clk_o is a register output, one system
// cycle behind the internal counter. The counter-based structure is this design's choice.
module clock_divider #(
  parameter int unsigned RATIO_W = 8   // covers 1 GHz / 500 MHz .. 1 GHz / 20 MHz swept in the paper
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [RATIO_W-1:0] ratio,
  output logic               clk_o
);
  logic [RATIO_W-1:0] cnt, cur_ratio;
  logic [RATIO_W-1:0] ratio_sat;

  assign ratio_sat = (ratio < RATIO_W'(2)) ? RATIO_W'(2) : ratio;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      cur_ratio <= RATIO_W'(2);
      clk_o     <= 1'b0;
    end else begin
      if (cnt + 1'b1 >= cur_ratio) begin
        cnt       <= '0;
        cur_ratio <= ratio_sat;
        clk_o     <= 1'b1;                        // rising edge starts a period
      end else begin
        cnt   <= cnt + 1'b1;
        clk_o <= (cnt + 1'b1) < (cur_ratio >> 1); // high for floor(ratio/2) cycles
      end
    end
  end
endmodule
