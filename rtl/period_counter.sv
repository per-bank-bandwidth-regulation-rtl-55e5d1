// Global regulation period counter.
//
// Holds the Regulation Period Register (RPR) and a free-running counter that
// advances once per clock. In the cycle where the counter has reached or passed
// RPR it is set back to zero and `period_end` is high for that one cycle; the
// bank access counters use that pulse to replenish every bank budget. This is
// lines 1-8 of the paper's regulation algorithm, so a period lasts RPR+1 clocks
// (the count runs 0..RPR). One period counter serves all domains, as in the paper.
//
// Interface: `rpr_we`/`rpr_wdata` write the RPR from the register front end;
// `rpr` reads it back. `period_end` is combinational from the counter register.
// Writing a new RPR does not restart the count; with the ">=" compare a smaller
// value takes effect at once. The reset value of RPR (400 cycles, the paper's
// evaluation setting) and the 32-bit widths are this design's choices.
module period_counter #(
  parameter int unsigned            W         = 32,
  parameter logic [W-1:0]           RPR_RESET = 400
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         rpr_we,
  input  logic [W-1:0] rpr_wdata,
  output logic [W-1:0] rpr,
  output logic [W-1:0] count,
  output logic         period_end
);

  assign period_end = (count >= rpr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      rpr   <= RPR_RESET;
    end else begin
      if (period_end) count <= '0;
      else            count <= count + 1'b1;
      if (rpr_we) rpr <= rpr_wdata;
    end
  end

endmodule
