// Core Control Interface (CCI).
//
// For every core it holds a Domain Assignment Register (DAR), which names the
// regulation domain the core belongs to, and a Regulation Enable Register
// (RER), which decides whether the core's channel A requests may be stalled.
// Both are software-visible memory-mapped registers; the paper describes them
// as "[Domain]" and "[Reg Enable]" per core. The block is plain register
// storage with per-core write strobes from the register front end and
// continuous outputs to the per-core throttles and the domain counters.
//
// A domain number at or beyond N_DOMAINS is clamped to the last domain when
// written, so a core always belongs to an existing domain. Reset puts every
// core in domain 0 with regulation disabled, so the unit is transparent until
// software programs it. Clamping and reset values are this design's choices.
module core_control_interface #(
  parameter int unsigned N_CORES   = 3,
  parameter int unsigned N_DOMAINS = 2,
  parameter int unsigned DOM_W     = (N_DOMAINS > 1) ? $clog2(N_DOMAINS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N_CORES-1:0]            dar_we,
  input  logic [N_CORES-1:0]            rer_we,
  input  logic [31:0]                   wdata,
  output logic [N_CORES-1:0][DOM_W-1:0] domain,
  output logic [N_CORES-1:0]            reg_en
);

  logic [DOM_W-1:0] wdom;

  always_comb begin
    if (wdata >= 32'(N_DOMAINS)) wdom = DOM_W'(N_DOMAINS - 1);
    else                         wdom = DOM_W'(wdata);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      domain <= '0;
      reg_en <= '0;
    end else begin
      for (int c = 0; c < N_CORES; c++) begin
        if (dar_we[c]) domain[c] <= wdom;
        if (rer_we[c]) reg_en[c] <= wdata[0];
      end
    end
  end

endmodule
