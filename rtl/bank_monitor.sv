// Per-bank monitoring interface.
//
// For every core, N_BANKS counters count that core's channel A accesses to each
// bank (paper, monitoring algorithm). Unlike the regulation counters they know
// no domains and no period: they only count, and software reads them to learn
// a core's per-bank bandwidth and access pattern, for example to program
// budgets adaptively. Writing a counter through the register front end clears
// it, one counter per write strobe.
//
// Timing: a counter shows an access one clock after it is reported. A clear
// and an access in the same cycle leave the counter at 1, so no access is
// lost. Counters are W bits wide and wrap around like ordinary performance
// counters; width, wrap-around and the clear-on-write scheme are this design's
// choices.
module bank_monitor #(
  parameter int unsigned N_CORES = 3,
  parameter int unsigned N_BANKS = 4,
  parameter int unsigned W       = 32,
  parameter int unsigned BANK_W  = (N_BANKS > 1) ? $clog2(N_BANKS) : 1
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [N_CORES-1:0]                    acc_valid,
  input  logic [N_CORES-1:0][BANK_W-1:0]        acc_bank,
  input  logic [N_CORES-1:0][N_BANKS-1:0]       clr,
  output logic [N_CORES-1:0][N_BANKS-1:0][W-1:0] mon
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mon <= '0;
    end else begin
      for (int c = 0; c < N_CORES; c++) begin
        for (int j = 0; j < N_BANKS; j++) begin
          logic hit;
          hit = acc_valid[c] && (32'(acc_bank[c]) == j);
          if (clr[c][j])  mon[c][j] <= W'(hit);
          else if (hit)   mon[c][j] <= mon[c][j] + 1'b1;
        end
      end
    end
  end

endmodule
