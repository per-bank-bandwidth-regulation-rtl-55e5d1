// Domain Control Interface (DCI): access budgets and per-bank access counters.
//
// Each regulation domain has one Access Budget Register (ABR) and N_BANKS Bank
// Access Counters (BAC), one per shared-cache bank. Every channel A access a
// core makes is charged to the counter of that core's domain and of the bank
// the address maps to (paper, regulation algorithm lines 17-20). A bank is
// "depleted" for a domain once its counter has reached the budget (line 13);
// the per-core throttles then stall further requests of that domain to that
// bank. At the end of each regulation period all counters return to zero
// (lines 1-6), which replenishes every budget at once. Each bank receives the
// full ABR budget; the budget is not divided among banks.
//
// Timing: in the period-end cycle the algorithm clears the counters before it
// evaluates stalls and charges accesses, so `depleted` is forced low in that
// cycle and the counters restart from the accesses made in it. Several cores of
// one domain may hit the same bank in one cycle; all are charged (the counter
// adds their number). Because the stall decision uses the counter value at the
// start of the cycle, as in the algorithm, such simultaneous accesses can pass
// a budget by at most N_CORES-1. Counters saturate at their maximum instead of
// wrapping. Reset clears the counters and loads ABR_RESET into every ABR
// (32 accesses: 1.28 GB/s with the paper's 400-cycle period and 16-byte
// accounting unit); saturation and reset values are this design's choices.
module domain_control_interface #(
  parameter int unsigned            N_CORES   = 3,
  parameter int unsigned            N_DOMAINS = 2,
  parameter int unsigned            N_BANKS   = 4,
  parameter int unsigned            W         = 32,
  parameter logic [W-1:0]           ABR_RESET = 32,
  parameter int unsigned            DOM_W     = (N_DOMAINS > 1) ? $clog2(N_DOMAINS) : 1,
  parameter int unsigned            BANK_W    = (N_BANKS > 1) ? $clog2(N_BANKS) : 1
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  // budget register writes
  input  logic [N_DOMAINS-1:0]                    abr_we,
  input  logic [W-1:0]                            wdata,
  // period replenish pulse
  input  logic                                    period_end,
  // one access report per core
  input  logic [N_CORES-1:0]                      acc_valid,
  input  logic [N_CORES-1:0][BANK_W-1:0]          acc_bank,
  input  logic [N_CORES-1:0][DOM_W-1:0]           domain,
  // state
  output logic [N_DOMAINS-1:0][W-1:0]             abr,
  output logic [N_DOMAINS-1:0][N_BANKS-1:0][W-1:0] bac,
  output logic [N_DOMAINS-1:0][N_BANKS-1:0]       depleted
);

  localparam int unsigned CNT_W = $clog2(N_CORES + 1);

  logic [N_DOMAINS-1:0][N_BANKS-1:0][CNT_W-1:0] hits;
  logic [N_DOMAINS-1:0][N_BANKS-1:0][W:0]       sum;

  always_comb begin
    for (int d = 0; d < N_DOMAINS; d++) begin
      for (int j = 0; j < N_BANKS; j++) begin
        hits[d][j] = '0;
        for (int c = 0; c < N_CORES; c++) begin
          if (acc_valid[c] && (32'(domain[c]) == d) && (32'(acc_bank[c]) == j))
            hits[d][j] = hits[d][j] + 1'b1;
        end
        sum[d][j]      = (period_end ? {(W+1){1'b0}} : {1'b0, bac[d][j]}) + (W+1)'(hits[d][j]);
        depleted[d][j] = !period_end && (bac[d][j] >= abr[d]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bac <= '0;
      for (int d = 0; d < N_DOMAINS; d++) abr[d] <= ABR_RESET;
    end else begin
      for (int d = 0; d < N_DOMAINS; d++) begin
        if (abr_we[d]) abr[d] <= wdata;
        for (int j = 0; j < N_BANKS; j++) begin
          bac[d][j] <= sum[d][j][W] ? {W{1'b1}} : sum[d][j][W-1:0];
        end
      end
    end
  end

endmodule
