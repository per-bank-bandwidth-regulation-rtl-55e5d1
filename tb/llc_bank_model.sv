// Behavioural model of the system bus and a multi-bank shared cache, seen from
// channel A (testbench use only).
//
// Each bank has an input queue of DEPTH requests and serves one request every
// BANK_CYCLES clocks. A core's request is accepted when the queue of its bank
// has room; several cores can be accepted by one bank in the same cycle while
// room lasts, lower core numbers first, rotating the first core every cycle.
// Banks are independent, so traffic spread over banks flows in parallel while
// traffic aimed at one bank piles up behind its service rate: the contention
// the regulation unit guards against. The model only produces ready; it keeps
// no data and sends no responses. Bank = address bits [BANK_LSB +: log2(N_BANKS)].
module llc_bank_model #(
  parameter int unsigned N_CORES     = 3,
  parameter int unsigned N_BANKS     = 4,
  parameter int unsigned BANK_LSB    = 6,
  parameter int unsigned BANK_CYCLES = 2,
  parameter int unsigned DEPTH       = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N_CORES-1:0]       valid,
  input  logic [N_CORES-1:0][31:0] addr,
  output logic [N_CORES-1:0]       ready
);
  localparam int unsigned BW = (N_BANKS > 1) ? $clog2(N_BANKS) : 1;

  int unsigned occ   [N_BANKS];   // queued requests
  int unsigned timer [N_BANKS];   // cycles to the next service
  int unsigned first;

  function automatic int unsigned bank_of(logic [31:0] a);
    return (N_BANKS > 1) ? int'(a[BANK_LSB +: BW]) : 0;
  endfunction

  always_comb begin
    int unsigned room [N_BANKS];
    ready = '0;
    for (int b = 0; b < N_BANKS; b++) room[b] = DEPTH - occ[b];
    for (int k = 0; k < N_CORES; k++) begin
      int unsigned c;
      c = (first + k) % N_CORES;
      if (valid[c] && room[bank_of(addr[c])] > 0) begin
        ready[c] = 1'b1;
        room[bank_of(addr[c])]--;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < N_BANKS; b++) begin occ[b] <= 0; timer[b] <= 0; end
      first <= 0;
    end else begin
      first <= (first + 1) % N_CORES;
      for (int b = 0; b < N_BANKS; b++) begin
        int unsigned o;
        o = occ[b];
        for (int c = 0; c < N_CORES; c++)
          if (valid[c] && ready[c] && bank_of(addr[c]) == b) o++;
        if (timer[b] != 0) timer[b] <= timer[b] - 1;
        else if (occ[b] != 0) begin o--; timer[b] <= BANK_CYCLES - 1; end
        occ[b] <= o;
      end
    end
  end
endmodule
