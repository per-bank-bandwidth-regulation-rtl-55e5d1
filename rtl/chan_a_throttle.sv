// Per-core channel A throttle.
//
// Sits on the TL-C channel A of one core, between the core's private caches
// and the system bus. It decodes the destination bank of every request from
// address bits [BANK_LSB +: log2(N_BANKS)] (the paper's evaluated cache uses
// bit 6 for two banks and bits 7:6 for four). When regulation is enabled for
// the core and the bank is depleted for the core's domain, the request is
// stalled by pulling both the valid towards the bus and the ready towards the
// core low, as the paper describes; requests to other banks keep flowing.
// Each accepted request (valid and ready both high towards the bus) is
// reported on `acc_valid`/`acc_bank` so the domain counters and the per-core
// monitors can charge it.
//
// A multi-beat channel A message (Put or atomic with data wider than one beat)
// is one access: only its first beat is counted and only its first beat can be
// stalled, so a burst is never cut in the middle. The paper does not say how
// beats are counted; this is this design's choice. The gate is combinational:
// no added latency and no buffering. `dep_row` must be the depleted flags of
// this core's domain, one per bank.
module chan_a_throttle
  import bpr_pkg::*;
#(
  parameter int unsigned N_BANKS  = 4,
  parameter int unsigned BANK_LSB = 6,
  parameter int unsigned BANK_W   = (N_BANKS > 1) ? $clog2(N_BANKS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // from the core
  input  logic               in_valid,
  output logic               in_ready,
  input  tl_a_t              in_a,
  // to the system bus
  output logic               out_valid,
  input  logic               out_ready,
  output tl_a_t              out_a,
  // regulation state
  input  logic               reg_en,
  input  logic [N_BANKS-1:0] dep_row,
  // access report and status
  output logic               acc_valid,
  output logic [BANK_W-1:0]  acc_bank,
  output logic               stalled
);

  logic [7:0]        beats_left;
  logic              first_beat;
  logic [BANK_W-1:0] bank;
  logic              stall;
  logic              fire;

  assign bank       = (N_BANKS > 1) ? in_a.address[BANK_LSB +: BANK_W] : '0;
  assign first_beat = (beats_left == 8'd0);
  assign stall      = first_beat && reg_en && dep_row[bank];

  assign out_a      = in_a;
  assign out_valid  = in_valid  && !stall;
  assign in_ready   = out_ready && !stall;
  assign fire       = out_valid && out_ready;

  assign acc_valid  = fire && first_beat;
  assign acc_bank   = bank;
  assign stalled    = in_valid && stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beats_left <= '0;
    end else if (fire) begin
      if (first_beat) beats_left <= a_beats_m1(in_a.opcode, in_a.size);
      else            beats_left <= beats_left - 8'd1;
    end
  end

  // TileLink: a sender keeps valid and the payload steady until accepted.
  a_core_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_ready) |=> (in_valid && $stable(in_a)));

  initial begin
    assert (N_BANKS == (1 << BANK_W) || N_BANKS == 1)
      else $error("N_BANKS must be a power of two");
  end

endmodule
