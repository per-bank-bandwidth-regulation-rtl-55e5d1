// Per-bank bandwidth regulation unit (top level).
//
// The unit is placed on the TL-C edges between N_CORES cores (with their
// private L1 caches) and the shared system bus that leads to a multi-bank
// last-level cache. Cores are grouped into regulation domains. Within every
// regulation period each domain may make at most ABR accesses to *each* cache
// bank; when a domain has used up the budget of one bank, its regulated cores
// are stalled on requests to that bank only, while requests to the other banks
// go on. This limits the worst-case load a group of cores can put on one bank
// (the bank-contention denial-of-service case) without throttling traffic that
// is spread across banks.
//
// Structure:
//   period_counter            global period, RPR, replenish pulse
//   core_control_interface    DAR and RER per core
//   domain_control_interface  ABR and per-bank access counters per domain
//   chan_a_throttle (x cores) bank decode and valid/ready gating of channel A
//   bank_monitor              per-core, per-bank monitoring counters
//   reg_mmio                  TileLink-UL register slave on the periphery bus
// Only channel A is monitored and regulated. Channels B, C, D and E pass
// straight through, combinationally, as the paper describes.
//
// Timing: the throttle is combinational, so an unregulated request sees no
// added latency. Counters and registers update on the rising clock edge; reset
// is asynchronous and active low. Default parameters follow the paper's
// evaluation SoC (three cores: one BOOM and two Rocket, a real-time and a
// best-effort domain, a four-bank cache indexed by address bits 7:6,
// 400-cycle period); register reset values and bus widths are this design's.
module bw_regulation_unit
  import bpr_pkg::*;
#(
  parameter int unsigned N_CORES   = 3,
  parameter int unsigned N_DOMAINS = 2,
  parameter int unsigned N_BANKS   = 4,
  parameter int unsigned BANK_LSB  = 6,
  parameter logic [31:0] RPR_RESET = 400,
  parameter logic [31:0] ABR_RESET = 32,
  parameter int unsigned DOM_W     = (N_DOMAINS > 1) ? $clog2(N_DOMAINS) : 1,
  parameter int unsigned BANK_W    = (N_BANKS > 1) ? $clog2(N_BANKS) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // channel A: core -> bus, regulated
  input  logic  [N_CORES-1:0]       core_a_valid,
  output logic  [N_CORES-1:0]       core_a_ready,
  input  tl_a_t [N_CORES-1:0]       core_a,
  output logic  [N_CORES-1:0]       bus_a_valid,
  input  logic  [N_CORES-1:0]       bus_a_ready,
  output tl_a_t [N_CORES-1:0]       bus_a,
  // channel B: bus -> core, pass-through
  input  logic  [N_CORES-1:0]       bus_b_valid,
  output logic  [N_CORES-1:0]       bus_b_ready,
  input  tl_b_t [N_CORES-1:0]       bus_b,
  output logic  [N_CORES-1:0]       core_b_valid,
  input  logic  [N_CORES-1:0]       core_b_ready,
  output tl_b_t [N_CORES-1:0]       core_b,
  // channel C: core -> bus, pass-through
  input  logic  [N_CORES-1:0]       core_c_valid,
  output logic  [N_CORES-1:0]       core_c_ready,
  input  tl_c_t [N_CORES-1:0]       core_c,
  output logic  [N_CORES-1:0]       bus_c_valid,
  input  logic  [N_CORES-1:0]       bus_c_ready,
  output tl_c_t [N_CORES-1:0]       bus_c,
  // channel D: bus -> core, pass-through
  input  logic  [N_CORES-1:0]       bus_d_valid,
  output logic  [N_CORES-1:0]       bus_d_ready,
  input  tl_d_t [N_CORES-1:0]       bus_d,
  output logic  [N_CORES-1:0]       core_d_valid,
  input  logic  [N_CORES-1:0]       core_d_ready,
  output tl_d_t [N_CORES-1:0]       core_d,
  // channel E: core -> bus, pass-through
  input  logic  [N_CORES-1:0]       core_e_valid,
  output logic  [N_CORES-1:0]       core_e_ready,
  input  tl_e_t [N_CORES-1:0]       core_e,
  output logic  [N_CORES-1:0]       bus_e_valid,
  input  logic  [N_CORES-1:0]       bus_e_ready,
  output tl_e_t [N_CORES-1:0]       bus_e,
  // periphery bus register port (TileLink-UL)
  input  logic                      pb_a_valid,
  output logic                      pb_a_ready,
  input  pb_a_t                     pb_a,
  output logic                      pb_d_valid,
  input  logic                      pb_d_ready,
  output pb_d_t                     pb_d,
  // status
  output logic  [N_CORES-1:0]       core_stalled,
  output logic                      period_end
);

  logic [31:0]                                 wdata, rpr;
  logic                                        rpr_we;
  logic [N_DOMAINS-1:0]                        abr_we;
  logic [N_CORES-1:0]                          dar_we, rer_we;
  logic [N_CORES-1:0][N_BANKS-1:0]             mon_clr;
  logic [N_CORES-1:0][DOM_W-1:0]               domain;
  logic [N_CORES-1:0]                          reg_en;
  logic [N_DOMAINS-1:0][31:0]                  abr;
  logic [N_DOMAINS-1:0][N_BANKS-1:0][31:0]     bac;
  logic [N_DOMAINS-1:0][N_BANKS-1:0]           depleted;
  logic [N_CORES-1:0][N_BANKS-1:0][31:0]       mon;
  logic [N_CORES-1:0]                          acc_valid;
  logic [N_CORES-1:0][BANK_W-1:0]              acc_bank;

  period_counter #(.W(32), .RPR_RESET(RPR_RESET)) u_period (
    .clk, .rst_n,
    .rpr_we, .rpr_wdata(wdata), .rpr, .count(), .period_end
  );

  core_control_interface #(.N_CORES(N_CORES), .N_DOMAINS(N_DOMAINS), .DOM_W(DOM_W)) u_cci (
    .clk, .rst_n, .dar_we, .rer_we, .wdata, .domain, .reg_en
  );

  domain_control_interface #(
    .N_CORES(N_CORES), .N_DOMAINS(N_DOMAINS), .N_BANKS(N_BANKS), .W(32),
    .ABR_RESET(ABR_RESET), .DOM_W(DOM_W), .BANK_W(BANK_W)
  ) u_dci (
    .clk, .rst_n, .abr_we, .wdata, .period_end,
    .acc_valid, .acc_bank, .domain, .abr, .bac, .depleted
  );

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    chan_a_throttle #(.N_BANKS(N_BANKS), .BANK_LSB(BANK_LSB), .BANK_W(BANK_W)) u_thr (
      .clk, .rst_n,
      .in_valid (core_a_valid[c]), .in_ready (core_a_ready[c]), .in_a (core_a[c]),
      .out_valid(bus_a_valid[c]),  .out_ready(bus_a_ready[c]),  .out_a(bus_a[c]),
      .reg_en   (reg_en[c]),
      .dep_row  (depleted[domain[c]]),
      .acc_valid(acc_valid[c]), .acc_bank(acc_bank[c]), .stalled(core_stalled[c])
    );
  end

  bank_monitor #(.N_CORES(N_CORES), .N_BANKS(N_BANKS), .W(32), .BANK_W(BANK_W)) u_mon (
    .clk, .rst_n, .acc_valid, .acc_bank, .clr(mon_clr), .mon
  );

  reg_mmio #(.N_CORES(N_CORES), .N_DOMAINS(N_DOMAINS), .N_BANKS(N_BANKS), .DOM_W(DOM_W)) u_regs (
    .clk, .rst_n,
    .a_valid(pb_a_valid), .a_ready(pb_a_ready), .a(pb_a),
    .d_valid(pb_d_valid), .d_ready(pb_d_ready), .d(pb_d),
    .wdata, .rpr_we, .abr_we, .dar_we, .rer_we, .mon_clr,
    .rpr, .abr, .domain, .reg_en, .bac, .mon
  );

  // channels B to E are not regulated
  assign core_b_valid = bus_b_valid;
  assign bus_b_ready  = core_b_ready;
  assign core_b       = bus_b;
  assign bus_c_valid  = core_c_valid;
  assign core_c_ready = bus_c_ready;
  assign bus_c        = core_c;
  assign core_d_valid = bus_d_valid;
  assign bus_d_ready  = core_d_ready;
  assign core_d       = bus_d;
  assign bus_e_valid  = core_e_valid;
  assign core_e_ready = bus_e_ready;
  assign bus_e        = core_e;

endmodule
