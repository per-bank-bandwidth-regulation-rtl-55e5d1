// Workload runner used by tb_bandwidth_workloads (testbench helper).
//
// Builds one regulation unit with N_BANKS banks, programs it through its
// periphery-bus register port (RPR = 400 cycles, budget ABR accesses per bank
// and period, core 0 regulated in domain 0) and drives core 0 with three access
// patterns, each for PERIODS full regulation periods, while the bus accepts
// every request at once (no cache contention, so the regulator alone limits
// the rate). Patterns:
//   0  single bank: every request to bank 0 (the bank-aware attack pattern)
//   1  sequential:  one request per cache line, sweeping the banks in turn
//      (the "Bandwidth" synthetic workload: a sequential line-stride read)
//   2  skewed:      per-bank mix in the proportions the paper profiles for
//      its most skewed benchmark, 309455:1843:1647:1795 (four banks) or the
//      same counts folded onto two banks
// For each pattern it reports the accepted accesses; a counter per period
// checks that no bank of the domain ever exceeds ABR accesses in a period.
module bw_workload_runner #(
  parameter int unsigned N_BANKS = 4,
  parameter int unsigned PERIODS = 20,
  parameter int unsigned ABR     = 32
) (
  output logic        done,
  output int          checks,
  output int          failures,
  output longint      accepted [3]
);
  import bpr_pkg::*;
  localparam int NC = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  [NC-1:0] core_a_valid, core_a_ready, bus_a_valid;
  tl_a_t [NC-1:0] core_a, bus_a;
  logic  [NC-1:0] b_v, b_r, c_v, c_r, d_v, d_r, e_v, e_r;
  tl_b_t [NC-1:0] b_i, b_o;
  tl_c_t [NC-1:0] c_i, c_o;
  tl_d_t [NC-1:0] d_i, d_o;
  tl_e_t [NC-1:0] e_i, e_o;
  logic           pb_a_valid, pb_a_ready, pb_d_valid;
  pb_a_t          pb_a;
  pb_d_t          pb_d;
  logic  [NC-1:0] core_stalled;
  logic           period_end;

  bw_regulation_unit #(.N_BANKS(N_BANKS)) dut (
    .clk, .rst_n,
    .core_a_valid, .core_a_ready, .core_a, .bus_a_valid, .bus_a_ready('1), .bus_a,
    .bus_b_valid('0), .bus_b_ready(b_r), .bus_b(b_i), .core_b_valid(b_v), .core_b_ready('0), .core_b(b_o),
    .core_c_valid('0), .core_c_ready(c_r), .core_c(c_i), .bus_c_valid(c_v), .bus_c_ready('0), .bus_c(c_o),
    .bus_d_valid('0), .bus_d_ready(d_r), .bus_d(d_i), .core_d_valid(d_v), .core_d_ready('0), .core_d(d_o),
    .core_e_valid('0), .core_e_ready(e_r), .core_e(e_i), .bus_e_valid(e_v), .bus_e_ready('0), .bus_e(e_o),
    .pb_a_valid, .pb_a_ready, .pb_a, .pb_d_valid, .pb_d_ready(1'b1), .pb_d,
    .core_stalled, .period_end
  );

  assign b_i = '0; assign c_i = '0; assign d_i = '0; assign e_i = '0;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL (%0d banks): %s", N_BANKS, msg); end
  endtask

  task automatic reg_write(input logic [11:0] a, input logic [31:0] v);
    @(negedge clk);
    pb_a_valid = 1'b1; pb_a = '0; pb_a.opcode = PB_A_PUT_FULL; pb_a.address = a;
    pb_a.data = v; pb_a.mask = 4'hf; pb_a.size = 2'd2;
    @(negedge clk);
    pb_a_valid = 1'b0;
  endtask

  int line;
  function automatic logic [31:0] next_addr(int pat);
    int bank;
    int r;
    case (pat)
      0: bank = 0;
      1: begin bank = line % N_BANKS; line++; end
      default: begin
        // cumulative weights of 309455 : 1843 : 1647 : 1795
        r = $urandom_range(0, 314739);
        bank = (r < 309455) ? 0 : (r < 311298) ? 1 : (r < 312945) ? 2 : 3;
        bank = bank % N_BANKS;
      end
    endcase
    return 32'h8000_0000 + ($urandom_range(0, 1023) << 8) + 32'(bank) * 64;
  endfunction

  int per_bank [N_BANKS];

  initial begin
    bit fire, pe;
    int bk, per;
    done = 1'b0; checks = 0; failures = 0;
    core_a_valid = '0; core_a = '0; pb_a_valid = 1'b0; pb_a = '0; line = 0;
    for (int p = 0; p < 3; p++) accepted[p] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    reg_write(12'h000, 32'd400);
    reg_write(12'h100, 32'(ABR));
    reg_write(12'h200, 32'd0);
    reg_write(12'h300, 32'd1);
    for (int pat = 0; pat < 3; pat++) begin
      // start on a period boundary; the access counters restart in that cycle
      #1;
      while (!period_end) begin @(negedge clk); #1; end
      per = 0;
      for (int j = 0; j < N_BANKS; j++) per_bank[j] = 0;
      while (per < int'(PERIODS)) begin
        if (!core_a_valid[0]) begin
          core_a[0] = '0;
          core_a[0].opcode  = A_GET;
          core_a[0].size    = 4'd6;
          core_a[0].address = next_addr(pat);
          core_a_valid[0]   = 1'b1;
        end
        #1;
        fire = core_a_valid[0] && core_a_ready[0];
        bk   = (N_BANKS > 1) ? int'(core_a[0].address[6 +: $clog2(N_BANKS)]) : 0;
        @(posedge clk);
        @(negedge clk);
        if (fire) begin
          per_bank[bk]++;
          accepted[pat]++;
          core_a_valid[0] = 1'b0;
        end
        #1;
        if (period_end) begin
          // the period that just closed
          for (int j = 0; j < N_BANKS; j++)
            check(per_bank[j] <= int'(ABR),
                  $sformatf("pattern %0d bank %0d: %0d accesses in a period", pat, j, per_bank[j]));
          for (int j = 0; j < N_BANKS; j++) per_bank[j] = 0;
          per++;
        end
      end
    end
    done = 1'b1;
  end
endmodule
