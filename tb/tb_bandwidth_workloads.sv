// Synthetic workloads of the paper's evaluation on the regulation unit, for a
// two-bank and a four-bank cache.
//
// With a 400-cycle period and a budget of 32 accesses per bank (the paper's
// 1.28 GB/s setting), a regulated core is driven with (a) all requests to one
// bank, as the bank-aware attack does, (b) a sequential line-by-line sweep, as
// the "Bandwidth" benchmark does, and (c) a skewed per-bank mix taken from the
// paper's profile of its most skewed benchmark. The bus accepts every request,
// so only the regulator limits the rate. Expected, from the budget alone:
//   single bank: 32 accesses per period (what a bank-oblivious regulator with
//                the same budget would allow for any pattern)
//   sweep:       N_BANKS x 32 accesses per period, i.e. 2x and 4x the
//                single-bank rate (the paper measures 1.86x and 3.66x on a
//                full system, where the core itself also limits the rate)
//   skewed:      close to the single-bank rate, since one bank takes ~98%
// Each figure is checked to within one access per period.
module tb_bandwidth_workloads;
  localparam int PERIODS = 20;
  logic   done2, done4;
  int     chk2, chk4, fail2, fail4;
  longint acc2 [3], acc4 [3];
  int     checks = 0, failures = 0;

  bw_workload_runner #(.N_BANKS(2), .PERIODS(PERIODS), .ABR(32)) u2 (.done(done2), .checks(chk2), .failures(fail2), .accepted(acc2));
  bw_workload_runner #(.N_BANKS(4), .PERIODS(PERIODS), .ABR(32)) u4 (.done(done4), .checks(chk4), .failures(fail4), .accepted(acc4));

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic bit near(longint v, longint e);
    return (v >= e - PERIODS) && (v <= e);
  endfunction

  initial begin
    #100;  // the runners clear done at time 0
    wait (done2 && done4);
    $display("2 banks: single=%0d sweep=%0d skewed=%0d per %0d periods", acc2[0], acc2[1], acc2[2], PERIODS);
    $display("4 banks: single=%0d sweep=%0d skewed=%0d per %0d periods", acc4[0], acc4[1], acc4[2], PERIODS);
    $display("sweep / single-bank throughput: 2 banks %.2f, 4 banks %.2f",
             real'(acc2[1]) / real'(acc2[0]), real'(acc4[1]) / real'(acc4[0]));
    check(near(acc2[0], 32 * PERIODS), "2 banks, single bank: 32 per period");
    check(near(acc4[0], 32 * PERIODS), "4 banks, single bank: 32 per period");
    check(near(acc2[1], 64 * PERIODS), "2 banks, sweep: 64 per period");
    check(near(acc4[1], 128 * PERIODS), "4 banks, sweep: 128 per period");
    check(acc4[2] >= 32 * PERIODS && acc4[2] < 36 * PERIODS, "4 banks, skewed: limited by the hot bank");
    check(acc2[2] >= 32 * PERIODS && acc2[2] < 36 * PERIODS, "2 banks, skewed: limited by the hot bank");
    checks += chk2 + chk4;
    failures += fail2 + fail4;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
