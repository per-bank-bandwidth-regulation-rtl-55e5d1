// Self-checking testbench for period_counter.
//
// Checks that with RPR = P the replenish pulse comes every P+1 clocks (the count
// runs 0..P), that the reset value of RPR is 400, that a written RPR is read
// back and takes effect, and that lowering RPR below the running count ends the
// period at once (">=" compare). Expected pulse times are computed here from
// the cycle number, not taken from the block.
module tb_period_counter;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        rpr_we = 1'b0;
  logic [31:0] rpr_wdata = '0;
  logic [31:0] rpr, count;
  logic        period_end;
  int          checks = 0, failures = 0;

  period_counter dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Run n cycles; return the cycle offsets (1-based) at which period_end was high.
  task automatic pulses(input int n, output int first, output int second);
    first = -1; second = -1;
    for (int i = 1; i <= n; i++) begin
      @(negedge clk);
      if (period_end) begin
        if (first < 0) first = i; else if (second < 0) second = i;
      end
    end
  endtask

  initial begin
    int f, s;
    repeat (2) @(negedge clk);
    check(rpr == 32'd400, "RPR reset value is 400");
    rst_n = 1'b1;
    // From reset the count is 0; the first pulse is when count == 400.
    pulses(1000, f, s);
    check(f == 400, $sformatf("first pulse at %0d", f));
    check(s - f == 401, $sformatf("400-cycle RPR gives 401-cycle period, got %0d", s - f));

    // Program RPR = 9: period of 10 cycles.
    @(negedge clk); rpr_we = 1'b1; rpr_wdata = 32'd9;
    @(negedge clk); rpr_we = 1'b0;
    check(rpr == 32'd9, "RPR readback");
    pulses(40, f, s);
    check(f >= 1 && f <= 10, $sformatf("first pulse after write at %0d", f));
    check(s - f == 10, $sformatf("RPR=9 period %0d", s - f));

    // Count every pulse in 200 cycles: 20 expected.
    begin
      int n;
      n = 0;
      for (int i = 0; i < 200; i++) begin @(negedge clk); if (period_end) n++; end
      check(n == 20, $sformatf("20 pulses in 200 cycles with RPR=9, got %0d", n));
    end

    // Lower RPR while the count is above the new value: the period ends at once.
    @(negedge clk); rpr_we = 1'b1; rpr_wdata = 32'd100;
    @(negedge clk); rpr_we = 1'b0;
    repeat (50) @(negedge clk);
    check(count >= 32'd40 && !period_end, "count running above 40");
    rpr_we = 1'b1; rpr_wdata = 32'd3;
    @(negedge clk); rpr_we = 1'b0;
    check(period_end, "period ends at once when RPR drops below the count");
    @(negedge clk);
    check(count == 0, "count restarts from zero");
    pulses(12, f, s);
    check(s - f == 4, $sformatf("RPR=3 period %0d", s - f));

    // RPR = 0: a pulse every cycle.
    rpr_we = 1'b1; rpr_wdata = 32'd0;
    @(negedge clk); rpr_we = 1'b0;
    begin
      int n;
      n = 0;
      for (int i = 0; i < 10; i++) begin @(negedge clk); if (period_end) n++; end
      check(n == 10, "RPR=0 pulses every cycle");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
