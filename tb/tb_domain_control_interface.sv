// Self-checking testbench for domain_control_interface.
//
// Drives random per-core access reports (random bank, random domain
// assignment), random period-end pulses and occasional budget writes, and
// compares every bank access counter and every depleted flag, each cycle, with
// a reference model of the paper's regulation algorithm kept in this file:
// at period end all counters restart from the accesses of that cycle; otherwise
// each access adds one to the counter of (domain of the core, bank); a bank is
// depleted when its counter has reached the domain's budget, never in the
// period-end cycle. A directed part also checks the reset budget (32), that
// exactly ABR accesses deplete a bank and that other banks stay open.
module tb_domain_control_interface;
  localparam int NC = 3, ND = 2, NB = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [ND-1:0]              abr_we = '0;
  logic [31:0]                wdata = '0;
  logic                       period_end = 1'b0;
  logic [NC-1:0]              acc_valid = '0;
  logic [NC-1:0][1:0]         acc_bank = '0;
  logic [NC-1:0][0:0]         domain = '0;
  logic [ND-1:0][31:0]        abr;
  logic [ND-1:0][NB-1:0][31:0] bac;
  logic [ND-1:0][NB-1:0]      depleted;
  int checks = 0, failures = 0;
  longint m_bac [ND][NB];
  longint m_abr [ND];

  domain_control_interface #(.N_CORES(NC), .N_DOMAINS(ND), .N_BANKS(NB)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Check combinational outputs (inputs settled), then advance the model one clock.
  task automatic step();
    #1;
    for (int d = 0; d < ND; d++)
      for (int j = 0; j < NB; j++)
        check(depleted[d][j] == (!period_end && m_bac[d][j] >= m_abr[d]),
              $sformatf("depleted[%0d][%0d]", d, j));
    @(posedge clk);
    for (int d = 0; d < ND; d++) begin
      for (int j = 0; j < NB; j++) begin
        if (period_end) m_bac[d][j] = 0;
        for (int c = 0; c < NC; c++)
          if (acc_valid[c] && domain[c] == d && acc_bank[c] == j) m_bac[d][j]++;
      end
      if (abr_we[d]) m_abr[d] = wdata;
    end
    @(negedge clk);
    for (int d = 0; d < ND; d++) begin
      check(abr[d] == m_abr[d], $sformatf("abr[%0d]", d));
      for (int j = 0; j < NB; j++)
        check(bac[d][j] == m_bac[d][j], $sformatf("bac[%0d][%0d]=%0d exp %0d", d, j, bac[d][j], m_bac[d][j]));
    end
  endtask

  initial begin
    int n_depl = 0, n_pe = 0;
    for (int d = 0; d < ND; d++) begin
      m_abr[d] = 32;
      for (int j = 0; j < NB; j++) m_bac[d][j] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(abr[0] == 32 && abr[1] == 32, "reset budget 32");

    // Directed: budget 5 for domain 0, core 0 in domain 0 hits bank 2 five times.
    abr_we = 2'b01; wdata = 5; step(); abr_we = '0;
    for (int i = 0; i < 5; i++) begin
      check(!depleted[0][2], "bank 2 open before 5 accesses");
      acc_valid = 3'b001; acc_bank[0] = 2; step();
    end
    acc_valid = '0;
    check(depleted[0][2], "bank 2 depleted after 5 accesses");
    check(depleted[0] == 4'b0100, "other banks of domain 0 still open");
    check(depleted[1] == 4'b0000, "domain 1 unaffected");
    // Simultaneous access by two cores of one domain counts twice.
    domain = '0; acc_valid = 3'b110; acc_bank[1] = 1; acc_bank[2] = 1; step();
    acc_valid = '0;
    check(bac[0][1] == 2, "two simultaneous accesses counted");
    // Period end replenishes.
    period_end = 1'b1; step(); period_end = 1'b0;
    check(bac[0] == '0 && !depleted[0][2], "replenished at period end");

    // Random phase.
    for (int i = 0; i < 20000; i++) begin
      acc_valid  = NC'($urandom);
      for (int c = 0; c < NC; c++) begin
        acc_bank[c] = ($urandom_range(0, 3) == 0) ? 2'($urandom) : 2'd0;
        domain[c]   = 1'($urandom);
      end
      period_end = ($urandom_range(0, 39) == 0);
      abr_we     = ($urandom_range(0, 199) == 0) ? ND'($urandom) : '0;
      wdata      = $urandom_range(0, 24);
      if (period_end) n_pe++;
      if (|depleted) n_depl++;
      step();
    end
    check(n_depl > 100 && n_pe > 100, "random phase exercised depletion and replenish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
