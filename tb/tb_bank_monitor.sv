// Self-checking testbench for bank_monitor.
//
// Random access reports from three cores to four banks and random clears are
// applied; every cycle all twelve counters are compared with a model kept
// here (one counter per core and bank, +1 per access, a clear leaves only the
// access of the same cycle). A directed part checks a skewed pattern like the
// paper's "Localization" profile, where one bank takes nearly all accesses.
module tb_bank_monitor;
  localparam int NC = 3, NB = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NC-1:0]              acc_valid = '0;
  logic [NC-1:0][1:0]         acc_bank = '0;
  logic [NC-1:0][NB-1:0]      clr = '0;
  logic [NC-1:0][NB-1:0][31:0] mon;
  int checks = 0, failures = 0;
  longint m [NC][NB];

  bank_monitor #(.N_CORES(NC), .N_BANKS(NB)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic step();
    @(posedge clk);
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < NB; j++) begin
        if (clr[c][j]) m[c][j] = 0;
        if (acc_valid[c] && acc_bank[c] == j) m[c][j]++;
      end
    @(negedge clk);
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < NB; j++)
        check(mon[c][j] == 32'(m[c][j]), $sformatf("mon[%0d][%0d]=%0d exp %0d", c, j, mon[c][j], m[c][j]));
  endtask

  initial begin
    foreach (m[c, j]) m[c][j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // Skewed: core 0 sends 300 accesses to bank 0 and one to each other bank.
    for (int i = 0; i < 303; i++) begin
      acc_valid = 3'b001;
      acc_bank[0] = (i < 300) ? 2'd0 : 2'(i - 299);
      step();
    end
    acc_valid = '0;
    check(mon[0][0] == 300 && mon[0][1] == 1 && mon[0][2] == 1 && mon[0][3] == 1, "skewed profile");
    check(mon[1] == '0 && mon[2] == '0, "other cores untouched");
    // Random.
    for (int i = 0; i < 20000; i++) begin
      acc_valid = NC'($urandom);
      for (int c = 0; c < NC; c++) acc_bank[c] = 2'($urandom);
      clr = ($urandom_range(0, 49) == 0) ? (NC*NB)'($urandom) : '0;
      step();
    end
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
