// Self-checking testbench for core_control_interface.
//
// Reproduces the paper's four-core, two-domain example (cores 0-2 in domain 0
// with regulation enabled, core 3 in domain 1 without), then writes random
// values and compares every DAR and RER with a model kept here, including the
// clamping of out-of-range domain numbers.
module tb_core_control_interface;
  localparam int NC = 4, ND = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NC-1:0] dar_we = '0, rer_we = '0;
  logic [31:0]   wdata = '0;
  logic [NC-1:0][0:0] domain;
  logic [NC-1:0] reg_en;
  int checks = 0, failures = 0;
  int exp_dom [NC];
  bit exp_en  [NC];

  core_control_interface #(.N_CORES(NC), .N_DOMAINS(ND)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input bit is_rer, input int core, input logic [31:0] v);
    @(negedge clk);
    wdata = v;
    if (is_rer) rer_we[core] = 1'b1; else dar_we[core] = 1'b1;
    @(negedge clk);
    dar_we = '0; rer_we = '0;
    if (is_rer) exp_en[core] = v[0];
    else        exp_dom[core] = (v >= ND) ? ND - 1 : int'(v);
  endtask

  task automatic compare(input string tag);
    for (int c = 0; c < NC; c++) begin
      check(int'(domain[c]) == exp_dom[c], $sformatf("%s: DAR[%0d]=%0d exp %0d", tag, c, domain[c], exp_dom[c]));
      check(reg_en[c] == exp_en[c], $sformatf("%s: RER[%0d]", tag, c));
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin exp_dom[c] = 0; exp_en[c] = 0; end
    repeat (2) @(negedge clk);
    compare("reset");
    rst_n = 1'b1;
    // Example configuration: cores 0-2 regulated in domain 0, core 3 in domain 1.
    for (int c = 0; c < 3; c++) begin wr(0, c, 0); wr(1, c, 1); end
    wr(0, 3, 1); wr(1, 3, 0);
    compare("example");
    check(domain == {1'b1, 1'b0, 1'b0, 1'b0} && reg_en == 4'b0111, "example packed");
    // Random writes, including out-of-range domains.
    for (int i = 0; i < 200; i++) begin
      wr($urandom_range(0, 1), $urandom_range(0, NC - 1), $urandom_range(0, 5));
      compare("random");
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
