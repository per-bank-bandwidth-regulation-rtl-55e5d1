// Self-checking testbench for chan_a_throttle.
//
// A random core-side sender issues Get, AcquireBlock and multi-beat PutFullData
// messages (held steady until accepted, as TileLink requires) to random banks;
// the bus side accepts at random; regulation enable and the depleted flags
// change at random between messages. Every cycle the gate outputs are compared
// with a model written here: a request is stalled only on the first beat of a
// message, only when regulation is enabled and the addressed bank (address
// bits 7:6 for four banks) is depleted; stalled means valid to the bus and
// ready to the core are both low. Each accepted message must be reported once,
// with its bank, and the payload must pass unchanged.
module tb_chan_a_throttle;
  import bpr_pkg::*;
  localparam int NB = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  tl_a_t in_a, out_a;
  logic reg_en = 1'b0;
  logic [NB-1:0] dep_row = '0;
  logic acc_valid, stalled;
  logic [1:0] acc_bank;
  int checks = 0, failures = 0;
  int n_stall = 0, n_burst = 0, n_pass_depleted = 0;

  chan_a_throttle #(.N_BANKS(NB), .BANK_LSB(6)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic tl_a_t new_msg();
    tl_a_t m;
    m = '0;
    case ($urandom_range(0, 2))
      0: begin m.opcode = A_GET;       m.size = 4'd6; end
      1: begin m.opcode = A_ACQ_BLOCK; m.size = 4'd6; end
      default: begin m.opcode = A_PUT_FULL; m.size = 4'($urandom_range(3, 6)); end
    endcase
    m.source  = 4'($urandom);
    m.address = {$urandom} & ~32'h3f;
    m.mask    = 8'hff;
    m.data    = {$urandom, $urandom};
    return m;
  endfunction

  initial begin
    int beat;       // beat index inside the current message (model)
    int nbeats;
    bit exp_stall;
    bit fire;
    in_a = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    beat = 0; nbeats = 1;
    @(negedge clk);
    for (int cyc = 0; cyc < 20000; cyc++) begin
      if (!in_valid && $urandom_range(0, 3) != 0) begin
        in_a     = new_msg();
        in_valid = 1'b1;
        nbeats   = (in_a.opcode == A_PUT_FULL && (1 << in_a.size) > 8) ? (1 << in_a.size) / 8 : 1;
      end
      // budgets change (period end, other cores) at random, at any time
      if ($urandom_range(0, 7) == 0) begin
        reg_en  = ($urandom_range(0, 3) != 0);
        dep_row = NB'($urandom);
      end
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      exp_stall = in_valid && beat == 0 && reg_en && dep_row[in_a.address[7:6]];
      check(out_valid == (in_valid && !exp_stall), "out_valid");
      check(in_ready  == (out_ready && !(beat == 0 && reg_en && dep_row[in_a.address[7:6]])), "in_ready");
      check(stalled   == exp_stall, "stalled");
      check(out_a == in_a, "payload passes unchanged");
      check(acc_valid == (in_valid && !exp_stall && out_ready && beat == 0), "acc_valid once per message");
      if (acc_valid) check(acc_bank == in_a.address[7:6], "acc_bank");
      if (exp_stall) n_stall++;
      if (in_valid && beat > 0 && reg_en && dep_row[in_a.address[7:6]] && out_ready) n_pass_depleted++;
      fire = in_valid && in_ready;
      @(posedge clk);
      @(negedge clk);  // inputs change only away from the sampling edge
      if (fire) begin
        // advance the model; keep the message (new data beat) until its last beat
        if (beat + 1 == nbeats) begin
          if (nbeats > 1) n_burst++;
          beat = 0; in_valid = 1'b0;
        end else begin
          beat++;
          in_a.data = {$urandom, $urandom};
        end
      end
    end
    check(n_stall > 1000 && n_burst > 500 && n_pass_depleted > 50, "stalls, bursts and mid-burst beats all exercised");
    $display("stalls=%0d bursts=%0d midburst_passes=%0d", n_stall, n_burst, n_pass_depleted);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
