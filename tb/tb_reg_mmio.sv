// Self-checking testbench for reg_mmio.
//
// The testbench keeps its own copies of every register the front end exposes
// (RPR, ABR, DAR, RER) and updates them from the write strobes, as the real
// register blocks would; counters (BAC, monitors) are random values it drives.
// Through TileLink-UL Get/Put requests it checks: the register map offsets,
// read data, full and byte-masked writes, that BAC is read only, that a write
// to a monitor clears exactly that monitor, that unmapped addresses read zero,
// and that a response is held while the master stalls d_ready (one request in
// flight, a_ready low meanwhile).
module tb_reg_mmio;
  import bpr_pkg::*;
  localparam int NC = 3, ND = 2, NB = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic a_valid = 1'b0, a_ready, d_valid, d_ready = 1'b1;
  pb_a_t a = '0;
  pb_d_t d;
  logic [31:0] wdata;
  logic rpr_we;
  logic [ND-1:0] abr_we;
  logic [NC-1:0] dar_we, rer_we;
  logic [NC-1:0][NB-1:0] mon_clr;
  logic [31:0] rpr = 32'd400;
  logic [ND-1:0][31:0] abr = '0;
  logic [NC-1:0][0:0] domain = '0;
  logic [NC-1:0] reg_en = '0;
  logic [ND-1:0][NB-1:0][31:0] bac;
  logic [NC-1:0][NB-1:0][31:0] mon;
  int checks = 0, failures = 0;

  reg_mmio #(.N_CORES(NC), .N_DOMAINS(ND), .N_BANKS(NB)) dut (.*);

  always #5 clk = ~clk;

  // register storage as the real blocks do it
  always_ff @(posedge clk) begin
    if (rpr_we) rpr <= wdata;
    for (int i = 0; i < ND; i++) if (abr_we[i]) abr[i] <= wdata;
    for (int i = 0; i < NC; i++) begin
      if (dar_we[i]) domain[i] <= wdata[0];
      if (rer_we[i]) reg_en[i] <= wdata[0];
      for (int j = 0; j < NB; j++) if (mon_clr[i][j]) mon[i][j] <= '0;
    end
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // One request, response taken after `hold` cycles of d_ready low.
  task automatic xfer(input logic [2:0] op, input logic [11:0] addr, input logic [31:0] data,
                      input logic [3:0] mask, input int hold, output pb_d_t rsp);
    a_valid = 1'b1; a.opcode = op; a.address = addr; a.data = data; a.mask = mask;
    a.size = 2'd2; a.source = 4'($urandom);
    d_ready = (hold == 0);
    #1;
    while (!a_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    a_valid = 1'b0;
    check(d_valid, "response one cycle after the request");
    for (int i = 0; i < hold; i++) begin
      check(d_valid && !a_ready, "response held, no new request accepted");
      @(negedge clk);
    end
    rsp = d;
    check(rsp.source == a.source, "response source");
    check(rsp.opcode == ((op == PB_A_GET) ? PB_D_ACK_DATA : PB_D_ACK), "response opcode");
    d_ready = 1'b1;
    @(negedge clk);
  endtask

  task automatic rd(input logic [11:0] addr, output logic [31:0] v, input int hold = 0);
    pb_d_t r;
    xfer(PB_A_GET, addr, '0, 4'hf, hold, r);
    v = r.data;
  endtask

  task automatic wr(input logic [11:0] addr, input logic [31:0] v, input logic [3:0] mask = 4'hf);
    pb_d_t r;
    xfer(PB_A_PUT_FULL, addr, v, mask, 0, r);
  endtask

  initial begin
    logic [31:0] v;
    foreach (bac[i, j]) bac[i][j] = $urandom;
    foreach (mon[i, j]) mon[i][j] = $urandom | 32'h1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    rd(12'h000, v); check(v == 400, "RPR read");
    wr(12'h000, 32'd1234); check(rpr == 1234, "RPR write");
    rd(12'h000, v, 3); check(v == 1234, "RPR read with stalled response");
    wr(12'h104, 32'd16); check(abr[1] == 16 && abr[0] == 0, "ABR[1] write only");
    wr(12'h100, 32'h0000_0180); check(abr[0] == 384, "ABR[0] write");
    wr(12'h100, 32'hAAAA_BB20, 4'b0001); check(abr[0] == 32'h0000_0120, "byte-masked ABR write");
    rd(12'h104, v); check(v == 16, "ABR[1] read");
    wr(12'h208, 32'd1); check(domain[2] == 1'b1 && domain[1:0] == '0, "DAR[2] write");
    wr(12'h300, 32'd1); wr(12'h304, 32'd1); check(reg_en == 3'b011, "RER writes");
    rd(12'h208, v); check(v == 1, "DAR read");
    rd(12'h304, v); check(v == 1, "RER read");
    for (int i = 0; i < ND; i++)
      for (int j = 0; j < NB; j++) begin
        rd(12'h400 + 12'(4 * (i * NB + j)), v);
        check(v == bac[i][j], $sformatf("BAC[%0d][%0d] read", i, j));
      end
    wr(12'h404, 32'd0);
    rd(12'h404, v); check(v == bac[0][1], "BAC is read only");
    for (int c = 0; c < NC; c++)
      for (int j = 0; j < NB; j++) begin
        rd(12'h800 + 12'(4 * (c * NB + j)), v);
        check(v == mon[c][j], $sformatf("MON[%0d][%0d] read", c, j));
      end
    wr(12'h800 + 12'(4 * (1 * NB + 2)), 32'd0);
    check(mon[1][2] == 0, "monitor clear");
    check(mon[1][1] != 0 && mon[1][3] != 0 && mon[0][2] != 0 && mon[2][2] != 0, "only that monitor cleared");
    rd(12'h00C, v); check(v == 0, "unmapped reads zero");
    rd(12'h10C, v); check(v == 0, "ABR beyond domains reads zero");
    wr(12'h00C, 32'hFFFF_FFFF); check(rpr == 1234 && abr[0] == 32'h120, "unmapped write ignored");
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
