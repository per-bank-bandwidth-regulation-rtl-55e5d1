// End-to-end testbench of bw_regulation_unit at its default parameters
// (three cores, two domains, four banks on address bits 7:6, 400-cycle period).
//
// Set-up as in the paper's evaluation: core 0 (the real-time "victim") is in
// domain 1 with regulation off; cores 1 and 2 (the best-effort "attackers") are
// in domain 0 with regulation on and a budget of 32 accesses per bank and
// period. Software programs the unit through the periphery-bus register port.
// A behavioural bus/cache model (llc_bank_model) serves one request per bank
// every two cycles behind a four-entry queue per bank.
//
// The testbench holds a cycle-accurate reference model of the unit (period
// counter, registers, per-bank access counters, beat tracking, monitors) built
// from the paper's algorithms and the register map, and compares every cycle:
// valid towards the bus and ready towards each core on channel A, the payload,
// the pass-through of channels B to E, and every register read. It runs these
// phases, one after the other:
//   attack      cores 1 and 2 hammer bank 0, core 0 reads bank 0 too
//   stream      cores 1 and 2 sweep all banks line by line
//   bursts      multi-beat PutFullData messages mixed with reads
//   readback    all BAC and monitor registers read, one monitor cleared
//   unregulate  RER of cores 1 and 2 cleared: no stall may happen
//   reprogram   RPR = 99, ABR = 8, regulation on again
// It counts how often each mechanism happened (stall, replenish of a stalled
// request, pass to an open bank while another is depleted, burst beat passing a
// depleted bank, simultaneous charge of two cores, register read, write and
// monitor clear) and counts a failure for any that never happened. It also
// checks the paper's guarantee: per period, domain 0 reaches bank 0 at most
// ABR + 1 times (two cores can be charged in one cycle), and the sweep gets
// several times the single-bank throughput.
module tb_bw_regulation_unit;
  import bpr_pkg::*;
  localparam int NC = 3, ND = 2, NB = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  [NC-1:0] core_a_valid = '0, core_a_ready, bus_a_valid, bus_a_ready;
  tl_a_t [NC-1:0] core_a, bus_a;
  logic  [NC-1:0] bus_b_valid, bus_b_ready, core_b_valid, core_b_ready;
  tl_b_t [NC-1:0] bus_b, core_b;
  logic  [NC-1:0] core_c_valid, core_c_ready, bus_c_valid, bus_c_ready;
  tl_c_t [NC-1:0] core_c, bus_c;
  logic  [NC-1:0] bus_d_valid, bus_d_ready, core_d_valid, core_d_ready;
  tl_d_t [NC-1:0] bus_d, core_d;
  logic  [NC-1:0] core_e_valid, core_e_ready, bus_e_valid, bus_e_ready;
  tl_e_t [NC-1:0] core_e, bus_e;
  logic           pb_a_valid = 1'b0, pb_a_ready, pb_d_valid, pb_d_ready = 1'b1;
  pb_a_t          pb_a = '0;
  pb_d_t          pb_d;
  logic  [NC-1:0] core_stalled;
  logic           period_end;

  bw_regulation_unit dut (.*);

  logic [NC-1:0][31:0] bus_addr;
  for (genvar c = 0; c < NC; c++) begin : g_addr
    assign bus_addr[c] = bus_a[c].address;
  end
  llc_bank_model #(.N_CORES(NC), .N_BANKS(NB), .BANK_LSB(6), .BANK_CYCLES(2)) u_llc (
    .clk, .rst_n, .valid(bus_a_valid), .addr(bus_addr), .ready(bus_a_ready)
  );

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // ------------------------------------------------------------ reference model
  longint m_cnt, m_rpr;
  longint m_abr [ND];
  int     m_dar [NC];
  bit     m_rer [NC];
  longint m_bac [ND][NB];
  longint m_mon [NC][NB];
  int     m_beat[NC];

  function automatic int bank_of(logic [31:0] a);
    return int'(a[7:6]);
  endfunction

  function automatic int beats_of(tl_a_t m);
    if (m.opcode == A_PUT_FULL && (1 << m.size) > 8) return (1 << m.size) / 8;
    return 1;
  endfunction

  function automatic logic [31:0] model_read(logic [11:0] addr);
    int w;
    w = int'(addr[11:2]);
    if (addr == 12'h000) return 32'(m_rpr);
    if (addr[11:8] == 4'h1 && w - 64 < ND)  return 32'(m_abr[w - 64]);
    if (addr[11:8] == 4'h2 && w - 128 < NC) return 32'(m_dar[w - 128]);
    if (addr[11:8] == 4'h3 && w - 192 < NC) return 32'(m_rer[w - 192]);
    if (addr[11:10] == 2'b01 && w - 256 < ND * NB) return 32'(m_bac[(w - 256) / NB][(w - 256) % NB]);
    if (addr[11] == 1'b1 && w - 512 < NC * NB)     return 32'(m_mon[(w - 512) / NB][(w - 512) % NB]);
    return 32'd0;
  endfunction

  // ------------------------------------------------------------ register traffic
  typedef struct { bit wr; logic [11:0] addr; logic [31:0] data; } mmio_op_t;
  mmio_op_t mq[$];
  logic [31:0] exp_rd[$];
  logic [31:0] rd_vals[$];   // read data in order, for phase checks

  task automatic q_wr(input logic [11:0] a, input logic [31:0] v);
    mmio_op_t o; o.wr = 1; o.addr = a; o.data = v; mq.push_back(o);
  endtask
  task automatic q_rd(input logic [11:0] a);
    mmio_op_t o; o.wr = 0; o.addr = a; o.data = 0; mq.push_back(o);
  endtask

  // ------------------------------------------------------------ traffic generators
  typedef enum int { T_OFF, T_BANK0, T_SWEEP, T_BURST } tmode_e;
  tmode_e mode [NC];
  int     rate [NC];         // percent chance of a new message per idle cycle
  int     sweep[NC];

  function automatic tl_a_t gen(int c);
    tl_a_t m;
    m = '0;
    m.source = 4'(c);
    m.mask   = 8'hff;
    m.data   = {$urandom, $urandom};
    m.opcode = ($urandom_range(0, 1) != 0) ? A_GET : A_ACQ_BLOCK;
    m.size   = 4'd6;
    case (mode[c])
      T_BANK0: m.address = 32'h8000_0000 + 32'(c) * 32'h10000 + ($urandom_range(0, 255) << 8);
      T_SWEEP: begin m.address = 32'h8000_0000 + 32'(c) * 32'h10000 + 32'(sweep[c]) * 64; sweep[c]++; end
      default: begin
        m.address = 32'h8000_0000 + ({$urandom} & 32'h000f_ffc0);
        if ($urandom_range(0, 1) != 0) begin m.opcode = A_PUT_FULL; m.size = 4'($urandom_range(3, 6)); end
      end
    endcase
    return m;
  endfunction

  // ------------------------------------------------------------ statistics
  int n_stall, n_release, n_open_bank_pass, n_midburst, n_double, n_rd, n_wr, n_clr;
  int n_pass_bd, n_unreg_violation;
  int per_period_d0b0, max_d0b0;
  int period_acc_d0, n_periods_d0;
  int cyc;

  initial begin
    int phase_end;
    string phase;
    bit    fire   [NC];
    bit    stall  [NC];
    bit    was_stalled [NC];
    bit    pb_fire, pe;
    mmio_op_t cur;
    int    acc_cnt [ND][NB];
    longint attack_acc, sweep_acc;
    int    attack_per, sweep_per;

    m_cnt = 0; m_rpr = 400;
    for (int d = 0; d < ND; d++) begin m_abr[d] = 32; for (int j = 0; j < NB; j++) m_bac[d][j] = 0; end
    for (int c = 0; c < NC; c++) begin
      m_dar[c] = 0; m_rer[c] = 0; m_beat[c] = 0; mode[c] = T_OFF; rate[c] = 0; sweep[c] = 0;
      was_stalled[c] = 0;
      for (int j = 0; j < NB; j++) m_mon[c][j] = 0;
    end
    core_a = '0;
    attack_acc = 0; sweep_acc = 0; attack_per = 0; sweep_per = 0;
    per_period_d0b0 = 0; max_d0b0 = 0;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // program: victim core 0 in domain 1 unregulated, cores 1-2 in domain 0 regulated
    q_wr(12'h000, 32'd400);     // RPR: 400 cycles
    q_wr(12'h100, 32'd32);      // ABR domain 0: 32 accesses per bank per period
    q_wr(12'h104, 32'd1000);    // ABR domain 1 (unregulated anyway)
    q_wr(12'h200, 32'd1);       // DAR core 0 -> domain 1
    q_wr(12'h204, 32'd0);
    q_wr(12'h208, 32'd0);
    q_wr(12'h300, 32'd0);       // RER core 0 off
    q_wr(12'h304, 32'd1);       // RER core 1 on
    q_wr(12'h308, 32'd1);       // RER core 2 on
    for (int c = 0; c < NC; c++) for (int j = 0; j < NB; j++) q_wr(12'h800 + 12'(4 * (c * NB + j)), 0);
    for (int i = 0; i < 9; i++) q_rd(12'h000 + (i == 0 ? 12'h000 : i < 3 ? 12'h100 + 12'(4 * (i - 1)) : i < 6 ? 12'h200 + 12'(4 * (i - 3)) : 12'h300 + 12'(4 * (i - 6))));

    @(negedge clk);
    m_cnt = 1;  // the period counter has run for one clock since reset ended
    phase = "config"; phase_end = 120;
    for (cyc = 0; cyc < 19000; cyc++) begin
      // ---------------- phase sequencing
      if (cyc == phase_end) begin
        case (phase)
          "config": begin
            phase = "attack"; phase_end = cyc + 4010;
            mode[0] = T_BANK0; rate[0] = 20;
            mode[1] = T_BANK0; rate[1] = 100;
            mode[2] = T_BANK0; rate[2] = 100;
          end
          "attack": begin
            phase = "stream"; phase_end = cyc + 4010;
            mode[1] = T_SWEEP; mode[2] = T_SWEEP;
          end
          "stream": begin
            phase = "bursts"; phase_end = cyc + 3000;
            mode[0] = T_BURST; mode[1] = T_BURST; mode[2] = T_BURST;
            rate[0] = 50;
          end
          "bursts": begin
            phase = "readback"; phase_end = cyc + 1500;
            rate[0] = 5; rate[1] = 5; rate[2] = 5;
            for (int d = 0; d < ND; d++) for (int j = 0; j < NB; j++) q_rd(12'h400 + 12'(4 * (d * NB + j)));
            for (int c = 0; c < NC; c++) for (int j = 0; j < NB; j++) q_rd(12'h800 + 12'(4 * (c * NB + j)));
            q_wr(12'h800 + 12'(4 * (1 * NB + 0)), 0);
            q_rd(12'h800 + 12'(4 * (1 * NB + 0)));
            q_wr(12'h100, 32'h0000_ff10);   // full write then read back
            q_rd(12'h100);
            q_wr(12'h100, 32'd32);
          end
          "readback": begin
            phase = "unregulate"; phase_end = cyc + 2500;
            rate[0] = 20; rate[1] = 100; rate[2] = 100;
            mode[1] = T_BANK0; mode[2] = T_BANK0;
            q_wr(12'h304, 0); q_wr(12'h308, 0);
          end
          "unregulate": begin
            phase = "reprogram"; phase_end = cyc + 3000;
            q_wr(12'h000, 32'd99); q_wr(12'h100, 32'd8);
            q_wr(12'h304, 1); q_wr(12'h308, 1);
          end
          default: phase_end = -1;
        endcase
      end

      // ---------------- drive inputs (away from the clock edge)
      for (int c = 0; c < NC; c++) begin
        if (!core_a_valid[c] && mode[c] != T_OFF && $urandom_range(1, 100) <= rate[c]) begin
          core_a[c] = gen(c);
          core_a_valid[c] = 1'b1;
        end
        bus_b_valid[c] = 1'($urandom); bus_b[c] = {$urandom, $urandom, $urandom, $urandom};
        core_b_ready[c] = 1'($urandom);
        core_c_valid[c] = 1'($urandom); core_c[c] = {$urandom, $urandom, $urandom, $urandom};
        bus_c_ready[c] = 1'($urandom);
        bus_d_valid[c] = 1'($urandom); bus_d[c] = {$urandom, $urandom, $urandom};
        core_d_ready[c] = 1'($urandom);
        core_e_valid[c] = 1'($urandom); core_e[c] = 4'($urandom);
        bus_e_ready[c] = 1'($urandom);
      end
      if (!pb_a_valid && mq.size() > 0) begin
        cur = mq[0];
        pb_a_valid = 1'b1;
        pb_a.opcode = cur.wr ? PB_A_PUT_FULL : PB_A_GET;
        pb_a.address = cur.addr; pb_a.data = cur.data; pb_a.mask = 4'hf;
        pb_a.size = 2'd2; pb_a.source = 4'($urandom);
      end
      pb_d_ready = ($urandom_range(0, 3) != 0);
      #1;

      // ---------------- compare with the model
      pe = (m_cnt >= m_rpr);
      check(period_end == pe, "period_end");
      for (int c = 0; c < NC; c++) begin
        int b, d;
        bit dep;
        b = bank_of(core_a[c].address);
        d = m_dar[c];
        dep = !pe && (m_bac[d][b] >= m_abr[d]);
        stall[c] = core_a_valid[c] && m_beat[c] == 0 && m_rer[c] && dep;
        check(bus_a_valid[c] == (core_a_valid[c] && !stall[c]), $sformatf("%s: bus_a_valid[%0d]", phase, c));
        check(core_a_ready[c] == (bus_a_ready[c] && !(m_beat[c] == 0 && m_rer[c] && dep)), $sformatf("%s: core_a_ready[%0d]", phase, c));
        check(core_stalled[c] == stall[c], "core_stalled");
        check(bus_a[c] == core_a[c], "channel A payload");
        fire[c] = core_a_valid[c] && core_a_ready[c];
        if (stall[c]) n_stall++;
        if (stall[c] && !m_rer[c]) n_unreg_violation++;
        if (fire[c] && m_beat[c] == 0 && was_stalled[c]) n_release++;
        if (fire[c] && m_beat[c] == 0 && m_rer[c]) begin
          bit any_dep;
          any_dep = 0;
          for (int j = 0; j < NB; j++) if (j != b && !pe && m_bac[d][j] >= m_abr[d]) any_dep = 1;
          if (any_dep) n_open_bank_pass++;
        end
        if (fire[c] && m_beat[c] > 0 && m_rer[c] && dep) n_midburst++;
        // pass-through channels
        check(core_b_valid[c] == bus_b_valid[c] && core_b[c] == bus_b[c] && bus_b_ready[c] == core_b_ready[c], "channel B pass-through");
        check(bus_c_valid[c] == core_c_valid[c] && bus_c[c] == core_c[c] && core_c_ready[c] == bus_c_ready[c], "channel C pass-through");
        check(core_d_valid[c] == bus_d_valid[c] && core_d[c] == bus_d[c] && bus_d_ready[c] == core_d_ready[c], "channel D pass-through");
        check(bus_e_valid[c] == core_e_valid[c] && bus_e[c] == core_e[c] && core_e_ready[c] == bus_e_ready[c], "channel E pass-through");
        n_pass_bd++;
      end
      if (fire[1] && fire[2] && m_beat[1] == 0 && m_beat[2] == 0 && m_dar[1] == m_dar[2] &&
          bank_of(core_a[1].address) == bank_of(core_a[2].address)) n_double++;
      pb_fire = pb_a_valid && pb_a_ready;
      if (pb_fire && !cur.wr) exp_rd.push_back(model_read(cur.addr));
      if (pb_d_valid && pb_d_ready) begin
        if (pb_d.opcode == PB_D_ACK_DATA) begin
          logic [31:0] e;
          e = exp_rd.pop_front();
          check(pb_d.data == e, $sformatf("register read %h exp %h", pb_d.data, e));
          rd_vals.push_back(pb_d.data);
          n_rd++;
        end
      end

      @(posedge clk);
      @(negedge clk);

      // ---------------- advance the model by one clock
      for (int d = 0; d < ND; d++) for (int j = 0; j < NB; j++) acc_cnt[d][j] = 0;
      for (int c = 0; c < NC; c++) begin
        if (fire[c]) begin
          if (m_beat[c] == 0) begin
            acc_cnt[m_dar[c]][bank_of(core_a[c].address)]++;
            m_mon[c][bank_of(core_a[c].address)]++;
          end
          m_beat[c] = (m_beat[c] + 1 == beats_of(core_a[c])) ? 0 : m_beat[c] + 1;
          if (m_beat[c] == 0) core_a_valid[c] = 1'b0;
          else core_a[c].data = {$urandom, $urandom};
        end
        was_stalled[c] = stall[c] ? 1'b1 : (fire[c] ? 1'b0 : was_stalled[c]);
      end
      if (pe) begin
        if (phase == "attack") begin attack_acc += per_period_d0b0; attack_per++; end
        if (phase == "stream") begin sweep_acc += period_acc_d0;   sweep_per++; end
        per_period_d0b0 = 0; period_acc_d0 = 0;
      end
      per_period_d0b0 += acc_cnt[0][0];
      for (int j = 0; j < NB; j++) period_acc_d0 += acc_cnt[0][j];
      if (m_rer[1] && m_rer[2] && per_period_d0b0 > max_d0b0) max_d0b0 = per_period_d0b0;
      for (int d = 0; d < ND; d++)
        for (int j = 0; j < NB; j++)
          m_bac[d][j] = (pe ? 0 : m_bac[d][j]) + acc_cnt[d][j];
      m_cnt = pe ? 0 : m_cnt + 1;
      if (pb_fire) begin
        void'(mq.pop_front());
        pb_a_valid = 1'b0;
        if (cur.wr) begin
          int w;
          n_wr++;
          w = int'(cur.addr[11:2]);
          if (cur.addr == 12'h000) m_rpr = cur.data;
          else if (cur.addr[11:8] == 4'h1 && w - 64 < ND)  m_abr[w - 64] = cur.data;
          else if (cur.addr[11:8] == 4'h2 && w - 128 < NC) m_dar[w - 128] = (cur.data >= ND) ? ND - 1 : int'(cur.data);
          else if (cur.addr[11:8] == 4'h3 && w - 192 < NC) m_rer[w - 192] = cur.data[0];
          else if (cur.addr[11] && w - 512 < NC * NB) begin
            // a clear in the same cycle as an access keeps that access
            m_mon[(w - 512) / NB][(w - 512) % NB] = 0;
            for (int c = 0; c < NC; c++)
              if (fire[c] && m_beat[c] == 0 && (w - 512) / NB == c && !core_a_valid[c] &&
                  bank_of(core_a[c].address) == (w - 512) % NB) m_mon[c][(w - 512) % NB]++;
            n_clr++;
          end
        end
      end
      for (int c = 0; c < NC; c++) check(dut.u_mon.mon[c] == {32'(m_mon[c][3]), 32'(m_mon[c][2]), 32'(m_mon[c][1]), 32'(m_mon[c][0])}, "monitor counters track the model");
    end

    // ------------------------------------------------------------ summary checks
    $display("stall=%0d release=%0d open_bank_pass=%0d midburst=%0d double=%0d rd=%0d wr=%0d clr=%0d",
             n_stall, n_release, n_open_bank_pass, n_midburst, n_double, n_rd, n_wr, n_clr);
    $display("attack: %0d accesses of domain 0 to bank 0 in %0d periods; max per period %0d",
             attack_acc, attack_per, max_d0b0);
    $display("stream: %0d accesses of domain 0 in %0d periods", sweep_acc, sweep_per);
    check(n_stall > 0,          "mechanism: stall");
    check(n_release > 0,        "mechanism: stalled request released at period end");
    check(n_open_bank_pass > 0, "mechanism: open bank passes while another is depleted");
    check(n_midburst > 0,       "mechanism: later beats of a burst pass a depleted bank");
    check(n_double > 0,         "mechanism: two cores of one domain charged in one cycle");
    check(n_rd > 30 && n_wr > 20 && n_clr > 0, "mechanism: register reads, writes, monitor clear");
    check(n_unreg_violation == 0, "unregulated core never stalled");
    check(max_d0b0 <= 32 + 1,   $sformatf("domain 0 bank 0 accesses per period %0d <= ABR+1", max_d0b0));
    check(attack_per >= 8 && attack_acc >= 32 * (attack_per - 1), "attackers get their full single-bank budget");
    check(sweep_per >= 8 && sweep_acc > 3 * attack_acc * sweep_per / attack_per,
          "sweeping all four banks gets over 3x the single-bank throughput");
    check(exp_rd.size() == 0 && mq.size() == 0, "all register requests answered");
    // the first nine reads returned the programmed configuration
    check(rd_vals.size() > 9 && rd_vals[0] == 400 && rd_vals[1] == 32 && rd_vals[3] == 1 && rd_vals[7] == 1,
          "configuration read back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (25000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
