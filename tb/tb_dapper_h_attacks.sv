// tb_dapper_h_attacks: the two mapping-agnostic performance attacks run
// against one full-size rank tracker (default parameters: 2M rows, 256-row
// groups, N_M = 250).
//
// Streaming attack: every row of the rank is activated in bank-interleaved
// order (row r of bank 0, row r of bank 1, ...), PASSES times within one
// refresh window. Six passes are the 12M activations a channel can issue per
// window, all aimed at one rank's 2M rows; three passes are one rank's share
// when the channel's two ranks are streamed alike. The test checks that the
// first three passes cause no mitigation, that Table 2 (which has no filter)
// saturates, and that the tracker takes one activation per cycle whenever it
// is not mitigating. It reports the mitigations and the largest counters
// after six passes: with the bit-vector rule, Table 1 still counts roughly
// one activation in seven of a stream whose banks arrive in random order, so
// its counters climb to about 36 per pass and the sixth pass triggers.
//
// Refresh attack: one row is hammered until HAMMER_MITIGATIONS mitigations
// have happened. With no other traffic the reset counters are zero, so every
// mitigation must come exactly N_M + 1 activations after the previous one
// (the first activation after a mitigation only sets the bank's bit again),
// and the hammered row must be among the refreshed rows. Within one window
// the same pair of groups triggers every time, so the shared-row count is
// the same for every mitigation.
module tb_dapper_h_attacks;
  import dapper_pkg::*;

  localparam int RB = DEF_ROW_BITS, BB = DEF_BANK_BITS, NM = DEF_NM;
  localparam int NG = 1 << (RB - DEF_GROUP_BITS);
  localparam int PASSES = 6;
  localparam int HAMMER_MITIGATIONS = 20;

  logic clk = 0, rst_n = 0, refw_tick = 0, act_valid = 0, mit_ready = 1;
  logic [RB-1:0] act_addr = '0, mit_addr;
  logic act_ready, mit_valid, busy_clear, busy_mitigate, ev_filtered, ev_trigger;
  logic [63:0] seed = 64'h7777_1234_5678_9999;

  dapper_h_rank dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL @%0d %s", cyc, what); end
  endtask

  // refreshed rows of the current mitigation
  int n_ref_rows = 0;
  bit saw_target = 0;
  logic [RB-1:0] target = 21'h0A_5A5A;
  always @(negedge clk) if (mit_valid && mit_ready) begin
    n_ref_rows++;
    if (mit_addr == target) saw_target = 1;
  end

  initial begin
    longint n_acts, n_trig, n_busy, t0;
    int max1, max2, n_single, since;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (busy_clear) @(negedge clk);

    // ------------------------------------------------ streaming attack
    n_acts = 0; n_trig = 0; n_busy = 0; t0 = cyc;
    act_valid = 1;
    for (int p = 0; p < PASSES; p++)
      for (int r = 0; r < (1 << (RB - BB)); r++)
        for (int b = 0; b < (1 << BB); b++) begin
          act_addr = {BB'(b), (RB - BB)'(r)};
          #1;
          while (!act_ready) begin n_busy++; @(negedge clk); #1; end
          n_acts++;
          if (ev_trigger) n_trig++;
          @(negedge clk);
          if (r == (1 << (RB - BB)) - 1 && b == (1 << BB) - 1) begin
            $display("streaming pass %0d done: %0d mitigations so far", p + 1, n_trig);
            if (p + 1 == 3) check(n_trig == 0, "mitigation within one rank's share (6M) of a window's activations");
          end
        end
    act_valid = 0;
    while (busy_mitigate) @(negedge clk);
    max1 = 0; max2 = 0;
    for (int i = 0; i < NG; i++) begin
      if (int'(dut.u_t1.mem[i]) > max1) max1 = int'(dut.u_t1.mem[i]);
      if (int'(dut.u_t2.mem[i]) > max2) max2 = int'(dut.u_t2.mem[i]);
    end
    $display("streaming: %0d activations, %0d mitigations, max Table 1 counter %0d, max Table 2 counter %0d, %0d held-off cycles",
             n_acts, n_trig, max1, max2, n_busy);
    check(n_acts == longint'(PASSES) << RB, "streaming activation count");
    check(n_busy == n_trig * 257, "held-off cycles are exactly the mitigation cycles");
    check(max2 == 255, "Table 2 counters not saturated by six streaming passes");

    // new window before the refresh attack
    refw_tick = 1; @(negedge clk); refw_tick = 0;
    @(negedge clk);
    while (busy_clear) @(negedge clk);

    // ------------------------------------------------ refresh attack
    n_single = 0; since = 0;
    act_valid = 1; act_addr = target;
    for (int k = 0; k < HAMMER_MITIGATIONS; k++) begin
      n_ref_rows = 0; saw_target = 0;
      do begin
        #1;
        while (!act_ready) begin @(negedge clk); #1; end
        since++;
        t0 = ev_trigger;
        @(negedge clk);
      end while (t0 == 0);
      while (busy_mitigate) @(negedge clk);
      check(since == ((k == 0) ? NM + 1 : NM + 1), $sformatf("mitigation %0d after %0d activations", k, since));
      check(saw_target, "hammered row not refreshed");
      check(n_ref_rows >= 1, "no row refreshed");
      if (n_ref_rows == 1) n_single++;
      since = 0;
    end
    act_valid = 0;
    $display("refresh attack: %0d mitigations, %0d refreshed a single row", HAMMER_MITIGATIONS, n_single);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
