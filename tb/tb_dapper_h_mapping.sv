// tb_dapper_h_mapping: the mapping-capturing attack against a small rank
// tracker, trial by trial.
//
// The attack: pick a target row, activate it N_M - 2 times, activate two
// random other rows, then activate the target once more. A mitigation during
// the last three activations tells the attacker that the two random rows
// landed in the target's groups. Counting only the counters, that happens
// when at least one random row shares the target's Table 1 group and at
// least one shares its Table 2 group, with probability
//   p = (1 - (1 - 1/N)^2)^2          (N groups per table).
//
// Each trial runs in a fresh refresh window (a refw_tick, so new keys and
// cleared tables). The rank is small (256 rows, 2 banks, N = 4 groups,
// N_M = 6) so that the events are frequent enough to count.
//
// Checks:
//   * every activation's trigger strobe matches the reference model;
//   * the rate of the counter-only event above matches p within 5 sigma,
//     computed from the reference model's groups (this tests that the keyed
//     hash spreads rows evenly);
//   * the RTL triggers in exactly the trials where the bit-vector rule says
//     it must. The target's first activation only sets its bank's bit, so
//     Table 1 ends the trial at N_M only if both random rows lie in the
//     target's Table 1 group *and* in the target's bank, and at least one
//     random row lies in its Table 2 group. The filter therefore makes the
//     procedure succeed far less often than p.
module tb_dapper_h_mapping;
  import dapper_pkg::*;
  import tb_ref_pkg::*;

  localparam int RB = 8, BB = 1, GB = 6, CB = 4, NM = 6;
  localparam int NG = 1 << (RB - GB);
  localparam int TRIALS = 20000;

  logic clk = 0, rst_n = 0, refw_tick = 0, act_valid = 0, mit_ready = 1;
  logic [RB-1:0] act_addr = '0, mit_addr;
  logic act_ready, mit_valid, busy_clear, busy_mitigate, ev_filtered, ev_trigger;
  logic [63:0] seed = 64'h0BAD_F00D_1357_2468;

  dapper_h_rank #(.ROW_BITS(RB), .BANK_BITS(BB), .GROUP_BITS(GB),
                  .CNT_BITS(CB), .NM(NM)) dut (.*);

  dapper_ref m;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL @%0d %s", cyc, what); end
  endtask

  task automatic wait_clear();
    while (!busy_clear) @(negedge clk);
    while (busy_clear) @(negedge clk);
    m.rekey_clear();
  endtask

  // One activation; returns the trigger strobe.
  task automatic do_act(logic [RB-1:0] a, output bit trig);
    act_valid = 1; act_addr = a;
    #1;
    while (!act_ready) begin @(negedge clk); #1; end
    trig = ev_trigger;
    m.act(64'(a));
    check(trig == m.last_trigger, $sformatf("trigger strobe row %h", a));
    @(negedge clk);
    act_valid = 0;
  endtask

  initial begin
    automatic int n_eq = 0, n_pred = 0, n_hit = 0;
    automatic real p, sigma, rate;
    m = new(RB, BB, GB, CB, NM, 4, 16, seed, SALT_TABLE1, SALT_TABLE2);
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait_clear();
    for (int t = 0; t < TRIALS; t++) begin
      automatic logic [RB-1:0] tgt, r [2];
      automatic bit trig, hit, in1 [2], in2 [2], sameb [2], eq_ev, pred;
      if (t > 0) begin
        while (!act_ready) @(negedge clk);
        refw_tick = 1; @(negedge clk); refw_tick = 0;
        wait_clear();
      end
      tgt = RB'($urandom());
      foreach (r[i]) begin
        do r[i] = RB'($urandom()); while (r[i] == tgt);
        in1[i]   = m.grp1(64'(r[i])) == m.grp1(64'(tgt));
        in2[i]   = m.grp2(64'(r[i])) == m.grp2(64'(tgt));
        sameb[i] = r[i][RB-1 -: BB] == tgt[RB-1 -: BB];
      end
      eq_ev = (in1[0] || in1[1]) && (in2[0] || in2[1]);
      pred  = in1[0] && sameb[0] && in1[1] && sameb[1] && (in2[0] || in2[1]);
      hit = 0;
      for (int i = 0; i < NM - 2; i++) begin
        do_act(tgt, trig);
        check(!trig, "trigger while the target is below N_M");
      end
      do_act(r[0], trig); hit |= trig;
      do_act(r[1], trig); hit |= trig;
      do_act(tgt, trig);  hit |= trig;
      check(hit == pred, $sformatf("trial %0d: trigger %0d, bit-vector rule predicts %0d", t, hit, pred));
      n_eq += int'(eq_ev);
      n_pred += int'(pred);
      n_hit += int'(hit);
    end
    p = 1.0 - (1.0 - 1.0 / NG) ** 2;
    p = p * p;
    sigma = $sqrt(p * (1.0 - p) / TRIALS);
    rate = real'(n_eq) / TRIALS;
    $display("mapping-capturing: %0d trials, N = %0d groups: counter-only event %0d (rate %f, formula %f), mitigations %0d (bit-vector rule predicts %0d)",
             TRIALS, NG, n_eq, rate, p, n_hit, n_pred);
    check(rate > p - 5.0 * sigma && rate < p + 5.0 * sigma, "counter-only success rate matches the formula");
    check(n_hit > 0, "the attack succeeded at least once");
    check(n_hit < n_eq, "the bit-vector lowers the success count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
