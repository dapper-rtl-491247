// tb_dapper_h_rank: one rank tracker at reduced size (1K rows, 4 banks,
// 16-row groups, 4-bit counters, N_M = 6) against the reference model.
//
// Traffic: a single-row hammer (the refresh attack), a small hot set of rows
// in several banks, a bank-interleaved streaming sweep of all rows and
// uniform random rows, with a refresh-window reset in the middle. Per
// activation the bit-vector filter and trigger strobes are compared; per
// mitigation the refreshed rows (in order), the reset-counter values written
// back and the whole contents of both counter tables and the bit-vectors. It
// also checks timing: one activation per cycle when nothing is pending, a
// clear sweep of exactly one cycle per group, a mitigation of one cycle per
// group member plus one per refused refresh request plus one reset cycle.
module tb_dapper_h_rank;
  import tb_ref_pkg::*;
  import dapper_pkg::*;

  localparam int RB = 10, BB = 2, GB = 4, CB = 4, NM = 6;
  localparam int NG = 1 << (RB - GB);

  logic clk = 0, rst_n = 0, refw_tick = 0, act_valid = 0, mit_ready = 0;
  logic [RB-1:0] act_addr = '0, mit_addr;
  logic act_ready, mit_valid, busy_clear, busy_mitigate, ev_filtered, ev_trigger;
  logic [63:0] seed = 64'h0bad_c0ff_ee12_3456;

  dapper_h_rank #(.ROW_BITS(RB), .BANK_BITS(BB), .GROUP_BITS(GB), .CNT_BITS(CB), .NM(NM))
    dut (.*);

  dapper_ref m;
  longint unsigned got_rows[$];
  int checks = 0, failures = 0;
  int n_acts = 0, n_trig = 0, n_filtered = 0, n_multi = 0, n_stall = 0, n_reset_nz = 0;
  int n_clears = 0, n_b2b = 0;
  int stall_cycles = 0;
  longint cyc = 0, last_accept = -10;
  bit last_was_plain = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL @%0d %s", cyc, what); end
  endtask

  // refresh request sink: random back-pressure
  always @(negedge clk) begin
    mit_ready = ($urandom_range(0, 2) != 0);
    if (mit_valid && mit_ready) got_rows.push_back(64'(mit_addr));
    if (mit_valid && !mit_ready) stall_cycles++;
  end

  task automatic compare_tables(string when);
    for (int i = 0; i < NG; i++) begin
      check(int'(dut.u_t1.mem[i]) == m.t1[i], $sformatf("%s T1[%0d]=%0d exp %0d", when, i, dut.u_t1.mem[i], m.t1[i]));
      check(int'(dut.u_t2.mem[i]) == m.t2[i], $sformatf("%s T2[%0d]=%0d exp %0d", when, i, dut.u_t2.mem[i], m.t2[i]));
      check(64'(dut.u_bv.mem[i]) == m.bv[i], $sformatf("%s BV[%0d]", when, i));
    end
  endtask

  task automatic wait_clear();
    int n = 0;
    while (!busy_clear) @(negedge clk);
    while (busy_clear) begin n++; @(negedge clk); end
    check(n == NG, $sformatf("clear sweep took %0d cycles, exp %0d", n, NG));
    m.rekey_clear();
    n_clears++;
    last_was_plain = 0;
    compare_tables("after clear");
  endtask

  // Present one activation (at a falling edge); act_valid stays high so
  // back-to-back calls form a continuous stream.
  task automatic do_act(logic [RB-1:0] a);
    int n = 0;
    act_valid = 1; act_addr = a;
    #1;
    while (!act_ready) begin @(negedge clk); #1; last_was_plain = 0; end
    m.act(64'(a));
    n_acts++;
    check(ev_filtered == m.last_filtered, $sformatf("filter strobe row %h", a));
    check(ev_trigger == m.last_trigger, $sformatf("trigger strobe row %h", a));
    if (last_was_plain) begin
      check(cyc == last_accept + 1, "back-to-back activation not accepted in the next cycle");
      n_b2b++;
    end
    last_accept = cyc;
    if (m.last_filtered) n_filtered++;
    if (m.last_trigger) begin
      got_rows.delete();
      stall_cycles = 0;
    end
    @(negedge clk);
    last_was_plain = !m.last_trigger;
    if (m.last_trigger) begin
      n_trig++;
      while (busy_mitigate) begin n++; @(negedge clk); end
      check(n == (1 << GB) + stall_cycles + 1,
            $sformatf("mitigation took %0d cycles, exp %0d", n, (1 << GB) + stall_cycles + 1));
      if (stall_cycles > 0) n_stall++;
      check(got_rows.size() == m.shared_rows.size(),
            $sformatf("refreshed %0d rows, exp %0d", got_rows.size(), m.shared_rows.size()));
      foreach (m.shared_rows[i])
        if (i < got_rows.size()) check(got_rows[i] == m.shared_rows[i], "refreshed row");
      check(m.shared_rows.size() >= 1, "the hammered row itself is refreshed");
      if (m.shared_rows.size() > 1) n_multi++;
      if (m.last_reset1 > 0 || m.last_reset2 > 0) n_reset_nz++;
      check(int'(dut.u_t1.mem[m.last_g1]) == m.last_reset1, "Table 1 reset value");
      check(int'(dut.u_t2.mem[m.last_g2]) == m.last_reset2, "Table 2 reset value");
      compare_tables("after mitigation");
    end
  endtask

  task automatic idle(int n);
    act_valid = 0;
    last_was_plain = 0;
    repeat (n) @(negedge clk);
  endtask

  initial begin
    logic [RB-1:0] hot [8];
    m = new(RB, BB, GB, CB, NM, 4, 16, seed, SALT_TABLE1, SALT_TABLE2);
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait_clear();

    // 1. refresh attack: one row hammered
    for (int i = 0; i < 40; i++) do_act(10'h2A5);
    idle(2);
    // 2. hot set spread over banks
    foreach (hot[i]) hot[i] = RB'($urandom());
    for (int i = 0; i < 600; i++) do_act(hot[$urandom_range(0, 7)]);
    idle(3);
    // 3. bank-interleaved streaming over all rows
    for (int p = 0; p < 3; p++)
      for (int r = 0; r < (1 << (RB - BB)); r++)
        for (int b = 0; b < (1 << BB); b++) do_act({BB'(b), (RB - BB)'(r)});
    compare_tables("after streaming");
    // refresh-window reset
    idle(1);
    refw_tick = 1; @(negedge clk); refw_tick = 0;
    wait_clear();
    // 4. random rows plus hammering
    for (int i = 0; i < 1500; i++)
      do_act(($urandom_range(0, 1) == 0) ? RB'($urandom()) : hot[$urandom_range(0, 3)]);
    idle(2);
    compare_tables("end");

    $display("acts=%0d triggers=%0d filtered=%0d multi_shared=%0d stalled=%0d reset_nonzero=%0d clears=%0d back_to_back=%0d",
             n_acts, n_trig, n_filtered, n_multi, n_stall, n_reset_nz, n_clears, n_b2b);
    check(n_trig > 0, "no mitigation");
    check(n_filtered > 0, "bit-vector never filtered");
    check(n_multi > 0, "no mitigation with several shared rows");
    check(n_stall > 0, "refresh request never stalled");
    check(n_reset_nz > 0, "reset counter never above zero");
    check(n_clears == 2, "clear count");
    check(n_b2b > 100, "too few back-to-back activations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
