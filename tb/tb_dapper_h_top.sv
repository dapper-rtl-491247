// tb_dapper_h_top: end-to-end test of the two-rank channel tracker at reduced
// size (1K rows per rank, 4 banks, 16-row groups, 4-bit counters, N_M = 6,
// refresh window of 4000 cycles), checked against one reference model per
// rank.
//
// The driver acts like a memory controller: each cycle it activates a row in
// a rank that can take one (hammered rows, a hot set or random rows), and now
// and then deliberately targets a busy rank to see act_ready held low. The
// refresh-request sink applies random back-pressure. Every request that
// leaves the arbiter is compared with the next expected shared row of its
// rank; table contents are compared after each clear sweep and at the end.
// Each mechanism is counted and must occur: clear sweep and re-keying at boot
// and at the refresh-window tick, bit-vector filtering, mitigation, a
// mitigation with several shared rows, a non-zero reset counter, refused
// refresh requests, both ranks requesting refreshes at once, and a refused
// activation.
module tb_dapper_h_top;
  import tb_ref_pkg::*;
  import dapper_pkg::*;

  localparam int  NR = 2, RB = 10, BB = 2, GB = 4, CB = 4, NM = 6;
  localparam int  TREFW = 4000;
  localparam int  NG = 1 << (RB - GB);
  localparam int  CYCLES = 14000;
  localparam bit  FULL = 1'b0;

  logic clk = 0, rst_n = 0, act_valid = 0, mit_ready = 0;
  logic act_ready, mit_valid, refw_tick;
  logic [0:0] act_rank = '0, mit_rank;
  logic [RB-1:0] act_addr = '0, mit_addr;
  logic [NR-1:0] busy_clear, busy_mitigate, ev_filtered, ev_trigger;
  logic [63:0] seed = 64'h5eed_1234_abcd_0042;

  dapper_h_top #(.NUM_RANKS(NR), .ROW_BITS(RB), .BANK_BITS(BB), .GROUP_BITS(GB),
                 .CNT_BITS(CB), .NM(NM), .TREFW_CYCLES(TREFW)) dut (.*);

  dapper_ref m [NR];
  longint unsigned exp_rows [NR][$];
  int checks = 0, failures = 0;
  int n_acts = 0, n_trig = 0, n_filtered = 0, n_multi = 0, n_reset_nz = 0;
  int n_clears = 0, n_mit_stall = 0, n_conflict = 0, n_act_stall = 0, n_refreshed = 0, n_ticks = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL @%0d %s", cyc, what); end
  endtask

  // refresh request sink with random back-pressure
  always @(negedge clk) begin
    if (rst_n) begin
      mit_ready = ($urandom_range(0, 3) != 0);
      if (dut.r_mit_valid == '1) n_conflict++;
      if (refw_tick) n_ticks++;
      if (mit_valid && !mit_ready) n_mit_stall++;
      if (mit_valid && mit_ready) begin
        n_refreshed++;
        if (exp_rows[mit_rank].size() == 0) check(0, "unexpected refresh request");
        else check(64'(mit_addr) == exp_rows[mit_rank].pop_front(),
                   $sformatf("refresh row %h rank %0d", mit_addr, mit_rank));
      end
    end
  end

  function automatic int t1_of(int r, int i);
    return (r == 0) ? int'(dut.g_rank[0].u_rank.u_t1.mem[i]) : int'(dut.g_rank[1].u_rank.u_t1.mem[i]);
  endfunction
  function automatic int t2_of(int r, int i);
    return (r == 0) ? int'(dut.g_rank[0].u_rank.u_t2.mem[i]) : int'(dut.g_rank[1].u_rank.u_t2.mem[i]);
  endfunction
  function automatic longint unsigned bv_of(int r, int i);
    return (r == 0) ? 64'(dut.g_rank[0].u_rank.u_bv.mem[i]) : 64'(dut.g_rank[1].u_rank.u_bv.mem[i]);
  endfunction

  task automatic compare_tables(int r, string when);
    for (int i = 0; i < NG; i++) begin
      check(t1_of(r, i) == m[r].t1[i], $sformatf("%s rank %0d T1[%0d]", when, r, i));
      check(t2_of(r, i) == m[r].t2[i], $sformatf("%s rank %0d T2[%0d]", when, r, i));
      check(bv_of(r, i) == m[r].bv[i], $sformatf("%s rank %0d BV[%0d]", when, r, i));
    end
  endtask

  initial begin
    logic [NR-1:0] prev_clear = '0;
    logic [NR-1:0] rdy;
    logic [RB-1:0] hot [NR][6];
    logic [RB-1:0] a;
    int r;
    for (int i = 0; i < NR; i++) begin
      m[i] = new(RB, BB, GB, CB, NM, 4, 16, seed ^ (64'(i + 1) * SALT_RANK), SALT_TABLE1, SALT_TABLE2);
      foreach (hot[i][j]) hot[i][j] = RB'($urandom());
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < CYCLES; c++) begin
      // clear sweeps: model re-keys when one starts, compare when it ends
      for (int i = 0; i < NR; i++) begin
        if (busy_clear[i] && !prev_clear[i]) begin m[i].rekey_clear(); n_clears++; end
        if (!busy_clear[i] && prev_clear[i]) compare_tables(i, "after clear");
      end
      prev_clear = busy_clear;
      rdy = dut.r_act_ready;
      // choose a rank: a ready one, or now and then a busy one on purpose
      if (rdy == '0 || (rdy != '1 && $urandom_range(0, 7) == 0)) begin
        r = 0;
        for (int i = 0; i < NR; i++) if (!rdy[i]) r = i;
      end else begin
        do r = $urandom_range(0, NR - 1); while (!rdy[r]);
      end
      case ($urandom_range(0, 5))
        0, 1:    a = hot[r][0];
        2, 3:    a = hot[r][$urandom_range(0, 5)];
        default: a = RB'($urandom());
      endcase
      act_valid = 1; act_rank = 1'(r); act_addr = a;
      #1;
      if (!act_ready) begin
        n_act_stall++;
        check(!rdy[r], "act_ready low for a ready rank");
      end else begin
        m[r].act(64'(a));
        n_acts++;
        check(ev_filtered[r] == m[r].last_filtered, "filter strobe");
        check(ev_trigger[r] == m[r].last_trigger, "trigger strobe");
        check(ev_filtered[1-r] == 0 && ev_trigger[1-r] == 0, "strobe on the other rank");
        if (m[r].last_filtered) n_filtered++;
        if (m[r].last_trigger) begin
          n_trig++;
          if (m[r].shared_rows.size() > 1) n_multi++;
          if (m[r].last_reset1 > 0 || m[r].last_reset2 > 0) n_reset_nz++;
          foreach (m[r].shared_rows[k]) exp_rows[r].push_back(m[r].shared_rows[k]);
        end
      end
      @(negedge clk);
    end
    act_valid = 0;
    while (busy_mitigate != '0 || busy_clear != '0) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int i = 0; i < NR; i++) begin
      compare_tables(i, "end");
      check(exp_rows[i].size() == 0, $sformatf("rank %0d: %0d refreshes missing", i, exp_rows[i].size()));
    end
    $display("acts=%0d triggers=%0d refreshed=%0d filtered=%0d multi_shared=%0d reset_nonzero=%0d",
             n_acts, n_trig, n_refreshed, n_filtered, n_multi, n_reset_nz);
    $display("clears=%0d window_ticks=%0d refresh_stalls=%0d arbitration_conflicts=%0d act_stalls=%0d",
             n_clears, n_ticks, n_mit_stall, n_conflict, n_act_stall);
    check(n_trig > 0, "mitigation never happened");
    check(n_filtered > 0, "bit-vector filter never happened");
    check(n_multi > 0, "no mitigation with several shared rows");
    check(n_reset_nz > 0, "reset counter never above zero");
    check(n_clears >= (FULL ? NR : 2 * NR), "clear sweep count");
    check(FULL || n_ticks > 0, "refresh window never ended");
    check(n_mit_stall > 0, "refresh request never held back");
    check(FULL || n_conflict > 0, "ranks never competed for the refresh port");
    check(n_act_stall > 0, "activation never refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (CYCLES + 50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
