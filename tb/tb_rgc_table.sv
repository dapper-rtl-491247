// tb_rgc_table: random update / read / write traffic on a small counter table
// (64 entries of 4 bits) compared with a reference array, including
// saturation at 15 and the priority of the write port over an update.
module tb_rgc_table;
  localparam int N = 64, CB = 4;
  logic clk = 0;
  logic [5:0] upd_addr, rd_addr, wr_addr;
  logic upd_inc = 0, wr_en = 0;
  logic [CB-1:0] upd_val, rd_data, wr_data;
  int ref_mem [N];
  int checks = 0, failures = 0, saturations = 0;

  rgc_table #(.NUM_ENTRIES(N), .CNT_BITS(CB)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int exp_val;
    // clear through the write port
    for (int i = 0; i < N; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 6'(i); wr_data = 0; ref_mem[i] = 0;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 3000; t++) begin
      upd_addr = 6'($urandom_range(0, 7));  // few entries so that they saturate
      upd_inc  = ($urandom_range(0, 3) != 0);
      rd_addr  = 6'($urandom_range(0, N - 1));
      wr_en    = ($urandom_range(0, 40) == 0);
      wr_addr  = ($urandom_range(0, 1) == 0) ? upd_addr : 6'($urandom_range(0, N - 1));
      wr_data  = CB'($urandom());
      #1;
      exp_val = ref_mem[upd_addr];
      if (upd_inc && exp_val < 15) exp_val++;
      if (upd_inc && ref_mem[upd_addr] == 15) saturations++;
      check(upd_val == CB'(exp_val), $sformatf("upd_val %0d exp %0d", upd_val, exp_val));
      check(rd_data == CB'(ref_mem[rd_addr]), "rd_data");
      if (wr_en) ref_mem[wr_addr] = wr_data;
      else if (upd_inc) ref_mem[upd_addr] = exp_val;
      @(negedge clk);
    end
    check(saturations > 0, "saturation never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
