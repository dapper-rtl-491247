// tb_bit_vector_table: random accesses and clears on a 16-entry, 4-bank
// bit-vector table compared with a reference: a miss sets the bank's bit, a
// hit keeps only the bank's bit, a clear zeroes the entry and wins over an
// access in the same cycle.
module tb_bit_vector_table;
  localparam int N = 16, NB = 4;
  logic clk = 0;
  logic acc_en = 0, clr_en = 0, acc_hit;
  logic [3:0] acc_addr, clr_addr;
  logic [1:0] acc_bank;
  logic [NB-1:0] acc_vec;
  logic [NB-1:0] ref_mem [N];
  int checks = 0, failures = 0, hits = 0, misses = 0;

  bit_vector_table #(.NUM_ENTRIES(N), .NUM_BANKS(NB)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      @(negedge clk); clr_en = 1; clr_addr = 4'(i); ref_mem[i] = '0;
    end
    @(negedge clk); clr_en = 0;
    for (int t = 0; t < 3000; t++) begin
      acc_en   = ($urandom_range(0, 3) != 0);
      acc_addr = 4'($urandom_range(0, 3));
      acc_bank = 2'($urandom());
      clr_en   = ($urandom_range(0, 30) == 0);
      clr_addr = 4'($urandom_range(0, 3));
      #1;
      check(acc_vec == ref_mem[acc_addr], "acc_vec");
      check(acc_hit == ref_mem[acc_addr][acc_bank], "acc_hit");
      if (clr_en) ref_mem[clr_addr] = '0;
      else if (acc_en) begin
        if (ref_mem[acc_addr][acc_bank]) begin
          ref_mem[acc_addr] = NB'(1) << acc_bank; hits++;
        end else begin
          ref_mem[acc_addr][acc_bank] = 1'b1; misses++;
        end
      end
      @(negedge clk);
    end
    check(hits > 100 && misses > 100, "hits and misses both exercised");
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
