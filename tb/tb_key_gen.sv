// tb_key_gen: checks the key generator against a reference xorshift64.
// After reset the keys are zero; each rekey pulse must load the next
// generator state, keys must hold without a pulse, and a seed equal to the
// salt (all-zero start state) must fall back to the salt.
module tb_key_gen;
  import tb_ref_pkg::*;

  localparam logic [63:0] SALT = 64'h1234_5678_9abc_def0;

  logic clk = 0, rst_n = 0, rekey = 0;
  logic [63:0] seed, keys;
  longint unsigned st;
  int checks = 0, failures = 0;

  key_gen #(.SALT(SALT)) dut (.clk, .rst_n, .seed, .rekey, .keys);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(logic [63:0] s);
    seed = s;
    rst_n = 0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    check(keys == 0, "keys not zero after reset");
    st = ((s ^ SALT) == 0) ? SALT : (s ^ SALT);
    for (int i = 0; i < 6; i++) begin
      rekey = 1;
      @(negedge clk);
      rekey = 0;
      st = xs64(st);
      check(keys == st, $sformatf("rekey %0d keys=%h exp=%h", i, keys, st));
      repeat (3) @(negedge clk);
      check(keys == st, "keys changed without rekey");
    end
  endtask

  initial begin
    run(64'hdead_beef_cafe_f00d);
    run(SALT);
    run({$urandom(), $urandom()});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
