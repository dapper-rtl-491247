// tb_refw_timer: the tick must come exactly every PERIOD cycles after reset,
// for a short period (37) and for a period of 1.
module tb_refw_timer;
  logic clk = 0, rst_n = 0, tick_a, tick_b;
  int checks = 0, failures = 0;

  refw_timer #(.PERIOD(37)) dut_a (.clk, .rst_n, .tick(tick_a));
  refw_timer #(.PERIOD(1))  dut_b (.clk, .rst_n, .tick(tick_b));

  always #5 clk = ~clk;

  initial begin
    int cyc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (cyc = 1; cyc <= 400; cyc++) begin
      // at this negedge, cyc-1 rising edges have passed since reset release
      checks++;
      if (tick_a != (cyc % 37 == 0)) begin
        failures++;
        $display("FAIL cycle %0d tick=%0d", cyc, tick_a);
      end
      checks++;
      if (!tick_b) failures++;
      @(negedge clk);
    end
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
