// refw_timer: refresh-window timer.
//
// DAPPER-H clears its counter tables and bit-vectors and draws new cipher
// keys once per refresh window (tREFW, 32 ms in DDR5). This counter measures
// the window in clock cycles and raises tick for one cycle at the last cycle
// of every window: the first tick comes PERIOD cycles after reset is
// released, then one every PERIOD cycles. The default PERIOD is 32 ms at the
// 4 GHz controller clock (0.25 ns per cycle). Counting locally instead of
// taking the window from the refresh scheduler is this design's choice.
module refw_timer #(
  parameter int unsigned PERIOD = dapper_pkg::DEF_TREFW_CYCLES,
  localparam int unsigned CW    = (PERIOD > 1) ? $clog2(PERIOD) : 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic tick
);

  logic [CW-1:0] cnt;

  assign tick = (cnt == CW'(PERIOD - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt <= '0;
    end else if (tick) begin
      cnt <= '0;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

endmodule
