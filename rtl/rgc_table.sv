// rgc_table: one table of row group counters (RGCs).
//
// Every hashed row group has one saturating CNT_BITS counter; the default
// table holds 8K one-byte entries, the SRAM the paper sizes per rank. The
// array is written as a plain memory so that synthesis can map it to an SRAM
// macro. It has three ports:
//   update: reads entry upd_addr and, when upd_inc is high, writes it back
//           incremented by one (saturating at all ones). upd_val shows the
//           value the entry holds after this cycle's update, combinationally,
//           so the caller can compare it with the mitigation threshold in the
//           same cycle.
//   read:   combinational read of entry rd_addr, used by the mitigation scan
//           to fetch the counters of the other table.
//   write:  wr_en writes wr_data to wr_addr (clear sweep and counter reset);
//           it takes priority over an update in the same cycle.
// Timing: reads are combinational, writes happen at the rising clock edge.
// Saturation instead of wrap-around is this design's choice; the paper only
// sizes the entries. The table has no reset: the tracker clears it with a
// sweep after every reset.
module rgc_table #(
  parameter int unsigned NUM_ENTRIES = 8192,
  parameter int unsigned CNT_BITS    = dapper_pkg::DEF_CNT_BITS,
  localparam int unsigned AW         = $clog2(NUM_ENTRIES)
) (
  input  logic                clk,
  input  logic [AW-1:0]       upd_addr,
  input  logic                upd_inc,
  output logic [CNT_BITS-1:0] upd_val,
  input  logic [AW-1:0]       rd_addr,
  output logic [CNT_BITS-1:0] rd_data,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic [CNT_BITS-1:0] wr_data
);

  logic [CNT_BITS-1:0] mem [NUM_ENTRIES];
  logic [CNT_BITS-1:0] upd_cur;

  assign upd_cur = mem[upd_addr];
  assign upd_val = (upd_inc && (upd_cur != '1)) ? upd_cur + 1'b1 : upd_cur;
  assign rd_data = mem[rd_addr];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      mem[wr_addr] <= wr_data;
    end else if (upd_inc) begin
      mem[upd_addr] <= upd_val;
    end
  end

endmodule
