// bit_vector_table: per-bank bit-vectors of RGC Table 1.
//
// Each Table 1 row group carries one bit per bank. An activation of a row in
// bank b whose group's bit b is still clear only sets that bit and does not
// count in Table 1; if bit b is already set, the activation counts in Table 1
// and the bits of all other banks are cleared. This stops a streaming pattern
// that touches the same group from many banks from inflating Table 1. The
// rule is the paper's; the memory organisation is this design's.
//
// Interface and timing: acc_hit and acc_vec show, combinationally, bit acc_bank
// and the whole vector of entry acc_addr before the access; with acc_en high
// the entry is updated at the clock edge (set bit b on a miss, keep only bit b
// on a hit). clr_en zeroes entry clr_addr at the clock edge and takes priority.
// Default size: 8K entries of 32 bits, 32KB per rank as in the paper.
module bit_vector_table #(
  parameter int unsigned NUM_ENTRIES = 8192,
  parameter int unsigned NUM_BANKS   = 32,
  localparam int unsigned AW         = $clog2(NUM_ENTRIES),
  localparam int unsigned BW         = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1
) (
  input  logic                 clk,
  input  logic                 acc_en,
  input  logic [AW-1:0]        acc_addr,
  input  logic [BW-1:0]        acc_bank,
  output logic                 acc_hit,
  output logic [NUM_BANKS-1:0] acc_vec,
  input  logic                 clr_en,
  input  logic [AW-1:0]        clr_addr
);

  logic [NUM_BANKS-1:0] mem [NUM_ENTRIES];
  logic [NUM_BANKS-1:0] bank_onehot;

  assign acc_vec     = mem[acc_addr];
  assign acc_hit     = acc_vec[acc_bank];
  assign bank_onehot = NUM_BANKS'(1) << acc_bank;

  always_ff @(posedge clk) begin
    if (clr_en) begin
      mem[clr_addr] <= '0;
    end else if (acc_en) begin
      mem[acc_addr] <= acc_hit ? bank_onehot : (acc_vec | bank_onehot);
    end
  end

endmodule
