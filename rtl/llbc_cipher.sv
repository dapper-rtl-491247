// llbc_cipher: low-latency block cipher over a row address (LLBC).
//
// DAPPER hashes every activated row address with a reversible keyed
// permutation, so that rows land in row groups an attacker cannot predict and
// so that a hashed group can be turned back into the original rows when it has
// to be refreshed. The cipher is a four-round unbalanced Feistel network on the
// ROW_BITS-wide address: the address is split into a high half (ROW_BITS -
// ROW_BITS/2 bits) and a low half; even rounds XOR a keyed mixing function of
// the low half into the high half, odd rounds the reverse. Because each round
// only XORs a function of the untouched half, running the rounds backwards
// with the same keys (DECRYPT = 1) is the exact inverse, so the map is a
// bijection on all 2^ROW_BITS addresses for any keys.
//
// The round count, the 16-bit round keys and the 21-bit width follow the
// paper, which leaves the cipher itself open (any lightweight cipher such as
// SCARF will do). The Feistel structure and the round function (key mixing, a
// Simon-style AND-rotate term and a modular add) are this design's own choice;
// they are not claimed to be cryptographically strong.
//
// Interface: keys holds round key r in bits [r*KEY_BITS +: KEY_BITS].
// Timing: purely combinational, so one address is hashed per cycle, matching
// the paper's single-cycle update.
module llbc_cipher #(
  parameter int unsigned ROW_BITS = dapper_pkg::DEF_ROW_BITS,
  parameter int unsigned ROUNDS   = dapper_pkg::DEF_ROUNDS,
  parameter int unsigned KEY_BITS = dapper_pkg::DEF_KEY_BITS,
  parameter bit          DECRYPT  = 1'b0
) (
  input  logic [ROUNDS*KEY_BITS-1:0] keys,
  input  logic [ROW_BITS-1:0]        din,
  output logic [ROW_BITS-1:0]        dout
);

  localparam int unsigned LO_BITS = ROW_BITS / 2;
  localparam int unsigned HI_BITS = ROW_BITS - LO_BITS;
  localparam int unsigned CW      = (KEY_BITS > HI_BITS) ? KEY_BITS : HI_BITS;

  typedef logic [CW-1:0] word_t;

  function automatic word_t rotl(word_t x, int unsigned n);
    return (x << n) | (x >> (CW - n));
  endfunction

  // Keyed round function: key whitening, a nonlinear AND-rotate term, then a
  // modular add that spreads carries upwards.
  function automatic word_t round_f(word_t half, logic [KEY_BITS-1:0] k);
    word_t a;
    word_t b;
    a = half ^ word_t'(k);
    b = a ^ (rotl(a, 1) & rotl(a, 2)) ^ rotl(a, 5);
    return b + rotl(b, 7);
  endfunction

  always_comb begin
    logic [HI_BITS-1:0] hi;
    logic [LO_BITS-1:0] lo;
    word_t              f;
    int unsigned        r;
    hi = din[ROW_BITS-1:LO_BITS];
    lo = din[LO_BITS-1:0];
    for (int unsigned i = 0; i < ROUNDS; i++) begin
      r = DECRYPT ? (ROUNDS - 1 - i) : i;
      if (r % 2 == 0) begin
        f  = round_f(word_t'(lo), keys[r*KEY_BITS +: KEY_BITS]);
        hi = hi ^ f[HI_BITS-1:0] ^ f[CW-1 -: HI_BITS];
      end else begin
        f  = round_f(word_t'(hi), keys[r*KEY_BITS +: KEY_BITS]);
        lo = lo ^ f[LO_BITS-1:0] ^ f[CW-1 -: LO_BITS];
      end
    end
    dout = {hi, lo};
  end

endmodule
