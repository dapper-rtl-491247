// key_gen: pseudo-random key source and key registers for one cipher.
//
// Each hashing table owns ROUNDS key registers of KEY_BITS bits (four 16-bit
// registers in the paper). New keys are drawn at boot and at every
// refresh-window reset, so the row-to-group mapping changes every window.
// The paper allows a PRNG or a true random source; this block is the PRNG
// variant: a 64-bit xorshift generator (shifts 13, 7, 17) whose start state is
// the external seed XOR a per-instance SALT, so instances fed the same seed
// still produce unrelated keys. A true random source, if present, would drive
// the seed port. The xorshift generator and the salt are this design's choice.
//
// Interface and timing: synchronous active-low reset loads the generator
// state and zeroes the keys; a one-cycle rekey pulse advances the generator
// and loads the new state into the key registers at the same clock edge, so
// the keys are valid from the following cycle.
module key_gen #(
  parameter int unsigned ROUNDS   = dapper_pkg::DEF_ROUNDS,
  parameter int unsigned KEY_BITS = dapper_pkg::DEF_KEY_BITS,
  parameter logic [63:0] SALT     = dapper_pkg::SALT_TABLE1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [63:0]                seed,
  input  logic                       rekey,
  output logic [ROUNDS*KEY_BITS-1:0] keys
);

  if (ROUNDS * KEY_BITS > 64) begin : g_width_check
    $error("key_gen: ROUNDS*KEY_BITS must not exceed the 64-bit generator state");
  end

  function automatic logic [63:0] xorshift64(logic [63:0] s);
    logic [63:0] x;
    x = s;
    x = x ^ (x << 13);
    x = x ^ (x >> 7);
    x = x ^ (x << 17);
    return x;
  endfunction

  logic [63:0] state;
  logic [63:0] next_state;
  logic [63:0] start_state;

  // xorshift never leaves the all-zero state, so avoid starting there.
  assign start_state = ((seed ^ SALT) == 64'd0) ? SALT : (seed ^ SALT);
  assign next_state  = xorshift64(state);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= start_state;
      keys  <= '0;
    end else if (rekey) begin
      state <= next_state;
      keys  <= next_state[ROUNDS*KEY_BITS-1:0];
    end
  end

endmodule
