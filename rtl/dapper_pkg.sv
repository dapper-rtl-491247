// dapper_pkg: constants and types shared by the DAPPER-H tracker modules.
//
// The default sizes describe one DDR5 rank of the evaluated system: 32 banks
// of 64K rows give a 21-bit rank-level row address (2M rows), rows are hashed
// into groups of 256, so each counter table has 8K entries of one byte, and
// the mitigation threshold N_M is half of the RowHammer threshold N_RH = 500.
// The clock is the 4 GHz controller clock (0.25 ns), so the 32 ms refresh
// window is 128M cycles. The cycle time and the bank-bits-on-top address
// layout are this design's choices; the other numbers follow the paper.
package dapper_pkg;

  localparam int unsigned DEF_ROW_BITS     = 21;          // 2M rows per rank
  localparam int unsigned DEF_BANK_BITS    = 5;           // 32 banks per rank
  localparam int unsigned DEF_GROUP_BITS   = 8;           // 256 rows per row group
  localparam int unsigned DEF_CNT_BITS     = 8;           // 1-byte row group counters
  localparam int unsigned DEF_NRH          = 500;         // RowHammer threshold
  localparam int unsigned DEF_NM           = DEF_NRH / 2; // mitigation threshold
  localparam int unsigned DEF_ROUNDS       = 4;           // cipher rounds
  localparam int unsigned DEF_KEY_BITS     = 16;          // one 16-bit key per round
  localparam int unsigned DEF_NUM_RANKS    = 2;           // ranks per 32GB channel
  localparam int unsigned DEF_TREFW_CYCLES = 128_000_000; // 32 ms at 0.25 ns

  // Distinct salts so that the two tables (and the ranks) draw unrelated keys
  // from one seed.
  localparam logic [63:0] SALT_TABLE1 = 64'h9E37_79B9_7F4A_7C15;
  localparam logic [63:0] SALT_TABLE2 = 64'hC2B2_AE3D_27D4_EB4F;
  localparam logic [63:0] SALT_RANK   = 64'hD6E8_FEB8_6659_FD93;

  // Tracker controller states.
  typedef enum logic [1:0] {
    S_CLEAR,  // sweeping all counters and bit-vectors to zero after re-keying
    S_IDLE,   // accepting activations, one per cycle
    S_SCAN,   // mitigation: walking the members of both triggered groups
    S_RESET   // mitigation: writing the reset-counter values back
  } tracker_state_e;

endpackage
