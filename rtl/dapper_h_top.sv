// dapper_h_top: DAPPER-H tracker for one DDR5 channel (32GB, two ranks).
//
// The row hashing is done per rank (2M rows each), so the channel holds one
// independent dapper_h_rank tracker per rank, each with its own two counter
// tables, bit-vectors and keys. A single refresh-window timer starts the
// clear-and-rekey of all ranks at the same time. Activations carry their rank
// and are steered to that rank's tracker; act_ready reflects the addressed
// rank only. Mitigative refresh requests of all ranks are merged into one
// stream for the memory controller by a round-robin arbiter that holds its
// choice while a request waits for mit_ready.
//
// With the defaults the channel holds 2 x (2 x 8KB counters + 32KB
// bit-vectors) = 96KB of table storage, the paper's budget per 32GB. The
// per-rank seeds are the external seed XOR a per-rank constant; the seed
// would come from a true random source, which is not part of this design.
//
// Interfaces (valid/ready, data stable while valid and not ready):
//   act_*: activation {rank, rank-level row address {bank, row}}.
//   mit_*: aggressor row to protect with a victim row refresh.
// Status: per-rank busy and event strobes, and the refresh-window tick.
module dapper_h_top
  import dapper_pkg::*;
#(
  parameter int unsigned NUM_RANKS    = DEF_NUM_RANKS,
  parameter int unsigned ROW_BITS     = DEF_ROW_BITS,
  parameter int unsigned BANK_BITS    = DEF_BANK_BITS,
  parameter int unsigned GROUP_BITS   = DEF_GROUP_BITS,
  parameter int unsigned CNT_BITS     = DEF_CNT_BITS,
  parameter int unsigned NM           = DEF_NM,
  parameter int unsigned ROUNDS       = DEF_ROUNDS,
  parameter int unsigned KEY_BITS     = DEF_KEY_BITS,
  parameter int unsigned TREFW_CYCLES = DEF_TREFW_CYCLES,
  localparam int unsigned RB          = (NUM_RANKS > 1) ? $clog2(NUM_RANKS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [63:0]          seed,
  input  logic                 act_valid,
  output logic                 act_ready,
  input  logic [RB-1:0]        act_rank,
  input  logic [ROW_BITS-1:0]  act_addr,
  output logic                 mit_valid,
  input  logic                 mit_ready,
  output logic [RB-1:0]        mit_rank,
  output logic [ROW_BITS-1:0]  mit_addr,
  output logic                 refw_tick,
  output logic [NUM_RANKS-1:0] busy_clear,
  output logic [NUM_RANKS-1:0] busy_mitigate,
  output logic [NUM_RANKS-1:0] ev_filtered,
  output logic [NUM_RANKS-1:0] ev_trigger
);

  logic [NUM_RANKS-1:0] r_act_ready, r_mit_valid, r_mit_ready;
  logic [ROW_BITS-1:0]  r_mit_addr [NUM_RANKS];

  refw_timer #(.PERIOD(TREFW_CYCLES)) u_refw (.clk, .rst_n, .tick(refw_tick));

  for (genvar i = 0; i < NUM_RANKS; i++) begin : g_rank
    localparam logic [63:0] RANK_SALT = 64'(i + 1) * SALT_RANK;
    dapper_h_rank #(
      .ROW_BITS  (ROW_BITS),
      .BANK_BITS (BANK_BITS),
      .GROUP_BITS(GROUP_BITS),
      .CNT_BITS  (CNT_BITS),
      .NM        (NM),
      .ROUNDS    (ROUNDS),
      .KEY_BITS  (KEY_BITS)
    ) u_rank (
      .clk,
      .rst_n,
      .seed         (seed ^ RANK_SALT),
      .refw_tick,
      .act_valid    (act_valid && (act_rank == RB'(i))),
      .act_ready    (r_act_ready[i]),
      .act_addr,
      .mit_valid    (r_mit_valid[i]),
      .mit_ready    (r_mit_ready[i]),
      .mit_addr     (r_mit_addr[i]),
      .busy_clear   (busy_clear[i]),
      .busy_mitigate(busy_mitigate[i]),
      .ev_filtered  (ev_filtered[i]),
      .ev_trigger   (ev_trigger[i])
    );
  end

  assign act_ready = r_act_ready[act_rank];

  // ------------------------------------------------ refresh request arbiter
  logic [RB-1:0] last_grant, lock_rank, sel;
  logic          locked, any_valid;

  always_comb begin
    int unsigned idx;
    idx       = 0;
    sel       = lock_rank;
    any_valid = 1'b0;
    if (!locked) begin
      sel = last_grant;
      for (int unsigned k = NUM_RANKS; k >= 1; k--) begin
        idx = (int'(last_grant) + k) % NUM_RANKS;
        if (r_mit_valid[idx]) begin
          sel       = RB'(idx);
          any_valid = 1'b1;
        end
      end
    end else begin
      any_valid = r_mit_valid[lock_rank];
    end
  end

  assign mit_valid = any_valid;
  assign mit_rank  = sel;
  assign mit_addr  = r_mit_addr[sel];

  always_comb begin
    r_mit_ready = '0;
    r_mit_ready[sel] = mit_ready && any_valid;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last_grant <= RB'(NUM_RANKS - 1);
      lock_rank  <= '0;
      locked     <= 1'b0;
    end else if (mit_valid && mit_ready) begin
      last_grant <= sel;
      locked     <= 1'b0;
    end else if (mit_valid) begin
      lock_rank <= sel;
      locked    <= 1'b1;
    end
  end

  a_mit_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (mit_valid && !mit_ready) |=> (mit_valid && $stable(mit_addr) && $stable(mit_rank)));

endmodule
