// dapper_h_rank: DAPPER-H RowHammer tracker for one rank.
//
// Rows are counted in groups, not one by one. Every activated row address is
// hashed by two independently keyed ciphers; the top bits of each hashed
// address select one row group counter (RGC) in Table 1 and one in Table 2,
// so a row shares its Table 1 counter with 255 other rows and its Table 2
// counter with a different, unrelated set of 255 rows. A row is treated as a
// possible aggressor only when both of its counters have reached the
// mitigation threshold NM (= N_RH / 2).
//
// Update (one activation per cycle, state S_IDLE):
//   * Table 2's counter is always incremented.
//   * Table 1's counter is incremented only if the bank's bit in the group's
//     bit-vector is already set; otherwise the bit is set and Table 1 is left
//     alone. On a counted activation the bits of all other banks are cleared.
//   * If both counters are now >= NM, a mitigation starts.
// Mitigation (S_SCAN, one member of each group per cycle, then S_RESET):
//   * Side 1 decrypts member i of the Table 1 group with the Table 1 keys and
//     re-encrypts it with the Table 2 keys. If it lands in the triggered
//     Table 2 group it is a shared row and is sent out on mit_* for a victim
//     row refresh; otherwise its Table 2 counter is folded into a running
//     maximum, the Table 1 reset counter.
//   * Side 2 does the same for member i of the Table 2 group, folding its
//     Table 1 counter into the Table 2 reset counter. Shared rows found on
//     this side are the same rows as on side 1 and are not sent again.
//   * S_RESET writes each triggered counter to its reset counter and clears
//     the Table 1 group's bit-vector. A row that was not refreshed thus keeps
//     an estimate, the smaller of its two counters, that is no lower than
//     before.
// Refresh-window reset (S_CLEAR): at reset release and after every refw_tick,
// both key generators draw new keys and one counter entry of each table and
// one bit-vector are zeroed per cycle (NUM_GROUPS cycles).
//
// The update rules, the double hashing, the shared-row search and the reset
// counters follow the paper (its Fig. 11 example: reset counters 31 and 100).
// This design's own choices: rank row address = {bank, row in bank}; the
// triggering test is >= NM on saturating counters; the mitigation walks one
// member per table per cycle with four cipher engines (the paper only says
// several engines work in parallel); activations are stalled (act_ready low)
// during a mitigation and during the clear sweep, since the tables are SRAMs
// without a flash clear.
//
// Interfaces (valid/ready, data held while valid is high and ready low):
//   act_*: activated row, rank-level address {bank, row}.
//   mit_*: aggressor row whose neighbours the memory controller must refresh
//          (one victim row refresh command per request).
// Timing: an accepted activation updates the tables at the next clock edge; a
// mitigation takes 2^GROUP_BITS scan cycles plus one cycle per stalled
// refresh request plus one reset cycle.
module dapper_h_rank
  import dapper_pkg::*;
#(
  parameter int unsigned ROW_BITS   = DEF_ROW_BITS,
  parameter int unsigned BANK_BITS  = DEF_BANK_BITS,
  parameter int unsigned GROUP_BITS = DEF_GROUP_BITS,
  parameter int unsigned CNT_BITS   = DEF_CNT_BITS,
  parameter int unsigned NM         = DEF_NM,
  parameter int unsigned ROUNDS     = DEF_ROUNDS,
  parameter int unsigned KEY_BITS   = DEF_KEY_BITS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [63:0]         seed,
  input  logic                refw_tick,
  // activation stream from the memory controller
  input  logic                act_valid,
  output logic                act_ready,
  input  logic [ROW_BITS-1:0] act_addr,
  // mitigative refresh requests to the memory controller
  output logic                mit_valid,
  input  logic                mit_ready,
  output logic [ROW_BITS-1:0] mit_addr,
  // status and event strobes
  output logic                busy_clear,
  output logic                busy_mitigate,
  output logic                ev_filtered,
  output logic                ev_trigger
);

  localparam int unsigned GIDX_BITS  = ROW_BITS - GROUP_BITS;
  localparam int unsigned NUM_GROUPS = 1 << GIDX_BITS;
  localparam int unsigned NUM_BANKS  = 1 << BANK_BITS;

  typedef logic [GIDX_BITS-1:0] gidx_t;
  typedef logic [ROW_BITS-1:0]  row_t;
  typedef logic [CNT_BITS-1:0]  cnt_t;

  if (NM >= (1 << CNT_BITS)) begin : g_nm_check
    $error("dapper_h_rank: NM does not fit in CNT_BITS");
  end

  tracker_state_e state;
  gidx_t          clr_idx;
  logic           refw_pending;
  gidx_t          mg1, mg2;       // triggered groups in Table 1 / Table 2
  logic [GROUP_BITS-1:0] scan_idx;
  cnt_t           reset1, reset2; // reset counters of Table 1 / Table 2

  // ---------------------------------------------------------------- keys
  logic                       rekey;
  logic [ROUNDS*KEY_BITS-1:0] keys1, keys2;

  assign rekey = (state == S_CLEAR) && (clr_idx == '0);

  key_gen #(.ROUNDS(ROUNDS), .KEY_BITS(KEY_BITS), .SALT(SALT_TABLE1)) u_key1 (
    .clk, .rst_n, .seed, .rekey, .keys(keys1)
  );
  key_gen #(.ROUNDS(ROUNDS), .KEY_BITS(KEY_BITS), .SALT(SALT_TABLE2)) u_key2 (
    .clk, .rst_n, .seed, .rekey, .keys(keys2)
  );

  // ------------------------------------------------------- cipher engines
  // The two encryption engines serve the update path in S_IDLE and the
  // re-encryption of decrypted members in S_SCAN.
  row_t enc1_in, enc1_out, enc2_in, enc2_out;
  row_t dec1_in, dec1_out, dec2_in, dec2_out;

  assign dec1_in = {mg1, scan_idx};
  assign dec2_in = {mg2, scan_idx};
  assign enc1_in = (state == S_SCAN) ? dec2_out : act_addr;
  assign enc2_in = (state == S_SCAN) ? dec1_out : act_addr;

  llbc_cipher #(.ROW_BITS(ROW_BITS), .ROUNDS(ROUNDS), .KEY_BITS(KEY_BITS), .DECRYPT(1'b0))
    u_enc1 (.keys(keys1), .din(enc1_in), .dout(enc1_out));
  llbc_cipher #(.ROW_BITS(ROW_BITS), .ROUNDS(ROUNDS), .KEY_BITS(KEY_BITS), .DECRYPT(1'b0))
    u_enc2 (.keys(keys2), .din(enc2_in), .dout(enc2_out));
  llbc_cipher #(.ROW_BITS(ROW_BITS), .ROUNDS(ROUNDS), .KEY_BITS(KEY_BITS), .DECRYPT(1'b1))
    u_dec1 (.keys(keys1), .din(dec1_in), .dout(dec1_out));
  llbc_cipher #(.ROW_BITS(ROW_BITS), .ROUNDS(ROUNDS), .KEY_BITS(KEY_BITS), .DECRYPT(1'b1))
    u_dec2 (.keys(keys2), .din(dec2_in), .dout(dec2_out));

  // group index of a hashed address: hashed address / group size
  gidx_t g1, g2;
  assign g1 = enc1_out[ROW_BITS-1 -: GIDX_BITS];
  assign g2 = enc2_out[ROW_BITS-1 -: GIDX_BITS];

  // ---------------------------------------------------------------- tables
  logic act_fire;
  logic bv_hit;
  logic [NUM_BANKS-1:0] bv_vec;
  cnt_t t1_val, t2_val, t1_rd, t2_rd;
  logic t1_wr, t2_wr, bv_clr;
  gidx_t t1_wr_addr, t2_wr_addr, bv_clr_addr;
  cnt_t  t1_wr_data, t2_wr_data;

  assign act_ready = (state == S_IDLE) && !refw_pending;
  assign act_fire  = act_valid && act_ready;

  bit_vector_table #(.NUM_ENTRIES(NUM_GROUPS), .NUM_BANKS(NUM_BANKS)) u_bv (
    .clk,
    .acc_en  (act_fire),
    .acc_addr(g1),
    .acc_bank(act_addr[ROW_BITS-1 -: BANK_BITS]),
    .acc_hit (bv_hit),
    .acc_vec (bv_vec),
    .clr_en  (bv_clr),
    .clr_addr(bv_clr_addr)
  );

  // In S_SCAN, g1/g2 come from the re-encrypted members: side 2's member
  // reads its Table 1 counter, side 1's member its Table 2 counter.
  rgc_table #(.NUM_ENTRIES(NUM_GROUPS), .CNT_BITS(CNT_BITS)) u_t1 (
    .clk,
    .upd_addr(g1), .upd_inc(act_fire && bv_hit), .upd_val(t1_val),
    .rd_addr (g1), .rd_data(t1_rd),
    .wr_en   (t1_wr), .wr_addr(t1_wr_addr), .wr_data(t1_wr_data)
  );
  rgc_table #(.NUM_ENTRIES(NUM_GROUPS), .CNT_BITS(CNT_BITS)) u_t2 (
    .clk,
    .upd_addr(g2), .upd_inc(act_fire), .upd_val(t2_val),
    .rd_addr (g2), .rd_data(t2_rd),
    .wr_en   (t2_wr), .wr_addr(t2_wr_addr), .wr_data(t2_wr_data)
  );

  // Write ports: clear sweep or mitigation reset.
  always_comb begin
    t1_wr       = 1'b0;
    t2_wr       = 1'b0;
    bv_clr      = 1'b0;
    t1_wr_addr  = clr_idx;
    t2_wr_addr  = clr_idx;
    bv_clr_addr = clr_idx;
    t1_wr_data  = '0;
    t2_wr_data  = '0;
    if (state == S_CLEAR) begin
      t1_wr  = 1'b1;
      t2_wr  = 1'b1;
      bv_clr = 1'b1;
    end else if (state == S_RESET) begin
      t1_wr       = 1'b1;
      t2_wr       = 1'b1;
      bv_clr      = 1'b1;
      t1_wr_addr  = mg1;
      t2_wr_addr  = mg2;
      bv_clr_addr = mg1;
      t1_wr_data  = reset1;
      t2_wr_data  = reset2;
    end
  end

  // ----------------------------------------------------------- update path
  logic trigger;
  assign trigger = act_fire && (t1_val >= CNT_BITS'(NM)) && (t2_val >= CNT_BITS'(NM));

  // ------------------------------------------------------------ scan path
  logic shared1, shared2, scan_step, scan_last;
  assign shared1   = (g2 == mg2);  // Table 1 member also in the Table 2 group
  assign shared2   = (g1 == mg1);  // Table 2 member also in the Table 1 group
  assign mit_valid = (state == S_SCAN) && shared1;
  assign mit_addr  = dec1_out;
  assign scan_step = (state == S_SCAN) && (!shared1 || mit_ready);
  assign scan_last = (scan_idx == '1);

  // ------------------------------------------------------------------ FSM
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= S_CLEAR;
      clr_idx      <= '0;
      refw_pending <= 1'b0;
      mg1          <= '0;
      mg2          <= '0;
      scan_idx     <= '0;
      reset1       <= '0;
      reset2       <= '0;
    end else begin
      unique case (state)
        S_CLEAR: begin
          clr_idx <= clr_idx + 1'b1;
          if (clr_idx == gidx_t'(NUM_GROUPS - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (refw_pending) begin
            state        <= S_CLEAR;
            clr_idx      <= '0;
            refw_pending <= 1'b0;
          end else if (trigger) begin
            state    <= S_SCAN;
            mg1      <= g1;
            mg2      <= g2;
            scan_idx <= '0;
            reset1   <= '0;
            reset2   <= '0;
          end
        end
        S_SCAN: begin
          if (scan_step) begin
            if (!shared1 && (t2_rd > reset1)) reset1 <= t2_rd;
            if (!shared2 && (t1_rd > reset2)) reset2 <= t1_rd;
            scan_idx <= scan_idx + 1'b1;
            if (scan_last) state <= S_RESET;
          end
        end
        S_RESET: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
      if (refw_tick) refw_pending <= 1'b1;
    end
  end

  assign busy_clear    = (state == S_CLEAR);
  assign busy_mitigate = (state == S_SCAN) || (state == S_RESET);
  assign ev_filtered   = act_fire && !bv_hit;
  assign ev_trigger    = trigger;

  // A refresh request must stay put until the controller takes it.
  property p_mit_stable;
    @(posedge clk) disable iff (!rst_n)
      (mit_valid && !mit_ready) |=> (mit_valid && $stable(mit_addr));
  endproperty
  a_mit_stable: assert property (p_mit_stable);

  // No activation is taken while the tables are busy.
  a_no_act_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (state != S_IDLE) |-> !act_ready);

endmodule
