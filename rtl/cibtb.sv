// cibtb: conflict-invisible branch target buffer.
//
// Structure (paper, after the V-way cache): the Tag-Store and the
// Target-Store are decoupled.  The Tag-Store has 2 * 2**SET_W sets, split
// into two skews of 2**SET_W sets; every set has BASE_WAYS + EXTRA_WAYS tag
// slots (8 + 5), each holding an encrypted tag, a valid bit and a forward
// pointer (FPTR) to any Target-Store entry.  The Target-Store has
// NUM_TARGETS = (number of sets) * BASE_WAYS entries, each holding an encrypted
// target, a valid bit and a reverse pointer (RPTR) to the tag slot that owns
// it.  Because there are more tag slots than targets, sets keep invalid slots.
//
// Indexing (paper, Algorithm 1): a PC is mapped to one set in each skew with
// two index keys (PC xor Key_0, PC xor Key_1) and to one tag (PC xor Key_c).
// A tag match in either set is a hit; the FPTR gives the target, which is
// decrypted with the content pad.  On a miss the set with fewer valid tags is
// chosen (skew 0 on a tie).
//
// Replacement (paper, Algorithm 2): two random Target-Store entries are the
// candidates; the one whose RPTR points into the set with more valid tags is
// evicted (candidate 0 on a tie), its owning tag is invalidated wherever it is
// (global eviction, "secure eviction", up_se), and the new tag takes an
// invalid slot of the chosen set.  A "dangerous eviction" (up_de) can only
// happen when the chosen set has no invalid slot.
//
// This design's own choices, where the paper is silent: a free (invalid)
// candidate target is used before any valid one and then nothing is evicted
// (up_fill; this only happens while the buffer warms up); the new tag takes the
// lowest-numbered invalid slot; on a dangerous eviction the victim is slot
// rand0 mod (BASE_WAYS+EXTRA_WAYS) of the chosen set and its target entry is
// reused; a hit whose target changed overwrites the target.  The lookup answer
// is registered (one cycle from lk_valid to lk_resp_valid); an update takes
// effect at the clock edge of the cycle in which up_valid is high, and a
// lookup in that cycle sees the buffer before it.  Reset clears the valid bits.
//
// Interface: lk_* predicts a target for (pc, thread ID); up_* installs a taken
// branch and its target, using rand0 / rand1 as the two random candidates.
// up_hit, up_miss, up_fill, up_se and up_de are combinational reports of the
// update cycle.
module cibtb
  import cibpu_pkg::*;
#(
  parameter int unsigned SET_W      = 11,
  parameter int unsigned BASE_WAYS  = 8,
  parameter int unsigned EXTRA_WAYS = 5,
  parameter int unsigned TAG_W      = 12,
  parameter int unsigned TGT_W      = PC_W,
  localparam int unsigned WAYS        = BASE_WAYS + EXTRA_WAYS,
  localparam int unsigned GSET_W      = SET_W + 1,
  localparam int unsigned NUM_SETS    = 1 << GSET_W,
  localparam int unsigned NUM_TARGETS = NUM_SETS * BASE_WAYS,
  localparam int unsigned TI_W        = $clog2(NUM_TARGETS),
  localparam int unsigned WAY_W       = $clog2(WAYS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [SECRET_W-1:0] secret,
  // prediction
  input  logic                lk_valid,
  input  logic [PC_W-1:0]     lk_pc,
  input  logic [TID_W-1:0]    lk_tid,
  output logic                lk_resp_valid,
  output logic                lk_hit,
  output logic [TGT_W-1:0]    lk_target,
  // update with a taken branch
  input  logic                up_valid,
  input  logic [PC_W-1:0]     up_pc,
  input  logic [TID_W-1:0]    up_tid,
  input  logic [TGT_W-1:0]    up_target,
  input  logic [TI_W-1:0]     rand0,
  input  logic [TI_W-1:0]     rand1,
  output logic                up_hit,
  output logic                up_miss,
  output logic                up_fill,
  output logic                up_se,
  output logic                up_de
);

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic [TI_W-1:0]  fptr;
  } tag_entry_t;

  typedef struct packed {
    logic [TGT_W-1:0]  tgt;   // encrypted target
    logic [GSET_W-1:0] rset;  // RPTR: owning set
    logic [WAY_W-1:0]  rway;  // RPTR: owning slot
  } tgt_entry_t;

  tag_entry_t       tags [NUM_SETS][WAYS];
  logic [WAYS-1:0]  tvld [NUM_SETS];
  tgt_entry_t       tgts [NUM_TARGETS];
  logic             gvld [NUM_TARGETS];

  initial begin
    assert (WAYS <= 32) else $error("cibtb: at most 32 tag slots per set");
    assert (TI_W <= 32) else $error("cibtb: at most 2**32 targets");
  end

  // ---------------------------------------------------------------- lookup
  logic [SET_W-1:0] lk_i0, lk_i1;
  logic [TAG_W-1:0] lk_tag;
  logic [TGT_W-1:0] lk_pad;
  logic [GSET_W-1:0] lk_s0, lk_s1;
  logic             lk_m;
  logic [TI_W-1:0]  lk_fptr;

  cibpu_enc #(.IDX_W(SET_W), .TAG_W(TAG_W), .PAD_W(TGT_W),
              .IDX_DOMAIN(DOM_BTB_IDX), .CONT_DOMAIN(DOM_BTB_CONT))
    u_enc_lk0 (.secret, .tid(lk_tid), .pc(lk_pc), .idx(lk_i0), .tag(lk_tag), .pad(lk_pad));

  logic [KEY_W-1:0] lk_key1;
  cibpu_keygen u_key_lk1 (.secret, .tid(lk_tid), .pc(lk_pc), .domain(DOM_BTB_IDX + 8'd1), .key(lk_key1));
  assign lk_i1 = SET_W'(KEY_W'(lk_pc) ^ lk_key1);

  assign lk_s0 = {1'b0, lk_i0};
  assign lk_s1 = {1'b1, lk_i1};

  always_comb begin
    lk_m    = 1'b0;
    lk_fptr = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (tvld[lk_s1][w] && tags[lk_s1][w].tag == lk_tag) begin
        lk_m = 1'b1; lk_fptr = tags[lk_s1][w].fptr;
      end
    end
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (tvld[lk_s0][w] && tags[lk_s0][w].tag == lk_tag) begin
        lk_m = 1'b1; lk_fptr = tags[lk_s0][w].fptr;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lk_resp_valid <= 1'b0;
      lk_hit        <= 1'b0;
      lk_target     <= '0;
    end else begin
      lk_resp_valid <= lk_valid;
      lk_hit        <= lk_valid && lk_m;
      lk_target     <= lk_m ? (tgts[lk_fptr].tgt ^ lk_pad) : '0;  // Dec.C
    end
  end

  // ---------------------------------------------------------------- update
  logic [SET_W-1:0]  up_i0, up_i1;
  logic [TAG_W-1:0]  up_tag;
  logic [TGT_W-1:0]  up_pad;
  logic [GSET_W-1:0] up_s0, up_s1, fin_set;
  logic [5:0]        n0, n1, m0, m1;
  logic              up_m;
  logic [TI_W-1:0]   up_fptr;
  logic [WAYS-1:0]   fin_vld;
  logic              fin_full;
  logic [WAY_W-1:0]  free_way, de_way, new_way;
  logic [TI_W-1:0]   chosen;
  logic [GSET_W-1:0] c0_set, c1_set, v_set;
  logic [WAY_W-1:0]  v_way;
  logic              evict;

  cibpu_enc #(.IDX_W(SET_W), .TAG_W(TAG_W), .PAD_W(TGT_W),
              .IDX_DOMAIN(DOM_BTB_IDX), .CONT_DOMAIN(DOM_BTB_CONT))
    u_enc_up0 (.secret, .tid(up_tid), .pc(up_pc), .idx(up_i0), .tag(up_tag), .pad(up_pad));

  logic [KEY_W-1:0] up_key1;
  cibpu_keygen u_key_up1 (.secret, .tid(up_tid), .pc(up_pc), .domain(DOM_BTB_IDX + 8'd1), .key(up_key1));
  assign up_i1 = SET_W'(KEY_W'(up_pc) ^ up_key1);

  assign up_s0 = {1'b0, up_i0};
  assign up_s1 = {1'b1, up_i1};

  // Algorithm 1: hit detection and load-balancing choice of the set.
  always_comb begin
    up_m    = 1'b0;
    up_fptr = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (tvld[up_s1][w] && tags[up_s1][w].tag == up_tag) begin
        up_m = 1'b1; up_fptr = tags[up_s1][w].fptr;
      end
    end
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (tvld[up_s0][w] && tags[up_s0][w].tag == up_tag) begin
        up_m = 1'b1; up_fptr = tags[up_s0][w].fptr;
      end
    end
    n0       = popcount32(32'(tvld[up_s0]));
    n1       = popcount32(32'(tvld[up_s1]));
    fin_set  = (n0 <= n1) ? up_s0 : up_s1;
    fin_vld  = tvld[fin_set];
    fin_full = &fin_vld;
    free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) if (!fin_vld[w]) free_way = WAY_W'(w);
    de_way   = WAY_W'(32'(rand0) % WAYS);
  end

  // Algorithm 2: load-balancing choice of the target to replace.
  always_comb begin
    c0_set = tgts[rand0].rset;
    c1_set = tgts[rand1].rset;
    m0     = popcount32(32'(tvld[c0_set]));
    m1     = popcount32(32'(tvld[c1_set]));
    if (!gvld[rand0])      begin chosen = rand0; evict = 1'b0; end
    else if (!gvld[rand1]) begin chosen = rand1; evict = 1'b0; end
    else                   begin chosen = (m0 >= m1) ? rand0 : rand1; evict = 1'b1; end
    v_set   = tgts[chosen].rset;
    v_way   = tgts[chosen].rway;
    new_way = fin_full ? de_way : free_way;
  end

  assign up_hit  = up_valid && up_m;
  assign up_miss = up_valid && !up_m;
  assign up_de   = up_miss && fin_full;
  assign up_fill = up_miss && !fin_full && !evict;
  assign up_se   = up_miss && !fin_full && evict;

  // Storage writes.
  always_ff @(posedge clk) begin
    if (up_hit) begin
      tgts[up_fptr].tgt <= up_target ^ up_pad;                           // Enc.C
    end else if (up_de) begin
      tags[fin_set][de_way].tag      <= up_tag;                          // keep FPTR
      tgts[tags[fin_set][de_way].fptr] <= '{tgt: up_target ^ up_pad, rset: fin_set, rway: de_way};
    end else if (up_miss) begin
      tags[fin_set][new_way] <= '{tag: up_tag, fptr: chosen};
      tgts[chosen]           <= '{tgt: up_target ^ up_pad, rset: fin_set, rway: new_way};
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tvld <= '{default: '0};
      gvld <= '{default: 1'b0};
    end else if (up_miss && !fin_full) begin
      if (evict) tvld[v_set][v_way] <= 1'b0;                 // global eviction
      tvld[fin_set][new_way] <= 1'b1;
      gvld[chosen]           <= 1'b1;
    end
  end

  // A valid target is always owned by exactly the valid tag its RPTR names.
  always_ff @(posedge clk) begin
    if (rst_n && up_se) begin
      assert (tvld[v_set][v_way] && tags[v_set][v_way].fptr == chosen)
        else $error("cibtb: RPTR of target %0d does not point back to its tag", chosen);
    end
  end

endmodule
