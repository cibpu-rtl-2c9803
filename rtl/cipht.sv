// cipht: conflict-invisible pattern history table.
//
// The table is replicated into NUM_SKEWS (three) skews.  Each skew is a
// direct-mapped array of 2**IDX_W entries, each holding a valid bit, a TAG_W
// tag and a 2-bit saturating counter (Tag-Store and State-Store).  Every skew
// has its own index key (Enc.I_s) and content key (Enc.C_s): the index, the
// tag and the stored counter are all encrypted, the counter by xor with a
// 2-bit pad of the content key.
//
// Lookup (paper): a branch hits only if its tag matches in all three skews;
// the counter of one skew (skew 0 here) gives the prediction, taken when the
// counter is 2 or 3.  Update (paper): on a hit the 2-bit counters are
// incremented on taken and decremented on not-taken, saturating at 0 and 3;
// on a miss the entry is replaced in all three skews at once, so the skews
// always hold the same branch.
//
// This design's own choices: the lookup answer is registered (one cycle from
// lk_valid to lk_resp_valid), an update is applied at the clock edge of the
// cycle in which up_valid is high, a new entry starts weakly biased towards
// its first outcome (2 if taken, 1 if not), reset clears only the valid bits,
// and a lookup in the same cycle as an update sees the table before it.
//
// Interface: lk_* is the prediction request (pc, thread ID) and its answer;
// up_* is the resolved outcome of a conditional branch.  up_hit / up_alloc
// report, in the update cycle, whether the update found the branch or
// allocated it.
module cipht
  import cibpu_pkg::*;
#(
  parameter int unsigned IDX_W     = 13,
  parameter int unsigned TAG_W     = 12,
  parameter int unsigned NUM_SKEWS = 3
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
  output logic                lk_taken,
  output logic [1:0]          lk_ctr,
  // update
  input  logic                up_valid,
  input  logic [PC_W-1:0]     up_pc,
  input  logic [TID_W-1:0]    up_tid,
  input  logic                up_taken,
  output logic                up_hit,
  output logic                up_alloc
);

  localparam int unsigned ENTRIES = 1 << IDX_W;

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic [1:0]       ctr;   // encrypted counter
  } pht_entry_t;

  pht_entry_t       store [NUM_SKEWS][ENTRIES];
  logic [ENTRIES-1:0] vld [NUM_SKEWS];

  logic [IDX_W-1:0] lk_idx [NUM_SKEWS], up_idx [NUM_SKEWS];
  logic [TAG_W-1:0] lk_tag [NUM_SKEWS], up_tag [NUM_SKEWS];
  logic [1:0]       lk_pad [NUM_SKEWS], up_pad [NUM_SKEWS];
  logic [NUM_SKEWS-1:0] lk_match, up_match;
  logic [1:0]       up_ctr_new [NUM_SKEWS];
  pht_entry_t       lk_ent [NUM_SKEWS], up_ent [NUM_SKEWS];

  for (genvar s = 0; s < NUM_SKEWS; s++) begin : g_skew
    cibpu_enc #(
      .IDX_W(IDX_W), .TAG_W(TAG_W), .PAD_W(2),
      .IDX_DOMAIN(DOM_PHT_IDX + 8'(s)), .CONT_DOMAIN(DOM_PHT_CONT + 8'(s))
    ) u_enc_lk (.secret, .tid(lk_tid), .pc(lk_pc),
                .idx(lk_idx[s]), .tag(lk_tag[s]), .pad(lk_pad[s]));
    cibpu_enc #(
      .IDX_W(IDX_W), .TAG_W(TAG_W), .PAD_W(2),
      .IDX_DOMAIN(DOM_PHT_IDX + 8'(s)), .CONT_DOMAIN(DOM_PHT_CONT + 8'(s))
    ) u_enc_up (.secret, .tid(up_tid), .pc(up_pc),
                .idx(up_idx[s]), .tag(up_tag[s]), .pad(up_pad[s]));

    always_comb begin
      lk_ent[s]   = store[s][lk_idx[s]];
      up_ent[s]   = store[s][up_idx[s]];
      lk_match[s] = vld[s][lk_idx[s]] && (lk_ent[s].tag == lk_tag[s]);
      up_match[s] = vld[s][up_idx[s]] && (up_ent[s].tag == up_tag[s]);
    end

    // Saturating 2-bit counter on the decrypted state (Dec.C, update, Enc.C).
    always_comb begin
      logic [1:0] dec;
      dec = up_ent[s].ctr ^ up_pad[s];
      if (!up_hit)       up_ctr_new[s] = up_taken ? 2'd2 : 2'd1;
      else if (up_taken) up_ctr_new[s] = (dec == 2'd3) ? 2'd3 : dec + 2'd1;
      else               up_ctr_new[s] = (dec == 2'd0) ? 2'd0 : dec - 2'd1;
    end

    always_ff @(posedge clk) begin
      if (up_valid) store[s][up_idx[s]] <= '{tag: up_tag[s], ctr: up_ctr_new[s] ^ up_pad[s]};
    end

    always_ff @(posedge clk) begin
      if (!rst_n)        vld[s] <= '0;
      else if (up_valid) vld[s][up_idx[s]] <= 1'b1;
    end
  end

  assign up_hit   = up_valid && (&up_match);
  assign up_alloc = up_valid && !(&up_match);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lk_resp_valid <= 1'b0;
      lk_hit        <= 1'b0;
      lk_ctr        <= 2'd0;
    end else begin
      lk_resp_valid <= lk_valid;
      lk_hit        <= lk_valid && (&lk_match);
      lk_ctr        <= (&lk_match) ? (lk_ent[0].ctr ^ lk_pad[0]) : 2'd0;
    end
  end

  assign lk_taken = lk_hit && lk_ctr[1];

endmodule
