// cibpu_top: conflict-invisible secure branch prediction unit.
//
// The unit holds the two protected prediction structures of the paper, a
// three-skew encrypted pattern history table (cipht) and a two-skew decoupled
// branch target buffer with load-balancing index and replacement (cibtb), and
// the two random number generators the replacement draws from.  All keys are
// derived inside the tables from the device secret, the thread ID and the PC,
// so the unit has no key registers and no key re-randomisation.  The device
// secret is an input: in silicon it comes from a physically unclonable
// function, which is outside this RTL.
//
// Interface (this design's own; the paper integrates the unit into an
// out-of-order core and gives no port list):
//   pred_*  a prediction request for (pc, thread ID); the answer comes one
//           cycle later on pred_resp_valid: the PHT hit, direction and 2-bit
//           counter, and the BTB hit and target.  A PHT miss means "no opinion": the core's own
//           base predictor decides.
//   upd_*   a resolved branch.  Conditional branches train the PHT; taken
//           branches (conditional or not) are installed in the BTB.
//   ev_*    one-cycle reports of what an update did: PHT hit or allocation,
//           BTB hit, miss, fill of a free target, secure (global) eviction and
//           dangerous (in-set) eviction.
// Both random generators advance every cycle.
module cibpu_top
  import cibpu_pkg::*;
#(
  parameter int unsigned PHT_IDX_W      = 13,
  parameter int unsigned PHT_TAG_W      = 12,
  parameter int unsigned BTB_SET_W      = 11,
  parameter int unsigned BTB_BASE_WAYS  = 8,
  parameter int unsigned BTB_EXTRA_WAYS = 5,
  parameter int unsigned BTB_TAG_W      = 12,
  parameter logic [31:0] RNG_SEED0      = 32'h2545_f491,
  parameter logic [31:0] RNG_SEED1      = 32'h9e37_79b9
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [SECRET_W-1:0] puf_secret,
  // prediction
  input  logic                pred_valid,
  input  logic [PC_W-1:0]     pred_pc,
  input  logic [TID_W-1:0]    pred_tid,
  output logic                pred_resp_valid,
  output logic                pred_pht_hit,
  output logic                pred_taken,
  output logic [1:0]          pred_ctr,
  output logic                pred_btb_hit,
  output logic [PC_W-1:0]     pred_target,
  // update from branch resolution
  input  logic                upd_valid,
  input  logic [PC_W-1:0]     upd_pc,
  input  logic [TID_W-1:0]    upd_tid,
  input  logic                upd_is_cond,
  input  logic                upd_taken,
  input  logic [PC_W-1:0]     upd_target,
  // events
  output logic                ev_pht_hit,
  output logic                ev_pht_alloc,
  output logic                ev_btb_hit,
  output logic                ev_btb_miss,
  output logic                ev_btb_fill,
  output logic                ev_btb_se,
  output logic                ev_btb_de
);

  localparam int unsigned TI_W = $clog2((2 << BTB_SET_W) * BTB_BASE_WAYS);

  logic [31:0] rnd0, rnd1;
  logic        pht_resp_valid, btb_resp_valid;

  cibpu_prng #(.SEED(RNG_SEED0)) u_rng0 (.clk, .rst_n, .en(1'b1), .rnd(rnd0));
  cibpu_prng #(.SEED(RNG_SEED1)) u_rng1 (.clk, .rst_n, .en(1'b1), .rnd(rnd1));

  cipht #(.IDX_W(PHT_IDX_W), .TAG_W(PHT_TAG_W)) u_pht (
    .clk, .rst_n, .secret(puf_secret),
    .lk_valid(pred_valid), .lk_pc(pred_pc), .lk_tid(pred_tid),
    .lk_resp_valid(pht_resp_valid), .lk_hit(pred_pht_hit), .lk_taken(pred_taken), .lk_ctr(pred_ctr),
    .up_valid(upd_valid && upd_is_cond), .up_pc(upd_pc), .up_tid(upd_tid), .up_taken(upd_taken),
    .up_hit(ev_pht_hit), .up_alloc(ev_pht_alloc)
  );

  cibtb #(.SET_W(BTB_SET_W), .BASE_WAYS(BTB_BASE_WAYS), .EXTRA_WAYS(BTB_EXTRA_WAYS),
          .TAG_W(BTB_TAG_W), .TGT_W(PC_W)) u_btb (
    .clk, .rst_n, .secret(puf_secret),
    .lk_valid(pred_valid), .lk_pc(pred_pc), .lk_tid(pred_tid),
    .lk_resp_valid(btb_resp_valid), .lk_hit(pred_btb_hit), .lk_target(pred_target),
    .up_valid(upd_valid && upd_taken), .up_pc(upd_pc), .up_tid(upd_tid), .up_target(upd_target),
    .rand0(rnd0[TI_W-1:0]), .rand1(rnd1[TI_W-1:0]),
    .up_hit(ev_btb_hit), .up_miss(ev_btb_miss), .up_fill(ev_btb_fill),
    .up_se(ev_btb_se), .up_de(ev_btb_de)
  );

  assign pred_resp_valid = pht_resp_valid && btb_resp_valid;

  // The two tables answer in the same cycle.
  always_ff @(posedge clk) begin
    if (rst_n) assert (pht_resp_valid == btb_resp_valid)
      else $error("cibpu_top: PHT and BTB answers out of step");
  end

endmodule
