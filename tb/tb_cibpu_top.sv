// tb_cibpu_top: end-to-end test of the secure branch prediction unit with two
// hardware threads sharing it (SMT-2).
//
// The unit is built small (16-entry PHT skews, 4 BTB sets per skew with 2 + 1
// tag slots, 16 targets) so that every mechanism occurs: PHT hits,
// allocations and counter saturation, BTB hits, misses, target changes,
// fills of free targets, secure (global) evictions and dangerous (in-set)
// evictions, and thread isolation (a branch installed by one thread is not
// seen by the other thread at the same PC).
//
// The branch pool is 20 PCs executed by both threads, chosen so that all 40
// (PC, thread) pairs have distinct encrypted tags: any hit therefore belongs
// to the branch that was looked up, and per-branch models suffice.  A PHT hit
// must return the counter the branch's own history gives since its last
// allocation; a BTB hit must return the last target the branch was installed
// with.  Conditional branches are biased (mostly taken, mostly not taken or
// random); unconditional ones are sometimes indirect with two targets.  Each
// cycle drives one prediction and one resolved branch; predictions are
// checked one cycle later.  Counts of each mechanism are printed and a
// mechanism that never happened is a failure.
module tb_cibpu_top;
  import cibpu_pkg::*;
  import cibpu_ref_pkg::*;

  localparam int NPC = 20, NB = 2 * NPC;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [SECRET_W-1:0] puf_secret = 128'h5a5a_0123_4567_89ab_cdef_fedc_ba98_7654;
  logic pred_valid = 1'b0, upd_valid = 1'b0, upd_is_cond = 1'b0, upd_taken = 1'b0;
  logic [PC_W-1:0]  pred_pc = '0, upd_pc = '0, upd_target = '0;
  logic [TID_W-1:0] pred_tid = '0, upd_tid = '0;
  logic pred_resp_valid, pred_pht_hit, pred_taken, pred_btb_hit;
  logic [1:0] pred_ctr;
  logic [PC_W-1:0] pred_target;
  logic ev_pht_hit, ev_pht_alloc, ev_btb_hit, ev_btb_miss, ev_btb_fill, ev_btb_se, ev_btb_de;

  cibpu_top #(.PHT_IDX_W(4), .PHT_TAG_W(12), .BTB_SET_W(2), .BTB_BASE_WAYS(2),
              .BTB_EXTRA_WAYS(1), .BTB_TAG_W(12)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int c_pht_hit, c_pht_alloc, c_pht_sat, c_pred_t, c_pred_nt, c_btb_hit, c_btb_miss,
      c_retarget, c_fill, c_se, c_de, c_isolated;

  logic [47:0] bpc [NB];
  logic [15:0] btid [NB];
  int          bkind [NB];     // 0 mostly taken, 1 mostly not taken, 2 random, 3 direct jump, 4 indirect jump
  logic [47:0] btgt0 [NB], btgt1 [NB];
  bit          pht_seen [NB], btb_seen [NB];
  logic [1:0]  mctr [NB];
  logic [47:0] mtgt [NB];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Pick 20 PCs whose 40 (PC, thread) tags are all distinct in the BTB and in
  // every PHT skew.
  task automatic choose_pool();
    int n = 0;
    logic [47:0] pc;
    pc = 48'h0000_0040_0000;
    while (n < NPC) begin
      bit ok = 1;
      for (int t = 0; t < 2; t++)
        for (int j = 0; j < 2 * n + t; j++) begin
          logic [15:0] tid = 16'(t + 1);
          if (ref_tag(puf_secret, tid, pc, DOM_BTB_CONT, 12) == ref_tag(puf_secret, btid[j], bpc[j], DOM_BTB_CONT, 12))
            ok = 0;
          for (int s = 0; s < 3; s++)
            if (ref_tag(puf_secret, tid, pc, DOM_PHT_CONT + 8'(s), 12) ==
                ref_tag(puf_secret, btid[j], bpc[j], DOM_PHT_CONT + 8'(s), 12)) ok = 0;
        end
      if (ok) begin
        for (int t = 0; t < 2; t++) begin
          bpc[2 * n + t] = pc; btid[2 * n + t] = 16'(t + 1);
        end
        n++;
      end
      pc += 48'd28;
    end
    for (int b = 0; b < NB; b++) begin
      bkind[b] = (b / 2) % 5;
      btgt0[b] = bpc[b] + 48'h100 + 48'(b * 8);
      btgt1[b] = bpc[b] - 48'h2000;
    end
  endtask

  task automatic cycle(input bit pv, input int pb, input bit uv, input int ub);
    bit taken, is_cond;
    logic [47:0] tgt;
    bit e_pvalid;
    logic [1:0] e_ctr;
    bit pht_known, btb_known, twin_btb;
    logic [47:0] e_tgt;
    is_cond = bkind[ub] <= 2;
    case (bkind[ub])
      0: taken = ($urandom % 10) != 0;
      1: taken = ($urandom % 10) == 0;
      2: taken = 1'($urandom % 2);
      default: taken = 1'b1;
    endcase
    tgt = (bkind[ub] == 4 && $urandom % 3 == 0) ? btgt1[ub] : btgt0[ub];
    @(negedge clk);
    pred_valid = pv; pred_pc = bpc[pb]; pred_tid = btid[pb];
    upd_valid = uv; upd_pc = bpc[ub]; upd_tid = btid[ub];
    upd_is_cond = is_cond; upd_taken = taken; upd_target = tgt;
    #1;
    // Expected prediction, from the state before this cycle's update.
    e_pvalid  = pv;
    pht_known = pht_seen[pb];
    e_ctr     = mctr[pb];
    btb_known = btb_seen[pb];
    e_tgt     = mtgt[pb];
    twin_btb  = btb_seen[pb ^ 1];
    // Update reports.
    if (uv && is_cond) begin
      check(ev_pht_hit ^ ev_pht_alloc, "PHT update gives neither or both of hit and allocate");
      if (ev_pht_hit) begin
        check(pht_seen[ub], "PHT hit for a branch never allocated");
        c_pht_hit++;
        if (taken && mctr[ub] == 2'd3 || !taken && mctr[ub] == 2'd0) c_pht_sat++;
        if (taken) mctr[ub] = (mctr[ub] == 2'd3) ? 2'd3 : mctr[ub] + 2'd1;
        else       mctr[ub] = (mctr[ub] == 2'd0) ? 2'd0 : mctr[ub] - 2'd1;
      end else begin
        c_pht_alloc++;
        mctr[ub] = taken ? 2'd2 : 2'd1;
        pht_seen[ub] = 1;
      end
    end else
      check(!ev_pht_hit && !ev_pht_alloc, "PHT event without a conditional update");
    if (uv && taken) begin
      check(ev_btb_hit ^ ev_btb_miss, "BTB update gives neither or both of hit and miss");
      check(!ev_btb_miss || (ev_btb_fill + ev_btb_se + ev_btb_de == 1), "BTB miss without exactly one replacement kind");
      if (ev_btb_hit) begin
        check(btb_seen[ub], "BTB hit for a branch never installed");
        c_btb_hit++;
        if (mtgt[ub] != tgt) c_retarget++;
      end else begin
        c_btb_miss++;
        c_fill += int'(ev_btb_fill); c_se += int'(ev_btb_se); c_de += int'(ev_btb_de);
      end
      mtgt[ub] = tgt;
      btb_seen[ub] = 1;
    end else
      check(!(ev_btb_hit | ev_btb_miss | ev_btb_fill | ev_btb_se | ev_btb_de), "BTB event without a taken update");
    @(posedge clk);
    #1;
    check(pred_resp_valid == e_pvalid, "prediction answer not one cycle after the request");
    if (pv) begin
      if (pred_pht_hit) begin
        check(pht_known, "PHT hit for a branch never allocated");
        check(pred_ctr == e_ctr && pred_taken == e_ctr[1],
              $sformatf("branch %0d counter %0d expected %0d", pb, pred_ctr, e_ctr));
        if (pred_taken) c_pred_t++; else c_pred_nt++;
      end
      if (pred_btb_hit) begin
        check(btb_known && pred_target == e_tgt,
              $sformatf("branch %0d target %h expected %h", pb, pred_target, e_tgt));
      end else if (!btb_known && twin_btb) c_isolated++;
    end
  endtask

  initial begin
    choose_pool();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // Directed start: a fresh branch of thread 1 trains both tables, thread 2
    // at the same PC sees nothing.
    cycle(0, 0, 1, 0);
    cycle(1, 0, 0, 0);
    check(pred_pht_hit || pred_btb_hit || bkind[0] == 1, "trained branch not predicted");
    cycle(1, 1, 0, 0);
    check(!pred_pht_hit && !pred_btb_hit, "thread 2 sees thread 1's branch");

    for (int k = 0; k < 20000; k++)
      cycle(1'($urandom % 4 != 0), int'($urandom % NB), 1'($urandom % 5 != 0), int'($urandom % NB));

    $display("PHT: hit=%0d alloc=%0d saturate=%0d predicted-taken=%0d predicted-not-taken=%0d",
             c_pht_hit, c_pht_alloc, c_pht_sat, c_pred_t, c_pred_nt);
    $display("BTB: hit=%0d miss=%0d retarget=%0d fill=%0d secure-evict=%0d dangerous-evict=%0d isolated-lookups=%0d",
             c_btb_hit, c_btb_miss, c_retarget, c_fill, c_se, c_de, c_isolated);
    check(c_pht_hit > 0, "no PHT hit");          check(c_pht_alloc > 0, "no PHT allocation");
    check(c_pht_sat > 0, "no counter saturation"); check(c_pred_t > 0 && c_pred_nt > 0, "one direction never predicted");
    check(c_btb_hit > 0, "no BTB hit");          check(c_retarget > 0, "no target change");
    check(c_fill > 0, "no free-target fill");    check(c_se > 0, "no secure eviction");
    check(c_de > 0, "no dangerous eviction");    check(c_isolated > 0, "no isolated cross-thread lookup");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
