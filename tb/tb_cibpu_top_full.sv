// tb_cibpu_top_full: the prediction unit at its full default size (three PHT
// skews of 8192 entries, BTB of 2 x 2048 sets with 8 + 5 tag slots and 32768
// targets), taken through complete operation by two threads and then loaded
// the way the paper's eviction analysis loads it.
//
// Phase 1 (SMT-2 operation): 30 PCs run by two threads.  Each branch is
// resolved and then predicted.  While the Target-Store is far from full a BTB
// entry is never evicted, so every installed branch must hit with its own
// target, and the same PC of the other thread must miss until it is installed
// itself.  PHT hits must return the counter of the branch's own history.
//
// Phase 2 (bins and balls): 2,000,000 further taken branches with random PCs from
// a third thread are installed, more than the 32768 targets, so the
// Target-Store fills and the load-balancing replacement runs tens of
// thousands of times.  The test checks that no dangerous (in-set) eviction
// happens, that the number of valid tags always equals the number of valid
// targets, and prints the histogram of valid tags per set (the balls-per-bin
// distribution; with 8 targets per set on average it is narrow around 8).
// Every set must hold between 4 and 12 valid tags, the range the source
// design reports observing in its own ball-throwing experiment.
module tb_cibpu_top_full;
  import cibpu_pkg::*;
  import cibpu_ref_pkg::*;

  localparam int NPC = 30, NB = 2 * NPC;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [SECRET_W-1:0] puf_secret = 128'hc0ffee00_12345678_9abcdef0_0f0f0f0f;
  logic pred_valid = 1'b0, upd_valid = 1'b0, upd_is_cond = 1'b0, upd_taken = 1'b0;
  logic [PC_W-1:0]  pred_pc = '0, upd_pc = '0, upd_target = '0;
  logic [TID_W-1:0] pred_tid = '0, upd_tid = '0;
  logic pred_resp_valid, pred_pht_hit, pred_taken, pred_btb_hit;
  logic [1:0] pred_ctr;
  logic [PC_W-1:0] pred_target;
  logic ev_pht_hit, ev_pht_alloc, ev_btb_hit, ev_btb_miss, ev_btb_fill, ev_btb_se, ev_btb_de;

  cibpu_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int c_fill = 0, c_se = 0, c_de = 0, c_miss = 0, c_pht_hit = 0, c_btb_hit = 0;
  logic [47:0] bpc [NB];
  logic [15:0] btid [NB];
  bit          pht_seen [NB];
  logic [1:0]  mctr [NB];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    c_fill += int'(ev_btb_fill); c_se += int'(ev_btb_se); c_de += int'(ev_btb_de); c_miss += int'(ev_btb_miss);
  end

  task automatic resolve(input logic [47:0] pc, input logic [15:0] tid, input bit cond,
                         input bit taken, input logic [47:0] tgt, input int b);
    @(negedge clk);
    pred_valid = 1'b0;
    upd_valid = 1'b1; upd_pc = pc; upd_tid = tid; upd_is_cond = cond; upd_taken = taken; upd_target = tgt;
    #1;
    if (b >= 0 && cond) begin
      if (ev_pht_hit) begin
        check(pht_seen[b], "PHT hit for a branch never allocated");
        if (taken) mctr[b] = (mctr[b] == 2'd3) ? 2'd3 : mctr[b] + 2'd1;
        else       mctr[b] = (mctr[b] == 2'd0) ? 2'd0 : mctr[b] - 2'd1;
      end else begin
        check(ev_pht_alloc, "conditional update neither hit nor allocated");
        mctr[b] = taken ? 2'd2 : 2'd1; pht_seen[b] = 1;
      end
    end
    @(posedge clk);
    #1 upd_valid = 1'b0;
  endtask

  task automatic predict(input int b, output bit pht_hit, output logic [1:0] ctr,
                         output bit btb_hit, output logic [47:0] tgt);
    @(negedge clk);
    pred_valid = 1'b1; pred_pc = bpc[b]; pred_tid = btid[b];
    @(posedge clk);
    #1;
    check(pred_resp_valid, "no prediction answer after one cycle");
    pht_hit = pred_pht_hit; ctr = pred_ctr; btb_hit = pred_btb_hit; tgt = pred_target;
    @(negedge clk) pred_valid = 1'b0;
  endtask

  function automatic int count_tags();
    int n = 0;
    for (int s = 0; s < 4096; s++) for (int w = 0; w < 13; w++) n += int'(dut.u_btb.tvld[s][w]);
    return n;
  endfunction
  function automatic int count_targets();
    int n = 0;
    for (int i = 0; i < 32768; i++) n += int'(dut.u_btb.gvld[i]);
    return n;
  endfunction

  initial begin
    bit ph, bh;
    logic [1:0] ctr;
    logic [47:0] tgt;
    int n, hist [14];
    logic [47:0] pc;

    // Pool: 30 PCs for threads 1 and 2 with pairwise distinct BTB and PHT tags.
    n = 0; pc = 48'h0000_7f00_1000;
    while (n < NPC) begin
      bit ok;
      ok = 1;
      for (int t = 0; t < 2; t++) for (int j = 0; j < 2 * n + t; j++) begin
        if (ref_tag(puf_secret, 16'(t + 1), pc, DOM_BTB_CONT, 12) == ref_tag(puf_secret, btid[j], bpc[j], DOM_BTB_CONT, 12)) ok = 0;
        for (int s = 0; s < 3; s++)
          if (ref_tag(puf_secret, 16'(t + 1), pc, DOM_PHT_CONT + 8'(s), 12) ==
              ref_tag(puf_secret, btid[j], bpc[j], DOM_PHT_CONT + 8'(s), 12)) ok = 0;
      end
      if (ok) begin
        bpc[2 * n] = pc; btid[2 * n] = 16'd1; bpc[2 * n + 1] = pc; btid[2 * n + 1] = 16'd2; n++;
      end
      pc += 48'd36;
    end

    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // Phase 1: thread 1 installs and trains its branches; thread 2 must not see them.
    for (int b = 0; b < NB; b += 2) begin
      resolve(bpc[b], btid[b], 1'b1, 1'b1, bpc[b] + 48'h400 + 48'(b), b);
      resolve(bpc[b], btid[b], 1'b1, 1'b1, bpc[b] + 48'h400 + 48'(b), b);
    end
    for (int b = 0; b < NB; b++) begin
      predict(b, ph, ctr, bh, tgt);
      if (b % 2 == 0) begin
        check(bh && tgt == bpc[b] + 48'h400 + 48'(b), $sformatf("thread 1 branch %0d: hit %0b target %h", b, bh, tgt));
        if (ph) begin c_pht_hit++; check(ctr == mctr[b], "PHT counter differs from the branch's history"); end
        if (bh) c_btb_hit++;
      end else
        check(!bh && !ph, $sformatf("thread 2 sees thread 1's branch at %h", bpc[b]));
    end
    // Thread 2 now installs the same PCs with other targets and trains them not-taken... then taken.
    for (int b = 1; b < NB; b += 2) begin
      resolve(bpc[b], btid[b], 1'b1, 1'b0, 48'h0, b);
      resolve(bpc[b], btid[b], 1'b0, 1'b1, bpc[b] + 48'h9000, b);
    end
    for (int b = 0; b < NB; b++) begin
      predict(b, ph, ctr, bh, tgt);
      check(bh && tgt == bpc[b] + ((b % 2 == 0) ? 48'h400 + 48'(b) : 48'h9000),
            $sformatf("branch %0d after both threads installed: hit %0b target %h", b, bh, tgt));
      if (ph) begin c_pht_hit++; check(ctr == mctr[b], "PHT counter differs from the branch's history"); end
    end
    check(c_pht_hit > 0, "no PHT hit at full size");
    check(c_de == 0 && c_se == 0, "eviction while the Target-Store is nearly empty");
    check(count_tags() == count_targets(), "valid tags and valid targets differ after phase 1");

    // Phase 2: bins and balls.
    for (int k = 0; k < 2000000; k++) begin
      @(negedge clk);
      upd_valid = 1'b1; upd_is_cond = 1'b0; upd_taken = 1'b1;
      upd_pc = {16'h0, $urandom} << 2; upd_tid = 16'd3; upd_target = {16'h0, $urandom};
      if (k % 500000 == 499999) begin
        @(posedge clk) #1 upd_valid = 1'b0;
        check(count_tags() == count_targets(), $sformatf("valid tags and targets differ after %0d insertions", k + 1));
      end
    end
    @(negedge clk) upd_valid = 1'b0;
    @(posedge clk);
    foreach (hist[i]) hist[i] = 0;
    for (int s = 0; s < 4096; s++) begin
      int v;
      v = 0;
      for (int w = 0; w < 13; w++) v += int'(dut.u_btb.tvld[s][w]);
      hist[v]++;
    end
    $display("BTB misses=%0d fills=%0d secure-evictions=%0d dangerous-evictions=%0d valid-targets=%0d",
             c_miss, c_fill, c_se, c_de, count_targets());
    for (int i = 0; i < 14; i++) $display("  sets with %2d valid tags: %0d", i, hist[i]);
    check(c_se > 10000, "load-balancing replacement did not run");
    check(c_de == 0, "dangerous eviction at full size");
    for (int i = 0; i < 14; i++)
      if (i < 4 || i > 12) check(hist[i] == 0, $sformatf("%0d sets hold %0d valid tags, outside 4..12", hist[i], i));
    check(count_tags() == 32768, "Target-Store not full after phase 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
