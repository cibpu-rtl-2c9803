// tb_cibpu_reuse_attack: a reuse (poisoning) attack on the full-size unit.
//
// A victim thread (ID 1) installs 64 taken branches with their targets and
// trains them taken.  An attacker thread (ID 2) then trains the very same
// PCs, and 20,000 further random PCs, as not-taken conditional branches and
// as jumps to a recognisable malicious target (48'h0000_0bad_xxxx), the way a
// Spectre-BTB or BranchScope attacker primes a shared predictor.
//
// Checks: (1) the victim never receives an attacker-chosen target; (2) the
// victim never gets a PHT hit on a PC that only the attacker trained (a hit
// would need the tag to alias in all three skews); (3) the attacker, looking
// up the victim's PCs, never receives a victim target; (4) the victim's own
// surviving entries still return its own targets.  Runs at the default sizes,
// one request per cycle.  The attack class and the four guarantees follow the
// published security analysis; the PCs, the counts and the 0bad target marker
// are this bench's own choices.
module tb_cibpu_reuse_attack;
  import cibpu_pkg::*;

  localparam int NV = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [SECRET_W-1:0] puf_secret = 128'h3141_5926_5358_9793_2384_6264_3383_2795;
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
  int survived = 0, victim_alias = 0, attacker_alias = 0;
  logic [47:0] vpc [NV], vtgt [NV], fresh [NV];

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

  task automatic update(input logic [47:0] pc, input logic [15:0] tid, input bit cond,
                        input bit taken, input logic [47:0] tgt);
    @(negedge clk);
    pred_valid = 1'b0;
    upd_valid = 1'b1; upd_pc = pc; upd_tid = tid; upd_is_cond = cond; upd_taken = taken; upd_target = tgt;
    @(posedge clk);
    #1 upd_valid = 1'b0;
  endtask

  task automatic predict(input logic [47:0] pc, input logic [15:0] tid);
    @(negedge clk);
    upd_valid = 1'b0;
    pred_valid = 1'b1; pred_pc = pc; pred_tid = tid;
    @(posedge clk);
    #1 pred_valid = 1'b0;
  endtask

  function automatic bit malicious(input logic [47:0] t);
    return t[47:16] == 32'h0000_0bad;
  endfunction

  initial begin
    for (int i = 0; i < NV; i++) begin
      vpc[i]   = 48'h0000_5555_0000 + 48'(i * 40);
      vtgt[i]  = 48'h0000_7777_0000 + 48'(i * 16);
      fresh[i] = 48'h0000_6666_0000 + 48'(i * 40);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // Victim installs and trains its branches.
    for (int r = 0; r < 3; r++)
      for (int i = 0; i < NV; i++) update(vpc[i], 16'd1, 1'b1, 1'b1, vtgt[i]);

    // Attacker primes the same PCs and the fresh PCs, then floods the BTB.
    for (int r = 0; r < 3; r++)
      for (int i = 0; i < NV; i++) begin
        update(vpc[i],   16'd2, 1'b1, 1'b0, 48'h0);
        update(vpc[i],   16'd2, 1'b0, 1'b1, {32'h0000_0bad, 16'(i)});
        update(fresh[i], 16'd2, 1'b1, 1'b0, 48'h0);
        update(fresh[i], 16'd2, 1'b0, 1'b1, {32'h0000_0bad, 16'(i + 1000)});
      end
    for (int k = 0; k < 20000; k++)
      update({16'h0, $urandom} << 2, 16'd2, 1'($urandom % 2), 1'b1, {32'h0000_0bad, 16'($urandom)});

    // Attacker looks up the victim's PCs.
    for (int i = 0; i < NV; i++) begin
      predict(vpc[i], 16'd2);
      if (pred_btb_hit) begin
        check(pred_target != vtgt[i], $sformatf("attacker reads victim target of branch %0d", i));
      end
    end
    // Victim looks up its own PCs and PCs it never used.
    for (int i = 0; i < NV; i++) begin
      predict(vpc[i], 16'd1);
      check(!(pred_btb_hit && malicious(pred_target)), $sformatf("victim branch %0d steered to %h", i, pred_target));
      if (pred_btb_hit && pred_target == vtgt[i]) survived++;
      else if (pred_btb_hit) victim_alias++;
      predict(fresh[i], 16'd1);
      check(!pred_pht_hit, $sformatf("victim PHT hit on attacker-trained PC %h", fresh[i]));
      check(!(pred_btb_hit && malicious(pred_target)), $sformatf("victim fresh PC %h steered to %h", fresh[i], pred_target));
      if (pred_btb_hit) victim_alias++;
    end
    check(survived > 0, "no victim entry survived to check its own target");
    $display("victim entries surviving=%0d of %0d, victim alias hits=%0d, dangerous evictions seen at the end=%0b",
             survived, NV, victim_alias, ev_btb_de);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
