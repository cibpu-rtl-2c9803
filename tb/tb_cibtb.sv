// tb_cibtb: self-checking test of the decoupled two-skew BTB.
//
// The buffer is shrunk to 4 sets per skew, 2 base + 1 extra tag slots per set
// and 16 targets, so that every mechanism occurs within a few thousand
// updates: hits, target changes, fills of free targets during warm-up, secure
// (global) evictions and dangerous (in-set) evictions.  A reference model
// holds the Tag-Store (valid, tag, FPTR) and the Target-Store (valid,
// encrypted target, RPTR), computes indices, tags and pads with the
// testbench key model, and follows the paper's Algorithm 1 (hit in either
// skew, else the set with fewer valid tags, skew 0 on a tie) and Algorithm 2
// (of two random targets, evict the one whose owning set has more valid tags,
// the first on a tie), plus this design's rules for free targets, the slot
// chosen and dangerous evictions.  The testbench drives rand0 / rand1 itself.
// Each cycle has a random lookup, checked one cycle later, and a random
// update whose event report is checked in the same cycle.
module tb_cibtb;
  import cibpu_pkg::*;
  import cibpu_ref_pkg::*;

  localparam int SET_W = 2, BASE = 2, EXTRA = 1, TAG_W = 6;
  localparam int WAYS = BASE + EXTRA;
  localparam int NS   = 2 << SET_W;
  localparam int NT   = NS * BASE;
  localparam int TI_W = $clog2(NT);

  logic clk = 1'b0, rst_n = 1'b0;
  logic [SECRET_W-1:0] secret = 128'h00112233445566778899aabbccddeeff;
  logic lk_valid = 1'b0, up_valid = 1'b0;
  logic [PC_W-1:0]  lk_pc = '0, up_pc = '0, up_target = '0;
  logic [TID_W-1:0] lk_tid = '0, up_tid = '0;
  logic [TI_W-1:0]  rand0 = '0, rand1 = '0;
  logic lk_resp_valid, lk_hit, up_hit, up_miss, up_fill, up_se, up_de;
  logic [PC_W-1:0] lk_target;

  cibtb #(.SET_W(SET_W), .BASE_WAYS(BASE), .EXTRA_WAYS(EXTRA), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_hit = 0, n_retarget = 0, n_fill = 0, n_se = 0, n_de = 0, n_lk_hit = 0, n_skew1 = 0;
  bit          mtv [NS][WAYS];
  int          mtt [NS][WAYS];
  int          mtf [NS][WAYS];
  bit          mgv [NT];
  logic [47:0] mgt [NT];
  int          mgs [NT];
  int          mgw [NT];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic int nvalid(int set);
    int n = 0;
    for (int w = 0; w < WAYS; w++) n += int'(mtv[set][w]);
    return n;
  endfunction

  // Algorithm 1 on the model: returns hit, the FPTR on a hit, and both sets.
  function automatic bit model_find(logic [47:0] pc, logic [15:0] tid, output int fptr,
                                    output int set0, output int set1);
    int tag;
    set0 = int'(ref_idx(secret, tid, pc, DOM_BTB_IDX, SET_W));
    set1 = (1 << SET_W) + int'(ref_idx(secret, tid, pc, DOM_BTB_IDX + 8'd1, SET_W));
    tag  = int'(ref_tag(secret, tid, pc, DOM_BTB_CONT, TAG_W));
    fptr = 0;
    for (int w = 0; w < WAYS; w++) if (mtv[set0][w] && mtt[set0][w] == tag) begin fptr = mtf[set0][w]; return 1; end
    for (int w = 0; w < WAYS; w++) if (mtv[set1][w] && mtt[set1][w] == tag) begin fptr = mtf[set1][w]; return 1; end
    return 0;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cycle(input bit lv, input logic [47:0] lpc, input logic [15:0] ltid,
                       input bit uv, input logic [47:0] upc, input logic [15:0] utid,
                       input logic [47:0] utgt);
    bit e_lhit, h, full, evict;
    int f, s0, s1, fin, way, ch, r0, r1;
    logic [47:0] e_ltgt, pad;
    @(negedge clk);
    r0 = int'($urandom % NT); r1 = int'($urandom % NT);
    lk_valid = lv; lk_pc = lpc; lk_tid = ltid;
    up_valid = uv; up_pc = upc; up_tid = utid; up_target = utgt;
    rand0 = TI_W'(r0); rand1 = TI_W'(r1);
    #1;
    e_lhit = lv && model_find(lpc, ltid, f, s0, s1);
    e_ltgt = e_lhit ? (mgt[f] ^ 48'(ref_pad(secret, ltid, lpc, DOM_BTB_CONT, 48))) : '0;
    if (uv) begin
      pad  = 48'(ref_pad(secret, utid, upc, DOM_BTB_CONT, 48));
      h    = model_find(upc, utid, f, s0, s1);
      fin  = (nvalid(s0) <= nvalid(s1)) ? s0 : s1;
      full = nvalid(fin) == WAYS;
      evict = 0;
      if (!mgv[r0])      ch = r0;
      else if (!mgv[r1]) ch = r1;
      else begin evict = 1; ch = (nvalid(mgs[r0]) >= nvalid(mgs[r1])) ? r0 : r1; end
      check(up_hit == h && up_miss == !h, $sformatf("hit report %0b expected %0b", up_hit, h));
      check(up_de == (!h && full), "dangerous-eviction report");
      check(up_se == (!h && !full && evict), "secure-eviction report");
      check(up_fill == (!h && !full && !evict), "fill report");
    end else
      check(!(up_hit | up_miss | up_fill | up_se | up_de), "report without an update");
    @(posedge clk);
    if (uv) begin
      if (h) begin
        n_hit++;
        if ((mgt[f] ^ pad) != utgt) n_retarget++;
        mgt[f] = utgt ^ pad;
      end else begin
        if (fin >= (1 << SET_W)) n_skew1++;
        if (full) begin
          n_de++;
          way = r0 % WAYS;
          mtt[fin][way] = int'(ref_tag(secret, utid, upc, DOM_BTB_CONT, TAG_W));
          ch = mtf[fin][way];
        end else begin
          way = 0;                                  // free slot, found before the eviction
          while (mtv[fin][way]) way++;
          if (evict) begin n_se++; mtv[mgs[ch]][mgw[ch]] = 0; end else n_fill++;
          mtv[fin][way] = 1;
          mtt[fin][way] = int'(ref_tag(secret, utid, upc, DOM_BTB_CONT, TAG_W));
          mtf[fin][way] = ch;
          mgv[ch] = 1;
        end
        mgt[ch] = utgt ^ pad; mgs[ch] = fin; mgw[ch] = way;
      end
    end
    #1;
    check(lk_resp_valid == lv, "response valid does not follow the request by one cycle");
    if (lv) begin
      check(lk_hit == e_lhit, $sformatf("lookup pc=%h hit=%0b expected %0b", lpc, lk_hit, e_lhit));
      if (e_lhit) begin
        n_lk_hit++;
        check(lk_target == e_ltgt, $sformatf("lookup target %h expected %h", lk_target, e_ltgt));
      end
    end
  endtask

  logic [47:0] pcs [40];
  logic [47:0] tgts [40];

  initial begin
    int p;
    foreach (pcs[i]) begin pcs[i] = 48'h0000_1000_0000 + 48'(i * 52); tgts[i] = {16'h0, $urandom}; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // Directed: install one branch, read it back, change its target, and check
    // that the same PC of another thread does not see it.
    cycle(0, 0, 0, 1, pcs[0], 16'd7, 48'h0000_dead_beef);
    cycle(1, pcs[0], 16'd7, 0, 0, 0, 0);
    check(lk_hit && lk_target == 48'h0000_dead_beef, "installed branch not found");
    cycle(0, 0, 0, 1, pcs[0], 16'd7, 48'h0000_0bad_f00d);
    cycle(1, pcs[0], 16'd7, 0, 0, 0, 0);
    check(lk_hit && lk_target == 48'h0000_0bad_f00d, "target change not applied");

    for (int k = 0; k < 8000; k++) begin
      p = int'($urandom % 40);
      if ($urandom % 10 == 0) tgts[p] = {16'h0, $urandom};
      cycle(1'($urandom % 2), pcs[$urandom % 40], 16'($urandom % 2 + 1),
            ($urandom % 4) != 0, pcs[p], 16'($urandom % 2 + 1), tgts[p]);
    end

    check(n_hit > 0 && n_retarget > 0 && n_fill > 0 && n_se > 0 && n_de > 0 && n_lk_hit > 0 && n_skew1 > 0,
          "a mechanism never happened");
    $display("updates: hit=%0d retarget=%0d fill=%0d secure-evict=%0d dangerous-evict=%0d skew1-insert=%0d lookup-hits=%0d",
             n_hit, n_retarget, n_fill, n_se, n_de, n_skew1, n_lk_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
