// tb_cipht: self-checking test of the three-skew encrypted PHT.
//
// A reference model keeps, per skew, the valid bit, the encrypted tag and the
// encrypted 2-bit counter, computes indices and tags with the
// testbench key model, and applies the paper's rules: hit only when all three
// skews match, saturating counter update on a hit, replacement of all three
// skews on a miss (new counter 2 if taken, 1 if not).  The table is shrunk to
// 16 entries per skew with 4-bit tags so that replacements, partial matches
// and cross-thread aliasing occur often.  Every cycle drives a random lookup
// and a random update; the lookup answer is checked one cycle later (the
// block's latency), the update report in the same cycle.  A directed phase
// walks one counter through saturation at both ends.
module tb_cipht;
  import cibpu_pkg::*;
  import cibpu_ref_pkg::*;

  localparam int IDX_W = 4;
  localparam int TAG_W = 4;
  localparam int N     = 1 << IDX_W;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [SECRET_W-1:0] secret = 128'h0f1e2d3c4b5a69788796a5b4c3d2e1f0;
  logic lk_valid = 1'b0, up_valid = 1'b0, up_taken = 1'b0;
  logic [PC_W-1:0]  lk_pc = '0, up_pc = '0;
  logic [TID_W-1:0] lk_tid = '0, up_tid = '0;
  logic lk_resp_valid, lk_hit, lk_taken, up_hit, up_alloc;
  logic [1:0] lk_ctr;

  cipht #(.IDX_W(IDX_W), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_hit = 0, n_alloc = 0, n_lk_hit = 0, n_sat = 0;
  bit  mv [3][N];
  int  mt [3][N];
  logic [1:0] mc [3][N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic int idx_of(int s, logic [47:0] pc, logic [15:0] tid);
    return int'(ref_idx(secret, tid, pc, DOM_PHT_IDX + 8'(s), IDX_W));
  endfunction
  function automatic int tag_of(int s, logic [47:0] pc, logic [15:0] tid);
    return int'(ref_tag(secret, tid, pc, DOM_PHT_CONT + 8'(s), TAG_W));
  endfunction
  function automatic logic [1:0] pad_of(int s, logic [47:0] pc, logic [15:0] tid);
    return 2'(ref_pad(secret, tid, pc, DOM_PHT_CONT + 8'(s), 2));
  endfunction
  function automatic bit model_hit(logic [47:0] pc, logic [15:0] tid);
    bit h = 1;
    for (int s = 0; s < 3; s++) begin
      int i = idx_of(s, pc, tid);
      if (!(mv[s][i] && mt[s][i] == tag_of(s, pc, tid))) h = 0;
    end
    return h;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One cycle: drive at the falling edge, check the update report and predict
  // the lookup answer, apply the model at the rising edge, check the answer.
  task automatic cycle(input bit lv, input logic [47:0] lpc, input logic [15:0] ltid,
                       input bit uv, input logic [47:0] upc, input logic [15:0] utid, input bit ut);
    bit exp_hit, mh;
    logic [1:0] exp_ctr;
    @(negedge clk);
    lk_valid = lv; lk_pc = lpc; lk_tid = ltid;
    up_valid = uv; up_pc = upc; up_tid = utid; up_taken = ut;
    #1;
    exp_hit = lv && model_hit(lpc, ltid);
    exp_ctr = exp_hit ? mc[0][idx_of(0, lpc, ltid)] ^ pad_of(0, lpc, ltid) : 2'd0;
    if (uv) begin
      mh = model_hit(upc, utid);
      check(up_hit == mh && up_alloc == !mh, $sformatf("update report hit=%0b alloc=%0b model hit=%0b", up_hit, up_alloc, mh));
    end else
      check(!up_hit && !up_alloc, "update report without an update");
    @(posedge clk);
    if (uv) begin
      if (mh) n_hit++; else n_alloc++;
      for (int s = 0; s < 3; s++) begin
        int i = idx_of(s, upc, utid);
        logic [1:0] p, c;
        p = pad_of(s, upc, utid);
        c = mc[s][i] ^ p;                                  // decrypt
        if (mh) begin
          if (ut && c == 2'd3 || !ut && c == 2'd0) n_sat++;
          if (ut)  c = (c == 2'd3) ? 2'd3 : c + 2'd1;
          else     c = (c == 2'd0) ? 2'd0 : c - 2'd1;
        end else begin
          mv[s][i] = 1; mt[s][i] = tag_of(s, upc, utid); c = ut ? 2'd2 : 2'd1;
        end
        mc[s][i] = c ^ p;                                  // encrypt
      end
    end
    #1;
    check(lk_resp_valid == lv, "response valid does not follow the request by one cycle");
    if (lv) begin
      check(lk_hit == exp_hit, $sformatf("lookup pc=%h tid=%0d hit=%0b expected %0b", lpc, ltid, lk_hit, exp_hit));
      if (exp_hit) begin
        n_lk_hit++;
        check(lk_ctr == exp_ctr && lk_taken == exp_ctr[1],
              $sformatf("lookup counter %0d taken %0b expected %0d", lk_ctr, lk_taken, exp_ctr));
      end
    end
  endtask

  logic [47:0] pcs [24];

  initial begin
    foreach (pcs[i]) pcs[i] = 48'h0000_4000_0000 + 48'(i * 36);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // Directed: one branch trained up to 3 and down to 0.
    cycle(0, 0, 0, 1, pcs[0], 16'd1, 1);                   // allocate, counter 2
    for (int k = 0; k < 4; k++) cycle(1, pcs[0], 16'd1, 1, pcs[0], 16'd1, 1);
    cycle(1, pcs[0], 16'd1, 0, 0, 0, 0);
    check(lk_ctr == 2'd3 && lk_taken, "counter does not saturate at 3");
    for (int k = 0; k < 5; k++) cycle(1, pcs[0], 16'd1, 1, pcs[0], 16'd1, 0);
    cycle(1, pcs[0], 16'd1, 0, 0, 0, 0);
    check(lk_hit && lk_ctr == 2'd0 && !lk_taken, "counter does not saturate at 0");
    cycle(1, pcs[0], 16'd2, 0, 0, 0, 0);
    check(!lk_hit, "another thread hits the first thread's entry");

    // Random traffic from two threads over a small branch pool.
    for (int k = 0; k < 6000; k++)
      cycle(1'($urandom % 2), pcs[$urandom % 24], 16'($urandom % 2 + 1),
            ($urandom % 4) != 0, pcs[$urandom % 24], 16'($urandom % 2 + 1), ($urandom % 3) != 0);

    check(n_hit > 0 && n_alloc > 0 && n_lk_hit > 0 && n_sat > 0, "a mechanism never happened");
    $display("updates: hit=%0d alloc=%0d saturated=%0d, lookup hits=%0d", n_hit, n_alloc, n_sat, n_lk_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
