// tb_cibpu_enc: known-answer test of the index / tag / pad encryption of one
// skew, with the PHT geometry (13-bit index, 12-bit tag, 2-bit state pad) and
// index domain 0x01, content domain 0x11.  Expected values come from an
// independent software model.  Also checks that decryption (xor with the same
// pad) restores random contents.  Combinational: checked 1 ns after each input.
module tb_cibpu_enc;
  import cibpu_pkg::*;

  typedef struct packed {
    logic [127:0] secret;
    logic [15:0]  tid;
    logic [47:0]  pc;
    logic [12:0]  idx;
    logic [11:0]  tag;
    logic [1:0]   pad;
  } kat_t;

  localparam kat_t KAT [6] = '{
    '{128'h0123456789abcdeffedcba9876543210, 16'h0001, 48'h000080001000, 13'h195a, 12'h6d6, 2'h1},
    '{128'h0123456789abcdeffedcba9876543210, 16'h0002, 48'h000080001000, 13'h17cf, 12'hb73, 2'h2},
    '{128'h0123456789abcdeffedcba9876543210, 16'h0001, 48'h000080001004, 13'h1294, 12'h0d6, 2'h0},
    '{128'h0123456789abcdeffedcba9876543210, 16'h0001, 48'h000080001000, 13'h195a, 12'h6d6, 2'h1},
    '{128'h00000000000000000000000000000000, 16'h0000, 48'h000000000000, 13'h0b74, 12'h0df, 2'h3},
    '{128'hdeadbeefcafef00d0badc0de12345678, 16'hbeef, 48'hfffffffffffc, 13'h1713, 12'hd87, 2'h0}
  };

  logic [SECRET_W-1:0] secret;
  logic [TID_W-1:0]    tid;
  logic [PC_W-1:0]     pc;
  logic [12:0]         idx;
  logic [11:0]         tag;
  logic [1:0]          pad;
  int checks = 0, failures = 0;

  cibpu_enc #(.IDX_W(13), .TAG_W(12), .PAD_W(2), .IDX_DOMAIN(8'h01), .CONT_DOMAIN(8'h11))
    dut (.secret, .tid, .pc, .idx, .tag, .pad);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] plain, stored;
    foreach (KAT[i]) begin
      secret = KAT[i].secret; tid = KAT[i].tid; pc = KAT[i].pc;
      #1;
      check(idx == KAT[i].idx, $sformatf("KAT %0d idx %h expected %h", i, idx, KAT[i].idx));
      check(tag == KAT[i].tag, $sformatf("KAT %0d tag %h expected %h", i, tag, KAT[i].tag));
      check(pad == KAT[i].pad, $sformatf("KAT %0d pad %h expected %h", i, pad, KAT[i].pad));
    end
    for (int i = 0; i < 100; i++) begin
      secret = {$urandom, $urandom, $urandom, $urandom};
      tid = 16'($urandom); pc = {16'($urandom), $urandom};
      plain = 2'($urandom);
      #1 stored = plain ^ pad;
      #1 check((stored ^ pad) == plain, "Dec.C does not invert Enc.C");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
