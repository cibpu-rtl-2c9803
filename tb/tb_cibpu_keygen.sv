// tb_cibpu_keygen: known-answer test of the key derivation function.
//
// The expected keys were computed with an independent software model of the
// same add-rotate-xor schedule.  The test also checks that changing only the
// thread ID, only the PC or only the domain changes the key, over random
// inputs.  Combinational block: each vector is applied and checked after 1 ns.
module tb_cibpu_keygen;
  import cibpu_pkg::*;

  typedef struct packed {
    logic [127:0] secret;
    logic [15:0]  tid;
    logic [47:0]  pc;
    logic [7:0]   dom;
    logic [63:0]  key;
  } kat_t;

  localparam kat_t KAT [6] = '{
    '{128'h0123456789abcdeffedcba9876543210, 16'h0001, 48'h000080001000, 8'h00, 64'h46a8a560aed0e00e},
    '{128'h0123456789abcdeffedcba9876543210, 16'h0002, 48'h000080001000, 8'h00, 64'h48e8648345421278},
    '{128'h0123456789abcdeffedcba9876543210, 16'h0001, 48'h000080001004, 8'h00, 64'h9c49683d58c2bc68},
    '{128'h0123456789abcdeffedcba9876543210, 16'h0001, 48'h000080001000, 8'h91, 64'he4cc92d5ace41272},
    '{128'h00000000000000000000000000000000, 16'h0000, 48'h000000000000, 8'h00, 64'h4530bfd2115c2db6},
    '{128'hdeadbeefcafef00d0badc0de12345678, 16'hbeef, 48'hfffffffffffc, 8'h80, 64'h168deeeb4e887200}
  };

  logic [SECRET_W-1:0] secret;
  logic [TID_W-1:0]    tid;
  logic [PC_W-1:0]     pc;
  logic [7:0]          domain;
  logic [KEY_W-1:0]    key;
  int checks = 0, failures = 0;

  cibpu_keygen dut (.secret, .tid, .pc, .domain, .key);

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
    logic [63:0] k_base;
    foreach (KAT[i]) begin
      secret = KAT[i].secret; tid = KAT[i].tid; pc = KAT[i].pc; domain = KAT[i].dom;
      #1;
      check(key == KAT[i].key, $sformatf("KAT %0d: got %h expected %h", i, key, KAT[i].key));
    end
    for (int i = 0; i < 200; i++) begin
      secret = {$urandom, $urandom, $urandom, $urandom};
      tid = 16'($urandom); pc = {16'($urandom), $urandom}; domain = 8'($urandom);
      #1 k_base = key;
      tid = tid ^ 16'(1 << ($urandom % 16));
      #1 check(key != k_base, "thread ID does not change the key");
      tid = tid ^ tid; pc = pc ^ 48'(1 << ($urandom % 48));
      #1 k_base = key;
      domain = domain ^ 8'h01;
      #1 check(key != k_base, "domain does not change the key");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
