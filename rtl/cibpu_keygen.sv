// cibpu_keygen: derives one 64-bit key from the device secret, the thread ID,
// the branch PC and a key domain.
//
// The key-management scheme follows the paper: every key of the predictor is
// computed in hardware from the thread ID and the PC, never stored and never
// visible to software, and the secret behind it comes from a physically
// unclonable function.  Because a key is a pure function of (secret, TID, PC),
// it never has to be re-randomised.  The paper does not give the function
// itself.  This design uses four SipHash-style add-rotate-xor rounds keyed by
// the 128-bit secret, with the message {TID, PC} and the domain byte, so that
// each table and skew gets an independent key.
//
// Interface: secret, tid, pc, domain in; key out.  Purely combinational, no
// clock; the result is valid in the same cycle as the inputs.
module cibpu_keygen
  import cibpu_pkg::*;
(
  input  logic [SECRET_W-1:0] secret,
  input  logic [TID_W-1:0]    tid,
  input  logic [PC_W-1:0]     pc,
  input  logic [7:0]          domain,
  output logic [KEY_W-1:0]    key
);

  logic [63:0] msg;
  sip_state_t  s0, s1, s2, s3, s4;

  assign msg = {tid, pc};

  always_comb begin
    s0.v0 = secret[63:0]   ^ 64'h736f6d6570736575;
    s0.v1 = secret[127:64] ^ 64'h646f72616e646f6d;
    s0.v2 = secret[63:0]   ^ 64'h6c7967656e657261 ^ {56'd0, domain};
    s0.v3 = secret[127:64] ^ 64'h7465646279746573 ^ msg;
    s1 = sip_round(s0);
    s2 = sip_round(s1);
    s2.v0 = s2.v0 ^ msg;
    s2.v2 = s2.v2 ^ {domain, 56'hff};
    s3 = sip_round(s2);
    s4 = sip_round(s3);
    key = s4.v0 ^ s4.v1 ^ s4.v2 ^ s4.v3;
  end

endmodule
