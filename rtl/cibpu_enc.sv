// cibpu_enc: index and content encryption of one table skew (Enc.I and
// Enc.C / Dec.C).
//
// Following the paper's load-balancing index algorithm, the encrypted index is
// the PC xor-ed with the skew's index key and the tag is the PC xor-ed with the
// content key.  The stored content (a 2-bit PHT state or a 48-bit BTB target)
// is xor-ed with a pad taken from the content key on the way in and xor-ed with
// the same pad on the way out (Dec.C), so an entry written by one thread
// decrypts to garbage for another.  The paper does not say which key bits form
// the index, tag and pad; here the index and tag are the low bits of the xor
// and the pad is the top PAD_W bits of the content key.  The two keys come from
// cibpu_keygen with the domains IDX_DOMAIN and CONT_DOMAIN.
//
// Interface: secret, tid, pc in; idx, tag, pad out.  Purely combinational.
module cibpu_enc
  import cibpu_pkg::*;
#(
  parameter int unsigned IDX_W       = 13,
  parameter int unsigned TAG_W       = 12,
  parameter int unsigned PAD_W       = 2,
  parameter logic [7:0]  IDX_DOMAIN  = DOM_PHT_IDX,
  parameter logic [7:0]  CONT_DOMAIN = DOM_PHT_CONT
) (
  input  logic [SECRET_W-1:0] secret,
  input  logic [TID_W-1:0]    tid,
  input  logic [PC_W-1:0]     pc,
  output logic [IDX_W-1:0]    idx,
  output logic [TAG_W-1:0]    tag,
  output logic [PAD_W-1:0]    pad
);

  logic [KEY_W-1:0] key_i, key_c;
  logic [KEY_W-1:0] pc_ext;

  cibpu_keygen u_key_i (.secret, .tid, .pc, .domain(IDX_DOMAIN),  .key(key_i));
  cibpu_keygen u_key_c (.secret, .tid, .pc, .domain(CONT_DOMAIN), .key(key_c));

  assign pc_ext = KEY_W'(pc);
  assign idx = IDX_W'(pc_ext ^ key_i);
  assign tag = TAG_W'(pc_ext ^ key_c);
  assign pad = key_c[KEY_W-1 -: PAD_W];

endmodule
