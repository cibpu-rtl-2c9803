// cibpu_pkg: widths and key-domain constants shared by the conflict-invisible
// branch prediction unit.
//
// Widths that follow the paper: a 48-bit branch virtual address (the paper's
// BTB target is 48 bits and it speaks of "the 48 bits in a branch virtual
// address").  Widths that are this design's own choice: a 16-bit thread /
// address-space ID, a 128-bit device secret and 64-bit derived keys.
//
// Every key is derived from (secret, thread ID, PC, domain).  The domain byte
// separates the keys of the different tables and skews so that no two of them
// coincide: bit 7 selects the BTB (1) or PHT (0), bit 4 selects a content key
// (1) or an index key (0) and the low bits give the skew number.
package cibpu_pkg;

  localparam int unsigned PC_W     = 48;
  localparam int unsigned TID_W    = 16;
  localparam int unsigned SECRET_W = 128;
  localparam int unsigned KEY_W    = 64;

  // Key domains (index key = Enc.I, content key = Enc.C / Dec.C).
  localparam logic [7:0] DOM_PHT_IDX  = 8'h00;  // + skew number
  localparam logic [7:0] DOM_PHT_CONT = 8'h10;  // + skew number
  localparam logic [7:0] DOM_BTB_IDX  = 8'h80;  // + skew number
  localparam logic [7:0] DOM_BTB_CONT = 8'h90;

  // One SipHash-style add-rotate-xor round on a four-word state.
  typedef struct packed {
    logic [63:0] v0;
    logic [63:0] v1;
    logic [63:0] v2;
    logic [63:0] v3;
  } sip_state_t;

  function automatic logic [63:0] rotl64(input logic [63:0] x, input int unsigned n);
    return (x << n) | (x >> (64 - n));
  endfunction

  function automatic sip_state_t sip_round(input sip_state_t s);
    sip_state_t r;
    r = s;
    r.v0 = r.v0 + r.v1; r.v1 = rotl64(r.v1, 13); r.v1 = r.v1 ^ r.v0; r.v0 = rotl64(r.v0, 32);
    r.v2 = r.v2 + r.v3; r.v3 = rotl64(r.v3, 16); r.v3 = r.v3 ^ r.v2;
    r.v0 = r.v0 + r.v3; r.v3 = rotl64(r.v3, 21); r.v3 = r.v3 ^ r.v0;
    r.v2 = r.v2 + r.v1; r.v1 = rotl64(r.v1, 17); r.v1 = r.v1 ^ r.v2; r.v2 = rotl64(r.v2, 32);
    return r;
  endfunction

  // Number of set bits in a valid-bit vector of up to 32 ways.
  function automatic logic [5:0] popcount32(input logic [31:0] v);
    logic [5:0] n;
    n = '0;
    for (int i = 0; i < 32; i++) n = n + 6'(v[i]);
    return n;
  endfunction

endpackage
