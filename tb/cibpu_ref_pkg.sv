// cibpu_ref_pkg: testbench reference model of the key derivation and the
// per-skew encryption (index = PC xor index key, tag = PC xor content key,
// pad = top bits of the content key).  Written independently of the RTL as a
// four-word array schedule; tb_cibpu_keygen ties both to known answers.
package cibpu_ref_pkg;

  function automatic logic [63:0] rl(input logic [63:0] x, input int n);
    return (x << n) | (x >> (64 - n));
  endfunction

  function automatic void ref_round(ref logic [63:0] v [4]);
    v[0] += v[1]; v[1] = rl(v[1], 13) ^ v[0]; v[0] = rl(v[0], 32);
    v[2] += v[3]; v[3] = rl(v[3], 16) ^ v[2];
    v[0] += v[3]; v[3] = rl(v[3], 21) ^ v[0];
    v[2] += v[1]; v[1] = rl(v[1], 17) ^ v[2]; v[2] = rl(v[2], 32);
  endfunction

  function automatic logic [63:0] ref_key(input logic [127:0] secret, input logic [15:0] tid,
                                          input logic [47:0] pc, input logic [7:0] dom);
    logic [63:0] v [4];
    logic [63:0] m;
    m = {tid, pc};
    v[0] = secret[63:0]   ^ 64'h736f6d6570736575;
    v[1] = secret[127:64] ^ 64'h646f72616e646f6d;
    v[2] = secret[63:0]   ^ 64'h6c7967656e657261 ^ 64'(dom);
    v[3] = secret[127:64] ^ 64'h7465646279746573 ^ m;
    ref_round(v); ref_round(v);
    v[0] ^= m; v[2] ^= {dom, 56'hff};
    ref_round(v); ref_round(v);
    return v[0] ^ v[1] ^ v[2] ^ v[3];
  endfunction

  // Encrypted index of `bits` bits for key domain `dom`.
  function automatic logic [63:0] ref_idx(input logic [127:0] s, input logic [15:0] t,
                                          input logic [47:0] pc, input logic [7:0] dom, input int bits);
    return (64'(pc) ^ ref_key(s, t, pc, dom)) & ((64'd1 << bits) - 1);
  endfunction

  // Encrypted tag of `bits` bits for content domain `dom`.
  function automatic logic [63:0] ref_tag(input logic [127:0] s, input logic [15:0] t,
                                          input logic [47:0] pc, input logic [7:0] dom, input int bits);
    return (64'(pc) ^ ref_key(s, t, pc, dom)) & ((64'd1 << bits) - 1);
  endfunction

  // Content pad: the top `bits` bits of the content key.
  function automatic logic [63:0] ref_pad(input logic [127:0] s, input logic [15:0] t,
                                          input logic [47:0] pc, input logic [7:0] dom, input int bits);
    return ref_key(s, t, pc, dom) >> (64 - bits);
  endfunction

endpackage
