// rptr_ref_pkg -- reference model of the pointer encoding and data linking,
// used by the testbenches. Written directly from the definitions (plain modulo
// arithmetic on integers), independently of the RTL encoder structure.
package rptr_ref_pkg;

  localparam int unsigned REF_MOD [5] = '{5, 7, 17, 31, 127};
  localparam int unsigned REF_OFF [5] = '{41, 44, 47, 52, 57};   // bit position in the 64-bit pointer
  localparam int unsigned REF_WID [5] = '{3, 3, 5, 5, 7};

  // full 64-bit encoded pointer of a 41-bit functional value
  function automatic logic [63:0] ref_encode(input logic [40:0] f);
    logic [63:0] p;
    longint unsigned v;
    v = longint'(f);
    p = {23'b0, f};
    for (int k = 0; k < 5; k++) begin
      longint unsigned r;
      r = v % longint'(REF_MOD[k]);
      for (int b = 0; b < int'(REF_WID[k]); b++) p[REF_OFF[k] + b] = r[b];
    end
    return p;
  endfunction

  // residue k of an encoded pointer
  function automatic int unsigned ref_res(input logic [63:0] p, input int k);
    int unsigned r;
    r = 0;
    for (int b = 0; b < int'(REF_WID[k]); b++) r[b] = p[REF_OFF[k] + b];
    return r;
  endfunction

  // encoded value of a signed integer (negative values: mathematical residues)
  function automatic logic [63:0] ref_encode_signed(input longint s);
    logic [63:0] p;
    p = {23'b0, 41'(s)};
    for (int k = 0; k < 5; k++) begin
      longint r;
      r = s % longint'(REF_MOD[k]);
      if (r < 0) r = r + longint'(REF_MOD[k]);
      for (int b = 0; b < int'(REF_WID[k]); b++) p[REF_OFF[k] + b] = r[b];
    end
    return p;
  endfunction

  // pad byte of one byte address: xor of the eight bytes of its encoded pointer
  function automatic logic [7:0] ref_pad(input logic [39:0] byte_addr, input logic mmio);
    logic [63:0] p;
    logic [7:0]  x;
    p = ref_encode({mmio, byte_addr});
    x = '0;
    for (int i = 0; i < 8; i++) x = x ^ p[8*i +: 8];
    return x;
  endfunction

  function automatic logic [63:0] rand64();
    return {$urandom(), $urandom()};
  endfunction

endpackage
