// rptr_pkg -- shared constants and types of the residue-pointer extension.
//
// An encoded pointer is one 64-bit register value:
//   [39:0]  p      plain byte address (1 TiB address space)
//   [40]    MMIO   tag: the pointer addresses a peripheral, data is not linked
//   [63:41] r      23 bits of redundancy, the residues of the 41-bit value {MMIO, p}
//                  modulo 5, 7, 17, 31 and 127, packed LSB first as
//                  r0=[43:41] r1=[46:44] r2=[51:47] r3=[56:52] r4=[63:57].
// The moduli set, the 40/1/23 split and the residue widths 3,3,5,5,7 follow the
// paper; the exact bit ranges of r3 and r4 are this design's reading (the widths
// of the text are used, see the README).
package rptr_pkg;

  localparam int unsigned XLEN      = 64;  // register / data word width
  localparam int unsigned ADDR_W    = 40;  // plain pointer width
  localparam int unsigned FUNC_W    = 41;  // functional value: pointer + MMIO bit
  localparam int unsigned RES_W     = 23;  // packed residue field
  localparam int unsigned NUM_RES   = 5;   // number of moduli
  localparam int unsigned IMM_W     = 12;  // instruction immediate
  localparam int unsigned MMIO_BIT  = 40;

  typedef int unsigned res_arr_t [NUM_RES];

  localparam res_arr_t MODULI  = '{5, 7, 17, 31, 127};
  localparam res_arr_t RES_WID = '{3, 3, 5, 5, 7};
  localparam res_arr_t RES_OFF = '{0, 3, 6, 11, 16};   // offset inside the 23-bit field

  // Operations of the residue ALU.
  typedef enum logic [2:0] {
    RES_NONE = 3'd0,
    RES_RENC = 3'd1,   // encode rs1
    RES_RDEC = 3'd2,   // decode rs1 (clear redundancy)
    RES_RADD = 3'd3,   // rs1 + rs2, both encoded
    RES_RSUB = 3'd4    // rs1 - rs2, both encoded
  } res_op_e;

  // Decoded operations accepted by the extension from the base core's decoder.
  typedef enum logic [3:0] {
    OP_NONE   = 4'd0,
    OP_RENC   = 4'd1,
    OP_RDEC   = 4'd2,
    OP_RADD   = 4'd3,
    OP_RADDI  = 4'd4,
    OP_RSUB   = 4'd5,
    OP_RLOAD  = 4'd6,  // rl{b,h,w,d}[u]ck: load through an encoded pointer, unlinked
    OP_RSTORE = 4'd7,  // rs{b,h,w,d}ck:    store through an encoded pointer, linked
    OP_LOAD   = 4'd8,  // original RISC-V load, plain address, no linking
    OP_STORE  = 4'd9   // original RISC-V store
  } rptr_op_e;

  // Access size, as funct3[1:0] of RISC-V loads and stores.
  typedef enum logic [1:0] {
    SZ_B = 2'd0,
    SZ_H = 2'd1,
    SZ_W = 2'd2,
    SZ_D = 2'd3
  } mem_size_e;

  // (2^i) mod m, used to build the weighted-sum residue encoders.
  function automatic int unsigned pow2_mod(input int unsigned i, input int unsigned m);
    int unsigned r;
    r = 1 % m;
    for (int unsigned k = 0; k < i; k++) r = (r * 2) % m;
    return r;
  endfunction

endpackage
