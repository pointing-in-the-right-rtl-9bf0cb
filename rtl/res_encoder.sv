// res_encoder -- multi-residue encoder ("Res Encode").
//
// Computes the residues of the unsigned value func_i modulo 5, 7, 17, 31 and 127
// and packs them into the 23-bit redundancy field {r4, r3, r2, r1, r0}
// (r0 in bits 2:0). The full encoded pointer is {res_o, func_i} for W = 41.
//
// How: bit i of the input contributes (2^i mod m) to residue m. For each
// modulus the constants of all set bits are summed (at most 41*126, 13 bits)
// and the small sum is reduced once by a constant modulo. This is the plainest
// structure that computes the residues; the paper names a specialised encoder
// algorithm from the literature whose details it does not give, so the
// internal structure here is this design's own.
//
// Purely combinational, no clock. Parameter W lets the same encoder serve
// narrower inputs (the 12-bit immediate encoder uses W = 12).
module res_encoder
  import rptr_pkg::*;
#(
  parameter int unsigned W = FUNC_W
) (
  input  logic [W-1:0]     func_i,
  output logic [RES_W-1:0] res_o
);

  localparam int unsigned SUM_W = 13;

  typedef logic [W-1:0][6:0] weight_t;

  function automatic weight_t weights(input int unsigned m);
    weight_t w;
    for (int unsigned i = 0; i < W; i++) w[i] = 7'(pow2_mod(i, m));
    return w;
  endfunction

  for (genvar k = 0; k < NUM_RES; k++) begin : g_mod
    localparam int unsigned M   = MODULI[k];
    localparam int unsigned WD  = RES_WID[k];
    localparam int unsigned OFF = RES_OFF[k];
    localparam weight_t     WT  = weights(M);

    logic [SUM_W-1:0] sum;
    logic [SUM_W-1:0] red;

    always_comb begin
      sum = '0;
      for (int unsigned i = 0; i < W; i++) begin
        if (func_i[i]) sum = sum + SUM_W'(WT[i]);
      end
      red = sum % SUM_W'(M);
    end

    assign res_o[OFF +: WD] = red[WD-1:0];
  end

endmodule
