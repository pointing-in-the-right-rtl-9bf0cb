// imm_res_encoder -- 12-bit immediate residue encoder ("ResEnc" in decode).
//
// Turns the signed 12-bit immediate of raddi and of the protected loads and
// stores into an encoded 64-bit operand, so that the residue ALU can add it to
// an encoded pointer like any other encoded value:
//   enc_o[40:0]  = immediate sign-extended to 41 bits (two's complement)
//   enc_o[63:41] = residues of the signed integer value of the immediate.
// For a negative immediate the residue is the mathematical one, m - (|imm| mod m)
// (or 0), so that pointer + imm keeps its residues consistent whenever the
// result does not wrap below zero. The paper places a 12-bit residue encoder in
// the decode stage; the handling of the sign is this design's choice.
//
// Combinational; the magnitude is encoded by a 12-bit res_encoder and each
// residue is negated modulo m when the immediate is negative.
module imm_res_encoder
  import rptr_pkg::*;
(
  input  logic [IMM_W-1:0] imm_i,
  output logic [XLEN-1:0]  enc_o
);

  logic             neg;
  logic [IMM_W-1:0] mag;      // |imm|; 2048 still fits 12 unsigned bits
  logic [RES_W-1:0] mag_res;
  logic [RES_W-1:0] res;

  assign neg = imm_i[IMM_W-1];
  assign mag = neg ? (~imm_i + 1'b1) : imm_i;

  res_encoder #(.W(IMM_W)) u_enc (
    .func_i (mag),
    .res_o  (mag_res)
  );

  for (genvar k = 0; k < NUM_RES; k++) begin : g_neg
    localparam int unsigned M   = MODULI[k];
    localparam int unsigned WD  = RES_WID[k];
    localparam int unsigned OFF = RES_OFF[k];
    logic [WD-1:0] r;
    assign r = mag_res[OFF +: WD];
    assign res[OFF +: WD] = (neg && r != '0) ? WD'(M - r) : r;
  end

  assign enc_o = {res, {(FUNC_W-IMM_W){imm_i[IMM_W-1]}}, imm_i};

endmodule
