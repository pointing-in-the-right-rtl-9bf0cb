// res_alu -- residue ALU of the execute stage ("ResALU").
//
// Operates on multi-residue encoded 64-bit values {r[22:0], f[40:0]}:
//   RES_RENC  result = {enc(rs1.f), rs1.f}       encode (idempotent: rs1[63:41] ignored)
//   RES_RDEC  result = {23'b0, rs1.f}            decode, pure rewiring
//   RES_RADD  result = {(r1 + r2) mod m, f1 + f2}
//   RES_RSUB  result = {(r1 - r2) mod m, f1 - f2}
// Structure as in the paper: one 41-bit functional adder, one residue adder per
// modulus followed by a modular reduction, and one shared encoder. A mux
// (isRenc) feeds either the adder sum or rs1 into the encoder; a second mux
// (isRenc) picks the encoder output or the reduced residue sums as the result
// residues. After an add or subtract the encoder re-encodes the sum and the
// comparator checks it against the independently computed residues, one error
// bit per modulus (res_error_o, 5 bits). A faulty operand, a fault in either
// adder or a fault in the reduction makes at least one bit fire.
// Subtraction reuses the adders: the functional operand is complemented with a
// carry-in and each residue of rs2 is negated modulo m; this sharing scheme,
// and gating res_error_o to add/subtract, are this design's choices.
//
// Purely combinational; the pipeline registers are outside.
module res_alu
  import rptr_pkg::*;
(
  input  res_op_e             op_i,
  input  logic [XLEN-1:0]     rs1_i,
  input  logic [XLEN-1:0]     rs2_i,
  output logic [XLEN-1:0]     result_o,
  output logic [NUM_RES-1:0]  res_error_o
);

  logic              is_renc, is_sub, is_arith;
  logic [FUNC_W-1:0] f1, f2, sum;
  logic [RES_W-1:0]  r1, r2, res_sum, enc_res;
  logic [FUNC_W-1:0] enc_in;

  assign is_renc  = (op_i == RES_RENC);
  assign is_sub   = (op_i == RES_RSUB);
  assign is_arith = (op_i == RES_RADD) || (op_i == RES_RSUB);

  assign f1 = rs1_i[FUNC_W-1:0];
  assign f2 = rs2_i[FUNC_W-1:0];
  assign r1 = rs1_i[XLEN-1:FUNC_W];
  assign r2 = rs2_i[XLEN-1:FUNC_W];

  // 41-bit functional adder
  assign sum = f1 + (is_sub ? ~f2 : f2) + FUNC_W'(is_sub);

  // residue adders with modular reduction
  for (genvar k = 0; k < NUM_RES; k++) begin : g_res
    localparam int unsigned M   = MODULI[k];
    localparam int unsigned WD  = RES_WID[k];
    localparam int unsigned OFF = RES_OFF[k];
    logic [8:0] a, b, bn, s;
    always_comb begin
      a  = 9'(r1[OFF +: WD]) % 9'(M);
      b  = 9'(r2[OFF +: WD]) % 9'(M);
      bn = (is_sub && b != '0) ? 9'(M) - b : b;
      s  = (a + bn) % 9'(M);
    end
    assign res_sum[OFF +: WD] = s[WD-1:0];
  end

  // shared encoder
  assign enc_in = is_renc ? f1 : sum;

  res_encoder #(.W(FUNC_W)) u_enc (
    .func_i (enc_in),
    .res_o  (enc_res)
  );

  // comparator: one error bit per modulus
  for (genvar k = 0; k < NUM_RES; k++) begin : g_cmp
    localparam int unsigned WD  = RES_WID[k];
    localparam int unsigned OFF = RES_OFF[k];
    assign res_error_o[k] = is_arith && (enc_res[OFF +: WD] != res_sum[OFF +: WD]);
  end

  always_comb begin
    unique case (op_i)
      RES_RENC:          result_o = {enc_res, f1};
      RES_RDEC:          result_o = {{RES_W{1'b0}}, f1};
      RES_RADD, RES_RSUB: result_o = {res_sum, sum};
      default:           result_o = '0;
    endcase
  end

endmodule
