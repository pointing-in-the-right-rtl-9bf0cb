// tb_imm_res_encoder -- exhaustive check of the 12-bit immediate encoder:
// functional part sign-extended, residues those of the signed value.
module tb_imm_res_encoder;
  import rptr_ref_pkg::*;

  logic [11:0] imm;
  logic [63:0] enc;
  int checks = 0, failures = 0;

  imm_res_encoder dut (.imm_i(imm), .enc_o(enc));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -2048; i < 2048; i++) begin
      logic [63:0] exp;
      imm = 12'(i);
      #1;
      exp = ref_encode_signed(longint'(i));
      checks++;
      if (enc !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL imm=%0d enc=%h exp=%h", i, enc, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
