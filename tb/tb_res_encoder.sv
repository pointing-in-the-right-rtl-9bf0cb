// tb_res_encoder -- checks the 41-bit residue encoder against plain modulo
// arithmetic on corner values and random inputs.
module tb_res_encoder;
  import rptr_ref_pkg::*;

  logic [40:0] func;
  logic [22:0] res;
  int checks = 0, failures = 0;

  res_encoder dut (.func_i(func), .res_o(res));

  task automatic check(input logic [40:0] f);
    logic [63:0] exp;
    func = f;
    #1;
    exp = ref_encode(f);
    checks++;
    if (res !== exp[63:41]) begin
      failures++;
      $display("FAIL f=%h res=%h exp=%h", f, res, exp[63:41]);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check('0);
    check('1);
    check(41'h100_0000_0000);
    check(41'h0ff_ffff_ffff);
    for (int i = 0; i < 41; i++) check(41'(1) << i);
    for (int i = 0; i < 2000; i++) check({$urandom(), $urandom()});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
