// tb_res_alu -- checks renc, rdec, radd and rsub of the residue ALU against
// the reference encoding, idempotence of renc/rdec, a silent error output for
// correct operands, and detection of single bit flips in either operand.
module tb_res_alu;
  import rptr_pkg::*;
  import rptr_ref_pkg::*;

  res_op_e     op;
  logic [63:0] rs1, rs2, res;
  logic [4:0]  err;
  int checks = 0, failures = 0;
  int detected = 0;

  res_alu dut (.op_i(op), .rs1_i(rs1), .rs2_i(rs2), .result_o(res), .res_error_o(err));

  task automatic run(input res_op_e o, input logic [63:0] a, input logic [63:0] b);
    op = o; rs1 = a; rs2 = b;
    #1;
  endtask

  task automatic expect_eq(input string what, input logic [63:0] got, input logic [63:0] exp,
                           input logic [4:0] got_err, input logic [4:0] exp_err);
    checks++;
    if (got !== exp || got_err !== exp_err) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h/%b exp=%h/%b", what, got, got_err, exp, exp_err);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      logic [40:0] f1, f2, lo, hi;
      logic [63:0] p1, p2, e;
      f1 = 41'(rand64());
      f2 = 41'(rand64());
      p1 = ref_encode(f1);
      p2 = ref_encode(f2);
      // renc of a raw value with garbage in the upper bits; then idempotence
      run(RES_RENC, {23'(rand64()), f1}, '0);
      expect_eq("renc", res, p1, err, '0);
      e = res;
      run(RES_RENC, e, '0);
      expect_eq("renc idem", res, p1, err, '0);
      // rdec and idempotence
      run(RES_RDEC, p1, '0);
      expect_eq("rdec", res, {23'b0, f1}, err, '0);
      run(RES_RDEC, res, '0);
      expect_eq("rdec idem", res, {23'b0, f1}, err, '0);
      // radd: small offset so the sum does not wrap past 2^41
      f2 = 41'(rand64() & 64'hff_ffff);
      lo = f1 >> 1;
      p1 = ref_encode(lo);
      p2 = ref_encode(f2);
      run(RES_RADD, p1, p2);
      expect_eq("radd", res, ref_encode(lo + f2), err, '0);
      // rsub with rs1 >= rs2
      hi = (f1 > f2) ? f1 : f2;
      lo = (f1 > f2) ? f2 : f1;
      run(RES_RSUB, ref_encode(hi), ref_encode(lo));
      expect_eq("rsub", res, ref_encode(hi - lo), err, '0);
      // raddi style: add an encoded negative immediate
      begin
        int imm;
        imm = -int'($urandom_range(2048, 1));
        hi  = 41'(rand64() | 64'h1000);
        run(RES_RADD, ref_encode(hi), ref_encode_signed(longint'(imm)));
        expect_eq("raddi neg", res, ref_encode(hi - 41'(-imm)), err, '0);
      end
      // fault: flip one bit of rs1 (functional or residue part); must be flagged
      begin
        int b;
        logic [63:0] bad;
        b = $urandom_range(63, 0);
        bad = ref_encode(f1 >> 1);
        bad[b] = ~bad[b];
        run(RES_RADD, bad, ref_encode(41'(16)));
        checks++;
        if (err == '0) begin
          failures++;
          $display("FAIL undetected flip of bit %0d", b);
        end else detected++;
        // the same fault in rs2
        run(RES_RSUB, ref_encode(41'h1_0000_0000), bad);
        checks++;
        if (err == '0) begin
          failures++;
          $display("FAIL undetected flip of bit %0d in rs2", b);
        end
      end
    end
    // up to four flipped bits anywhere in an encoded pointer (distance-5 code)
    for (int i = 0; i < 3000; i++) begin
      logic [63:0] bad;
      int nf;
      bad = ref_encode(41'(rand64()) >> 1);
      nf  = $urandom_range(4, 2);
      begin
        logic [63:0] mask;
        mask = '0;
        while ($countones(mask) < nf) mask[$urandom_range(63, 0)] = 1'b1;
        bad = bad ^ mask;
      end
      run(RES_RADD, bad, ref_encode(41'(8)));
      checks++;
      if (err == '0) begin
        failures++;
        $display("FAIL undetected %0d-bit fault", nf);
      end else detected++;
    end
    // error output stays silent for renc/rdec even with inconsistent operands
    run(RES_RENC, 64'hffff_ffff_ffff_ffff, 64'h1234);
    expect_eq("renc no err", res, ref_encode(41'h1ff_ffff_ffff), err, '0);
    $display("faults detected: %0d", detected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
