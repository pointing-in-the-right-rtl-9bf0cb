// tb_ptr_reduce -- checks the per-lane pads and the xor linking against the
// reference, the MMIO and disable bypasses, that linking twice restores the
// data, and that data linked at one address comes back wrong at another.
module tb_ptr_reduce;
  import rptr_ref_pkg::*;

  logic [36:0] waddr;
  logic        mmio, en;
  logic [63:0] din, dout, pads;
  int checks = 0, failures = 0;

  ptr_reduce dut (.word_addr_i(waddr), .mmio_i(mmio), .link_en_i(en),
                  .data_i(din), .data_o(dout), .pads_o(pads));

  task automatic chk(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h exp=%h", what, got, exp);
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
      logic [63:0] exp, d, linked;
      logic [36:0] a;
      a = 37'(rand64());
      d = rand64();
      for (int j = 0; j < 8; j++) exp[8*j +: 8] = d[8*j +: 8] ^ ref_pad({a, 3'(j)}, 1'b0);
      waddr = a; mmio = 0; en = 1; din = d;
      #1;
      chk("link", dout, exp);
      linked = dout;
      din = linked;
      #1;
      chk("unlink", dout, d);
      // wrong address: neighbouring word
      waddr = a ^ 37'(1 << $urandom_range(36, 0));
      #1;
      checks++;
      if (dout == d) begin
        failures++;
        $display("FAIL wrong address unlinked to the original data");
      end
      // MMIO pointer and disabled linking leave data untouched
      waddr = a; mmio = 1; en = 1; din = d;
      #1;
      chk("mmio", dout, d);
      mmio = 0; en = 0;
      #1;
      chk("disabled", dout, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
