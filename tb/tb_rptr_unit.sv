// tb_rptr_unit -- end-to-end test of the residue-pointer extension at its
// default (and only) size. The testbench plays the base core: it issues decoded
// operations with their register operands, and checks every write-back, in
// order, against a reference computed from the encoding definitions and a
// shadow of the memory contents. Phases:
//   1. residue instructions (renc, rdec, radd, raddi, rsub), back to back;
//      latency and one-per-cycle throughput are checked
//   2. random protected loads/stores of every size through encoded pointers with
//      immediate offsets, MMIO pointers and plain RISC-V accesses, under random
//      bus stalls
//   3. fault cases: a tampered pointer (ResError, alarm, no bus transfer), an
//      address-bus fault on a linked load (wrong data)
//   4. misaligned protected accesses that cross a 64-bit word (split transfers)
// Every mechanism is counted and one that never happened counts as a failure.
module tb_rptr_unit;
  import rptr_pkg::*;
  import rptr_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            id_valid = 0, id_ready;
  rptr_op_e        id_op = OP_NONE;
  logic [4:0]      id_rd = '0;
  logic [63:0]     id_rs1 = '0, id_rs2 = '0;
  logic [11:0]     id_imm = '0;
  mem_size_e       id_size = SZ_D;
  logic            id_uns = 0;
  logic            wb_valid, wb_we, wb_err, alarm, split;
  logic [4:0]      wb_rd;
  logic [63:0]     wb_data;
  logic [4:0]      res_error;
  logic            dreq, dgnt, drvalid, dwe;
  logic [63:0]     daddr, dwdata, drdata;
  logic [7:0]      dbe;
  logic            stall_en = 0;
  logic [63:0]     addr_fault = '0;
  int              transfers, stalls;

  rptr_unit dut (
    .clk_i(clk), .rst_ni(rst_n),
    .id_valid_i(id_valid), .id_ready_o(id_ready), .id_op_i(id_op), .id_rd_i(id_rd),
    .id_rs1_i(id_rs1), .id_rs2_i(id_rs2), .id_imm_i(id_imm), .id_size_i(id_size),
    .id_unsigned_i(id_uns),
    .wb_valid_o(wb_valid), .wb_we_o(wb_we), .wb_rd_o(wb_rd), .wb_data_o(wb_data), .wb_err_o(wb_err),
    .res_error_o(res_error), .alarm_o(alarm), .split_o(split),
    .data_req_o(dreq), .data_gnt_i(dgnt), .data_rvalid_i(drvalid), .data_addr_o(daddr),
    .data_we_o(dwe), .data_be_o(dbe), .data_wdata_o(dwdata), .data_rdata_i(drdata)
  );

  tb_data_mem mem (
    .clk_i(clk), .stall_en_i(stall_en), .addr_fault_i(addr_fault),
    .data_req_i(dreq), .data_gnt_o(dgnt), .data_rvalid_o(drvalid), .data_addr_i(daddr),
    .data_we_i(dwe), .data_be_i(dbe), .data_wdata_i(dwdata), .data_rdata_o(drdata),
    .transfers_o(transfers), .stalls_o(stalls)
  );

  int checks = 0, failures = 0;

  // mechanism counters
  int n_renc, n_rdec, n_radd, n_raddi, n_rsub, n_lstore, n_lload, n_mmio, n_plain;
  int n_signext, n_reserr, n_addrfault, n_cross, n_b2b;

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL %s", s);
  endtask

  // ------------------------------------------------------------------ scoreboard
  typedef struct {
    logic        we;
    logic [4:0]  rd;
    logic [63:0] data;
    logic        err;
    logic        cmp;        // compare data
    logic        expect_bad; // data must differ from 'data' (address fault)
  } exp_t;

  exp_t exp_q[$];
  int   retired = 0;
  int   cycle = 0;
  int   last_wb_cycle = -10;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && split) n_cross++;
    if (rst_n && wb_valid) begin
      exp_t e;
      retired++;
      if (last_wb_cycle == cycle - 1) n_b2b++;
      last_wb_cycle = cycle;
      checks++;
      if (exp_q.size() == 0) fail("write-back with nothing expected");
      else begin
        e = exp_q.pop_front();
        if (wb_we !== e.we || wb_err !== e.err || (e.we && wb_rd !== e.rd))
          fail($sformatf("wb flags we=%0d err=%0d rd=%0d, expected %0d %0d %0d", wb_we, wb_err, wb_rd, e.we, e.err, e.rd));
        else if (e.cmp && wb_data !== e.data)
          fail($sformatf("wb data %h expected %h", wb_data, e.data));
        else if (e.expect_bad) begin
          if (wb_data == e.data) fail("address fault not visible");
          else n_addrfault++;
        end
      end
    end
  end

  // ------------------------------------------------------------------ driver
  task automatic issue(input rptr_op_e op, input logic [4:0] rd, input logic [63:0] rs1,
                       input logic [63:0] rs2, input logic [11:0] imm,
                       input mem_size_e sz, input logic uns);
    logic ok;
    id_valid = 1; id_op = op; id_rd = rd; id_rs1 = rs1; id_rs2 = rs2; id_imm = imm;
    id_size = sz; id_uns = uns;
    do begin
      @(negedge clk); ok = id_ready;
      @(posedge clk); #1;
    end while (!ok);
    id_valid = 0; id_op = OP_NONE;
  endtask

  task automatic expect_res(input logic [4:0] rd, input logic [63:0] data);
    exp_q.push_back('{we: 1, rd: rd, data: data, err: 0, cmp: 1, expect_bad: 0});
  endtask

  task automatic drain();
    int guard;
    guard = 0;
    while (exp_q.size() != 0 && guard < 1000) begin
      @(posedge clk); #1; guard++;
    end
    if (guard >= 1000) fail("pipeline did not drain");
  endtask

  // ------------------------------------------------------------------ memory shadow
  logic [7:0] shadow [logic [40:0]];

  function automatic logic [63:0] extend(input logic [63:0] v, input mem_size_e sz, input logic uns);
    int n;
    n = 8 << sz;
    if (n == 64) return v;
    v = v & ((64'd1 << n) - 1);
    if (!uns && v[n-1]) v = v | ~((64'd1 << n) - 1);
    return v;
  endfunction

  localparam logic [40:0] LINK_BASE  = 41'h0_10_0000_0000;
  localparam logic [40:0] MMIO_BASE  = 41'h1_00_0001_0000;
  localparam logic [40:0] PLAIN_BASE = 41'h0_00_0002_0000;
  localparam int          WORDS      = 16;

  // memory access through the extension; target address t, the pointer is built
  // as an encoded base and an immediate offset (or plain base for plain accesses)
  task automatic mem_op(input logic we, input logic prot, input logic [40:0] t,
                        input mem_size_e sz, input logic uns, input logic [63:0] wd,
                        input logic [4:0] rd);
    int          imm;
    logic [63:0] base;
    int          n;
    logic [63:0] v;
    n   = 1 << sz;
    imm = int'($urandom_range(200, 0)) - 100;
    if (prot) base = ref_encode(t - 41'(imm));
    else      base = {23'b0, t - 41'(imm)};
    if (we) begin
      issue(prot ? OP_RSTORE : OP_STORE, rd, base, wd, 12'(imm), sz, 0);
      for (int j = 0; j < n; j++) shadow[t + 41'(j)] = wd[8*j +: 8];
      exp_q.push_back('{we: 0, rd: rd, data: '0, err: 0, cmp: 0, expect_bad: 0});
    end else begin
      v = '0;
      for (int j = 0; j < n; j++) v[8*j +: 8] = shadow[t + 41'(j)];
      v = extend(v, sz, uns);
      if (!uns && sz != SZ_D && v[63]) n_signext++;
      issue(prot ? OP_RLOAD : OP_LOAD, rd, base, '0, 12'(imm), sz, uns);
      exp_q.push_back('{we: 1, rd: rd, data: v, err: 0, cmp: 1, expect_bad: 0});
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // ---------------------------------------------------------- 1. residue ops
    // latency: accepted at one edge, written back at the second edge after it
    begin
      int c0;
      logic [40:0] f;
      f = 41'h0_12_3456_789a;
      issue(OP_RENC, 5'd1, {23'h7f_ffff, f}, '0, '0, SZ_D, 0);
      c0 = cycle;
      expect_res(5'd1, ref_encode(f));
      n_renc++;
      drain();
      checks++;
      if (last_wb_cycle - c0 != 1) fail($sformatf("renc latency %0d", last_wb_cycle - c0 + 1));
    end
    begin
      int b2b0, r0, c0;
      b2b0 = n_b2b; r0 = retired;
      c0 = cycle;
      for (int i = 0; i < 400; i++) begin
        logic [40:0] f1, f2;
        int          k, imm;
        logic [4:0]  rd;
        f1 = 41'(rand64()) | 41'h800;
        f2 = 41'(rand64());
        rd = 5'($urandom_range(31, 1));
        k  = $urandom_range(4, 0);
        case (k)
          0: begin issue(OP_RENC, rd, {23'(rand64()), f1}, rand64(), '0, SZ_D, 0);
                   expect_res(rd, ref_encode(f1)); n_renc++; end
          1: begin issue(OP_RDEC, rd, ref_encode(f1), rand64(), '0, SZ_D, 0);
                   expect_res(rd, {23'b0, f1}); n_rdec++; end
          2: begin f1 = f1 >> 1; f2 = f2 >> 1;
                   issue(OP_RADD, rd, ref_encode(f1), ref_encode(f2), '0, SZ_D, 0);
                   expect_res(rd, ref_encode(f1 + f2)); n_radd++; end
          3: begin imm = int'($urandom_range(4095, 0)) - 2048;
                   issue(OP_RADDI, rd, ref_encode(f1), rand64(), 12'(imm), SZ_D, 0);
                   expect_res(rd, ref_encode(f1 + 41'(imm))); n_raddi++; end
          default: begin
                   if (f1 < f2) begin logic [40:0] t; t = f1; f1 = f2; f2 = t; end
                   issue(OP_RSUB, rd, ref_encode(f1), ref_encode(f2), '0, SZ_D, 0);
                   expect_res(rd, ref_encode(f1 - f2)); n_rsub++; end
        endcase
      end
      drain();
      checks++;
      if (retired - r0 != 400) fail("residue ops lost");
      checks++;
      if (n_b2b - b2b0 < 399) fail($sformatf("residue ops not one per cycle (%0d back-to-back)", n_b2b - b2b0));
      checks++;
      if (last_wb_cycle - c0 > 402) fail($sformatf("400 residue ops took %0d cycles", last_wb_cycle - c0));
    end

    // ---------------------------------------------------------- 2. memory
    for (int w = 0; w < WORDS; w++) begin
      mem_op(1, 1, LINK_BASE + 41'(8*w), SZ_D, 0, rand64(), 5'd0);
      mem_op(1, 1, MMIO_BASE + 41'(8*w), SZ_D, 0, rand64(), 5'd0);
      mem_op(1, 0, PLAIN_BASE + 41'(8*w), SZ_D, 0, rand64(), 5'd0);
    end
    n_lstore += WORDS; n_mmio += 2*WORDS; n_plain += WORDS;
    // the linked image differs from the data, the MMIO image does not
    drain();
    begin
      logic [63:0] img, d;
      for (int j = 0; j < 8; j++) d[8*j +: 8] = shadow[LINK_BASE + 41'(j)];
      img = mem.peek({23'b0, LINK_BASE});
      checks++;
      for (int j = 0; j < 8; j++)
        if (img[8*j +: 8] !== (d[8*j +: 8] ^ ref_pad(LINK_BASE[39:0] + 40'(j), 1'b0))) begin
          fail("linked memory image");
          break;
        end
      for (int j = 0; j < 8; j++) d[8*j +: 8] = shadow[MMIO_BASE + 41'(j)];
      img = mem.peek({23'b0, MMIO_BASE});
      checks++;
      if (img !== d) fail("MMIO memory image is not plain data");
    end
    stall_en = 1;
    for (int i = 0; i < 600; i++) begin
      int          region;
      mem_size_e   sz;
      logic [40:0] t;
      logic        we, uns;
      region = $urandom_range(2, 0);
      sz  = mem_size_e'($urandom_range(3, 0));
      t   = (region == 0) ? LINK_BASE : (region == 1) ? MMIO_BASE : PLAIN_BASE;
      t   = t + 41'($urandom_range(8*WORDS - 1, 0));
      t   = t & ~41'((1 << sz) - 1);
      we  = 1'($urandom_range(2, 0) == 0);
      uns = 1'($urandom_range(1, 0));
      mem_op(we, region != 2, t, sz, uns, rand64(), 5'($urandom_range(31, 1)));
      case (region)
        0: if (we) n_lstore++; else n_lload++;
        1: n_mmio++;
        default: n_plain++;
      endcase
    end
    drain();
    stall_en = 0;

    // ---------------------------------------------------------- 3. faults
    // tampered pointer: one flipped bit; must raise ResError, retire with an
    // error, set the alarm and never reach the bus
    begin
      logic [63:0] p;
      int          t0;
      p = ref_encode(LINK_BASE + 41'(64));
      p[$urandom_range(40, 3)] ^= 1'b1;
      t0 = transfers;
      exp_q.push_back('{we: 0, rd: 5'd7, data: '0, err: 1, cmp: 0, expect_bad: 0});
      fork
        issue(OP_RLOAD, 5'd7, p, '0, 12'd0, SZ_D, 0);
        begin
          @(posedge clk);
          repeat (2) begin
            @(negedge clk);
            if (res_error != '0) n_reserr++;
          end
        end
      join
      drain();
      repeat (3) @(posedge clk);
      #1;
      checks++;
      if (transfers != t0) fail("tampered pointer reached the bus");
      checks++;
      if (!alarm) fail("alarm not set");
    end
    // address-bus fault on a linked load: the memory returns the neighbouring
    // word, unlinking with the wrong address corrupts the value
    begin
      logic [63:0] v;
      for (int j = 0; j < 8; j++) v[8*j +: 8] = shadow[LINK_BASE + 41'(j)];
      addr_fault = 64'h8;
      issue(OP_RLOAD, 5'd9, ref_encode(LINK_BASE), '0, 12'd0, SZ_D, 0);
      exp_q.push_back('{we: 1, rd: 5'd9, data: v, err: 0, cmp: 0, expect_bad: 1});
      drain();
      addr_fault = '0;
    end
    // ---------------------------------------------------------- 4. misaligned
    for (int i = 0; i < 100; i++) begin
      mem_size_e   sz;
      logic [40:0] t;
      sz = mem_size_e'($urandom_range(3, 1));
      t  = LINK_BASE + 41'($urandom_range(8*WORDS - 9, 0));
      if (32'(t[2:0]) + (1 << sz) <= 8) t[2:0] = 3'd7;
      mem_op(1'($urandom_range(1, 0)), 1, t, sz, 1'($urandom_range(1, 0)), rand64(),
             5'($urandom_range(31, 1)));
    end
    drain();

    // ---------------------------------------------------------- coverage
    begin
      int cnt [string];
      cnt["renc"] = n_renc; cnt["rdec"] = n_rdec; cnt["radd"] = n_radd;
      cnt["raddi"] = n_raddi; cnt["rsub"] = n_rsub; cnt["linked store"] = n_lstore;
      cnt["linked load"] = n_lload; cnt["MMIO access"] = n_mmio; cnt["plain access"] = n_plain;
      cnt["sign extension"] = n_signext; cnt["ResError"] = n_reserr;
      cnt["address fault seen"] = n_addrfault; cnt["split access"] = n_cross;
      cnt["back-to-back retire"] = n_b2b; cnt["bus stall"] = stalls;
      foreach (cnt[k]) begin
        $display("  %-20s %0d", k, cnt[k]);
        checks++;
        if (cnt[k] == 0) fail($sformatf("mechanism never exercised: %s", k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
