// tb_kernel_fft -- runs the memory and pointer side of an in-place radix-2
// fixed-point FFT through the residue-pointer extension. The complex samples
// (16-bit real, 16-bit imaginary) live in linked memory at an odd base address,
// so some halfwords straddle two 64-bit words. The bit-reversal permutation and
// every butterfly form their element pointers the way protected code does:
// renc of the byte offset, radd to the encoded array base, and raddi for the
// partner element half a span away; samples are read with rlhck and written
// with rshck. The complex multiply by the Q15 twiddle and the scaling by 1/2
// per stage are done by the testbench, standing in for the base core.
// Checks: a constant input gives that constant in bin 0 (within the rounding
// of the Q15 twiddle 32767/32768) and zero in all other bins, and a random input
// gives the same result as a run of the same arithmetic without memory. The
// size (16 points) is this testbench's own choice.
module tb_kernel_fft;
  import rptr_pkg::*;
  import rptr_ref_pkg::*;

  localparam int N    = 16;
  localparam int LOGN = 4;
  localparam logic [40:0] X_BASE = 41'h00_0050_0007;   // odd: samples cross words

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
    .clk_i(clk), .stall_en_i(1'b1), .addr_fault_i(64'h0),
    .data_req_i(dreq), .data_gnt_o(dgnt), .data_rvalid_o(drvalid), .data_addr_i(daddr),
    .data_we_i(dwe), .data_be_i(dbe), .data_wdata_i(dwdata), .data_rdata_o(drdata),
    .transfers_o(transfers), .stalls_o(stalls)
  );

  int checks = 0, failures = 0;
  int n_ops = 0, n_err = 0, n_split = 0;

  always @(posedge clk) if (rst_n && wb_valid && wb_err) n_err++;
  always @(posedge clk) if (rst_n && wb_valid && split) n_split++;

  // execute one operation and wait for its write-back
  task automatic exec(input rptr_op_e op, input logic [63:0] rs1, input logic [63:0] rs2,
                      input int imm, input mem_size_e sz, input logic uns,
                      output logic [63:0] result);
    logic ok;
    id_valid = 1; id_op = op; id_rd = 5'd1; id_rs1 = rs1; id_rs2 = rs2; id_imm = 12'(imm);
    id_size = sz; id_uns = uns;
    do begin
      @(negedge clk); ok = id_ready;
      @(posedge clk); #1;
    end while (!ok);
    id_valid = 0; id_op = OP_NONE;
    while (!wb_valid) begin
      @(negedge clk);
      if (!wb_valid) @(posedge clk);
    end
    result = wb_data;
    @(posedge clk); #1;
    n_ops++;
  endtask

  typedef shortint cvec_t [N][2];   // [k][0] real, [k][1] imaginary

  shortint wre [N/2], wim [N/2];    // Q15 twiddles e^(-2 pi i k / N)

  function automatic int bitrev(input int i);
    int r;
    r = 0;
    for (int b = 0; b < LOGN; b++) r |= ((i >> b) & 1) << (LOGN - 1 - b);
    return r;
  endfunction

  // one butterfly: (a, b) -> ((a + w b) / 2, (a - w b) / 2)
  task automatic butterfly(inout shortint ar, inout shortint ai, inout shortint br,
                           inout shortint bi, input int k);
    int tr, ti;
    tr = (int'(br) * int'(wre[k]) - int'(bi) * int'(wim[k])) >>> 15;
    ti = (int'(br) * int'(wim[k]) + int'(bi) * int'(wre[k])) >>> 15;
    br = shortint'((int'(ar) - tr) >>> 1);
    bi = shortint'((int'(ai) - ti) >>> 1);
    ar = shortint'((int'(ar) + tr) >>> 1);
    ai = shortint'((int'(ai) + ti) >>> 1);
  endtask

  task automatic model_fft(input cvec_t x, output cvec_t y);
    for (int i = 0; i < N; i++) y[bitrev(i)] = x[i];
    for (int s = 1; s <= LOGN; s++) begin
      int span;
      span = 1 << (s - 1);
      for (int g = 0; g < N; g += 2*span)
        for (int j = 0; j < span; j++)
          butterfly(y[g+j][0], y[g+j][1], y[g+j+span][0], y[g+j+span][1], j * (N / (2*span)));
    end
  endtask

  function automatic logic near(input shortint v, input int target, input int tol);
    return (int'(v) >= target - tol) && (int'(v) <= target + tol);
  endfunction

  logic [63:0] px;

  task automatic store_vec(input cvec_t x);
    logic [63:0] r;
    for (int i = 0; i < N; i++) begin
      exec(OP_RSTORE, px, 64'(x[i][0]), 4*i,     SZ_H, 0, r);
      exec(OP_RSTORE, px, 64'(x[i][1]), 4*i + 2, SZ_H, 0, r);
    end
  endtask

  task automatic load_vec(output cvec_t x);
    logic [63:0] v;
    for (int i = 0; i < N; i++) begin
      exec(OP_RLOAD, px, '0, 4*i,     SZ_H, 0, v); x[i][0] = shortint'(v);
      exec(OP_RLOAD, px, '0, 4*i + 2, SZ_H, 0, v); x[i][1] = shortint'(v);
    end
  endtask

  // the FFT on the samples in memory
  task automatic mem_fft();
    logic [63:0] po, pa, pb, va, vb, v, r;
    shortint     ar, ai, br, bi;
    // bit-reversal permutation by swapping through encoded element pointers
    for (int i = 0; i < N; i++) begin
      int j, ofs;
      j = bitrev(i);
      ofs = 4*i;
      if (j > i) begin
        exec(OP_RENC, 64'(ofs), '0, 0, SZ_D, 0, po);
        exec(OP_RADD, px, po, 0, SZ_D, 0, pa);
        exec(OP_RADDI, pa, '0, 4*(j-i), SZ_D, 0, pb);
        exec(OP_RLOAD, pa, '0, 0, SZ_W, 0, va);
        exec(OP_RLOAD, pb, '0, 0, SZ_W, 0, vb);
        exec(OP_RSTORE, pa, vb, 0, SZ_W, 0, r);
        exec(OP_RSTORE, pb, va, 0, SZ_W, 0, r);
      end
    end
    for (int s = 1; s <= LOGN; s++) begin
      int span;
      span = 1 << (s - 1);
      for (int g = 0; g < N; g += 2*span)
        for (int j = 0; j < span; j++) begin
          int ofs;
          ofs = 4*(g+j);
          exec(OP_RENC, 64'(ofs), '0, 0, SZ_D, 0, po);
          exec(OP_RADD, px, po, 0, SZ_D, 0, pa);
          exec(OP_RADDI, pa, '0, 4*span, SZ_D, 0, pb);
          exec(OP_RLOAD, pa, '0, 0, SZ_H, 0, v); ar = shortint'(v);
          exec(OP_RLOAD, pa, '0, 2, SZ_H, 0, v); ai = shortint'(v);
          exec(OP_RLOAD, pb, '0, 0, SZ_H, 0, v); br = shortint'(v);
          exec(OP_RLOAD, pb, '0, 2, SZ_H, 0, v); bi = shortint'(v);
          butterfly(ar, ai, br, bi, j * (N / (2*span)));
          exec(OP_RSTORE, pa, 64'(ar), 0, SZ_H, 0, r);
          exec(OP_RSTORE, pa, 64'(ai), 2, SZ_H, 0, r);
          exec(OP_RSTORE, pb, 64'(br), 0, SZ_H, 0, r);
          exec(OP_RSTORE, pb, 64'(bi), 2, SZ_H, 0, r);
        end
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cvec_t x, y, yref;
    int    c0, c1;

    for (int k = 0; k < N/2; k++) begin
      real ang;
      ang = 2.0 * 3.14159265358979 * real'(k) / real'(N);
      wre[k] = shortint'($rtoi($floor( $cos(ang) * 32767.0 + 0.5)));
      wim[k] = shortint'($rtoi($floor(-$sin(ang) * 32767.0 + 0.5)));
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    exec(OP_RENC, {23'h4d2f1, X_BASE}, '0, 0, SZ_D, 0, px);

    // known answer: constant input -> all energy in bin 0
    for (int i = 0; i < N; i++) begin x[i][0] = 16'sd1234; x[i][1] = -16'sd567; end
    store_vec(x);
    mem_fft();
    load_vec(y);
    for (int k = 0; k < N; k++) begin
      checks++;
      // bin 0 may lose a few LSBs: the Q15 twiddle for 1 is 32767/32768
      if (k == 0 ? (!near(y[k][0], 1234, 8) || !near(y[k][1], -567, 8))
                 : (!near(y[k][0], 0, 1) || !near(y[k][1], 0, 1))) begin
        failures++;
        $display("FAIL constant input, bin %0d = (%0d, %0d)", k, y[k][0], y[k][1]);
      end
    end

    // random input against the memory-free run
    for (int i = 0; i < N; i++) begin
      x[i][0] = shortint'($urandom_range(65535, 0));
      x[i][1] = shortint'($urandom_range(65535, 0));
    end
    model_fft(x, yref);
    store_vec(x);
    c0 = int'($time / 10);
    mem_fft();
    c1 = int'($time / 10);
    load_vec(y);
    for (int k = 0; k < N; k++) begin
      checks++;
      if (y[k][0] != yref[k][0] || y[k][1] != yref[k][1]) begin
        failures++;
        $display("FAIL bin %0d = (%0d, %0d) expected (%0d, %0d)", k, y[k][0], y[k][1], yref[k][0], yref[k][1]);
      end
    end
    checks++;
    if (n_split == 0) begin
      failures++;
      $display("FAIL no word-crossing access happened");
    end
    checks++;
    if (n_err != 0 || alarm) begin
      failures++;
      $display("FAIL residue error during fault-free run");
    end
    $display("fft N=%0d: %0d operations, one transform %0d cycles, %0d bus transfers, %0d split, %0d stall cycles",
             N, n_ops, c1 - c0, transfers, n_split, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
