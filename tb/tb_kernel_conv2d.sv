// tb_kernel_conv2d -- runs the memory and pointer side of a 2-D convolution
// kernel through the residue-pointer extension, the way compiled protected code
// uses it:
//   * the image, kernel and output base pointers are made with renc,
//   * the image (unsigned bytes) and the 3x3 kernel (signed bytes) are written
//     as linked initial data with rsbck,
//   * for each output pixel the window is read with rlbuck/rlbck using the
//     row and column offset as the plain immediate of the access, the row
//     pointer advances with raddi, and the end of a row is found by rsub of
//     two encoded pointers,
//   * each 16-bit result is stored with rshck to an output array whose base is
//     deliberately odd, so some stores and reads cross a 64-bit word,
//   * a completion flag is written through a pointer with the MMIO bit set,
//     which must reach memory without linking.
// The multiply-accumulate belongs to the base core and is done here by the
// testbench. Image and kernel sizes are this testbench's own choice. Every
// operation waits for its write-back, so the reported cycle count is an upper
// bound, not the core's runtime.
module tb_kernel_conv2d;
  import rptr_pkg::*;
  import rptr_ref_pkg::*;

  localparam int W  = 12;             // image width and height (bytes)
  localparam int K  = 3;              // kernel size
  localparam int OW = W - K + 1;      // output width and height
  localparam logic [40:0] IMG_BASE = 41'h00_0020_0000;
  localparam logic [40:0] KER_BASE = 41'h00_0020_0100;
  localparam logic [40:0] OUT_BASE = 41'h00_0020_0201;   // odd: halfwords cross words
  localparam logic [40:0] FLAG_IO  = 41'h100_0000_0040;  // MMIO bit (40) set

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

  initial begin
    #40000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned img [W][W];
    byte          ker [K][K];
    shortint      out_ref [OW][OW];
    logic [63:0]  pimg, pker, pout, pflag, prow, pend, p, d, v, r;
    int           c0, c1;

    for (int y = 0; y < W; y++)
      for (int x = 0; x < W; x++) img[y][x] = 8'($urandom_range(255, 0));
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) ker[i][j] = byte'($urandom_range(255, 0));
    for (int y = 0; y < OW; y++)
      for (int x = 0; x < OW; x++) begin
        int acc;
        acc = 0;
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++) acc += int'(img[y+i][x+j]) * int'(ker[i][j]);
        out_ref[y][x] = shortint'(acc);
      end

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    exec(OP_RENC, {23'h00f0f, IMG_BASE}, '0, 0, SZ_D, 0, pimg);
    exec(OP_RENC, {23'h3c3c3, KER_BASE}, '0, 0, SZ_D, 0, pker);
    exec(OP_RENC, {23'h55555, OUT_BASE}, '0, 0, SZ_D, 0, pout);
    exec(OP_RENC, {23'h0, FLAG_IO}, '0, 0, SZ_D, 0, pflag);
    checks++;
    if (pimg !== ref_encode(IMG_BASE) || pker !== ref_encode(KER_BASE) ||
        pout !== ref_encode(OUT_BASE) || pflag !== ref_encode(FLAG_IO))
      failures++;

    // linked initial data: image row by row, kernel with immediates
    prow = pimg;
    for (int y = 0; y < W; y++) begin
      for (int x = 0; x < W; x++) exec(OP_RSTORE, prow, 64'(img[y][x]), x, SZ_B, 0, r);
      exec(OP_RADDI, prow, '0, W, SZ_D, 0, prow);
    end
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) exec(OP_RSTORE, pker, 64'(ker[i][j]), K*i + j, SZ_B, 0, r);

    // kernel: prow walks the top-left corner of the window, p the output
    c0 = int'($time / 10);
    prow = pimg;
    p    = pout;
    for (int y = 0; y < OW; y++) begin
      exec(OP_RADDI, prow, '0, OW, SZ_D, 0, pend);     // end of this output row
      for (int x = 0; ; x++) begin
        int acc;
        exec(OP_RSUB, pend, prow, 0, SZ_D, 0, d);      // remaining pixels in the row
        checks++;
        if (d !== ref_encode(41'(OW - x))) begin
          failures++;
          $display("FAIL rsub distance y=%0d x=%0d: %h", y, x, d);
        end
        if (d[40:0] == 41'd0) break;
        acc = 0;
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++) begin
            logic [63:0] iv, kv;
            exec(OP_RLOAD, prow, '0, W*i + j, SZ_B, 1, iv);
            exec(OP_RLOAD, pker, '0, K*i + j, SZ_B, 0, kv);
            acc += int'(iv) * int'(signed'(kv));
          end
        exec(OP_RSTORE, p, 64'(acc), 0, SZ_H, 0, r);
        exec(OP_RADDI, p, '0, 2, SZ_D, 0, p);
        exec(OP_RADDI, prow, '0, 1, SZ_D, 0, prow);
      end
      exec(OP_RADDI, prow, '0, K - 1, SZ_D, 0, prow);  // skip to next image row
    end
    c1 = int'($time / 10);
    exec(OP_RSTORE, pflag, 64'h0d0e, 0, SZ_H, 0, r);    // completion flag to the peripheral

    checks++;
    if (p !== ref_encode(OUT_BASE + 41'(2*OW*OW))) begin
      failures++;
      $display("FAIL output pointer %h", p);
    end

    // read back every output, signed, through a fresh pointer
    exec(OP_RENC, {23'h0, OUT_BASE}, '0, 0, SZ_D, 0, p);
    for (int y = 0; y < OW; y++)
      for (int x = 0; x < OW; x++) begin
        exec(OP_RLOAD, p, '0, 2*(OW*y + x), SZ_H, 0, v);
        checks++;
        if (v !== 64'(out_ref[y][x])) begin
          failures++;
          if (failures < 10)
            $display("FAIL out[%0d][%0d] = %h expected %h", y, x, v, 64'(out_ref[y][x]));
        end
      end

    // the MMIO flag is stored plain; the image is stored linked
    checks++;
    if (mem.peek({23'b0, FLAG_IO}) != 64'h0d0e) begin
      failures++;
      $display("FAIL MMIO flag %h", mem.peek({23'b0, FLAG_IO}));
    end
    checks++;
    if (mem.peek({23'b0, IMG_BASE})[7:0] == img[0][0] && mem.peek({23'b0, IMG_BASE})[15:8] == img[0][1]) begin
      failures++;
      $display("FAIL image stored unlinked");
    end
    checks++;
    if (n_err != 0 || alarm) begin
      failures++;
      $display("FAIL residue error during fault-free run");
    end
    checks++;
    if (n_split == 0) begin
      failures++;
      $display("FAIL no word-crossing access happened");
    end
    $display("conv2d %0dx%0d, kernel %0dx%0d: %0d operations, kernel %0d cycles, %0d bus transfers, %0d split, %0d stall cycles",
             W, W, K, K, n_ops, c1 - c0, transfers, n_split, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
