// tb_kernel_fir -- runs the memory and pointer side of an FIR filter kernel
// through the residue-pointer extension, the way compiled protected code uses it:
//   * array base pointers are produced with renc from plain addresses,
//   * the input and coefficient arrays are written with protected stores
//     (rshck), as linked initial data,
//   * the loop walks the arrays with raddi pointer increments and reads them
//     with rlhck (offset immediate), the results are written with rswck,
//   * the outputs are read back with rlwck and compared with a direct model.
// The multiply-accumulate itself belongs to the base core and is done here by
// the testbench. Array sizes are this testbench's own choice. Every operation
// waits for its write-back (the testbench has no forwarding), so the reported
// cycle count is an upper bound, not the core's runtime.
module tb_kernel_fir;
  import rptr_pkg::*;
  import rptr_ref_pkg::*;

  localparam int N = 64;   // input samples
  localparam int T = 8;    // filter taps
  localparam logic [40:0] X_BASE = 41'h00_0010_0000;
  localparam logic [40:0] H_BASE = 41'h00_0010_1002;   // deliberately not word aligned
  localparam logic [40:0] Y_BASE = 41'h00_0010_2000;

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
    .clk_i(clk), .stall_en_i(1'b0), .addr_fault_i(64'h0),
    .data_req_i(dreq), .data_gnt_o(dgnt), .data_rvalid_o(drvalid), .data_addr_i(daddr),
    .data_we_i(dwe), .data_be_i(dbe), .data_wdata_i(dwdata), .data_rdata_o(drdata),
    .transfers_o(transfers), .stalls_o(stalls)
  );

  int checks = 0, failures = 0;
  int n_ops = 0, n_err = 0;

  always @(posedge clk) if (rst_n && wb_valid && wb_err) n_err++;

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
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    shortint     x [N];
    shortint     h [T];
    int          y_ref [N-T+1];
    logic [63:0] px, ph, py, p, v, r;
    int          c0, c1;

    for (int i = 0; i < N; i++) x[i] = shortint'($urandom_range(65535, 0));
    for (int j = 0; j < T; j++) h[j] = shortint'($urandom_range(65535, 0));
    for (int i = 0; i <= N - T; i++) begin
      y_ref[i] = 0;
      for (int j = 0; j < T; j++) y_ref[i] += int'(x[i+j]) * int'(h[j]);
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // base pointers: plain addresses with garbage upper bits, encoded with renc
    exec(OP_RENC, {23'h12345, X_BASE}, '0, 0, SZ_D, 0, px);
    exec(OP_RENC, {23'h0abcd, H_BASE}, '0, 0, SZ_D, 0, ph);
    exec(OP_RENC, {23'h7ffff, Y_BASE}, '0, 0, SZ_D, 0, py);
    checks++;
    if (px !== ref_encode(X_BASE) || ph !== ref_encode(H_BASE) || py !== ref_encode(Y_BASE))
      failures++;

    // linked initial data
    p = px;
    for (int i = 0; i < N; i++) begin
      exec(OP_RSTORE, p, 64'(x[i]), 0, SZ_H, 0, r);
      exec(OP_RADDI, p, '0, 2, SZ_D, 0, p);
    end
    for (int j = 0; j < T; j++) exec(OP_RSTORE, ph, 64'(h[j]), 2*j, SZ_H, 0, r);

    // kernel
    c0 = $time / 10;
    for (int i = 0; i <= N - T; i++) begin
      int acc;
      acc = 0;
      for (int j = 0; j < T; j++) begin
        logic [63:0] xv, hv;
        exec(OP_RLOAD, px, '0, 2*j, SZ_H, 0, xv);
        exec(OP_RLOAD, ph, '0, 2*j, SZ_H, 0, hv);
        acc += int'(signed'(xv)) * int'(signed'(hv));
      end
      exec(OP_RSTORE, py, 64'(acc), 0, SZ_W, 0, r);
      exec(OP_RADDI, py, '0, 4, SZ_D, 0, py);
      exec(OP_RADDI, px, '0, 2, SZ_D, 0, px);
    end
    c1 = $time / 10;

    // pointers walked to the expected places
    checks++;
    if (px !== ref_encode(X_BASE + 41'(2*(N-T+1))) || py !== ref_encode(Y_BASE + 41'(4*(N-T+1)))) begin
      failures++;
      $display("FAIL pointer walk px=%h py=%h", px, py);
    end

    // read back results: rewind py with a negative raddi per element
    for (int i = N - T; i >= 0; i--) begin
      exec(OP_RADDI, py, '0, -4, SZ_D, 0, py);
      exec(OP_RLOAD, py, '0, 0, SZ_W, 0, v);
      checks++;
      if (v !== 64'(signed'(y_ref[i]))) begin
        failures++;
        if (failures < 10) $display("FAIL y[%0d] = %h expected %h", i, v, 64'(signed'(y_ref[i])));
      end
    end
    // the stored results are linked: memory does not hold the plain value
    checks++;
    if (mem.peek({23'b0, Y_BASE}) == {32'(y_ref[1]), 32'(y_ref[0])}) begin
      failures++;
      $display("FAIL results stored unlinked");
    end
    checks++;
    if (n_err != 0 || alarm) begin
      failures++;
      $display("FAIL residue error during fault-free run");
    end
    $display("fir N=%0d T=%0d: %0d operations, kernel %0d cycles, %0d bus transfers",
             N, T, n_ops, c1 - c0, transfers);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
