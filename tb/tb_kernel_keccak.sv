// tb_kernel_keccak -- runs the memory and pointer side of the Keccak-f[1600]
// permutation through the residue-pointer extension. The 25 64-bit lanes of
// the state live in memory, linked with their addresses. Each of the 24 rounds
// reads every lane with rldck (encoded state pointer plus the lane offset as
// plain immediate), computes the round in the testbench (standing in for the
// base core's ALU) and writes the lanes back with rsdck. A second state copy is
// reached through a pointer formed with radd of two encoded values and is
// walked down with negative raddi steps, so the 12-bit signed immediate path is
// used as well.
// Checks: the permutation of the all-zero state gives the published first
// lane F1258F7940E1DDE7 (and the whole result equals an in-memory-free run of
// the same round function), the copy reached through the radd pointer agrees,
// and no residue error is raised. Rotation offsets and round constants are
// generated from their defining recurrences, not from a table.
module tb_kernel_keccak;
  import rptr_pkg::*;
  import rptr_ref_pkg::*;

  localparam logic [40:0] ST_BASE   = 41'h00_0030_0000;
  localparam logic [40:0] COPY_OFFS = 41'h00_0000_0400;

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

  typedef logic [63:0] state_t [25];   // lane (x, y) at index x + 5*y

  int          rho [25];
  logic [63:0] rc  [24];

  // round-constant bit generator (LFSR x^8 + x^6 + x^5 + x^4 + 1)
  function automatic logic rc_bit(input int t);
    logic [8:0] r;
    r = 9'h1;
    for (int i = 0; i < t % 255; i++) begin
      r = r << 1;
      if (r[8]) r = r ^ 9'h171;
    end
    return r[0];
  endfunction

  function automatic logic [63:0] rotl(input logic [63:0] v, input int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic state_t round_fn(input state_t a, input int ir);
    logic [63:0] c [5];
    logic [63:0] b [25];
    state_t      o;
    for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a[x+5*y] ^= c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x+3*y)%5)] = rotl(a[x+5*y], rho[x+5*y]);
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        o[x+5*y] = b[x+5*y] ^ (~b[(x+1)%5+5*y] & b[(x+2)%5+5*y]);
    o[0] ^= rc[ir];
    return o;
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    state_t      s, model;
    logic [63:0] pst, pofs, pcopy, p, r;
    int          x, y, t, c0, c1;

    // rotation offsets and round constants from their recurrences
    rho[0] = 0;
    x = 1; y = 0;
    for (t = 0; t < 24; t++) begin
      int nx;
      rho[x+5*y] = ((t+1)*(t+2)/2) % 64;
      nx = y; y = (2*x + 3*y) % 5; x = nx;
    end
    for (int ir = 0; ir < 24; ir++) begin
      rc[ir] = '0;
      for (int j = 0; j < 7; j++) rc[ir][(1 << j) - 1] = rc_bit(j + 7*ir);
    end
    for (int i = 0; i < 25; i++) model[i] = '0;
    for (int ir = 0; ir < 24; ir++) model = round_fn(model, ir);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    exec(OP_RENC, {23'h1, ST_BASE}, '0, 0, SZ_D, 0, pst);
    for (int i = 0; i < 25; i++) exec(OP_RSTORE, pst, 64'h0, 8*i, SZ_D, 0, r);

    c0 = int'($time / 10);
    for (int ir = 0; ir < 24; ir++) begin
      for (int i = 0; i < 25; i++) exec(OP_RLOAD, pst, '0, 8*i, SZ_D, 0, s[i]);
      s = round_fn(s, ir);
      for (int i = 0; i < 25; i++) exec(OP_RSTORE, pst, s[i], 8*i, SZ_D, 0, r);
    end
    c1 = int'($time / 10);

    for (int i = 0; i < 25; i++) exec(OP_RLOAD, pst, '0, 8*i, SZ_D, 0, s[i]);
    checks++;
    if (s[0] !== 64'hF1258F7940E1DDE7) begin
      failures++;
      $display("FAIL lane 0 = %h", s[0]);
    end
    for (int i = 0; i < 25; i++) begin
      checks++;
      if (s[i] !== model[i]) begin
        failures++;
        $display("FAIL lane %0d = %h expected %h", i, s[i], model[i]);
      end
    end

    // copy the state to base + offset, the copy pointer made by radd of two
    // encoded values; written from the last lane down with negative raddi
    exec(OP_RENC, {23'h0, COPY_OFFS}, '0, 0, SZ_D, 0, pofs);
    exec(OP_RADD, pst, pofs, 0, SZ_D, 0, pcopy);
    exec(OP_RADDI, pcopy, '0, 8*24, SZ_D, 0, p);
    for (int i = 24; i >= 0; i--) begin
      exec(OP_RSTORE, p, s[i], 0, SZ_D, 0, r);
      if (i > 0) exec(OP_RADDI, p, '0, -8, SZ_D, 0, p);
    end
    checks++;
    if (p !== pcopy || pcopy !== ref_encode(ST_BASE + COPY_OFFS)) begin
      failures++;
      $display("FAIL copy pointer %h", p);
    end
    for (int i = 0; i < 25; i++) begin
      logic [63:0] v;
      exec(OP_RLOAD, pcopy, '0, 8*i, SZ_D, 0, v);
      checks++;
      if (v !== model[i]) begin
        failures++;
        $display("FAIL copy lane %0d = %h", i, v);
      end
    end
    // memory holds the linked image, not the plain lane
    checks++;
    if (mem.peek({23'b0, ST_BASE}) == model[0]) begin
      failures++;
      $display("FAIL state stored unlinked");
    end
    checks++;
    if (n_err != 0 || alarm) begin
      failures++;
      $display("FAIL residue error during fault-free run");
    end
    $display("keccak-f[1600] 24 rounds: %0d operations, permutation %0d cycles, %0d bus transfers, %0d stall cycles",
             n_ops, c1 - c0, transfers, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
