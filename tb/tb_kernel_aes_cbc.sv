// tb_kernel_aes_cbc -- runs the memory and pointer side of AES-128 in CBC mode
// through the residue-pointer extension. The S-box (256 bytes) and the state
// (16 bytes) live in linked memory. SubBytes is done the way protected code
// does a table lookup: each state byte is read with rlbuck, turned into an
// encoded index with renc, added to the encoded S-box base with radd, and the
// S-box entry is read with rlbuck through that pointer; the result is written
// back with rsbck. ShiftRows, MixColumns, AddRoundKey, the key schedule and the
// CBC chaining xor are done by the testbench, standing in for the base core.
// The S-box is generated from its definition (inverse in GF(2^8), then the
// affine map), not from a table.
// Checks: with the FIPS-197 key 000102..0f, IV = 0 and plaintext 00112233..ff
// the first ciphertext block is 69c4e0d86a7b0430d8cdb78070b4c55a; the second
// block (chained) equals a run of the same cipher without memory, and no
// residue error is raised.
module tb_kernel_aes_cbc;
  import rptr_pkg::*;
  import rptr_ref_pkg::*;

  localparam logic [40:0] SBOX_BASE  = 41'h00_0040_0000;
  localparam logic [40:0] STATE_BASE = 41'h00_0040_0105;   // not word aligned

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

  typedef logic [7:0] block_t [16];   // byte i = row i%4, column i/4

  logic [7:0] sbox [256];
  logic [7:0] rk   [11][16];

  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= a;
      a = xtime(a);
    end
    return p;
  endfunction

  function automatic logic [7:0] rotl8(input logic [7:0] v, input int n);
    return (v << n) | (v >> (8 - n));
  endfunction

  function automatic logic [7:0] sbox_def(input logic [7:0] x);
    logic [7:0] inv;
    inv = 8'h01;
    for (int i = 0; i < 254; i++) inv = gmul(inv, x);   // x^254 = x^-1, 0 -> 0
    if (x == 8'h00) inv = 8'h00;
    return inv ^ rotl8(inv, 1) ^ rotl8(inv, 2) ^ rotl8(inv, 3) ^ rotl8(inv, 4) ^ 8'h63;
  endfunction

  function automatic block_t shift_mix_key(input block_t s, input int round);
    block_t t, o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) t[r + 4*c] = s[r + 4*((c + r) % 4)];
    if (round != 10) begin
      for (int c = 0; c < 4; c++) begin
        logic [7:0] a0, a1, a2, a3;
        a0 = t[4*c]; a1 = t[4*c+1]; a2 = t[4*c+2]; a3 = t[4*c+3];
        o[4*c]   = gmul(a0, 2) ^ gmul(a1, 3) ^ a2 ^ a3;
        o[4*c+1] = a0 ^ gmul(a1, 2) ^ gmul(a2, 3) ^ a3;
        o[4*c+2] = a0 ^ a1 ^ gmul(a2, 2) ^ gmul(a3, 3);
        o[4*c+3] = gmul(a0, 3) ^ a1 ^ a2 ^ gmul(a3, 2);
      end
    end else o = t;
    for (int i = 0; i < 16; i++) o[i] ^= rk[round][i];
    return o;
  endfunction

  function automatic block_t model_encrypt(input block_t s);
    for (int i = 0; i < 16; i++) s[i] ^= rk[0][i];
    for (int r = 1; r <= 10; r++) begin
      for (int i = 0; i < 16; i++) s[i] = sbox[s[i]];
      s = shift_mix_key(s, r);
    end
    return s;
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    block_t      pt [2], ct [2], ref_ct [2], s, chain;
    logic [7:0]  w [44][4];
    logic [7:0]  rcon;
    logic [63:0] psbox, pst, pidx, pent, v, r;
    logic [127:0] kat;
    int          c0, c1;

    // S-box and key schedule of the FIPS-197 example key
    for (int i = 0; i < 256; i++) sbox[i] = sbox_def(8'(i));
    for (int i = 0; i < 4; i++)
      for (int b = 0; b < 4; b++) w[i][b] = 8'(4*i + b);
    rcon = 8'h01;
    for (int i = 4; i < 44; i++) begin
      logic [7:0] tmp [4];
      for (int b = 0; b < 4; b++) tmp[b] = w[i-1][b];
      if (i % 4 == 0) begin
        logic [7:0] t0;
        t0 = tmp[0];
        tmp[0] = sbox[tmp[1]] ^ rcon; tmp[1] = sbox[tmp[2]]; tmp[2] = sbox[tmp[3]]; tmp[3] = sbox[t0];
        rcon = xtime(rcon);
      end
      for (int b = 0; b < 4; b++) w[i][b] = w[i-4][b] ^ tmp[b];
    end
    for (int k = 0; k <= 10; k++)
      for (int i = 0; i < 16; i++) rk[k][i] = w[4*k + i/4][i%4];

    for (int i = 0; i < 16; i++) begin
      pt[0][i] = 8'(16*i + i);                   // 00 11 22 .. ff
      pt[1][i] = 8'($urandom_range(255, 0));
    end
    chain = '{default: 8'h00};                   // IV = 0
    for (int b = 0; b < 2; b++) begin
      for (int i = 0; i < 16; i++) s[i] = pt[b][i] ^ chain[i];
      ref_ct[b] = model_encrypt(s);
      chain = ref_ct[b];
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    exec(OP_RENC, {23'h2aaaa, SBOX_BASE}, '0, 0, SZ_D, 0, psbox);
    exec(OP_RENC, {23'h15555, STATE_BASE}, '0, 0, SZ_D, 0, pst);
    for (int i = 0; i < 256; i++) begin
      // the upper half is written through a pointer moved with raddi
      if (i == 128) exec(OP_RADDI, psbox, '0, 128, SZ_D, 0, pent);
      exec(OP_RSTORE, (i < 128) ? psbox : pent, 64'(sbox[i]), i % 128, SZ_B, 0, r);
    end

    c0 = int'($time / 10);
    chain = '{default: 8'h00};
    for (int b = 0; b < 2; b++) begin
      for (int i = 0; i < 16; i++) s[i] = pt[b][i] ^ chain[i] ^ rk[0][i];
      for (int i = 0; i < 16; i++) exec(OP_RSTORE, pst, 64'(s[i]), i, SZ_B, 0, r);
      for (int rnd = 1; rnd <= 10; rnd++) begin
        for (int i = 0; i < 16; i++) begin
          exec(OP_RLOAD, pst, '0, i, SZ_B, 1, v);              // state byte
          exec(OP_RENC, v, '0, 0, SZ_D, 0, pidx);               // encoded index
          exec(OP_RADD, psbox, pidx, 0, SZ_D, 0, pent);         // &sbox[v]
          exec(OP_RLOAD, pent, '0, 0, SZ_B, 1, v);              // sbox[v]
          s[i] = v[7:0];
        end
        s = shift_mix_key(s, rnd);
        for (int i = 0; i < 16; i++) exec(OP_RSTORE, pst, 64'(s[i]), i, SZ_B, 0, r);
      end
      for (int i = 0; i < 16; i++) begin
        exec(OP_RLOAD, pst, '0, i, SZ_B, 1, v);
        ct[b][i] = v[7:0];
      end
      chain = ct[b];
    end
    c1 = int'($time / 10);

    kat = '0;
    for (int i = 0; i < 16; i++) kat[127 - 8*i -: 8] = ct[0][i];
    checks++;
    if (kat !== 128'h69c4e0d86a7b0430d8cdb78070b4c55a) begin
      failures++;
      $display("FAIL block 0 ciphertext %h", kat);
    end
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (ct[b][i] !== ref_ct[b][i]) begin
          failures++;
          $display("FAIL block %0d byte %0d = %h expected %h", b, i, ct[b][i], ref_ct[b][i]);
        end
      end
    checks++;
    if (mem.peek({23'b0, SBOX_BASE})[7:0] == sbox[0] && mem.peek({23'b0, SBOX_BASE})[15:8] == sbox[1]) begin
      failures++;
      $display("FAIL S-box stored unlinked");
    end
    checks++;
    if (n_err != 0 || alarm) begin
      failures++;
      $display("FAIL residue error during fault-free run");
    end
    $display("aes-128 cbc, 2 blocks: %0d operations, cipher %0d cycles, %0d bus transfers, %0d stall cycles",
             n_ops, c1 - c0, transfers, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
