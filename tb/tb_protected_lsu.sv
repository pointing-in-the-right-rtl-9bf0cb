// tb_protected_lsu -- drives the LSU with stores and loads of every size and
// byte offset, linked, plain and through MMIO pointers, under random bus stalls.
// Checks the memory image of stored data against the reference linking, the
// loaded values (unlinked, extended), accesses that cross a word boundary (split
// into two transfers), the latency of unstalled single and split accesses, and
// that a fault on the address bus turns a linked load into wrong data.
module tb_protected_lsu;
  import rptr_pkg::*;
  import rptr_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            req_valid, req_ready, req_we, req_uns, req_link;
  logic [63:0]     req_addr, req_wdata;
  mem_size_e       req_size;
  logic            dreq, dgnt, drvalid, dwe;
  logic [63:0]     daddr, dwdata, drdata;
  logic [7:0]      dbe;
  logic            resp_valid, resp_split, resp_we;
  logic [63:0]     resp_rdata;
  logic            stall_en = 0;
  logic [63:0]     addr_fault = '0;
  int              transfers, stalls;
  int checks = 0, failures = 0;
  int compared = 0;
  int splits = 0;

  protected_lsu dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_addr_i(req_addr),
    .req_we_i(req_we), .req_size_i(req_size), .req_unsigned_i(req_uns),
    .req_link_i(req_link), .req_wdata_i(req_wdata),
    .data_req_o(dreq), .data_gnt_i(dgnt), .data_rvalid_i(drvalid), .data_addr_o(daddr),
    .data_we_o(dwe), .data_be_o(dbe), .data_wdata_o(dwdata), .data_rdata_i(drdata),
    .resp_valid_o(resp_valid), .resp_split_o(resp_split), .resp_we_o(resp_we), .resp_rdata_o(resp_rdata)
  );

  tb_data_mem mem (
    .clk_i(clk), .stall_en_i(stall_en), .addr_fault_i(addr_fault),
    .data_req_i(dreq), .data_gnt_o(dgnt), .data_rvalid_o(drvalid), .data_addr_i(daddr),
    .data_we_i(dwe), .data_be_i(dbe), .data_wdata_i(dwdata), .data_rdata_o(drdata),
    .transfers_o(transfers), .stalls_o(stalls)
  );

  // shadow of the plain (unlinked) byte contents, per address and MMIO flag
  logic [7:0] shadow [logic [40:0]];

  task automatic fail(input string s);
    failures++;
    if (failures < 15) $display("FAIL %s", s);
  endtask

  // one access; returns response data, error flag and cycles from accept to response
  task automatic access(input logic we, input logic [40:0] f, input mem_size_e sz,
                        input logic uns, input logic link, input logic [63:0] wd,
                        output logic [63:0] rd, output logic err, output int cycles);
    req_valid = 1; req_we = we; req_addr = {23'h0, f}; req_size = sz;
    req_uns = uns; req_link = link; req_wdata = wd;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    cycles = 0;
    while (!resp_valid) begin
      @(posedge clk); #1; cycles++;
    end
    rd = resp_rdata; err = resp_split;
    if (resp_split) splits++;
    @(posedge clk); #1;
  endtask

  function automatic logic [63:0] extend(input logic [63:0] v, input mem_size_e sz, input logic uns);
    int n;
    n = 8 << sz;
    if (n == 64) return v;
    v = v & ((64'd1 << n) - 1);
    if (!uns && v[n-1]) v = v | ~((64'd1 << n) - 1);
    return v;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] rd;
    logic        err;
    int          cyc;
    req_valid = 0; req_we = 0; req_addr = '0; req_size = SZ_B; req_uns = 0; req_link = 0; req_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // latency of an unstalled access: request and grant in the cycle after the
    // accepting one, response (rvalid) in the cycle after that
    access(1, 41'h00_1234_5678, SZ_D, 0, 1, 64'h0123_4567_89ab_cdef, rd, err, cyc);
    checks++;
    if (cyc != 1) fail($sformatf("latency %0d cycles, expected 1", cyc));
    for (int j = 0; j < 8; j++) shadow[41'h00_1234_5678 + 41'(j)] = 8'(64'h0123_4567_89ab_cdef >> (8*j));
    // memory image is linked: byte j xor pad(addr+j)
    begin
      logic [63:0] img, exp;
      img = mem.peek(64'h00_1234_5678);
      for (int j = 0; j < 8; j++) exp[8*j +: 8] = shadow[41'h00_1234_5678 + 41'(j)] ^ ref_pad(40'h00_1234_5678 + 40'(j), 0);
      checks++;
      if (img !== exp) fail($sformatf("memory image %h expected %h", img, exp));
    end

    // latency of an unstalled split access: two request/response pairs
    access(1, 41'h00_1234_567d, SZ_W, 0, 1, 64'h0000_0000_a1b2_c3d4, rd, err, cyc);
    for (int j = 0; j < 4; j++) shadow[41'h00_1234_567d + 41'(j)] = 8'(64'ha1b2_c3d4 >> (8*j));
    checks++;
    if (cyc != 3 || !err) fail($sformatf("split latency %0d cycles, expected 3", cyc));
    access(0, 41'h00_1234_567d, SZ_W, 0, 1, '0, rd, err, cyc);
    checks++;
    if (rd !== 64'hffff_ffff_a1b2_c3d4) fail($sformatf("split load %h", rd));

    stall_en = 1;
    for (int i = 0; i < 1500; i++) begin
      mem_size_e   sz;
      logic [40:0] f;
      logic        mmio, link, we, uns;
      logic [63:0] wd, exp;
      int          n;
      sz   = mem_size_e'($urandom_range(3, 0));
      n    = 1 << sz;
      mmio = 1'($urandom_range(7, 0) == 0);
      link = 1'($urandom_range(7, 0) != 0);
      f    = {mmio, 24'h0, 13'($urandom_range(31, 0)), 3'($urandom_range(7, 0))};
      // keep plain and linked traffic apart, each region keeps its own contents
      f[15] = link;
      if (!link || mmio) f[14] = 1'b1;
      we   = ($urandom_range(1, 0) == 1) || !shadow.exists(f);
      uns  = 1'($urandom_range(1, 0));
      wd   = rand64();
      if (we) begin
        access(1, f, sz, uns, link, wd, rd, err, cyc);
        for (int j = 0; j < n; j++) shadow[f + 41'(j)] = wd[8*j +: 8];
        checks++;
        if (err != (32'(f[2:0]) + n > 8)) fail("split flag");
      end else begin
        exp = '0;
        for (int j = 0; j < n; j++) exp[8*j +: 8] = shadow.exists(f + 41'(j)) ? shadow[f + 41'(j)] : 8'h00;
        access(0, f, sz, uns, link, '0, rd, err, cyc);
        // bytes never written read back as pad (linked) -- only compare known bytes
        begin
          logic known;
          known = 1;
          for (int j = 0; j < n; j++) if (!shadow.exists(f + 41'(j))) known = 0;
          checks++;
          if (known) compared++;
          if (known && rd !== extend(exp, sz, uns))
            fail($sformatf("load f=%h sz=%0d link=%0d got %h exp %h", f, sz, link, rd, extend(exp, sz, uns)));
        end
      end
    end

    // fault on the address bus during a linked load: data must come back wrong
    stall_en = 0;
    access(1, 41'h00_0000_8000, SZ_D, 0, 1, 64'hcafe_f00d_dead_beef, rd, err, cyc);
    access(1, 41'h00_0000_8008, SZ_D, 0, 1, 64'hcafe_f00d_dead_beef, rd, err, cyc);
    addr_fault = 64'h8;
    access(0, 41'h00_0000_8000, SZ_D, 0, 1, '0, rd, err, cyc);
    addr_fault = '0;
    checks++;
    if (rd == 64'hcafe_f00d_dead_beef) fail("address fault not visible in linked data");
    access(0, 41'h00_0000_8000, SZ_D, 0, 1, '0, rd, err, cyc);
    checks++;
    if (rd !== 64'hcafe_f00d_dead_beef) fail("linked load after fault");
    // the same fault on a plain access stays invisible (why linking is needed)
    access(1, 41'h00_0000_9000, SZ_D, 0, 0, 64'h1111_2222_3333_4444, rd, err, cyc);
    access(1, 41'h00_0000_9008, SZ_D, 0, 0, 64'h1111_2222_3333_4444, rd, err, cyc);
    addr_fault = 64'h8;
    access(0, 41'h00_0000_9000, SZ_D, 0, 0, '0, rd, err, cyc);
    addr_fault = '0;
    checks++;
    if (rd !== 64'h1111_2222_3333_4444) fail("plain load under address fault");

    checks++;
    if (stalls == 0) fail("no bus stall happened");
    checks++;
    if (splits < 20) fail($sformatf("only %0d split accesses", splits));
    checks++;
    if (compared < 100) fail($sformatf("only %0d loads compared", compared));
    $display("transfers=%0d stalls=%0d loads compared=%0d splits=%0d", transfers, stalls, compared, splits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
