// tb_data_mem -- behavioural data memory for the testbenches (not synthesisable).
//
// RI5CY-style slave: a request is granted in the cycle data_req is high and the
// random grant gate is open (always open when stall_en is 0); the response
// (rvalid, rdata for reads) follows exactly one cycle after the grant. Writes
// update the 64-bit word under the byte enables at grant time. Words never
// written read as zero. addr_fault is xor-ed onto the address of every granted
// transfer, modelling a fault on the address bus. Counts granted transfers and
// cycles in which a request waited for its grant.
module tb_data_mem (
  input  logic        clk_i,
  input  logic        stall_en_i,
  input  logic [63:0] addr_fault_i,
  input  logic        data_req_i,
  output logic        data_gnt_o,
  output logic        data_rvalid_o,
  input  logic [63:0] data_addr_i,
  input  logic        data_we_i,
  input  logic [7:0]  data_be_i,
  input  logic [63:0] data_wdata_i,
  output logic [63:0] data_rdata_o,
  output int          transfers_o,
  output int          stalls_o
);

  logic [63:0] mem [logic [63:0]];
  logic        gate = 1'b1;

  initial begin
    data_rvalid_o = 1'b0;
    data_rdata_o  = '0;
    transfers_o   = 0;
    stalls_o      = 0;
  end

  assign data_gnt_o = data_req_i && gate;

  function automatic logic [63:0] peek(input logic [63:0] a);
    return mem.exists(a) ? mem[a] : 64'h0;
  endfunction

  always @(posedge clk_i) begin
    data_rvalid_o <= 1'b0;
    if (data_req_i && !data_gnt_o) stalls_o <= stalls_o + 1;
    if (data_gnt_o) begin
      logic [63:0] a, w;
      a = (data_addr_i ^ addr_fault_i) & ~64'h7;
      transfers_o <= transfers_o + 1;
      data_rvalid_o <= 1'b1;
      if (data_we_i) begin
        w = peek(a);
        for (int i = 0; i < 8; i++) if (data_be_i[i]) w[8*i +: 8] = data_wdata_i[8*i +: 8];
        mem[a] = w;
      end else begin
        data_rdata_o <= peek(a);
      end
    end
    gate <= stall_en_i ? ($urandom_range(3, 0) != 0) : 1'b1;
  end

endmodule
