// ptr_reduce -- byte-wise data linking unit ("PtrReduce").
//
// Links a 64-bit data word with the addresses of its bytes. For byte lane j
// (j = 0..7) the byte address a_j = {word_addr_i, j} is multi-residue encoded
// into a 64-bit pointer P_j = {res({mmio, a_j}), mmio, a_j}; its eight bytes are
// xor-ed into one pad byte p'_j = P_j[7:0] ^ P_j[15:8] ^ ... ^ P_j[63:56], and
// the data byte of lane j is xor-ed with p'_j. Because xor is its own inverse
// the same unit links data on a store and unlinks it on a load; a load from any
// other address than the one the data was stored to gets the wrong pads and
// turns into corrupted data. With mmio_i set, or link_en_i clear, data passes
// unchanged (peripherals and plain RISC-V loads/stores).
//
// The encoding, the xor-reduction and the per-byte granularity follow the
// paper; taking the lane index as the low address bits (the byte's own address
// in a word-aligned 64-bit transfer) is how this design applies it to a bus.
//
// Combinational: eight 41-bit residue encoders and an xor tree per lane.
module ptr_reduce
  import rptr_pkg::*;
(
  input  logic [ADDR_W-4:0] word_addr_i,   // byte address bits 39:3
  input  logic              mmio_i,
  input  logic              link_en_i,
  input  logic [XLEN-1:0]   data_i,
  output logic [XLEN-1:0]   data_o,
  output logic [XLEN-1:0]   pads_o         // the eight pad bytes, for observation
);

  for (genvar j = 0; j < XLEN/8; j++) begin : g_lane
    logic [FUNC_W-1:0] func;
    logic [RES_W-1:0]  res;
    logic [XLEN-1:0]   ptr;
    logic [7:0]        pad;

    assign func = {mmio_i, word_addr_i, 3'(j)};

    res_encoder #(.W(FUNC_W)) u_enc (
      .func_i (func),
      .res_o  (res)
    );

    assign ptr = {res, func};

    always_comb begin
      pad = '0;
      for (int i = 0; i < XLEN/8; i++) pad = pad ^ ptr[8*i +: 8];
    end

    assign pads_o[8*j +: 8] = pad;
    assign data_o[8*j +: 8] = data_i[8*j +: 8] ^ ((link_en_i && !mmio_i) ? pad : 8'h00);
  end

endmodule
