// protected_lsu -- load/store unit with address-data linking.
//
// Takes one access at a time from the execute stage and runs it on the data
// interface:
//   req_*   : valid/ready request with a 64-bit byte address, write flag, size
//             (b/h/w/d), unsigned flag for loads, store data (register value)
//             and link_i (1 for the protected rl*ck / rs*ck instructions).
//   data_*  : RI5CY-style data bus. data_req_o is held until data_gnt_i; a
//             transfer completes with data_rvalid_i (for stores as well). The
//             address is word aligned, data_be_o selects the bytes.
//   resp_*  : one-cycle pulse when the access is done, carrying the loaded,
//             unlinked and sign/zero-extended value.
//
// Any byte alignment is accepted. An access that stays inside one 64-bit word
// takes one bus transfer; one that crosses into the next word is split into two
// transfers, the lower word first, and the response follows the second.
// Store data is shifted into a 128-bit lane image; the half for the current
// word is linked by ptr_reduce: each byte is xor-ed with the pad of its own
// encoded byte address, unless linking is off or the MMIO bit (address bit 40)
// is set. Load data of each word goes through the same ptr_reduce, which removes
// the link, is collected in the lane image, then shifted down and extended.
// One ptr_reduce instance serves both directions and both words.
//
// Timing: request accepted in IDLE (req_ready_o); data_req_o from the next
// cycle until granted, then wait for rvalid; resp_valid_o in the rvalid cycle
// of the last transfer (2 cycles after acceptance for an unstalled single
// transfer, 4 for a split one). Linking, the byte granularity, the MMIO bypass,
// the access sizes and misaligned support follow the paper; the bus handshake,
// one outstanding transfer and the two-transfer split are this design's
// choices (the paper does not say how misaligned accesses are carried out).
module protected_lsu
  import rptr_pkg::*;
(
  input  logic                 clk_i,
  input  logic                 rst_ni,

  input  logic                 req_valid_i,
  output logic                 req_ready_o,
  input  logic [XLEN-1:0]      req_addr_i,
  input  logic                 req_we_i,
  input  mem_size_e            req_size_i,
  input  logic                 req_unsigned_i,
  input  logic                 req_link_i,
  input  logic [XLEN-1:0]      req_wdata_i,

  output logic                 data_req_o,
  input  logic                 data_gnt_i,
  input  logic                 data_rvalid_i,
  output logic [XLEN-1:0]      data_addr_o,
  output logic                 data_we_o,
  output logic [XLEN/8-1:0]    data_be_o,
  output logic [XLEN-1:0]      data_wdata_o,
  input  logic [XLEN-1:0]      data_rdata_i,

  output logic                 resp_valid_o,
  output logic                 resp_we_o,
  output logic                 resp_split_o,   // the access took two transfers
  output logic [XLEN-1:0]      resp_rdata_o
);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT} state_e;

  state_e           state_q;
  logic [XLEN-1:0]  addr_q;
  logic             we_q, uns_q, link_q, split_q, phase_q;
  mem_size_e        size_q;
  logic [XLEN-1:0]  wdata_q;
  logic [XLEN-1:0]  rlow_q;            // unlinked first word of a split load

  logic [3:0]       nbytes;
  logic [2:0]       off;
  logic             crosses;
  logic [XLEN-4:0]  word_q;            // word index of the current transfer
  logic [2*XLEN-1:0] lane_wdata, lane_rdata, shifted;
  logic [2*XLEN/8-1:0] lane_be;
  logic [XLEN-1:0]  link_in, link_out;
  logic [XLEN-1:0]  pads_unused;
  logic             last;

  function automatic logic [3:0] size_bytes(input mem_size_e s);
    return 4'd1 << s;
  endfunction

  // ---------------------------------------------------------------- control
  assign req_ready_o = (state_q == S_IDLE);
  assign crosses     = (5'(req_addr_i[2:0]) + 5'(size_bytes(req_size_i))) > 5'd8;
  assign last        = !split_q || phase_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      addr_q  <= '0;
      we_q    <= 1'b0;
      uns_q   <= 1'b0;
      link_q  <= 1'b0;
      split_q <= 1'b0;
      phase_q <= 1'b0;
      size_q  <= SZ_B;
      wdata_q <= '0;
      rlow_q  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid_i) begin
          addr_q  <= req_addr_i;
          we_q    <= req_we_i;
          uns_q   <= req_unsigned_i;
          link_q  <= req_link_i;
          size_q  <= req_size_i;
          wdata_q <= req_wdata_i;
          split_q <= crosses;
          phase_q <= 1'b0;
          state_q <= S_REQ;
        end
        S_REQ:  if (data_gnt_i) state_q <= S_WAIT;
        S_WAIT: if (data_rvalid_i) begin
          rlow_q <= link_out;
          if (last) begin
            state_q <= S_IDLE;
          end else begin
            phase_q <= 1'b1;
            state_q <= S_REQ;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- lanes
  assign off        = addr_q[2:0];
  assign nbytes     = size_bytes(size_q);
  assign word_q     = addr_q[XLEN-1:3] + (XLEN-3)'(phase_q);
  assign lane_wdata = (2*XLEN)'(wdata_q) << (8 * off);
  assign lane_be    = 16'(((16'd1 << nbytes) - 16'd1) << off);
  assign link_in    = we_q ? (phase_q ? lane_wdata[2*XLEN-1:XLEN] : lane_wdata[XLEN-1:0])
                           : data_rdata_i;

  ptr_reduce u_ptr_reduce (
    .word_addr_i (word_q[ADDR_W-4:0]),
    .mmio_i      (addr_q[MMIO_BIT]),
    .link_en_i   (link_q),
    .data_i      (link_in),
    .data_o      (link_out),
    .pads_o      (pads_unused)
  );

  assign data_req_o   = (state_q == S_REQ);
  assign data_addr_o  = {word_q, 3'b000};
  assign data_we_o    = we_q;
  assign data_be_o    = phase_q ? lane_be[2*XLEN/8-1:XLEN/8] : lane_be[XLEN/8-1:0];
  assign data_wdata_o = link_out;

  // ---------------------------------------------------------------- response
  assign lane_rdata = split_q ? {link_out, rlow_q} : {{XLEN{1'b0}}, link_out};
  assign shifted    = lane_rdata >> (8 * off);

  always_comb begin
    unique case (size_q)
      SZ_B: resp_rdata_o = uns_q ? {56'b0, shifted[7:0]}  : {{56{shifted[7]}},  shifted[7:0]};
      SZ_H: resp_rdata_o = uns_q ? {48'b0, shifted[15:0]} : {{48{shifted[15]}}, shifted[15:0]};
      SZ_W: resp_rdata_o = uns_q ? {32'b0, shifted[31:0]} : {{32{shifted[31]}}, shifted[31:0]};
      default: resp_rdata_o = shifted[XLEN-1:0];
    endcase
  end

  assign resp_valid_o = (state_q == S_WAIT) && data_rvalid_i && last;
  assign resp_we_o    = we_q;
  assign resp_split_o = split_q;

  // bus rules: request stays up until granted, address and data stable meanwhile
  a_req_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
                               data_req_o && !data_gnt_i |=> data_req_o);
  a_addr_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                data_req_o && !data_gnt_i |=> $stable(data_addr_o) && $stable(data_be_o));
  a_no_rvalid: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                data_rvalid_i |-> state_q == S_WAIT);

endmodule
