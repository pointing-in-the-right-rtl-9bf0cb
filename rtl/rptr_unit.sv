// rptr_unit -- residue-pointer extension of a three-stage RV64 pipeline.
//
// Executes the pointer-protection instructions and the protected memory
// accesses on behalf of the base core, which decodes instructions, reads the
// register file and writes results back:
//   renc rd, rs1          rd = encode(rs1)
//   rdec rd, rs1          rd = decode(rs1)
//   radd rd, rs1, rs2     rd = rs1 + rs2      (encoded, checked)
//   raddi rd, rs1, imm    rd = rs1 + enc(imm) (encoded, checked)
//   rsub rd, rs1, rs2     rd = rs1 - rs2      (encoded, checked)
//   rl{b,h,w,d}[u]ck      rd = unlink(mem[rs1 + enc(imm)]), address checked
//   rs{b,h,w,d}ck         mem[rs1 + enc(imm)] = link(rs2), address checked
//   plain load / store    address rs1 + imm, no check, no linking
//
// Decode stage (id_*): the 12-bit immediate is residue encoded (imm_res_encoder)
// and selected as second operand for raddi and the protected accesses.
// ID/EX register, then execute: res_alu computes the result or the checked
// encoded address. A non-zero res_error_o (one bit per modulus) suppresses the
// memory access, retires the instruction with wb_err_o and sets the sticky
// alarm_o, from which the base core enters its safe state. Memory operations go
// to protected_lsu, which links store data and unlinks load data with the
// encoded byte addresses unless the MMIO bit of the pointer is set, and splits
// accesses that cross a 64-bit word into two bus transfers (split_o). The
// write-back stage returns either the EX/WB register (ALU results) or the LSU
// response.
//
// Handshake: id_valid_i/id_ready_o. An operation is accepted into ID/EX when
// ID/EX is empty or moves on. Execute holds while the LSU is busy, so results
// retire in order, at most one per cycle; a residue ALU operation retires two
// cycles after acceptance, a memory operation after its bus transfer.
// Forwarding and hazards are left to the base core. The stage split follows the
// modified pipeline of the paper; the ports and handshakes are this design's.
module rptr_unit
  import rptr_pkg::*;
(
  input  logic                 clk_i,
  input  logic                 rst_ni,

  // decode stage, from the base core
  input  logic                 id_valid_i,
  output logic                 id_ready_o,
  input  rptr_op_e             id_op_i,
  input  logic [4:0]           id_rd_i,
  input  logic [XLEN-1:0]      id_rs1_i,
  input  logic [XLEN-1:0]      id_rs2_i,
  input  logic [IMM_W-1:0]     id_imm_i,
  input  mem_size_e            id_size_i,
  input  logic                 id_unsigned_i,

  // write-back to the base core
  output logic                 wb_valid_o,
  output logic                 wb_we_o,
  output logic [4:0]           wb_rd_o,
  output logic [XLEN-1:0]      wb_data_o,
  output logic                 wb_err_o,

  // fault detection
  output logic [NUM_RES-1:0]   res_error_o,
  output logic                 alarm_o,
  output logic                 split_o,      // retiring access took two bus transfers

  // data interface
  output logic                 data_req_o,
  input  logic                 data_gnt_i,
  input  logic                 data_rvalid_i,
  output logic [XLEN-1:0]      data_addr_o,
  output logic                 data_we_o,
  output logic [XLEN/8-1:0]    data_be_o,
  output logic [XLEN-1:0]      data_wdata_o,
  input  logic [XLEN-1:0]      data_rdata_i
);

  // ------------------------------------------------------------ decode stage
  logic [XLEN-1:0] imm_enc, id_opb;
  logic            id_use_imm;

  imm_res_encoder u_imm_enc (
    .imm_i (id_imm_i),
    .enc_o (imm_enc)
  );

  assign id_use_imm = (id_op_i == OP_RADDI) || (id_op_i == OP_RLOAD) || (id_op_i == OP_RSTORE);
  assign id_opb     = id_use_imm ? imm_enc : id_rs2_i;

  // ------------------------------------------------------------ ID/EX register
  typedef struct packed {
    logic             valid;
    rptr_op_e         op;
    logic [4:0]       rd;
    logic [XLEN-1:0]  rs1;
    logic [XLEN-1:0]  opb;
    logic [XLEN-1:0]  sdata;
    logic [IMM_W-1:0] imm;
    mem_size_e        size;
    logic             uns;
  } idex_t;

  idex_t ex_q;
  logic  ex_ready;

  assign id_ready_o = !ex_q.valid || ex_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ex_q <= '0;
    end else if (id_ready_o) begin
      ex_q.valid <= id_valid_i;
      ex_q.op    <= id_op_i;
      ex_q.rd    <= id_rd_i;
      ex_q.rs1   <= id_rs1_i;
      ex_q.opb   <= id_opb;
      ex_q.sdata <= id_rs2_i;
      ex_q.imm   <= id_imm_i;
      ex_q.size  <= id_size_i;
      ex_q.uns   <= id_unsigned_i;
    end
  end

  // ------------------------------------------------------------ execute stage
  res_op_e             alu_op;
  logic [XLEN-1:0]     alu_res;
  logic [NUM_RES-1:0]  alu_err;
  logic                ex_is_mem, ex_is_prot, ex_is_store, ex_fault;
  logic [XLEN-1:0]     plain_addr, mem_addr;
  logic                lsu_ready, lsu_req;

  always_comb begin
    unique case (ex_q.op)
      OP_RENC:                               alu_op = RES_RENC;
      OP_RDEC:                               alu_op = RES_RDEC;
      OP_RADD, OP_RADDI, OP_RLOAD, OP_RSTORE: alu_op = RES_RADD;
      OP_RSUB:                               alu_op = RES_RSUB;
      default:                               alu_op = RES_NONE;
    endcase
  end

  res_alu u_res_alu (
    .op_i        (ex_q.valid ? alu_op : RES_NONE),
    .rs1_i       (ex_q.rs1),
    .rs2_i       (ex_q.opb),
    .result_o    (alu_res),
    .res_error_o (alu_err)
  );

  assign res_error_o = alu_err;
  assign ex_fault    = |alu_err;

  assign ex_is_prot  = (ex_q.op == OP_RLOAD) || (ex_q.op == OP_RSTORE);
  assign ex_is_mem   = ex_is_prot || (ex_q.op == OP_LOAD) || (ex_q.op == OP_STORE);
  assign ex_is_store = (ex_q.op == OP_RSTORE) || (ex_q.op == OP_STORE);

  // plain RISC-V address path (base ALU): rs1 + sign-extended immediate
  assign plain_addr = ex_q.rs1 + {{(XLEN-IMM_W){ex_q.imm[IMM_W-1]}}, ex_q.imm};
  // protected path: the checked encoded sum, decoded to its functional value
  assign mem_addr   = ex_is_prot ? {{RES_W{1'b0}}, alu_res[FUNC_W-1:0]} : plain_addr;

  // execute may only move on while the LSU is idle (in-order retirement)
  assign ex_ready = lsu_ready;
  assign lsu_req  = ex_q.valid && ex_is_mem && !ex_fault && lsu_ready;

  // ------------------------------------------------------------ LSU
  logic            lsu_resp_valid, lsu_resp_we, lsu_resp_split;
  logic [XLEN-1:0] lsu_rdata;
  logic [4:0]      lsu_rd_q;

  protected_lsu u_lsu (
    .clk_i          (clk_i),
    .rst_ni         (rst_ni),
    .req_valid_i    (lsu_req),
    .req_ready_o    (lsu_ready),
    .req_addr_i     (mem_addr),
    .req_we_i       (ex_is_store),
    .req_size_i     (ex_q.size),
    .req_unsigned_i (ex_q.uns),
    .req_link_i     (ex_is_prot),
    .req_wdata_i    (ex_q.sdata),
    .data_req_o     (data_req_o),
    .data_gnt_i     (data_gnt_i),
    .data_rvalid_i  (data_rvalid_i),
    .data_addr_o    (data_addr_o),
    .data_we_o      (data_we_o),
    .data_be_o      (data_be_o),
    .data_wdata_o   (data_wdata_o),
    .data_rdata_i   (data_rdata_i),
    .resp_valid_o   (lsu_resp_valid),
    .resp_we_o      (lsu_resp_we),
    .resp_split_o   (lsu_resp_split),
    .resp_rdata_o   (lsu_rdata)
  );

  // ------------------------------------------------------------ EX/WB register
  typedef struct packed {
    logic            valid;
    logic            we;
    logic [4:0]      rd;
    logic [XLEN-1:0] data;
    logic            err;
  } exwb_t;

  exwb_t wb_q;
  logic  alarm_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wb_q     <= '0;
      lsu_rd_q <= '0;
      alarm_q  <= 1'b0;
    end else begin
      // residue ALU results and faulted memory operations retire from here
      wb_q.valid <= ex_q.valid && ex_ready && (!ex_is_mem || ex_fault) && (ex_q.op != OP_NONE);
      wb_q.we    <= !ex_fault;
      wb_q.rd    <= ex_q.rd;
      wb_q.data  <= alu_res;
      wb_q.err   <= ex_fault;
      if (lsu_req) lsu_rd_q <= ex_q.rd;
      if (ex_q.valid && ex_fault) alarm_q <= 1'b1;
    end
  end

  // ------------------------------------------------------------ write-back
  always_comb begin
    if (lsu_resp_valid) begin
      wb_valid_o = 1'b1;
      wb_we_o    = !lsu_resp_we;
      wb_rd_o    = lsu_rd_q;
      wb_data_o  = lsu_rdata;
      wb_err_o   = 1'b0;
    end else begin
      wb_valid_o = wb_q.valid;
      wb_we_o    = wb_q.valid && wb_q.we;
      wb_rd_o    = wb_q.rd;
      wb_data_o  = wb_q.data;
      wb_err_o   = wb_q.err;
    end
  end

  assign alarm_o   = alarm_q;
  assign split_o   = lsu_resp_valid && lsu_resp_split;

  // the two write-back sources never coincide
  a_wb_exclusive: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                   !(lsu_resp_valid && wb_q.valid));

endmodule
