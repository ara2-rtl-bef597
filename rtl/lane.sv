// lane: one vector lane.
//
// Holds 1/NrLanes of the vector register file (eight single-port banks), the
// lane sequencer, the operand requester with its bank arbiter and crossbars,
// the operand queues, and two functional units: the VALU (integer ALU with
// reduction support) and the VMFPU (multiplier). Units outside the lanes use
// it through:
//  * four read queues, each a valid/pop word stream: store data (VSTU), slide
//    source (SLDU), v0 and the vcpop/vfirst operand (MASKU);
//  * three write ports (valid/ready, lane-local word address and byte enables)
//    for the VLDU, the SLDU and the MASKU;
//  * the mask byte-enable stream from the MASKU, the compare-flag stream to
//    the MASKU and the reduction exchange with the SLDU.
// done pulses report the end of an instruction in the VALU and in the VMFPU.
module lane
  import ara_pkg::*;
#(
  parameter int unsigned NrLanes         = ara_pkg::NrLanes,
  parameter int unsigned LaneId          = 0,
  parameter int unsigned WordsPerRegLane = ara_pkg::VLENPerLane / 64,
  parameter int unsigned NrBanks         = ara_pkg::NrBanks,
  parameter int unsigned QDepth          = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // Instruction
  input  logic        pe_valid_i,
  input  pe_req_t     pe_req_i,
  output logic        pe_ready_o,
  // Read queues towards units outside the lane
  output logic        st_valid_o,
  output logic [63:0] st_data_o,
  input  logic        st_pop_i,
  output logic        sld_valid_o,
  output logic [63:0] sld_data_o,
  input  logic        sld_pop_i,
  output logic        maskm_valid_o,
  output logic [63:0] maskm_data_o,
  input  logic        maskm_pop_i,
  output logic        maska_valid_o,
  output logic [63:0] maska_data_o,
  input  logic        maska_pop_i,
  // Write ports from units outside the lane
  input  logic        ld_wr_valid_i,
  input  vrf_wr_t     ld_wr_i,
  output logic        ld_wr_ready_o,
  input  logic        sld_wr_valid_i,
  input  vrf_wr_t     sld_wr_i,
  output logic        sld_wr_ready_o,
  input  logic        mask_wr_valid_i,
  input  vrf_wr_t     mask_wr_i,
  output logic        mask_wr_ready_o,
  // Mask byte-enables from the MASKU
  input  logic        mask_valid_i,
  input  logic [7:0]  mask_be_i,
  output logic        mask_pop_o,
  // Compare flags to the MASKU
  output logic        cmp_valid_o,
  output logic [7:0]  cmp_flags_o,
  input  logic        cmp_ready_i,
  // Reduction exchange with the SLDU
  output logic        red_valid_o,
  output logic [63:0] red_data_o,
  input  logic        red_in_valid_i,
  input  logic        red_in_use_i,
  input  logic [63:0] red_in_data_i,
  // Completion
  output logic        alu_done_o,
  output insn_id_t    alu_done_id_o,
  output logic        mul_done_o,
  output insn_id_t    mul_done_id_o
);
  localparam int unsigned NrQ       = NrOpQueues;
  localparam int unsigned NrWp      = NrWrPorts;
  localparam int unsigned BankDepth = NrVRegs * WordsPerRegLane / NrBanks;
  localparam int unsigned BAW       = $clog2(BankDepth);
  localparam int unsigned QCW       = $clog2(QDepth + 1);

  // Lane sequencer <-> operand requester / VFUs
  logic [NrQ-1:0] cmd_valid, cmd_ready;
  vreg_t          cmd_vreg   [NrQ];
  vlen_t          cmd_nwords [NrQ];
  logic           alu_cmd_valid, alu_cmd_ready, mul_cmd_valid, mul_cmd_ready;
  pe_req_t        vfu_req;

  lane_sequencer #(.NrLanes(NrLanes), .LaneId(LaneId), .WordsPerRegLane(WordsPerRegLane),
                   .NrQ(NrQ)) i_lane_seq (
    .pe_valid_i, .pe_req_i, .pe_ready_o,
    .cmd_valid_o(cmd_valid), .cmd_vreg_o(cmd_vreg), .cmd_nwords_o(cmd_nwords),
    .cmd_ready_i(cmd_ready),
    .alu_valid_o(alu_cmd_valid), .alu_ready_i(alu_cmd_ready),
    .mul_valid_o(mul_cmd_valid), .mul_ready_i(mul_cmd_ready),
    .vfu_req_o(vfu_req)
  );

  // Operand queues
  logic [QCW-1:0] q_space [NrQ];
  logic [NrQ-1:0] q_push, q_pop, q_valid;
  logic [63:0]    q_wdata [NrQ];
  logic [63:0]    q_rdata [NrQ];

  for (genvar q = 0; q < NrQ; q++) begin : g_q
    operand_queue #(.Depth(QDepth)) i_q (
      .clk_i, .rst_ni, .flush_i(1'b0),
      .push_i(q_push[q]), .data_i(q_wdata[q]),
      .pop_i(q_pop[q]), .valid_o(q_valid[q]), .data_o(q_rdata[q]), .space_o(q_space[q])
    );
  end

  // Write ports
  logic [NrWp-1:0] wr_valid, wr_ready;
  vrf_wr_t         wr [NrWp];

  // Banks
  logic [NrBanks-1:0] bank_req, bank_we;
  logic [BAW-1:0]     bank_addr  [NrBanks];
  logic [63:0]        bank_wdata [NrBanks];
  logic [7:0]         bank_be    [NrBanks];
  logic [63:0]        bank_rdata [NrBanks];

  operand_requester #(.NrBanks(NrBanks), .WordsPerRegLane(WordsPerRegLane), .NrQ(NrQ),
                      .NrWp(NrWp), .QDepth(QDepth)) i_opreq (
    .clk_i, .rst_ni,
    .cmd_valid_i(cmd_valid), .cmd_vreg_i(cmd_vreg), .cmd_nwords_i(cmd_nwords),
    .cmd_ready_o(cmd_ready),
    .q_space_i(q_space), .q_push_o(q_push), .q_data_o(q_wdata),
    .wr_valid_i(wr_valid), .wr_i(wr), .wr_ready_o(wr_ready),
    .bank_req_o(bank_req), .bank_we_o(bank_we), .bank_addr_o(bank_addr),
    .bank_wdata_o(bank_wdata), .bank_be_o(bank_be), .bank_rdata_i(bank_rdata)
  );

  for (genvar b = 0; b < NrBanks; b++) begin : g_bank
    vrf_bank #(.Depth(BankDepth)) i_bank (
      .clk_i, .req_i(bank_req[b]), .we_i(bank_we[b]), .addr_i(bank_addr[b]),
      .wdata_i(bank_wdata[b]), .be_i(bank_be[b]), .rdata_o(bank_rdata[b])
    );
  end

  // Functional units
  logic alu_a_pop, alu_b_pop, alu_m_pop, mul_a_pop, mul_b_pop, mul_c_pop, mul_m_pop;

  valu #(.NrLanes(NrLanes), .LaneId(LaneId), .WordsPerRegLane(WordsPerRegLane)) i_valu (
    .clk_i, .rst_ni,
    .cmd_valid_i(alu_cmd_valid), .cmd_i(vfu_req), .cmd_ready_o(alu_cmd_ready),
    .a_valid_i(q_valid[Q_ALU_A]), .a_data_i(q_rdata[Q_ALU_A]), .a_pop_o(alu_a_pop),
    .b_valid_i(q_valid[Q_ALU_B]), .b_data_i(q_rdata[Q_ALU_B]), .b_pop_o(alu_b_pop),
    .mask_valid_i, .mask_be_i, .mask_pop_o(alu_m_pop),
    .wr_valid_o(wr_valid[WP_ALU]), .wr_o(wr[WP_ALU]), .wr_ready_i(wr_ready[WP_ALU]),
    .cmp_valid_o, .cmp_flags_o, .cmp_ready_i,
    .red_valid_o, .red_data_o, .red_in_valid_i, .red_in_use_i, .red_in_data_i,
    .done_o(alu_done_o), .done_id_o(alu_done_id_o)
  );

  vmfpu #(.NrLanes(NrLanes), .LaneId(LaneId), .WordsPerRegLane(WordsPerRegLane)) i_vmfpu (
    .clk_i, .rst_ni,
    .cmd_valid_i(mul_cmd_valid), .cmd_i(vfu_req), .cmd_ready_o(mul_cmd_ready),
    .a_valid_i(q_valid[Q_MUL_A]), .a_data_i(q_rdata[Q_MUL_A]), .a_pop_o(mul_a_pop),
    .b_valid_i(q_valid[Q_MUL_B]), .b_data_i(q_rdata[Q_MUL_B]), .b_pop_o(mul_b_pop),
    .c_valid_i(q_valid[Q_MUL_C]), .c_data_i(q_rdata[Q_MUL_C]), .c_pop_o(mul_c_pop),
    .mask_valid_i, .mask_be_i, .mask_pop_o(mul_m_pop),
    .wr_valid_o(wr_valid[WP_MUL]), .wr_o(wr[WP_MUL]), .wr_ready_i(wr_ready[WP_MUL]),
    .done_o(mul_done_o), .done_id_o(mul_done_id_o)
  );

  assign mask_pop_o = alu_m_pop | mul_m_pop;

  always_comb begin
    q_pop           = '0;
    q_pop[Q_ALU_A]  = alu_a_pop;
    q_pop[Q_ALU_B]  = alu_b_pop;
    q_pop[Q_MUL_A]  = mul_a_pop;
    q_pop[Q_MUL_B]  = mul_b_pop;
    q_pop[Q_MUL_C]  = mul_c_pop;
    q_pop[Q_ST]     = st_pop_i;
    q_pop[Q_SLD]    = sld_pop_i;
    q_pop[Q_MASK_M] = maskm_pop_i;
    q_pop[Q_MASK_A] = maska_pop_i;
  end

  assign st_valid_o    = q_valid[Q_ST];
  assign st_data_o     = q_rdata[Q_ST];
  assign sld_valid_o   = q_valid[Q_SLD];
  assign sld_data_o    = q_rdata[Q_SLD];
  assign maskm_valid_o = q_valid[Q_MASK_M];
  assign maskm_data_o  = q_rdata[Q_MASK_M];
  assign maska_valid_o = q_valid[Q_MASK_A];
  assign maska_data_o  = q_rdata[Q_MASK_A];

  assign wr_valid[WP_LD]   = ld_wr_valid_i;
  assign wr[WP_LD]         = ld_wr_i;
  assign ld_wr_ready_o     = wr_ready[WP_LD];
  assign wr_valid[WP_SLD]  = sld_wr_valid_i;
  assign wr[WP_SLD]        = sld_wr_i;
  assign sld_wr_ready_o    = wr_ready[WP_SLD];
  assign wr_valid[WP_MASK] = mask_wr_valid_i;
  assign wr[WP_MASK]       = mask_wr_i;
  assign mask_wr_ready_o   = wr_ready[WP_MASK];
endmodule
