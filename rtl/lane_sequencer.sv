// lane_sequencer: turns an instruction into the work of one lane.
//
// For an instruction broadcast by the main sequencer it works out how many
// elements fall into this lane (element e lives in lane e mod NrLanes) and how
// many 64-bit words they fill, then in one cycle issues:
//  * a fetch command to the operand requester for every operand queue the
//    instruction needs (vs2/vs1 for the VALU or VMFPU, old vd for vmacc, store
//    data for the VSTU, the whole source register for the SLDU, v0 for masked
//    execution and the mask operand of vcpop/vfirst for the MASKU);
//  * the operation to the VALU or VMFPU.
// It accepts the instruction (pe_ready_o) only when every queue and unit it
// needs is free, so all of them start together. Vector loads need nothing from
// the lane's read side and are accepted at once.
module lane_sequencer
  import ara_pkg::*;
#(
  parameter int unsigned NrLanes         = ara_pkg::NrLanes,
  parameter int unsigned LaneId          = 0,
  parameter int unsigned WordsPerRegLane = ara_pkg::VLENPerLane / 64,
  parameter int unsigned NrQ             = ara_pkg::NrOpQueues
) (
  input  logic           pe_valid_i,
  input  pe_req_t        pe_req_i,
  output logic           pe_ready_o,
  // Operand requester commands
  output logic [NrQ-1:0] cmd_valid_o,
  output vreg_t          cmd_vreg_o   [NrQ],
  output vlen_t          cmd_nwords_o [NrQ],
  input  logic [NrQ-1:0] cmd_ready_i,
  // Functional units
  output logic           alu_valid_o,
  input  logic           alu_ready_i,
  output logic           mul_valid_o,
  input  logic           mul_ready_i,
  output pe_req_t        vfu_req_o
);
  logic [NrQ-1:0] need;
  logic           need_alu, need_mul, all_ready;
  vlen_t          nwords;
  ara_op_e        op;

  assign op        = pe_req_i.op;
  assign nwords    = words_of(lane_elems(pe_req_i.vl, LaneId, NrLanes), pe_req_i.ew);
  assign vfu_req_o = pe_req_i;

  always_comb begin
    need     = '0;
    need_alu = 1'b0;
    need_mul = 1'b0;
    for (int q = 0; q < NrQ; q++) begin
      cmd_vreg_o[q]   = '0;
      cmd_nwords_o[q] = nwords;
    end
    if (is_alu_op(op) || is_cmp_op(op) || is_red_op(op)) begin
      need_alu = 1'b1;
      if (!(op == OP_VMERGE && pe_req_i.vm)) begin
        need[Q_ALU_A]     = 1'b1;
        cmd_vreg_o[Q_ALU_A] = pe_req_i.vs2;
      end
      if (is_red_op(op)) begin
        need[Q_ALU_B]         = (LaneId == 0);
        cmd_vreg_o[Q_ALU_B]   = pe_req_i.vs1;
        cmd_nwords_o[Q_ALU_B] = vlen_t'(1);
      end else if (pe_req_i.use_vs1) begin
        need[Q_ALU_B]       = 1'b1;
        cmd_vreg_o[Q_ALU_B] = pe_req_i.vs1;
      end
    end
    if (is_mul_op(op)) begin
      need_mul            = 1'b1;
      need[Q_MUL_A]       = 1'b1;
      cmd_vreg_o[Q_MUL_A] = pe_req_i.vs2;
      need[Q_MUL_B]       = pe_req_i.use_vs1;
      cmd_vreg_o[Q_MUL_B] = pe_req_i.vs1;
      need[Q_MUL_C]       = (op == OP_VMACC);
      cmd_vreg_o[Q_MUL_C] = pe_req_i.vd;
    end
    if (is_store_op(op)) begin
      need[Q_ST]       = 1'b1;
      cmd_vreg_o[Q_ST] = pe_req_i.vd;
    end
    if (is_sld_op(op)) begin
      need[Q_SLD]         = 1'b1;
      cmd_vreg_o[Q_SLD]   = pe_req_i.vs2;
      cmd_nwords_o[Q_SLD] = vlen_t'(WordsPerRegLane);
    end
    if (is_mask_scalar_op(op)) begin
      need[Q_MASK_A]         = 1'b1;
      cmd_vreg_o[Q_MASK_A]   = pe_req_i.vs2;
      cmd_nwords_o[Q_MASK_A] = vlen_t'(WordsPerRegLane);
    end
    if (!pe_req_i.vm) begin
      need[Q_MASK_M]         = 1'b1;
      cmd_vreg_o[Q_MASK_M]   = '0;
      cmd_nwords_o[Q_MASK_M] = vlen_t'(WordsPerRegLane);
    end
  end

  assign all_ready   = ((need & ~cmd_ready_i) == '0) && (!need_alu || alu_ready_i) &&
                       (!need_mul || mul_ready_i);
  assign pe_ready_o  = all_ready;
  assign cmd_valid_o = (pe_valid_i && all_ready) ? need : '0;
  assign alu_valid_o = pe_valid_i && all_ready && need_alu;
  assign mul_valid_o = pe_valid_i && all_ready && need_mul;
endmodule
