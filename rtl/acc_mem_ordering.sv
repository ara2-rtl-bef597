// acc_mem_ordering: keeps scalar and vector memory accesses in program order.
//
// The scalar core and the vector unit reach memory over separate ports, so
// the system enforces the three rules of the paper:
//  * a scalar load may issue only when no vector store is in flight,
//  * a scalar store may issue only when no vector load or store is in flight,
//  * a vector memory instruction is offloaded only when no scalar store is
//    pending in the core.
// Two counters track the vector loads and stores that have been handed to the
// vector unit (acc request handshake with a load/store opcode) and not yet
// finished (load_done_i/store_done_i from the VLSU, or drop_i for memory
// instructions the vector unit rejects or skips because vl = 0).
//
// acc_req_* passes through, except that a vector memory instruction is held
// back (valid and ready both masked) while scalar_st_pending_i is high.
// Stall pulses (*_stall_o) report when a rule held something back.
// Counter width (CntWidth) is this design's choice; an assertion checks that
// it never overflows.
module acc_mem_ordering
  import ara_pkg::*;
#(
  parameter int unsigned CntWidth = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // core -> vector unit
  input  logic     core_req_valid_i,
  input  acc_req_t core_req_i,
  output logic     core_req_ready_o,
  output logic     ara_req_valid_o,
  output acc_req_t ara_req_o,
  input  logic     ara_req_ready_i,
  // vector unit status
  input  logic     load_done_i,
  input  logic     store_done_i,
  input  logic     drop_i,
  input  logic     drop_st_i,
  // scalar memory requests
  input  logic     scalar_ld_req_i,
  input  logic     scalar_st_req_i,
  input  logic     scalar_st_pending_i,
  output logic     scalar_ld_allow_o,
  output logic     scalar_st_allow_o,
  output logic     scalar_ld_stall_o,
  output logic     scalar_st_stall_o,
  output logic     vec_mem_stall_o,
  output logic [CntWidth-1:0] vld_cnt_o,
  output logic [CntWidth-1:0] vst_cnt_o
);
  logic [CntWidth-1:0] vld_q, vst_q;
  logic is_vld, is_vst, hold, fire;

  assign is_vld = (core_req_i.insn[6:0] == 7'b0000111);
  assign is_vst = (core_req_i.insn[6:0] == 7'b0100111);
  assign hold   = (is_vld || is_vst) && scalar_st_pending_i;

  assign ara_req_valid_o  = core_req_valid_i && !hold;
  assign ara_req_o        = core_req_i;
  assign core_req_ready_o = ara_req_ready_i && !hold;
  assign fire             = ara_req_valid_o && ara_req_ready_i;

  assign scalar_ld_allow_o = (vst_q == '0);
  assign scalar_st_allow_o = (vst_q == '0) && (vld_q == '0);
  assign scalar_ld_stall_o = scalar_ld_req_i && !scalar_ld_allow_o;
  assign scalar_st_stall_o = scalar_st_req_i && !scalar_st_allow_o;
  assign vec_mem_stall_o   = core_req_valid_i && hold;
  assign vld_cnt_o         = vld_q;
  assign vst_cnt_o         = vst_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vld_q <= '0;
      vst_q <= '0;
    end else begin
      vld_q <= vld_q + CntWidth'(fire && is_vld)
                     - CntWidth'(load_done_i || (drop_i && !drop_st_i));
      vst_q <= vst_q + CntWidth'(fire && is_vst)
                     - CntWidth'(store_done_i || (drop_i && drop_st_i));
    end
  end

  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(fire && is_vld && (&vld_q)) && !(fire && is_vst && (&vst_q)));
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(load_done_i && vld_q == '0) && !(store_done_i && vst_q == '0));
endmodule
