// ara2: the vector processor. Dispatcher, sequencer, NrLanes lanes, and the
// three units that span all lanes: load/store (VLSU), slide (SLDU) and mask
// (MASKU) unit.
//
// The dispatcher decodes instructions from the scalar core (acc_req/acc_resp)
// and hands them to the sequencer, which broadcasts each one to the lanes and
// the units it needs (participants() in ara_pkg). Lanes hold the VRF slices
// and the VALU/VMFPU; they feed operands to the units through per-lane
// operand queues and receive their results through dedicated VRF write ports.
// The VLSU has one memory port (mem_req/mem_rsp, MemBytes wide, in-order, one
// response per request).
//
// Status outputs: load_done_o/store_done_o pulse when a vector load/store
// finishes (used by the system for memory ordering), store_pending_o is high
// while a vector store is in flight, idle_o when nothing is in flight,
// stall_o when the sequencer holds an operation back (hazard, full window or
// a busy unit) and reshuffle_o when the dispatcher injects a reshuffle.
// mem_drop_o/mem_drop_st_o flag a vector load/store answered without running.
module ara2
  import ara_pkg::*;
#(
  parameter int unsigned NrLanes         = ara_pkg::NrLanes,
  parameter int unsigned WordsPerRegLane = ara_pkg::VLENPerLane / 64,
  parameter int unsigned MemBytes        = 4 * NrLanes,
  localparam int unsigned VLENBits       = 64 * WordsPerRegLane * NrLanes
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  acc_req_valid_i,
  input  acc_req_t              acc_req_i,
  output logic                  acc_req_ready_o,
  output logic                  acc_resp_valid_o,
  output acc_resp_t             acc_resp_o,
  output logic                  mem_req_valid_o,
  input  logic                  mem_req_ready_i,
  output logic [63:0]           mem_req_addr_o,
  output logic                  mem_req_we_o,
  output logic [MemBytes*8-1:0] mem_req_wdata_o,
  output logic [MemBytes-1:0]   mem_req_be_o,
  input  logic                  mem_rsp_valid_i,
  input  logic [MemBytes*8-1:0] mem_rsp_rdata_i,
  output logic                  load_done_o,
  output logic                  store_done_o,
  output logic                  store_pending_o,
  output logic                  idle_o,
  output logic                  stall_o,
  output logic                  reshuffle_o,
  output logic                  mem_drop_o,
  output logic                  mem_drop_st_o
);
  // dispatcher <-> sequencer
  logic    seq_valid, seq_ready;
  pe_req_t seq_req;
  logic    ack, ack_err, mres_valid;
  logic [63:0] mres;
  vlen_t   vl_unused;
  logic [7:0] vtype_unused;

  dispatcher #(.VLENBits(VLENBits)) i_disp (
    .clk_i, .rst_ni,
    .acc_req_valid_i, .acc_req_i, .acc_req_ready_o,
    .acc_resp_valid_o, .acc_resp_o,
    .seq_req_valid_o(seq_valid), .seq_req_o(seq_req), .seq_req_ready_i(seq_ready),
    .vlsu_ack_i(ack), .vlsu_ack_err_i(ack_err),
    .mask_res_valid_i(mres_valid), .mask_res_i(mres),
    .reshuffle_o, .mem_drop_o, .mem_drop_st_o, .vl_o(vl_unused), .vtype_o(vtype_unused)
  );

  logic               pe_valid;
  pe_req_t            pe_req;
  logic [NrUnits-1:0] unit_ready, part;
  logic [NrLanes-1:0] alu_done, mul_done, lane_ready;
  insn_id_t           alu_id [NrLanes], mul_id [NrLanes];
  logic               vlsu_done, sldu_done, masku_done;
  insn_id_t           vlsu_id, sldu_id, masku_id;
  logic [$clog2(NrInsnWindow+1)-1:0] inflight_unused;

  sequencer #(.NrLanes(NrLanes)) i_seq (
    .clk_i, .rst_ni,
    .req_valid_i(seq_valid), .req_i(seq_req), .req_ready_o(seq_ready),
    .pe_valid_o(pe_valid), .pe_req_o(pe_req), .unit_ready_i(unit_ready),
    .alu_done_i(alu_done), .alu_done_id_i(alu_id),
    .mul_done_i(mul_done), .mul_done_id_i(mul_id),
    .vlsu_done_i(vlsu_done), .vlsu_done_id_i(vlsu_id),
    .sldu_done_i(sldu_done), .sldu_done_id_i(sldu_id),
    .masku_done_i(masku_done), .masku_done_id_i(masku_id),
    .idle_o, .inflight_o(inflight_unused)
  );
  assign part    = participants(pe_req.op, pe_req.vm);
  assign stall_o = seq_valid && !seq_ready;

  // lane <-> unit signals
  logic [NrLanes-1:0] st_valid, st_pop, sld_valid, sld_pop, mm_valid, mm_pop, ma_valid, ma_pop;
  logic [63:0]        st_data [NrLanes], sld_data [NrLanes], mm_data [NrLanes], ma_data [NrLanes];
  logic [NrLanes-1:0] ldw_valid, ldw_ready, sldw_valid, sldw_ready, mw_valid, mw_ready;
  vrf_wr_t            ldw [NrLanes], sldw [NrLanes], mw [NrLanes];
  logic [NrLanes-1:0] mk_valid, mk_pop, cmp_valid, cmp_ready, red_valid, red_use;
  logic [7:0]         mk_be [NrLanes], cmp_flags [NrLanes];
  logic [63:0]        red_data [NrLanes], red_in [NrLanes];
  logic               red_in_valid;
  logic               vlsu_ready, sldu_ready, masku_ready;

  for (genvar l = 0; l < NrLanes; l++) begin : g_lane
    lane #(.NrLanes(NrLanes), .LaneId(l), .WordsPerRegLane(WordsPerRegLane)) i_lane (
      .clk_i, .rst_ni,
      .pe_valid_i(pe_valid && part[U_LANES]), .pe_req_i(pe_req), .pe_ready_o(lane_ready[l]),
      .st_valid_o(st_valid[l]), .st_data_o(st_data[l]), .st_pop_i(st_pop[l]),
      .sld_valid_o(sld_valid[l]), .sld_data_o(sld_data[l]), .sld_pop_i(sld_pop[l]),
      .maskm_valid_o(mm_valid[l]), .maskm_data_o(mm_data[l]), .maskm_pop_i(mm_pop[l]),
      .maska_valid_o(ma_valid[l]), .maska_data_o(ma_data[l]), .maska_pop_i(ma_pop[l]),
      .ld_wr_valid_i(ldw_valid[l]), .ld_wr_i(ldw[l]), .ld_wr_ready_o(ldw_ready[l]),
      .sld_wr_valid_i(sldw_valid[l]), .sld_wr_i(sldw[l]), .sld_wr_ready_o(sldw_ready[l]),
      .mask_wr_valid_i(mw_valid[l]), .mask_wr_i(mw[l]), .mask_wr_ready_o(mw_ready[l]),
      .mask_valid_i(mk_valid[l]), .mask_be_i(mk_be[l]), .mask_pop_o(mk_pop[l]),
      .cmp_valid_o(cmp_valid[l]), .cmp_flags_o(cmp_flags[l]), .cmp_ready_i(cmp_ready[l]),
      .red_valid_o(red_valid[l]), .red_data_o(red_data[l]),
      .red_in_valid_i(red_in_valid), .red_in_use_i(red_use[l]), .red_in_data_i(red_in[l]),
      .alu_done_o(alu_done[l]), .alu_done_id_o(alu_id[l]),
      .mul_done_o(mul_done[l]), .mul_done_id_o(mul_id[l])
    );
  end

  vlsu #(.NrLanes(NrLanes), .WordsPerRegLane(WordsPerRegLane), .MemBytes(MemBytes)) i_vlsu (
    .clk_i, .rst_ni,
    .pe_valid_i(pe_valid && part[U_VLSU]), .pe_req_i(pe_req), .pe_ready_o(vlsu_ready),
    .st_valid_i(st_valid), .st_data_i(st_data), .st_pop_o(st_pop),
    .ld_wr_valid_o(ldw_valid), .ld_wr_o(ldw), .ld_wr_ready_i(ldw_ready),
    .mem_req_valid_o, .mem_req_ready_i, .mem_req_addr_o, .mem_req_we_o,
    .mem_req_wdata_o, .mem_req_be_o, .mem_rsp_valid_i, .mem_rsp_rdata_i,
    .ack_o(ack), .ack_err_o(ack_err),
    .done_o(vlsu_done), .done_id_o(vlsu_id),
    .load_done_o, .store_done_o, .store_pending_o
  );

  sldu #(.NrLanes(NrLanes), .WordsPerRegLane(WordsPerRegLane)) i_sldu (
    .clk_i, .rst_ni,
    .pe_valid_i(pe_valid && part[U_SLDU]), .pe_req_i(pe_req), .pe_ready_o(sldu_ready),
    .sld_valid_i(sld_valid), .sld_data_i(sld_data), .sld_pop_o(sld_pop),
    .wr_valid_o(sldw_valid), .wr_o(sldw), .wr_ready_i(sldw_ready),
    .red_valid_i(red_valid), .red_data_i(red_data),
    .red_in_valid_o(red_in_valid), .red_in_use_o(red_use), .red_in_data_o(red_in),
    .done_o(sldu_done), .done_id_o(sldu_id)
  );

  masku #(.NrLanes(NrLanes), .WordsPerRegLane(WordsPerRegLane)) i_masku (
    .clk_i, .rst_ni,
    .pe_valid_i(pe_valid && part[U_MASKU]), .pe_req_i(pe_req), .pe_ready_o(masku_ready),
    .maskm_valid_i(mm_valid), .maskm_data_i(mm_data), .maskm_pop_o(mm_pop),
    .maska_valid_i(ma_valid), .maska_data_i(ma_data), .maska_pop_o(ma_pop),
    .mask_valid_o(mk_valid), .mask_be_o(mk_be), .mask_pop_i(mk_pop),
    .cmp_valid_i(cmp_valid), .cmp_flags_i(cmp_flags), .cmp_ready_o(cmp_ready),
    .wr_valid_o(mw_valid), .wr_o(mw), .wr_ready_i(mw_ready),
    .result_valid_o(mres_valid), .result_o(mres),
    .done_o(masku_done), .done_id_o(masku_id)
  );

  always_comb begin
    unit_ready          = '0;
    unit_ready[U_LANES] = &lane_ready;
    unit_ready[U_VLSU]  = vlsu_ready;
    unit_ready[U_SLDU]  = sldu_ready;
    unit_ready[U_MASKU] = masku_ready;
    unit_ready[U_MUL]   = 1'b1;
  end

  a_ack_only_when_busy: assert property (@(posedge clk_i) disable iff (!rst_ni)
    ack |-> !idle_o || vlsu_done);
endmodule
