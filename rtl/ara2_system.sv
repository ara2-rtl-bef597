// ara2_system: a single-core Ara2 system. The vector unit (ara2), the memory
// ordering logic, the D$ invalidation filter, the memory interconnect and the
// main memory.
//
// The scalar core (CVA6) and its L1 caches are not part of this design. Their
// connections are ports of this module:
//  * acc_req/acc_resp: vector instructions offloaded by the core, with the
//    values of rs1/rs2, and their responses;
//  * scalar_*: the core's scalar loads/stores ask whether they may issue
//    (memory ordering between scalar and vector accesses);
//  * cva_*: the L1 caches' port to main memory (refills, write-through);
//  * inval_*: invalidation port of the write-through D$.
// The vector unit's port to memory is MemBytes = 4 x NrLanes bytes wide
// (paper: the VLSU port width scales with the lane count), goes through the
// invalidation filter, and reaches memory with AraLatency cycles of latency;
// the caches' port has CvaLatency cycles.
//
// events_o flags one-cycle events for performance counting (see
// ara_pkg::sys_events_t).
module ara2_system
  import ara_pkg::*;
#(
  parameter int unsigned NrLanes         = ara_pkg::NrLanes,
  parameter int unsigned WordsPerRegLane = ara_pkg::VLENPerLane / 64,
  parameter int unsigned AraLatency      = 7,
  parameter int unsigned CvaLatency      = 5,
  parameter int unsigned MemWords        = 2097152,
  parameter int unsigned DCacheLineBytes = 32,
  parameter int unsigned DCacheIndexBits = 6,
  localparam int unsigned MemBytes       = 4 * NrLanes,
  localparam int unsigned DW             = 8 * MemBytes
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  // instruction offload from the scalar core
  input  logic                       acc_req_valid_i,
  input  acc_req_t                   acc_req_i,
  output logic                       acc_req_ready_o,
  output logic                       acc_resp_valid_o,
  output acc_resp_t                  acc_resp_o,
  // scalar memory ordering
  input  logic                       scalar_ld_req_i,
  input  logic                       scalar_st_req_i,
  input  logic                       scalar_st_pending_i,
  output logic                       scalar_ld_allow_o,
  output logic                       scalar_st_allow_o,
  // scalar caches <-> memory
  input  logic                       cva_req_valid_i,
  output logic                       cva_req_ready_o,
  input  logic [63:0]                cva_req_addr_i,
  input  logic                       cva_req_we_i,
  input  logic [DW-1:0]              cva_req_wdata_i,
  input  logic [MemBytes-1:0]        cva_req_be_i,
  output logic                       cva_rsp_valid_o,
  output logic [DW-1:0]              cva_rsp_rdata_o,
  // D$ invalidation
  output logic                       inval_valid_o,
  output logic [DCacheIndexBits-1:0] inval_index_o,
  input  logic                       inval_ready_i,
  // status
  output logic                       ara_idle_o,
  output sys_events_t                events_o
);
  // ordering
  logic     ara_req_valid, ara_req_ready, ld_done, st_done, st_pend, drop, drop_st;
  acc_req_t ara_req;
  logic [3:0] vld_cnt, vst_cnt;

  acc_mem_ordering #(.CntWidth(4)) i_order (
    .clk_i, .rst_ni,
    .core_req_valid_i(acc_req_valid_i), .core_req_i(acc_req_i), .core_req_ready_o(acc_req_ready_o),
    .ara_req_valid_o(ara_req_valid), .ara_req_o(ara_req), .ara_req_ready_i(ara_req_ready),
    .load_done_i(ld_done), .store_done_i(st_done), .drop_i(drop), .drop_st_i(drop_st),
    .scalar_ld_req_i, .scalar_st_req_i, .scalar_st_pending_i,
    .scalar_ld_allow_o, .scalar_st_allow_o,
    .scalar_ld_stall_o(events_o.scalar_ld_stall), .scalar_st_stall_o(events_o.scalar_st_stall),
    .vec_mem_stall_o(events_o.vec_mem_stall), .vld_cnt_o(vld_cnt), .vst_cnt_o(vst_cnt)
  );

  // vector unit
  logic          a_valid, a_ready, a_we, a_rsp_valid;
  logic [63:0]   a_addr;
  logic [DW-1:0] a_wdata, a_rdata;
  logic [MemBytes-1:0] a_be;

  ara2 #(.NrLanes(NrLanes), .WordsPerRegLane(WordsPerRegLane), .MemBytes(MemBytes)) i_ara (
    .clk_i, .rst_ni,
    .acc_req_valid_i(ara_req_valid), .acc_req_i(ara_req), .acc_req_ready_o(ara_req_ready),
    .acc_resp_valid_o, .acc_resp_o,
    .mem_req_valid_o(a_valid), .mem_req_ready_i(a_ready), .mem_req_addr_o(a_addr),
    .mem_req_we_o(a_we), .mem_req_wdata_o(a_wdata), .mem_req_be_o(a_be),
    .mem_rsp_valid_i(a_rsp_valid), .mem_rsp_rdata_i(a_rdata),
    .load_done_o(ld_done), .store_done_o(st_done), .store_pending_o(st_pend),
    .idle_o(ara_idle_o), .stall_o(events_o.seq_stall), .reshuffle_o(events_o.reshuffle),
    .mem_drop_o(drop), .mem_drop_st_o(drop_st)
  );

  // invalidation filter
  logic f_valid, f_ready;
  inval_filter #(.DCacheLineBytes(DCacheLineBytes), .DCacheIndexBits(DCacheIndexBits)) i_filter (
    .clk_i, .rst_ni,
    .ara_valid_i(a_valid), .ara_we_i(a_we), .ara_addr_i(a_addr), .ara_ready_o(a_ready),
    .mem_valid_o(f_valid), .mem_ready_i(f_ready),
    .inval_valid_o, .inval_index_o, .inval_ready_i,
    .inval_sent_o(events_o.inval_sent), .inval_merged_o(events_o.inval_merged)
  );

  // interconnect and memory
  logic [1:0]          ic_valid, ic_ready, ic_we, ic_rsp_valid;
  logic [63:0]         ic_addr [2];
  logic [DW-1:0]       ic_wdata [2], ic_rdata [2];
  logic [MemBytes-1:0] ic_be [2];
  logic                m_valid, m_we, m_rsp_valid;
  logic [63:0]         m_addr;
  logic [DW-1:0]       m_wdata, m_rdata;
  logic [MemBytes-1:0] m_be;

  assign ic_valid    = {cva_req_valid_i, f_valid};
  assign ic_we       = {cva_req_we_i, a_we};
  assign ic_addr     = '{a_addr, cva_req_addr_i};
  assign ic_wdata    = '{a_wdata, cva_req_wdata_i};
  assign ic_be       = '{a_be, cva_req_be_i};
  assign f_ready         = ic_ready[0];
  assign cva_req_ready_o = ic_ready[1];
  assign a_rsp_valid     = ic_rsp_valid[0];
  assign a_rdata         = ic_rdata[0];
  assign cva_rsp_valid_o = ic_rsp_valid[1];
  assign cva_rsp_rdata_o = ic_rdata[1];

  mem_interconnect #(.WordBytes(MemBytes), .AraLatency(AraLatency), .CvaLatency(CvaLatency)) i_ic (
    .clk_i, .rst_ni,
    .req_valid_i(ic_valid), .req_ready_o(ic_ready), .req_addr_i(ic_addr), .req_we_i(ic_we),
    .req_wdata_i(ic_wdata), .req_be_i(ic_be),
    .rsp_valid_o(ic_rsp_valid), .rsp_rdata_o(ic_rdata),
    .mem_valid_o(m_valid), .mem_addr_o(m_addr), .mem_we_o(m_we), .mem_wdata_o(m_wdata),
    .mem_be_o(m_be), .mem_rsp_valid_i(m_rsp_valid), .mem_rsp_rdata_i(m_rdata),
    .conflict_o(events_o.mem_conflict)
  );

  main_mem #(.NrWords(MemWords), .WordBytes(MemBytes)) i_mem (
    .clk_i, .rst_ni,
    .req_valid_i(m_valid), .req_addr_i(m_addr), .req_we_i(m_we), .req_wdata_i(m_wdata),
    .req_be_i(m_be), .rsp_valid_o(m_rsp_valid), .rsp_rdata_o(m_rdata)
  );

  // A vector store is in flight whenever the VLSU works on one.
  a_store_counted: assert property (@(posedge clk_i) disable iff (!rst_ni)
    st_pend |-> vst_cnt != '0);
  a_load_counted: assert property (@(posedge clk_i) disable iff (!rst_ni)
    ld_done |-> vld_cnt != '0);
endmodule
