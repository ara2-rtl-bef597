// vlsu: the vector load/store unit.
//
// Wraps the address generator, the load unit and the store unit around one
// memory port. The port is a simple in-order request/response bus: a request
// (address of a MemBytes-wide word, write flag, data, byte enables) is taken
// when req_ready_i is high, and every request, read or write, later returns
// exactly one response, in order. The memory system of the paper is AXI with a
// 4 x NrLanes-byte data bus; this bus has the same width and ordering.
//
// Loads: each element address becomes a read request while fewer than
// MaxOutstanding requests are open; the element index and byte offset wait in
// a FIFO for the response, which is buffered and handed to the load unit.
// Stores: each element address with its data from the lanes becomes a write
// request; the store is over when every write has been answered.
// One memory instruction at a time. At the end it pulses done_o (to the
// sequencer) and load_done_o or store_done_o, the memory-ordering signals for
// the scalar core; store_pending_o is high while a store is in progress.
module vlsu
  import ara_pkg::*;
#(
  parameter int unsigned NrLanes         = ara_pkg::NrLanes,
  parameter int unsigned WordsPerRegLane = ara_pkg::VLENPerLane / 64,
  parameter int unsigned MemBytes        = 4 * NrLanes,
  parameter int unsigned MaxOutstanding  = 16,
  localparam int unsigned OW             = $clog2(MemBytes)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  pe_valid_i,
  input  pe_req_t               pe_req_i,
  output logic                  pe_ready_o,
  // Store data from the lanes
  input  logic [NrLanes-1:0]    st_valid_i,
  input  logic [63:0]           st_data_i [NrLanes],
  output logic [NrLanes-1:0]    st_pop_o,
  // Load writes into the lanes
  output logic [NrLanes-1:0]    ld_wr_valid_o,
  output vrf_wr_t               ld_wr_o [NrLanes],
  input  logic [NrLanes-1:0]    ld_wr_ready_i,
  // Memory port
  output logic                  mem_req_valid_o,
  input  logic                  mem_req_ready_i,
  output logic [63:0]           mem_req_addr_o,
  output logic                  mem_req_we_o,
  output logic [MemBytes*8-1:0] mem_req_wdata_o,
  output logic [MemBytes-1:0]   mem_req_be_o,
  input  logic                  mem_rsp_valid_i,
  input  logic [MemBytes*8-1:0] mem_rsp_rdata_i,
  // Exception report of the address generator
  output logic                  ack_o,
  output logic                  ack_err_o,
  // Completion and memory ordering
  output logic                  done_o,
  output insn_id_t              done_id_o,
  output logic                  load_done_o,
  output logic                  store_done_o,
  output logic                  store_pending_o
);
  localparam int unsigned CW = $clog2(MaxOutstanding + 1);
  localparam int unsigned PW = $clog2(MaxOutstanding);

  typedef enum logic [1:0] { S_IDLE, S_LOAD, S_STORE, S_DONE } state_e;
  state_e  state_q;
  pe_req_t req_q;

  // Address generator
  logic        ag_valid, ag_ready, ag_skip, ag_busy, ag_start;
  logic [63:0] ag_addr;
  vlen_t       ag_elem;
  assign ag_start = (state_q == S_IDLE) && pe_valid_i;

  addrgen i_addrgen (
    .clk_i, .rst_ni, .start_i(ag_start), .base_i(pe_req_i.scalar), .stride_i(pe_req_i.stride),
    .strided_i(pe_req_i.op inside {OP_VLSE, OP_VSSE}), .ew_i(pe_req_i.ew), .vl_i(pe_req_i.vl),
    .busy_o(ag_busy), .addr_valid_o(ag_valid), .addr_o(ag_addr), .elem_o(ag_elem), .skip_o(ag_skip),
    .addr_ready_i(ag_ready), .ack_o, .ack_err_o
  );

  // Pending-element FIFO (loads) and response FIFO
  typedef struct packed { vlen_t elem; logic [OW-1:0] off; logic skip; } pend_t;
  pend_t                 pend_mem [MaxOutstanding];
  logic [MemBytes*8-1:0] rsp_mem  [MaxOutstanding];
  logic [PW-1:0]         pend_wr_q, pend_rd_q, rsp_wr_q, rsp_rd_q;
  logic [CW-1:0]         pend_cnt_q, rsp_cnt_q, wr_out_q;
  vlen_t                 ld_cnt_q;
  logic                  pend_push, pend_pop;
  pend_t                 pend_head;

  // Load side
  logic ld_in_valid, ld_in_ready;
  assign pend_head   = pend_mem[pend_rd_q];
  assign ld_in_valid = (pend_cnt_q != '0) && (pend_head.skip || rsp_cnt_q != '0);
  vldu #(.NrLanes(NrLanes), .WordsPerRegLane(WordsPerRegLane), .MemBytes(MemBytes)) i_vldu (
    .in_valid_i(ld_in_valid), .in_elem_i(pend_head.elem), .in_off_i(pend_head.off),
    .in_skip_i(pend_head.skip), .in_data_i(rsp_mem[rsp_rd_q]), .in_ready_o(ld_in_ready),
    .vd_i(req_q.vd), .ew_i(req_q.ew),
    .wr_valid_o(ld_wr_valid_o), .wr_o(ld_wr_o), .wr_ready_i(ld_wr_ready_i)
  );
  assign pend_pop = ld_in_valid && ld_in_ready;

  // Store side
  logic                  st_addr_ready, st_mem_valid;
  logic [63:0]           st_mem_addr;
  logic [MemBytes*8-1:0] st_mem_wdata;
  logic [MemBytes-1:0]   st_mem_be;
  vstu #(.NrLanes(NrLanes), .MemBytes(MemBytes)) i_vstu (
    .addr_valid_i(ag_valid && state_q == S_STORE), .addr_i(ag_addr), .elem_i(ag_elem),
    .skip_i(ag_skip), .addr_ready_o(st_addr_ready), .ew_i(req_q.ew), .vl_i(req_q.vl),
    .st_valid_i, .st_data_i, .st_pop_o,
    .mem_valid_o(st_mem_valid), .mem_addr_o(st_mem_addr), .mem_wdata_o(st_mem_wdata),
    .mem_be_o(st_mem_be), .mem_ready_i(mem_req_ready_i && (wr_out_q < CW'(MaxOutstanding)))
  );

  // Memory request mux
  logic ld_space;
  assign ld_space    = (pend_cnt_q < CW'(MaxOutstanding));
  assign pend_push   = (state_q == S_LOAD) && ag_valid && ld_space && (ag_skip || mem_req_ready_i);
  always_comb begin
    if (state_q == S_STORE) begin
      mem_req_valid_o = st_mem_valid && (wr_out_q < CW'(MaxOutstanding));
      mem_req_addr_o  = st_mem_addr;
      mem_req_we_o    = 1'b1;
      mem_req_wdata_o = st_mem_wdata;
      mem_req_be_o    = st_mem_be;
      ag_ready        = st_addr_ready && (ag_skip || wr_out_q < CW'(MaxOutstanding));
    end else begin
      mem_req_valid_o = (state_q == S_LOAD) && ag_valid && !ag_skip && ld_space;
      mem_req_addr_o  = ag_addr & ~64'(MemBytes - 1);
      mem_req_we_o    = 1'b0;
      mem_req_wdata_o = '0;
      mem_req_be_o    = '0;
      ag_ready        = pend_push;
    end
  end

  assign pe_ready_o      = (state_q == S_IDLE);
  assign store_pending_o = (state_q == S_STORE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE; req_q <= '0;
      pend_wr_q <= '0; pend_rd_q <= '0; pend_cnt_q <= '0;
      rsp_wr_q <= '0; rsp_rd_q <= '0; rsp_cnt_q <= '0;
      wr_out_q <= '0; ld_cnt_q <= '0;
      done_o <= 1'b0; done_id_o <= '0; load_done_o <= 1'b0; store_done_o <= 1'b0;
    end else begin
      done_o <= 1'b0; load_done_o <= 1'b0; store_done_o <= 1'b0;
      // pending elements
      if (pend_push) begin
        pend_mem[pend_wr_q] <= '{elem: ag_elem, off: OW'(ag_addr), skip: ag_skip};
        pend_wr_q <= (pend_wr_q == PW'(MaxOutstanding - 1)) ? '0 : pend_wr_q + 1'b1;
      end
      if (pend_pop) pend_rd_q <= (pend_rd_q == PW'(MaxOutstanding - 1)) ? '0 : pend_rd_q + 1'b1;
      pend_cnt_q <= pend_cnt_q + CW'(pend_push) - CW'(pend_pop);
      // read responses
      if (mem_rsp_valid_i && state_q == S_LOAD) begin
        rsp_mem[rsp_wr_q] <= mem_rsp_rdata_i;
        rsp_wr_q <= (rsp_wr_q == PW'(MaxOutstanding - 1)) ? '0 : rsp_wr_q + 1'b1;
      end
      if (pend_pop && !pend_head.skip)
        rsp_rd_q <= (rsp_rd_q == PW'(MaxOutstanding - 1)) ? '0 : rsp_rd_q + 1'b1;
      rsp_cnt_q <= rsp_cnt_q + CW'(mem_rsp_valid_i && state_q == S_LOAD) - CW'(pend_pop && !pend_head.skip);
      // write responses
      wr_out_q <= wr_out_q + CW'(state_q == S_STORE && mem_req_valid_o && mem_req_ready_i)
                           - CW'(mem_rsp_valid_i && state_q == S_STORE);
      if (pend_pop) ld_cnt_q <= ld_cnt_q + 1'b1;

      unique case (state_q)
        S_IDLE: if (pe_valid_i) begin
          req_q    <= pe_req_i;
          ld_cnt_q <= '0;
          state_q  <= is_load_op(pe_req_i.op) ? S_LOAD : S_STORE;
        end
        S_LOAD: if (ld_cnt_q >= req_q.vl && !ag_busy) begin
          load_done_o <= 1'b1;
          state_q     <= S_DONE;
        end
        S_STORE: if (!ag_busy && wr_out_q == '0 && !(mem_req_valid_o && mem_req_ready_i)) begin
          store_done_o <= 1'b1;
          state_q      <= S_DONE;
        end
        default: begin
          done_o    <= 1'b1;
          done_id_o <= req_q.id;
          state_q   <= S_IDLE;
        end
      endcase
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
    mem_req_valid_o && !mem_req_ready_i |=> mem_req_valid_o);
endmodule
