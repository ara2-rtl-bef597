// inval_filter: keeps the scalar core's write-through data cache coherent
// with vector stores.
//
// Every write the vector unit sends to memory may hit a line cached by the
// scalar core. The filter turns each vector store request into an
// invalidation of the D$ set the address maps to (the cache invalidates all
// ways of that set). Consecutive writes to the same set are merged, since a
// vector store walks through memory and usually hits the same line many times.
// When a new invalidation is needed and the cache has not yet taken the
// previous one, the vector write is held back (mem_ready_o low), so no vector
// write reaches memory before the matching invalidation is accepted.
//
// Interface: the vector memory request passes from ara_* to mem_* unchanged;
// inval_valid_o/inval_index_o/inval_ready_i is the invalidation port of the
// D$. The set index is addr[DCacheLineBits +: DCacheIndexBits]; the default
// (32-byte lines, 64 sets: 8 KiB, 4 ways) follows the CVA6 D$ named in the
// paper's setup.
module inval_filter #(
  parameter int unsigned DCacheLineBytes = 32,
  parameter int unsigned DCacheIndexBits = 6,
  localparam int unsigned LineBits       = $clog2(DCacheLineBytes)
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       ara_valid_i,
  input  logic                       ara_we_i,
  input  logic [63:0]                ara_addr_i,
  output logic                       ara_ready_o,
  output logic                       mem_valid_o,
  input  logic                       mem_ready_i,
  output logic                       inval_valid_o,
  output logic [DCacheIndexBits-1:0] inval_index_o,
  input  logic                       inval_ready_i,
  output logic                       inval_sent_o,    // an invalidation was accepted
  output logic                       inval_merged_o   // a write needed no new invalidation
);
  logic [DCacheIndexBits-1:0] last_q, idx;
  logic                       last_valid_q, pend_q;
  logic                       need;
  logic [63:0]                addr_unused;
  assign addr_unused = ara_addr_i;   // only the set index bits are used

  assign idx  = ara_addr_i[LineBits +: DCacheIndexBits];
  assign need = ara_valid_i && ara_we_i && !(last_valid_q && last_q == idx);

  // A write may go once its set has been (or is being) invalidated.
  assign inval_valid_o = pend_q || need;
  assign inval_index_o = pend_q ? last_q : idx;
  assign mem_valid_o   = ara_valid_i && !pend_q && !need;
  assign ara_ready_o   = mem_ready_i && !pend_q && !need;
  assign inval_sent_o  = inval_valid_o && inval_ready_i;
  assign inval_merged_o = ara_valid_i && ara_we_i && !need && !pend_q && mem_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      last_q       <= '0;
      last_valid_q <= 1'b0;
      pend_q       <= 1'b0;
    end else begin
      if (pend_q) begin
        if (inval_ready_i) pend_q <= 1'b0;
      end else if (need) begin
        last_q       <= idx;
        last_valid_q <= 1'b1;
        pend_q       <= !inval_ready_i;
      end
    end
  end

  a_write_after_inval: assert property (@(posedge clk_i) disable iff (!rst_ni)
    mem_valid_o && ara_we_i |-> last_valid_q && last_q == idx);
endmodule
