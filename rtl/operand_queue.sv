// operand_queue: FIFO between the VRF read crossbar and a functional unit.
//
// Decouples the bank arbitration from the unit that consumes the operand, so a
// unit can keep working while another requester holds a bank. First-word
// fall-through: data_o is the oldest entry whenever valid_o is high, pop_i
// removes it. push_i must only be asserted when there is space; the operand
// requester guarantees this by counting free slots (space_o) before it reads.
// Depth is this design's choice; the paper does not size the queues.
module operand_queue #(
  parameter int unsigned Depth = 4,
  localparam int unsigned CW   = $clog2(Depth + 1)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          flush_i,
  input  logic          push_i,
  input  logic [63:0]   data_i,
  input  logic          pop_i,
  output logic          valid_o,
  output logic [63:0]   data_o,
  output logic [CW-1:0] space_o
);
  localparam int unsigned PW = (Depth > 1) ? $clog2(Depth) : 1;
  logic [63:0]   mem [Depth];
  logic [PW-1:0] rd_q, wr_q;
  logic [CW-1:0] cnt_q;

  assign valid_o = (cnt_q != '0);
  assign data_o  = mem[rd_q];
  assign space_o = CW'(Depth) - cnt_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else if (flush_i) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else begin
      if (push_i) begin
        mem[wr_q] <= data_i;
        wr_q      <= (wr_q == PW'(Depth - 1)) ? '0 : wr_q + 1'b1;
      end
      if (pop_i && valid_o) rd_q <= (rd_q == PW'(Depth - 1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + CW'(push_i) - CW'(pop_i && valid_o);
    end
  end

  // Overflow would lose an operand
  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> (cnt_q < CW'(Depth) || pop_i));
endmodule
