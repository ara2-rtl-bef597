// main_mem: the system's main memory, a single-port SRAM model of NrWords
// words of WordBytes bytes.
//
// Every request (read or write) is accepted in the cycle it is valid and gets
// exactly one response in the next cycle (rsp_valid_o); for reads rsp_rdata_o
// holds the word, for writes it holds the word as it was before the write.
// Writes honour the byte enables. Addresses are byte
// addresses; the word index is addr / WordBytes modulo NrWords (no error for
// out-of-range addresses). The memory is not reset: the testbench preloads it
// hierarchically (mem_q) or by writes. Size: 2M words of 4 x NrLanes bytes, as
// in the paper's system (32 MiB for 4 lanes). The single-cycle SRAM access is
// this design's split of the 7/5-cycle system latency.
module main_mem #(
  parameter int unsigned NrWords   = 2097152,
  parameter int unsigned WordBytes = 16,
  localparam int unsigned AW       = $clog2(NrWords),
  localparam int unsigned OW       = $clog2(WordBytes)
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   req_valid_i,
  input  logic [63:0]            req_addr_i,
  input  logic                   req_we_i,
  input  logic [WordBytes*8-1:0] req_wdata_i,
  input  logic [WordBytes-1:0]   req_be_i,
  output logic                   rsp_valid_o,
  output logic [WordBytes*8-1:0] rsp_rdata_o
);
  logic [WordBytes*8-1:0] mem_q [NrWords];
  logic [AW-1:0]          idx;
  logic [63:0]            addr_unused;

  assign idx         = req_addr_i[OW +: AW];
  assign addr_unused = req_addr_i;

  always_ff @(posedge clk_i) begin
    if (req_valid_i) begin
      if (req_we_i) begin
        for (int b = 0; b < WordBytes; b++)
          if (req_be_i[b]) mem_q[idx][b*8 +: 8] <= req_wdata_i[b*8 +: 8];
      end
      rsp_rdata_o <= mem_q[idx];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rsp_valid_o <= 1'b0;
    else         rsp_valid_o <= req_valid_i;
  end
endmodule
