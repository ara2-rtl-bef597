// vstu: the vector store unit's data path.
//
// For each element address from the address generator it takes the element
// from the store-data queue of lane e mod NrLanes (byte ((e div NrLanes) * ew
// bytes) mod 8 of the lane's current word), moves it to its byte offset on the
// memory word and issues a write with byte enables covering the element. The
// lane word is popped after its last element slot, or after the lane's last
// element. One element per cycle. Skipped elements (after an address
// exception) consume their data without a memory write.
module vstu
  import ara_pkg::*;
#(
  parameter int unsigned NrLanes  = ara_pkg::NrLanes,
  parameter int unsigned MemBytes = 4 * NrLanes
) (
  input  logic                  addr_valid_i,
  input  logic [63:0]           addr_i,
  input  vlen_t                 elem_i,
  input  logic                  skip_i,
  output logic                  addr_ready_o,
  input  vew_e                  ew_i,
  input  vlen_t                 vl_i,
  input  logic [NrLanes-1:0]    st_valid_i,
  input  logic [63:0]           st_data_i [NrLanes],
  output logic [NrLanes-1:0]    st_pop_o,
  output logic                  mem_valid_o,
  output logic [63:0]           mem_addr_o,
  output logic [MemBytes*8-1:0] mem_wdata_o,
  output logic [MemBytes-1:0]   mem_be_o,
  input  logic                  mem_ready_i
);
  int unsigned lane, lbyte, ewb, off;
  logic        last_in_word, data_ok, fire;
  logic [63:0] elem;
  always_comb begin
    ewb          = ew_bytes(ew_i);
    lane         = int'(elem_i) % NrLanes;
    lbyte        = (int'(elem_i) / NrLanes) * ewb;
    off          = int'(addr_i) % MemBytes;
    last_in_word = ((lbyte % 8) + ewb == 8) || (int'(elem_i) + NrLanes >= int'(vl_i));
    data_ok      = st_valid_i[lane % NrLanes];
    elem         = st_data_i[lane % NrLanes] >> ((lbyte % 8) * 8);
    if (ewb < 8) elem = elem & ((64'd1 << (ewb * 8)) - 1);
    mem_addr_o   = addr_i & ~64'(MemBytes - 1);
    mem_wdata_o  = (MemBytes*8)'(elem) << (off * 8);
    mem_be_o     = MemBytes'(((1 << ewb) - 1)) << off;
    mem_valid_o  = addr_valid_i && data_ok && !skip_i;
  end
  // kept apart from the block above: the ready path must not feed back into valid
  always_comb begin
    fire         = addr_valid_i && data_ok && (skip_i || mem_ready_i);
    addr_ready_o = fire;
    st_pop_o     = '0;
    if (fire && last_in_word) st_pop_o[lane % NrLanes] = 1'b1;
  end
endmodule
