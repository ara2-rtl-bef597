// vldu: the vector load unit's data path.
//
// Takes one memory response at a time together with the element it belongs to
// (index e, byte offset of the element on the memory word) and writes the
// element into lane e mod NrLanes, at lane byte ((e div NrLanes) * ew bytes):
// the word address is vd * WordsPerRegLane + lane byte / 8 and the byte
// enables cover only the element. This is the shuffle from memory order to the
// lane layout, done one element per cycle (the paper's unit moves a whole bus
// word per cycle; this one trades bandwidth for a much smaller crossbar).
// Skipped elements (after an address exception) are consumed without a write.
module vldu
  import ara_pkg::*;
#(
  parameter int unsigned NrLanes         = ara_pkg::NrLanes,
  parameter int unsigned WordsPerRegLane = ara_pkg::VLENPerLane / 64,
  parameter int unsigned MemBytes        = 4 * NrLanes,
  localparam int unsigned OW             = $clog2(MemBytes)
) (
  input  logic                  in_valid_i,
  input  vlen_t                 in_elem_i,
  input  logic [OW-1:0]         in_off_i,
  input  logic                  in_skip_i,
  input  logic [MemBytes*8-1:0] in_data_i,
  output logic                  in_ready_o,
  input  vreg_t                 vd_i,
  input  vew_e                  ew_i,
  output logic [NrLanes-1:0]    wr_valid_o,
  output vrf_wr_t               wr_o [NrLanes],
  input  logic [NrLanes-1:0]    wr_ready_i
);
  int unsigned lane, lbyte, ewb;
  logic [63:0] elem;
  always_comb begin
    ewb   = ew_bytes(ew_i);
    lane  = int'(in_elem_i) % NrLanes;
    lbyte = (int'(in_elem_i) / NrLanes) * ewb;
    elem  = 64'(in_data_i >> (int'(in_off_i) * 8));
    unique case (ew_i)
      EW8:     elem = {8{elem[7:0]}};
      EW16:    elem = {4{elem[15:0]}};
      EW32:    elem = {2{elem[31:0]}};
      default: ;
    endcase
    for (int l = 0; l < NrLanes; l++) begin
      wr_valid_o[l] = in_valid_i && !in_skip_i && (lane == l);
      wr_o[l].addr  = 10'(int'(vd_i) * WordsPerRegLane + lbyte / 8);
      wr_o[l].data  = elem;
      wr_o[l].be    = 8'(((1 << ewb) - 1) << (lbyte % 8));
    end
    in_ready_o = in_skip_i || wr_ready_i[lane % NrLanes];
  end
endmodule
