// masku: the mask unit, connected to every lane.
//
// RVV 1.0 packs mask registers one bit per element, so the mask bit that lane
// l needs for its element e is stored in whichever lane holds byte e/8. The
// mask unit therefore works on whole registers:
//  * Masked execution: it reads v0 from all lanes (one word per lane per
//    cycle), deshuffles it into a VLEN-bit vector in element order, then feeds
//    every lane a stream of byte-enables, one byte per lane word, with the bit
//    of each element copied over the element's bytes.
//  * Compares: it collects the per-element flags the lane VALUs produce,
//    places them at their element index and writes the packed mask to vd in
//    every lane. Bits past vl in the last written byte are set to 1
//    (mask destinations are always tail-agnostic in RVV 1.0).
//  * vcpop.m / vfirst.m: it reads the source mask like v0, then scans it 64
//    bits per cycle and returns the count, or the index of the first set bit
//    (-1 if none), on result_o.
// Mask registers are kept with the 8-bit element layout; the dispatcher
// reshuffles a register to that layout before the mask unit reads it.
// Instructions handled one at a time; pe_ready_o is high when idle.
module masku
  import ara_pkg::*;
#(
  parameter int unsigned NrLanes         = ara_pkg::NrLanes,
  parameter int unsigned WordsPerRegLane = ara_pkg::VLENPerLane / 64,
  localparam int unsigned VLENBits       = 64 * WordsPerRegLane * NrLanes
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               pe_valid_i,
  input  pe_req_t            pe_req_i,
  output logic               pe_ready_o,
  // Register reads from the lanes (v0 and vcpop/vfirst operand queues)
  input  logic [NrLanes-1:0] maskm_valid_i,
  input  logic [63:0]        maskm_data_i [NrLanes],
  output logic [NrLanes-1:0] maskm_pop_o,
  input  logic [NrLanes-1:0] maska_valid_i,
  input  logic [63:0]        maska_data_i [NrLanes],
  output logic [NrLanes-1:0] maska_pop_o,
  // Mask byte-enables to the lanes
  output logic [NrLanes-1:0] mask_valid_o,
  output logic [7:0]         mask_be_o [NrLanes],
  input  logic [NrLanes-1:0] mask_pop_i,
  // Compare flags from the lanes
  input  logic [NrLanes-1:0] cmp_valid_i,
  input  logic [7:0]         cmp_flags_i [NrLanes],
  output logic [NrLanes-1:0] cmp_ready_o,
  // Mask register writes
  output logic [NrLanes-1:0] wr_valid_o,
  output vrf_wr_t            wr_o [NrLanes],
  input  logic [NrLanes-1:0] wr_ready_i,
  // Scalar result of vcpop/vfirst
  output logic               result_valid_o,
  output logic [63:0]        result_o,
  // Completion
  output logic               done_o,
  output insn_id_t           done_id_o
);
  localparam int unsigned Chunks = VLENBits / 64;

  typedef enum logic [2:0] { S_IDLE, S_FILL, S_STREAM, S_COLLECT, S_WRITE, S_SCAN, S_DONE } state_e;
  state_e             state_q;
  pe_req_t            req_q;
  logic [VLENBits-1:0] buf_q;     // mask bits in element order
  vlen_t              row_q;
  vlen_t              cnt_q [NrLanes];
  vlen_t              nw    [NrLanes];
  logic [63:0]        pop_q;
  logic [63:0]        first_q;

  logic [NrLanes-1:0] src_valid;
  logic [63:0]        src_data [NrLanes];
  logic               fill_go;
  logic               use_a;

  assign use_a      = is_mask_scalar_op(req_q.op);
  assign pe_ready_o = (state_q == S_IDLE);

  always_comb begin
    for (int l = 0; l < NrLanes; l++) begin
      src_valid[l] = use_a ? maska_valid_i[l] : maskm_valid_i[l];
      src_data[l]  = use_a ? maska_data_i[l]  : maskm_data_i[l];
      nw[l]        = words_of(lane_elems(req_q.vl, l, NrLanes), req_q.ew);
    end
  end
  assign fill_go     = (state_q == S_FILL) && (&src_valid);
  assign maskm_pop_o = (fill_go && !use_a) ? '1 : '0;
  assign maska_pop_o = (fill_go &&  use_a) ? '1 : '0;

  // Mask byte-enable of word w of lane l for element width ew
  function automatic logic [7:0] be_of(logic [VLENBits-1:0] bits, int unsigned w, int unsigned l,
                                       vew_e ew);
    logic [7:0]  be;
    int unsigned ewb, e;
    ewb = ew_bytes(ew);
    for (int unsigned k = 0; k < 8; k++) begin
      e     = ((w * 8 + k) / ewb) * NrLanes + l;
      be[k] = bits[e];
    end
    return be;
  endfunction

  // Streams, compare flags and writes, per lane
  logic [7:0] wbe [NrLanes];
  logic [63:0] wdata [NrLanes];
  always_comb begin
    for (int l = 0; l < NrLanes; l++) begin
      mask_valid_o[l] = (state_q == S_STREAM) && (cnt_q[l] < nw[l]);
      mask_be_o[l]    = be_of(buf_q, int'(cnt_q[l]), l, req_q.ew);
      cmp_ready_o[l]  = (state_q == S_COLLECT) && (cnt_q[l] < nw[l]);
      // Mask register write, 8-bit layout: lane byte j of word w is byte (w*8+j)*L + l
      for (int j = 0; j < 8; j++) begin
        wbe[l][j] = (((int'(cnt_q[l]) * 8 + j) * NrLanes + l) * 8 < int'(req_q.vl));
        for (int k = 0; k < 8; k++)
          wdata[l][j*8 + k] = (((int'(cnt_q[l]) * 8 + j) * NrLanes + l) * 8 + k >= int'(req_q.vl)) ? 1'b1 :
                              buf_q[(((int'(cnt_q[l]) * 8 + j) * NrLanes + l) * 8 + k) % VLENBits];
      end
      wr_valid_o[l]   = (state_q == S_WRITE) && (cnt_q[l] < vlen_t'(WordsPerRegLane)) && (wbe[l] != '0);
      wr_o[l].addr    = 10'(int'(req_q.vd) * WordsPerRegLane + int'(cnt_q[l]));
      wr_o[l].data    = wdata[l];
      wr_o[l].be      = wbe[l];
    end
  end

  logic all_done;
  always_comb begin
    all_done = 1'b1;
    for (int l = 0; l < NrLanes; l++) begin
      if (state_q == S_WRITE) begin
        if ((cnt_q[l] < vlen_t'(WordsPerRegLane)) && (wbe[l] != '0)) all_done = 1'b0;
      end else if (cnt_q[l] < nw[l]) all_done = 1'b0;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q        <= S_IDLE;
      req_q          <= '0;
      buf_q          <= '0;
      row_q          <= '0;
      pop_q          <= '0;
      first_q        <= '0;
      result_valid_o <= 1'b0;
      result_o       <= '0;
      done_o         <= 1'b0;
      done_id_o      <= '0;
      for (int l = 0; l < NrLanes; l++) cnt_q[l] <= '0;
    end else begin
      done_o         <= 1'b0;
      result_valid_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (pe_valid_i) begin
          req_q <= pe_req_i;
          row_q <= '0;
          for (int l = 0; l < NrLanes; l++) cnt_q[l] <= '0;
          if (is_cmp_op(pe_req_i.op)) begin
            buf_q   <= '0;
            state_q <= S_COLLECT;
          end else begin
            state_q <= S_FILL;
          end
        end
        S_FILL: if (fill_go) begin
          for (int l = 0; l < NrLanes; l++)
            for (int j = 0; j < 8; j++)
              buf_q[((int'(row_q) * 8 + j) * NrLanes + l) * 8 +: 8] <= src_data[l][j*8 +: 8];
          row_q <= row_q + 1'b1;
          if (int'(row_q) == WordsPerRegLane - 1) begin
            row_q   <= '0;
            pop_q   <= '0;
            first_q <= '1;
            state_q <= use_a ? S_SCAN : S_STREAM;
          end
        end
        S_STREAM: begin
          for (int l = 0; l < NrLanes; l++)
            if (mask_pop_i[l] && mask_valid_o[l]) cnt_q[l] <= cnt_q[l] + 1'b1;
          if (all_done) state_q <= S_IDLE;
        end
        S_COLLECT: begin
          for (int l = 0; l < NrLanes; l++) begin
            if (cmp_valid_i[l] && cmp_ready_o[l]) begin
              for (int s = 0; s < 8; s++)
                if (s < int'(8 / ew_bytes(req_q.ew)) &&
                    (int'(cnt_q[l]) * (8 / ew_bytes(req_q.ew)) + s) * NrLanes + l < int'(req_q.vl))
                  buf_q[((int'(cnt_q[l]) * (8 / ew_bytes(req_q.ew)) + s) * NrLanes + l) % VLENBits]
                    <= cmp_flags_i[l][s];
              cnt_q[l] <= cnt_q[l] + 1'b1;
            end
          end
          if (all_done) begin
            for (int l = 0; l < NrLanes; l++) cnt_q[l] <= '0;
            state_q <= S_WRITE;
          end
        end
        S_WRITE: begin
          for (int l = 0; l < NrLanes; l++)
            if (cnt_q[l] < vlen_t'(WordsPerRegLane) && (wbe[l] == '0 || wr_ready_i[l]))
              cnt_q[l] <= cnt_q[l] + 1'b1;
          if (all_done) state_q <= S_DONE;
        end
        S_SCAN: begin
          // 64 mask bits per cycle
          // descending, so that the lowest set index of the chunk is kept
          for (int k = 63; k >= 0; k--)
            if (int'(row_q) * 64 + k < int'(req_q.vl) && buf_q[(int'(row_q) * 64 + k) % VLENBits] &&
                first_q == '1)
              first_q <= 64'(int'(row_q) * 64 + k);
          pop_q <= pop_q + 64'($countones(buf_q[int'(row_q) * 64 +: 64] &
                     ((int'(req_q.vl) >= (int'(row_q) + 1) * 64) ? '1 :
                      ((64'd1 << (int'(req_q.vl) - int'(row_q) * 64)) - 1)) &
                     ((int'(req_q.vl) <= int'(row_q) * 64) ? 64'd0 : '1)));
          row_q <= row_q + 1'b1;
          if (int'(row_q) == Chunks - 1) state_q <= S_DONE;
        end
        default: begin  // S_DONE
          if (is_mask_scalar_op(req_q.op)) begin
            result_valid_o <= 1'b1;
            result_o       <= (req_q.op == OP_VCPOP) ? pop_q : first_q;
          end
          done_o    <= 1'b1;
          done_id_o <= req_q.id;
          state_q   <= S_IDLE;
        end
      endcase
    end
  end
endmodule
