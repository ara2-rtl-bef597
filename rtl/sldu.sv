// sldu: the slide unit, connected to every lane.
//
// The unit streams a register through a row datapath: a row is one 64-bit
// word of every lane (8 x NrLanes bytes), and the register's byte layout only
// permutes bytes inside a row. Its three jobs:
//
//  * Slides (vslideup / vslidedown by a scalar or immediate amount). The
//    datapath only moves data by a power-of-two number of elements (p2_slide);
//    any other amount is split into one pass per set bit of the amount, as the
//    paper does with micro-operations. A pass by 2^k elements of width ew
//    shifts the register by 2^k*ew bytes: either a whole number of rows
//    (row index offset) or less than a row, in which case each output row is
//    made of the current and the neighbouring input row. The source register
//    is held in a VLEN-bit buffer and each pass walks it one row per cycle, in
//    place (descending rows for slide-up, ascending for slide-down). The final
//    write uses byte enables: slide-up leaves elements below the offset and
//    past vl untouched; slide-down writes [0, vl) and shifts in zeros past the
//    end of the register.
//  * Reshuffle (enc_in -> enc_out). Converts a register written with one
//    element width into the layout of another, whole register, one row per
//    cycle. Never combined with a slide in the same pass.
//  * Inter-lane reduction steps. In step k every lane's partial result is
//    handed to lane (l - 2^k) (a power-of-two slide across lanes), for
//    log2(NrLanes) steps.
//
// Timing: load = WordsPerRegLane cycles (one row per cycle once every lane's
// queue has a word), one pass per set bit of the amount (one row per cycle),
// then the write-back, one row per cycle when the write ports grant.
module sldu
  import ara_pkg::*;
#(
  parameter int unsigned NrLanes         = ara_pkg::NrLanes,
  parameter int unsigned WordsPerRegLane = ara_pkg::VLENPerLane / 64,
  localparam int unsigned Rows           = WordsPerRegLane,
  localparam int unsigned RowBytes       = 8 * NrLanes
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               pe_valid_i,
  input  pe_req_t            pe_req_i,
  output logic               pe_ready_o,
  // Source register from the lanes
  input  logic [NrLanes-1:0] sld_valid_i,
  input  logic [63:0]        sld_data_i [NrLanes],
  output logic [NrLanes-1:0] sld_pop_o,
  // Result writes
  output logic [NrLanes-1:0] wr_valid_o,
  output vrf_wr_t            wr_o [NrLanes],
  input  logic [NrLanes-1:0] wr_ready_i,
  // Reduction exchange
  input  logic [NrLanes-1:0] red_valid_i,
  input  logic [63:0]        red_data_i [NrLanes],
  output logic               red_in_valid_o,
  output logic [NrLanes-1:0] red_in_use_o,
  output logic [63:0]        red_in_data_o [NrLanes],
  // Completion
  output logic               done_o,
  output insn_id_t           done_id_o
);
  localparam int unsigned RW       = $clog2(Rows);
  localparam int unsigned KMax     = $clog2(Rows * RowBytes);   // bits of the amount that matter
  localparam int unsigned RedSteps = (NrLanes > 1) ? $clog2(NrLanes) : 0;

  typedef logic [RowBytes*8-1:0] row_t;
  typedef enum logic [2:0] { S_IDLE, S_LOAD, S_PASS, S_WRITE, S_RED, S_DONE } state_e;

  state_e  state_q;
  pe_req_t req_q;
  row_t    buf_q [Rows];
  logic [RW:0] row_q;
  logic [4:0]  k_q;
  vlen_t   cnt_q [NrLanes];
  logic [2:0] step_q;

  // Deshuffle a row (lane layout -> byte order) and shuffle it back
  function automatic row_t deshuffle(row_t r, vew_e ew);
    row_t o;
    for (int unsigned b = 0; b < RowBytes; b++) o[b*8 +: 8] = r[vrf_byte_idx(b, ew, NrLanes)*8 +: 8];
    return o;
  endfunction
  function automatic row_t shuffle(row_t r, vew_e ew);
    row_t o;
    for (int unsigned b = 0; b < RowBytes; b++) o[vrf_byte_idx(b, ew, NrLanes)*8 +: 8] = r[b*8 +: 8];
    return o;
  endfunction

  logic        up;
  int unsigned vlmax, offset, sb, rs, bs;
  assign up = (req_q.op == OP_VSLIDEUP);
  always_comb begin
    vlmax  = Rows * RowBytes / ew_bytes(req_q.ew);
    offset = (req_q.scalar >= 64'(vlmax)) ? vlmax : int'(req_q.scalar);
    sb     = (1 << k_q) * ew_bytes(req_q.ew);        // bytes moved by this pass
    rs     = sb / RowBytes;
    bs     = sb % RowBytes;
  end

  // One output row of a power-of-two pass
  row_t pass_row;
  row_t d0, d1;
  int   r0, r1;
  always_comb begin
    if (up) begin
      r0 = int'(row_q) - int'(rs);
      r1 = r0 - 1;
    end else begin
      r0 = int'(row_q) + int'(rs);
      r1 = r0 + 1;
    end
    d0 = (r0 >= 0 && r0 < int'(Rows)) ? deshuffle(buf_q[r0[RW-1:0]], req_q.ew) : '0;
    d1 = (r1 >= 0 && r1 < int'(Rows) && bs != 0) ? deshuffle(buf_q[r1[RW-1:0]], req_q.ew) : '0;
    pass_row = '0;
    for (int unsigned b = 0; b < RowBytes; b++) begin
      if (up) pass_row[b*8 +: 8] = (b >= bs) ? d0[(b - bs)*8 +: 8] : d1[(RowBytes - bs + b)*8 +: 8];
      else    pass_row[b*8 +: 8] = (b + bs < RowBytes) ? d0[(b + bs)*8 +: 8] : d1[(b + bs - RowBytes)*8 +: 8];
    end
    pass_row = shuffle(pass_row, req_q.ew);
  end

  // Source rows, reshuffled on the fly when needed
  row_t in_row;
  always_comb begin
    for (int l = 0; l < NrLanes; l++) in_row[l*64 +: 64] = sld_data_i[l];
    if (req_q.op == OP_RESHUFFLE) in_row = shuffle(deshuffle(in_row, req_q.ew_old), req_q.ew);
  end

  logic load_go;
  assign load_go    = (state_q == S_LOAD) && (&sld_valid_i);
  assign sld_pop_o  = load_go ? '1 : '0;
  assign pe_ready_o = (state_q == S_IDLE);

  // Write-back
  logic [7:0] wbe [NrLanes];
  logic       all_written;
  always_comb begin
    all_written = 1'b1;
    for (int l = 0; l < NrLanes; l++) begin
      if (req_q.op == OP_RESHUFFLE) wbe[l] = 8'hff;
      else wbe[l] = slot_be(int'(cnt_q[l]), l, req_q.ew, up ? offset : 0, int'(req_q.vl), NrLanes);
      wr_valid_o[l] = (state_q == S_WRITE) && (cnt_q[l] < vlen_t'(Rows)) && (wbe[l] != '0);
      wr_o[l].addr  = 10'(int'(req_q.vd) * WordsPerRegLane + int'(cnt_q[l]));
      wr_o[l].data  = buf_q[cnt_q[l][RW-1:0]][l*64 +: 64];
      wr_o[l].be    = wbe[l];
      if (cnt_q[l] < vlen_t'(Rows)) all_written = 1'b0;
    end
  end

  // Reduction exchange: lane l receives the partial of lane l + 2^step
  always_comb begin
    red_in_valid_o = (state_q == S_RED) && (&red_valid_i);
    for (int l = 0; l < NrLanes; l++) begin
      red_in_use_o[l]  = (l + (1 << step_q) < NrLanes);
      red_in_data_o[l] = red_in_use_o[l] ? red_data_i[(l + (1 << step_q)) % NrLanes] : '0;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= S_IDLE;
      req_q     <= '0;
      row_q     <= '0;
      k_q       <= '0;
      step_q    <= '0;
      done_o    <= 1'b0;
      done_id_o <= '0;
      for (int r = 0; r < Rows; r++) buf_q[r] <= '0;
      for (int l = 0; l < NrLanes; l++) cnt_q[l] <= '0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (pe_valid_i) begin
          req_q  <= pe_req_i;
          row_q  <= '0;
          k_q    <= '0;
          step_q <= '0;
          for (int l = 0; l < NrLanes; l++) cnt_q[l] <= '0;
          if (is_red_op(pe_req_i.op)) state_q <= (RedSteps > 0) ? S_RED : S_IDLE;
          else state_q <= S_LOAD;
        end
        S_LOAD: if (load_go) begin
          buf_q[row_q[RW-1:0]] <= in_row;
          row_q <= row_q + 1'b1;
          if (int'(row_q) == Rows - 1) begin
            k_q   <= '0;
            row_q <= up ? (RW+1)'(Rows - 1) : '0;
            if (req_q.op == OP_RESHUFFLE) state_q <= S_WRITE;
            else if (offset >= vlmax) begin
              // everything slides out: slide-down yields zeros, slide-up writes nothing
              for (int r = 0; r < Rows; r++) buf_q[r] <= '0;
              state_q <= S_WRITE;
            end else state_q <= S_PASS;
          end
        end
        S_PASS: begin
          if (int'(k_q) >= KMax) state_q <= S_WRITE;
          else if (!offset[k_q]) k_q <= k_q + 1'b1;       // bit not set: no pass
          else begin
            buf_q[row_q[RW-1:0]] <= pass_row;
            if (up ? (row_q == '0) : (int'(row_q) == Rows - 1)) begin
              k_q   <= k_q + 1'b1;
              row_q <= up ? (RW+1)'(Rows - 1) : '0;
            end else row_q <= up ? row_q - 1'b1 : row_q + 1'b1;
          end
        end
        S_WRITE: begin
          for (int l = 0; l < NrLanes; l++)
            if (cnt_q[l] < vlen_t'(Rows) && (wbe[l] == '0 || wr_ready_i[l])) cnt_q[l] <= cnt_q[l] + 1'b1;
          if (all_written) state_q <= S_DONE;
        end
        S_RED: if (red_in_valid_o) begin
          step_q <= step_q + 1'b1;
          if (int'(step_q) == RedSteps - 1) state_q <= S_IDLE;
        end
        default: begin
          done_o    <= 1'b1;
          done_id_o <= req_q.id;
          state_q   <= S_IDLE;
        end
      endcase
    end
  end
endmodule
