// vmfpu: the multiplier unit of one lane (integer part).
//
// In the paper this unit holds the lane's multipliers and floating-point unit.
// This implementation covers the integer side: vmul (low half of vs2 * vs1 or
// vs2 * scalar) and vmacc (vd + vs1 * vs2, or vd + scalar * vs2), on 8/16/32/64-
// bit elements packed into 64-bit lane words. The floating-point operations are
// not implemented.
//
// Operands come from queues MUL_A (vs2), MUL_B (vs1) and MUL_C (old vd, for
// vmacc). Results are written through write port WP_MUL with byte enables
// covering active body elements only (tail and masked-off elements stay as
// they were). One word per cycle; the multiply is combinational in this model
// (the paper does not give the pipeline depth). done_o pulses when the last
// write has been accepted.
module vmfpu
  import ara_pkg::*;
#(
  parameter int unsigned NrLanes         = ara_pkg::NrLanes,
  parameter int unsigned LaneId          = 0,
  parameter int unsigned WordsPerRegLane = ara_pkg::VLENPerLane / 64
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        cmd_valid_i,
  input  pe_req_t     cmd_i,
  output logic        cmd_ready_o,
  input  logic        a_valid_i,
  input  logic [63:0] a_data_i,
  output logic        a_pop_o,
  input  logic        b_valid_i,
  input  logic [63:0] b_data_i,
  output logic        b_pop_o,
  input  logic        c_valid_i,
  input  logic [63:0] c_data_i,
  output logic        c_pop_o,
  input  logic        mask_valid_i,
  input  logic [7:0]  mask_be_i,
  output logic        mask_pop_o,
  output logic        wr_valid_o,
  output vrf_wr_t     wr_o,
  input  logic        wr_ready_i,
  output logic        done_o,
  output insn_id_t    done_id_o
);
  typedef enum logic [1:0] { S_IDLE, S_RUN, S_DRAIN } state_e;
  state_e  state_q;
  pe_req_t req_q;
  vlen_t   nwords_q, w_q;

  function automatic logic [63:0] simd_mul(logic [63:0] a, logic [63:0] b, logic [63:0] c,
                                           logic acc, vew_e ew);
    logic [63:0] r;
    r = '0;
    unique case (ew)
      EW8:  for (int s = 0; s < 8; s++) r[s*8 +: 8]   = a[s*8 +: 8] * b[s*8 +: 8] + (acc ? c[s*8 +: 8] : 8'd0);
      EW16: for (int s = 0; s < 4; s++) r[s*16 +: 16] = a[s*16 +: 16] * b[s*16 +: 16] + (acc ? c[s*16 +: 16] : 16'd0);
      EW32: for (int s = 0; s < 2; s++) r[s*32 +: 32] = a[s*32 +: 32] * b[s*32 +: 32] + (acc ? c[s*32 +: 32] : 32'd0);
      default: r = a * b + (acc ? c : 64'd0);
    endcase
    return r;
  endfunction

  function automatic logic [63:0] replicate(logic [63:0] s, vew_e ew);
    unique case (ew)
      EW8:     return {8{s[7:0]}};
      EW16:    return {4{s[15:0]}};
      EW32:    return {2{s[31:0]}};
      default: return s;
    endcase
  endfunction

  logic        need_b, need_c, need_m, go;
  logic [63:0] bop;
  logic [7:0]  be;
  assign need_b = req_q.use_vs1;
  assign need_c = (req_q.op == OP_VMACC);
  assign need_m = !req_q.vm;
  assign bop    = need_b ? b_data_i : replicate(req_q.scalar, req_q.ew);
  assign be     = slot_be(int'(w_q), LaneId, req_q.ew, 0, int'(req_q.vl), NrLanes) &
                  (need_m ? mask_be_i : 8'hff);
  assign go     = (state_q == S_RUN) && (w_q < nwords_q) && a_valid_i &&
                  (!need_b || b_valid_i) && (!need_c || c_valid_i) &&
                  (!need_m || mask_valid_i) && (!wr_valid_o || wr_ready_i);
  assign a_pop_o     = go;
  assign b_pop_o     = go && need_b;
  assign c_pop_o     = go && need_c;
  assign mask_pop_o  = go && need_m;
  assign cmd_ready_o = (state_q == S_IDLE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= S_IDLE;
      req_q      <= '0;
      nwords_q   <= '0;
      w_q        <= '0;
      wr_valid_o <= 1'b0;
      wr_o       <= '0;
      done_o     <= 1'b0;
      done_id_o  <= '0;
    end else begin
      done_o <= 1'b0;
      if (wr_valid_o && wr_ready_i) wr_valid_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (cmd_valid_i) begin
          req_q    <= cmd_i;
          nwords_q <= words_of(lane_elems(cmd_i.vl, LaneId, NrLanes), cmd_i.ew);
          w_q      <= '0;
          state_q  <= S_RUN;
        end
        S_RUN: begin
          if (go) begin
            w_q        <= w_q + 1'b1;
            wr_valid_o <= 1'b1;
            wr_o.addr  <= 10'(int'(req_q.vd) * WordsPerRegLane + int'(w_q));
            wr_o.data  <= simd_mul(a_data_i, bop, c_data_i, need_c, req_q.ew);
            wr_o.be    <= be;
          end
          if (w_q >= nwords_q) state_q <= S_DRAIN;
        end
        default: if (!(wr_valid_o && !wr_ready_i)) begin
          done_o    <= 1'b1;
          done_id_o <= req_q.id;
          state_q   <= S_IDLE;
        end
      endcase
    end
  end
endmodule
