// valu: the integer vector ALU of one lane.
//
// Works on one 64-bit lane word per cycle, split into 8/4/2/1 elements of
// 8/16/32/64 bits (SIMD). Operand A is vs2 (operand queue ALU_A), operand B is
// vs1 (queue ALU_B) or the scalar replicated to every element. Results go to
// the lane's VRF through write port WP_ALU with byte enables that cover only
// the body elements (index < vl) that are active (mask bit set, or unmasked):
// masked-off and tail elements are left undisturbed. Mask bits arrive from the
// mask unit as one byte-enable byte per word.
//
// Compares do not write the VRF: one flag per element slot goes to the mask
// unit, which packs the mask register.
//
// Integer reductions follow the paper's three steps. Intra-lane: the lane's
// words are folded into a 64-bit accumulator, inactive slots contributing the
// neutral value. Inter-lane: log2(NrLanes) steps; in step k the slide unit
// delivers the partial result of lane (this + 2^k), which is combined into the
// accumulator. SIMD and scalar step (lane 0 only): the 64-bit accumulator is
// folded in halves down to one element (one fold per cycle), combined with
// element 0 of vs1, and written to element 0 of vd.
//
// Timing: one word per cycle when operands and the write port allow; done_o
// pulses once per instruction when the last write has been accepted.
module valu
  import ara_pkg::*;
#(
  parameter int unsigned NrLanes         = ara_pkg::NrLanes,
  parameter int unsigned LaneId          = 0,
  parameter int unsigned WordsPerRegLane = ara_pkg::VLENPerLane / 64
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // Instruction from the lane sequencer
  input  logic        cmd_valid_i,
  input  pe_req_t     cmd_i,
  output logic        cmd_ready_o,
  // Operand queues
  input  logic        a_valid_i,
  input  logic [63:0] a_data_i,
  output logic        a_pop_o,
  input  logic        b_valid_i,
  input  logic [63:0] b_data_i,
  output logic        b_pop_o,
  // Mask byte-enables from the mask unit
  input  logic        mask_valid_i,
  input  logic [7:0]  mask_be_i,
  output logic        mask_pop_o,
  // VRF write port
  output logic        wr_valid_o,
  output vrf_wr_t     wr_o,
  input  logic        wr_ready_i,
  // Compare flags to the mask unit
  output logic        cmp_valid_o,
  output logic [7:0]  cmp_flags_o,
  input  logic        cmp_ready_i,
  // Inter-lane reduction through the slide unit
  output logic        red_valid_o,
  output logic [63:0] red_data_o,
  input  logic        red_in_valid_i,
  input  logic        red_in_use_i,
  input  logic [63:0] red_in_data_i,
  // Completion
  output logic        done_o,
  output insn_id_t    done_id_o
);
  localparam int unsigned RedSteps = (NrLanes > 1) ? $clog2(NrLanes) : 0;

  typedef enum logic [2:0] { S_IDLE, S_RUN, S_DRAIN, S_INTER, S_SIMD, S_SCALAR, S_WRITE } state_e;
  state_e      state_q;
  pe_req_t     req_q;
  vlen_t       nwords_q, w_q;
  logic [63:0] acc_q;
  logic [2:0]  step_q;
  logic [6:0]  cw_q;
  logic [63:0] bop;

  // ---------------------------------------------------------------------------
  // Element arithmetic on w-bit values held in 64-bit containers
  // ---------------------------------------------------------------------------
  function automatic logic [63:0] sext(logic [63:0] v, int unsigned w);
    return (w == 64) ? v : 64'($signed(v << (64 - w)) >>> (64 - w));
  endfunction
  function automatic logic [63:0] zext(logic [63:0] v, int unsigned w);
    return (w == 64) ? v : (v & ((64'd1 << w) - 1));
  endfunction

  function automatic logic [63:0] elem_op(ara_op_e op, logic [63:0] a, logic [63:0] b, int unsigned w);
    logic [63:0] za, zb, sa, sb;
    logic [5:0]  sh;
    za = zext(a, w); zb = zext(b, w); sa = sext(a, w); sb = sext(b, w);
    sh = 6'(zb & 64'(w - 1));
    unique case (op)
      OP_VADD,  OP_VREDSUM:  return za + zb;
      OP_VSUB:               return za - zb;
      OP_VRSUB:              return zb - za;
      OP_VAND,  OP_VREDAND:  return za & zb;
      OP_VOR,   OP_VREDOR:   return za | zb;
      OP_VXOR,  OP_VREDXOR:  return za ^ zb;
      OP_VSLL:               return za << sh;
      OP_VSRL:               return za >> sh;
      OP_VSRA:               return 64'($signed(sa) >>> sh);
      OP_VMINU, OP_VREDMINU: return (za < zb) ? za : zb;
      OP_VMAXU, OP_VREDMAXU: return (za > zb) ? za : zb;
      OP_VMIN,  OP_VREDMIN:  return ($signed(sa) < $signed(sb)) ? za : zb;
      OP_VMAX,  OP_VREDMAX:  return ($signed(sa) > $signed(sb)) ? za : zb;
      OP_VMSEQ:              return 64'(za == zb);
      OP_VMSNE:              return 64'(za != zb);
      OP_VMSLTU:             return 64'(za <  zb);
      OP_VMSLEU:             return 64'(za <= zb);
      OP_VMSGTU:             return 64'(za >  zb);
      OP_VMSLT:              return 64'($signed(sa) <  $signed(sb));
      OP_VMSLE:              return 64'($signed(sa) <= $signed(sb));
      OP_VMSGT:              return 64'($signed(sa) >  $signed(sb));
      default:               return zb;   // OP_VMERGE / vmv
    endcase
  endfunction

  // Apply elem_op to every slot of a word; for compares, bit s = flag of slot s
  function automatic logic [63:0] simd_op(ara_op_e op, logic [63:0] a, logic [63:0] b, vew_e ew);
    logic [63:0] r;
    r = '0;
    unique case (ew)
      EW8:  for (int s = 0; s < 8; s++) begin
              if (is_cmp_op(op)) r[s] = elem_op(op, 64'(a[s*8 +: 8]), 64'(b[s*8 +: 8]), 8)[0];
              else r[s*8 +: 8] = elem_op(op, 64'(a[s*8 +: 8]), 64'(b[s*8 +: 8]), 8)[7:0];
            end
      EW16: for (int s = 0; s < 4; s++) begin
              if (is_cmp_op(op)) r[s] = elem_op(op, 64'(a[s*16 +: 16]), 64'(b[s*16 +: 16]), 16)[0];
              else r[s*16 +: 16] = elem_op(op, 64'(a[s*16 +: 16]), 64'(b[s*16 +: 16]), 16)[15:0];
            end
      EW32: for (int s = 0; s < 2; s++) begin
              if (is_cmp_op(op)) r[s] = elem_op(op, 64'(a[s*32 +: 32]), 64'(b[s*32 +: 32]), 32)[0];
              else r[s*32 +: 32] = elem_op(op, 64'(a[s*32 +: 32]), 64'(b[s*32 +: 32]), 32)[31:0];
            end
      default: begin
              if (is_cmp_op(op)) r[0] = elem_op(op, a, b, 64)[0];
              else r = elem_op(op, a, b, 64);
            end
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

  function automatic logic [63:0] neutral(ara_op_e op, vew_e ew);
    unique case (op)
      OP_VREDAND, OP_VREDMINU: return '1;
      OP_VREDMIN: return replicate(64'h7fff_ffff_ffff_ffff >> (64 - 8 * ew_bytes(ew)), ew);
      OP_VREDMAX: return replicate(64'd1 << (8 * ew_bytes(ew) - 1), ew);
      default:    return '0;
    endcase
  endfunction

  // Fold the upper half of a cw-bit value onto the lower half
  function automatic logic [63:0] fold(ara_op_e op, logic [63:0] v, int unsigned cw);
    logic [63:0] lo, hi;
    lo = zext(v, cw / 2);
    hi = zext(v >> (cw / 2), cw / 2);
    return zext(elem_op(op, lo, hi, cw / 2), cw / 2);
  endfunction

  // ---------------------------------------------------------------------------
  // Datapath
  // ---------------------------------------------------------------------------
  logic       is_red, is_cmp, need_a, need_b, need_m, go;
  logic [7:0] body_be, act_be;
  logic [63:0] res, a_eff;

  assign is_red = is_red_op(req_q.op);
  assign is_cmp = is_cmp_op(req_q.op);
  assign need_a = !(req_q.op == OP_VMERGE && req_q.vm);
  assign need_b = req_q.use_vs1 && !is_red;
  assign need_m = !req_q.vm;
  assign bop    = need_b ? b_data_i : replicate(req_q.scalar, req_q.ew);
  assign body_be = slot_be(int'(w_q), LaneId, req_q.ew, 0, int'(req_q.vl), NrLanes);
  assign act_be  = (need_m && req_q.op != OP_VMERGE) ? (body_be & mask_be_i) : body_be;

  always_comb begin
    a_eff = a_data_i;
    if (is_red) begin
      // inactive slots contribute the neutral element
      for (int k = 0; k < 8; k++)
        if (!body_be[k]) a_eff[k*8 +: 8] = neutral(req_q.op, req_q.ew)[k*8 +: 8];
    end
    if (req_q.op == OP_VMERGE && !req_q.vm) begin
      res = a_data_i;
      for (int k = 0; k < 8; k++) if (mask_be_i[k]) res[k*8 +: 8] = bop[k*8 +: 8];
    end else if (is_red) begin
      res = simd_op(req_q.op, acc_q, a_eff, req_q.ew);
    end else begin
      res = simd_op(req_q.op, a_data_i, bop, req_q.ew);
    end
  end

  // A word can be processed when all its inputs are there and its output has room
  logic out_free;
  assign out_free = is_cmp ? (!cmp_valid_o || cmp_ready_i) :
                    is_red ? 1'b1 : (!wr_valid_o || wr_ready_i);
  assign go = (state_q == S_RUN) && (w_q < nwords_q) &&
              (!need_a || a_valid_i) && (!need_b || b_valid_i) &&
              (!need_m || mask_valid_i) && out_free;

  assign a_pop_o     = go && need_a;
  assign b_pop_o     = (go && need_b) || (state_q == S_SCALAR && b_valid_i);
  assign mask_pop_o  = go && need_m;
  assign cmd_ready_o = (state_q == S_IDLE);
  assign red_valid_o = (state_q == S_INTER);
  assign red_data_o  = acc_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= S_IDLE;
      req_q       <= '0;
      nwords_q    <= '0;
      w_q         <= '0;
      acc_q       <= '0;
      step_q      <= '0;
      cw_q        <= 7'd64;
      wr_valid_o  <= 1'b0;
      wr_o        <= '0;
      cmp_valid_o <= 1'b0;
      cmp_flags_o <= '0;
      done_o      <= 1'b0;
      done_id_o   <= '0;
    end else begin
      done_o <= 1'b0;
      if (wr_valid_o && wr_ready_i)   wr_valid_o  <= 1'b0;
      if (cmp_valid_o && cmp_ready_i) cmp_valid_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (cmd_valid_i) begin
          req_q    <= cmd_i;
          nwords_q <= words_of(lane_elems(cmd_i.vl, LaneId, NrLanes), cmd_i.ew);
          w_q      <= '0;
          acc_q    <= neutral(cmd_i.op, cmd_i.ew);
          step_q   <= '0;
          cw_q     <= 7'd64;
          state_q  <= S_RUN;
        end
        S_RUN: begin
          if (go) begin
            w_q <= w_q + 1'b1;
            if (is_cmp) begin
              cmp_valid_o <= 1'b1;
              cmp_flags_o <= res[7:0];
            end else if (is_red) begin
              acc_q <= res;
            end else begin
              wr_valid_o <= 1'b1;
              wr_o.addr  <= 10'(int'(req_q.vd) * WordsPerRegLane + int'(w_q));
              wr_o.data  <= res;
              wr_o.be    <= act_be;
            end
          end
          if (w_q >= nwords_q) state_q <= is_red ? ((RedSteps > 0) ? S_INTER :
                                                    (LaneId == 0 ? S_SIMD : S_DRAIN)) : S_DRAIN;
        end
        S_INTER: if (red_in_valid_i) begin
          if (red_in_use_i) acc_q <= simd_op(req_q.op, acc_q, red_in_data_i, req_q.ew);
          step_q <= step_q + 1'b1;
          if (int'(step_q) == RedSteps - 1) state_q <= (LaneId == 0) ? S_SIMD : S_DRAIN;
        end
        S_SIMD: begin
          // one halving per cycle: 64 -> 32 -> 16 -> 8 bits, down to the element width
          if (int'(cw_q) > 8 * int'(ew_bytes(req_q.ew))) begin
            acc_q <= fold(req_q.op, acc_q, int'(cw_q));
            cw_q  <= cw_q >> 1;
          end else state_q <= S_SCALAR;
        end
        S_SCALAR: if (b_valid_i) begin
          acc_q   <= simd_op(req_q.op, acc_q, b_data_i, req_q.ew);
          state_q <= S_WRITE;
        end
        S_WRITE: if (!wr_valid_o) begin
          wr_valid_o <= 1'b1;
          wr_o.addr  <= 10'(int'(req_q.vd) * WordsPerRegLane);
          wr_o.data  <= acc_q;
          wr_o.be    <= slot_be(0, 0, req_q.ew, 0, 1, NrLanes);
          state_q    <= S_DRAIN;
        end
        S_DRAIN: if (!(wr_valid_o && !wr_ready_i) && !(cmp_valid_o && !cmp_ready_i)) begin
          done_o    <= 1'b1;
          done_id_o <= req_q.id;
          state_q   <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
