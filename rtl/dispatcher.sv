// dispatcher: decodes the vector instructions offloaded by the scalar core,
// holds the vector CSRs and keeps the register-encoding table.
//
// Interface: acc_req_* carries one instruction (with rs1/rs2 values) from the
// core; acc_resp_* returns one response per instruction (a single-cycle pulse,
// the core always accepts it). seq_req_* hands decoded operations to the
// sequencer. vlsu_ack_i reports that the address generator checked all
// addresses of a memory operation; mask_res_* returns the scalar result of
// vcpop/vfirst.
//
// Operation:
//  * vsetvli/vsetivli/vsetvl update vl and vtype and answer with the new vl.
//    Only LMUL = 1 is supported; any other vtype sets vill.
//  * Every vector register has an entry in the encoding table recording the
//    element width it was last written with (the byte layout in the lanes
//    depends on it). Before an instruction is issued, every source register
//    whose recorded width differs from the one the instruction reads it with
//    is rewritten by an injected RESHUFFLE operation executed by the slide
//    unit. The destination is reshuffled too when the instruction only writes
//    part of it (vl < VLMAX or masked), so the tail and inactive elements keep
//    their values. Mask registers (v0 as mask, compare destinations,
//    vcpop/vfirst sources) use the 8-bit layout.
//  * The response for arithmetic instructions is sent as soon as the
//    operation is handed to the sequencer. Memory operations wait for the
//    address check (precise exceptions); vcpop/vfirst wait for their result.
//  * Unsupported or illegal encodings answer with err = 1 and do nothing.
//    mem_drop_o flags vector loads/stores that end this way (or have vl = 0),
//    so that the system's memory-ordering counters can forget them.
//
// Own choices (the paper does not list them): vstart is always 0; masked
// compares, masked memory operations and masked reductions are not
// supported; vmv<nr>r.v is supported for nr = 1 only (as a vl = VLMAX move).
module dispatcher
  import ara_pkg::*;
#(
  parameter int unsigned VLENBits = ara_pkg::VLEN
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       acc_req_valid_i,
  input  acc_req_t   acc_req_i,
  output logic       acc_req_ready_o,
  output logic       acc_resp_valid_o,
  output acc_resp_t  acc_resp_o,
  output logic       seq_req_valid_o,
  output pe_req_t    seq_req_o,
  input  logic       seq_req_ready_i,
  input  logic       vlsu_ack_i,
  input  logic       vlsu_ack_err_i,
  input  logic       mask_res_valid_i,
  input  logic [63:0] mask_res_i,
  output logic       reshuffle_o,   // a reshuffle operation was issued
  output logic       mem_drop_o,    // a vector load/store was answered without running
  output logic       mem_drop_st_o, // ... and it was a store
  output vlen_t      vl_o,
  output logic [7:0] vtype_o
);
  typedef enum logic [2:0] { S_IDLE, S_RESHUF, S_ISSUE, S_WAIT_ACK, S_WAIT_RES } state_e;

  state_e      state_q;
  vlen_t       vl_q;
  vew_e        sew_q;
  logic        vill_q;
  logic [31:0] eew_valid_q;
  vew_e        eew_q [32];

  pe_req_t     op_q;
  logic        wr_vd_q;           // instruction writes vd as a vector
  vew_e        vd_ew_q;           // width vd is written with
  logic [31:0] rs_pend_q;         // registers still to be reshuffled
  vew_e        rs_ew_q [32];      // width they must be reshuffled to

  function automatic vlen_t vlmax(vew_e ew);
    return vlen_t'(VLENBits / (8 * ew_bytes(ew)));
  endfunction

  // ------------------------------------------------------------------ decode
  typedef struct packed {
    logic        legal;
    logic        is_cfg;
    logic        is_vsetvl;
    logic        is_vsetivli;
    logic        mem;
    logic        scalar_res;
    pe_req_t     op;
  } dec_t;

  function automatic dec_t decode(acc_req_t r, vew_e sew, vlen_t vl, logic vill,
                                  logic [31:0] eval, vew_e eew [32]);
    dec_t        d;
    logic [31:0] i;
    logic [5:0]  f6;
    logic [2:0]  f3;
    logic [63:0] simm, uimm;
    i    = r.insn;
    f6   = i[31:26];
    f3   = i[14:12];
    simm = {{59{i[19]}}, i[19:15]};
    uimm = {59'd0, i[19:15]};
    d    = '0;
    d.op.vs1     = i[19:15];
    d.op.vs2     = i[24:20];
    d.op.vd      = i[11:7];
    d.op.vm      = i[25];
    d.op.ew      = sew;
    d.op.ew_old  = sew;
    d.op.vl      = vl;
    d.op.scalar  = (f3 == 3'b011) ? simm : r.rs1;
    d.op.stride  = r.rs2;
    d.op.use_vs1 = (f3 == 3'b000) || (f3 == 3'b010);
    d.op.op      = OP_VADD;
    if (i[6:0] == 7'b1010111) begin
      if (f3 == 3'b111) begin
        d.legal       = 1'b1;
        d.is_cfg      = 1'b1;
        d.is_vsetivli = (i[31:30] == 2'b11);
        d.is_vsetvl   = (i[31:25] == 7'b1000000);
      end else if (!vill && (f3 inside {3'b000, 3'b011, 3'b100})) begin
        d.legal = 1'b1;
        unique case (f6)
          6'b000000: d.op.op = OP_VADD;
          6'b000010: begin d.op.op = OP_VSUB; d.legal = (f3 != 3'b011); end
          6'b000011: begin d.op.op = OP_VRSUB; d.legal = (f3 != 3'b000); end
          6'b000100: begin d.op.op = OP_VMINU; d.legal = (f3 != 3'b011); end
          6'b000101: begin d.op.op = OP_VMIN;  d.legal = (f3 != 3'b011); end
          6'b000110: begin d.op.op = OP_VMAXU; d.legal = (f3 != 3'b011); end
          6'b000111: begin d.op.op = OP_VMAX;  d.legal = (f3 != 3'b011); end
          6'b001001: d.op.op = OP_VAND;
          6'b001010: d.op.op = OP_VOR;
          6'b001011: d.op.op = OP_VXOR;
          6'b001110: begin
            d.op.op = OP_VSLIDEUP;   d.legal = (f3 != 3'b000);
            if (f3 == 3'b011) d.op.scalar = uimm;
          end
          6'b001111: begin
            d.op.op = OP_VSLIDEDOWN; d.legal = (f3 != 3'b000);
            if (f3 == 3'b011) d.op.scalar = uimm;
          end
          6'b010111: begin
            d.op.op = OP_VMERGE;
            if (i[25] && i[24:20] != 5'd0) d.legal = 1'b0;
          end
          6'b011000: d.op.op = OP_VMSEQ;
          6'b011001: d.op.op = OP_VMSNE;
          6'b011010: begin d.op.op = OP_VMSLTU; d.legal = (f3 != 3'b011); end
          6'b011011: begin d.op.op = OP_VMSLT;  d.legal = (f3 != 3'b011); end
          6'b011100: d.op.op = OP_VMSLEU;
          6'b011101: d.op.op = OP_VMSLE;
          6'b011110: begin d.op.op = OP_VMSGTU; d.legal = (f3 != 3'b000); end
          6'b011111: begin d.op.op = OP_VMSGT;  d.legal = (f3 != 3'b000); end
          6'b100101: begin
            d.op.op = OP_VSLL;
            if (f3 == 3'b011) d.op.scalar = uimm;
          end
          6'b101000: begin
            d.op.op = OP_VSRL;
            if (f3 == 3'b011) d.op.scalar = uimm;
          end
          6'b101001: begin
            d.op.op = OP_VSRA;
            if (f3 == 3'b011) d.op.scalar = uimm;
          end
          6'b100111: begin
            // vmv1r.v: move of the whole register, keeping its encoding
            d.op.op      = OP_VMERGE;
            d.op.use_vs1 = 1'b1;
            d.op.vs1     = i[24:20];
            d.op.vs2     = 5'd0;
            d.legal      = (f3 == 3'b011) && i[25] && (i[19:15] == 5'd0);
            if (eval[i[24:20]]) d.op.ew = eew[i[24:20]];
            d.op.vl      = vlmax(d.op.ew);
          end
          default: d.legal = 1'b0;
        endcase
        if (is_cmp_op(d.op.op) && !i[25]) d.legal = 1'b0;
      end else if (!vill && f3 == 3'b010) begin
        d.legal = 1'b1;
        if (f6[5:3] == 3'b000) begin
          d.op.op = ara_op_e'(int'(OP_VREDSUM) + int'(f6[2:0]));
          d.legal = i[25];
        end else if (f6 == 6'b010000 && i[19:15] == 5'b10000) begin
          d.op.op = OP_VCPOP;  d.scalar_res = 1'b1; d.legal = i[25];
        end else if (f6 == 6'b010000 && i[19:15] == 5'b10001) begin
          d.op.op = OP_VFIRST; d.scalar_res = 1'b1; d.legal = i[25];
        end else if (f6 == 6'b100101) d.op.op = OP_VMUL;
        else if (f6 == 6'b101101)     d.op.op = OP_VMACC;
        else d.legal = 1'b0;
      end else if (!vill && f3 == 3'b110) begin
        d.legal = 1'b1;
        if (f6 == 6'b100101)      d.op.op = OP_VMUL;
        else if (f6 == 6'b101101) d.op.op = OP_VMACC;
        else d.legal = 1'b0;
      end
    end else if (!vill && (i[6:0] == 7'b0000111 || i[6:0] == 7'b0100111)) begin
      // unit-stride / strided loads and stores, nf = 0, mew = 0, unmasked
      d.mem        = 1'b1;
      d.op.scalar  = r.rs1;
      d.op.use_vs1 = 1'b0;
      unique case (f3)
        3'b000:  d.op.ew = EW8;
        3'b101:  d.op.ew = EW16;
        3'b110:  d.op.ew = EW32;
        3'b111:  d.op.ew = EW64;
        default: d.op.ew = EW8;
      endcase
      d.legal = (f3 inside {3'b000, 3'b101, 3'b110, 3'b111}) && i[31:28] == 4'd0 && i[25] &&
                (i[27:26] == 2'b10 || (i[27:26] == 2'b00 && i[24:20] == 5'd0)) &&
                (d.op.ew <= sew);
      if (i[6:0] == 7'b0000111) d.op.op = (i[27:26] == 2'b10) ? OP_VLSE : OP_VLE;
      else                      d.op.op = (i[27:26] == 2'b10) ? OP_VSSE : OP_VSE;
    end
    return d;
  endfunction

  dec_t dec;
  assign dec = decode(acc_req_i, sew_q, vl_q, vill_q, eew_valid_q, eew_q);

  // Registers an operation reads, with the width it reads them with
  logic [31:0] need_rs;
  vew_e        need_ew [32];
  pe_req_t o;
  always_comb begin
    o       = dec.op;
    need_rs = '0;
    for (int k = 0; k < 32; k++) need_ew[k] = o.ew;
    if (dec.legal && !dec.is_cfg) begin
      if (!is_load_op(o.op) && !(o.op == OP_VMERGE && o.vm)) need_rs[o.vs2] = 1'b1;
      if (o.use_vs1 || is_red_op(o.op))                       need_rs[o.vs1] = 1'b1;
      if (is_store_op(o.op) || o.op == OP_VMACC)              need_rs[o.vd]  = 1'b1;
      if (is_mask_scalar_op(o.op))                            need_ew[o.vs2] = EW8;
      // the destination keeps part of its old contents
      if (!is_store_op(o.op) && !is_mask_scalar_op(o.op) && !is_cmp_op(o.op) &&
          (o.vl < vlmax(o.ew) || !o.vm))                      need_rs[o.vd]  = 1'b1;
      if (!o.vm) begin
        need_rs[0] = 1'b1;
        need_ew[0] = EW8;
      end
      for (int k = 0; k < 32; k++)
        if (!eew_valid_q[k] || eew_q[k] == need_ew[k]) need_rs[k] = 1'b0;
    end
  end

  // First register still to be reshuffled
  logic [4:0] rs_sel;
  always_comb begin
    rs_sel = '0;
    for (int k = 31; k >= 0; k--) if (rs_pend_q[k]) rs_sel = 5'(k);
  end

  always_comb begin
    seq_req_valid_o = 1'b0;
    seq_req_o       = op_q;
    if (state_q == S_RESHUF) begin
      seq_req_valid_o  = 1'b1;
      seq_req_o        = '0;
      seq_req_o.op     = OP_RESHUFFLE;
      seq_req_o.vs2    = rs_sel;
      seq_req_o.vd     = rs_sel;
      seq_req_o.vm     = 1'b1;
      seq_req_o.ew     = rs_ew_q[rs_sel];
      seq_req_o.ew_old = eew_q[rs_sel];
      seq_req_o.vl     = vlmax(rs_ew_q[rs_sel]);
    end else if (state_q == S_ISSUE) begin
      seq_req_valid_o = 1'b1;
    end
  end
  // memory instructions that are rejected or have vl = 0 never reach the VLSU
  logic is_mem_opc;
  assign is_mem_opc    = (acc_req_i.insn[6:0] == 7'b0000111) || (acc_req_i.insn[6:0] == 7'b0100111);
  assign mem_drop_o    = (state_q == S_IDLE) && acc_req_valid_i && is_mem_opc &&
                         (!dec.legal || dec.op.vl == '0);
  assign mem_drop_st_o = acc_req_i.insn[5];
  assign reshuffle_o     = (state_q == S_RESHUF) && seq_req_ready_i;
  assign acc_req_ready_o = (state_q == S_IDLE);
  assign vl_o            = vl_q;
  assign vtype_o         = {vill_q, 5'd0, sew_q};

  // vset{i}vl{i}
  logic [63:0] avl, vtype_new;
  logic        new_vill;
  vew_e        new_sew;
  vlen_t       new_vl;
  always_comb begin
    vtype_new = dec.is_vsetvl ? acc_req_i.rs2 :
                dec.is_vsetivli ? {54'd0, acc_req_i.insn[29:20]} : {53'd0, acc_req_i.insn[30:20]};
    avl       = dec.is_vsetivli ? {59'd0, acc_req_i.insn[19:15]} : acc_req_i.rs1;
    new_vill  = (vtype_new[63:6] != '0) || (vtype_new[2:0] != 3'b000);
    new_sew   = vew_e'(vtype_new[4:3]);
    if (new_vill) new_sew = EW8;
    if (!dec.is_vsetivli && acc_req_i.insn[19:15] == 5'd0)
      avl = (acc_req_i.insn[11:7] != 5'd0) ? 64'hFFFF_FFFF : 64'(vl_q);
    new_vl = (avl > 64'(vlmax(new_sew))) ? vlmax(new_sew) : vlen_t'(avl);
    if (new_vill) new_vl = '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q          <= S_IDLE;
      vl_q             <= '0;
      sew_q            <= EW8;
      vill_q           <= 1'b1;
      eew_valid_q      <= '0;
      for (int k = 0; k < 32; k++) begin eew_q[k] <= EW8; rs_ew_q[k] <= EW8; end
      op_q             <= '0;
      wr_vd_q          <= 1'b0;
      vd_ew_q          <= EW8;
      rs_pend_q        <= '0;
      acc_resp_valid_o <= 1'b0;
      acc_resp_o       <= '0;
    end else begin
      acc_resp_valid_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (acc_req_valid_i) begin
          acc_resp_o.id     <= acc_req_i.id;
          acc_resp_o.result <= '0;
          acc_resp_o.err    <= 1'b0;
          if (!dec.legal) begin
            acc_resp_valid_o <= 1'b1;
            acc_resp_o.err   <= 1'b1;
          end else if (dec.is_cfg) begin
            vl_q              <= new_vl;
            sew_q             <= new_sew;
            vill_q            <= new_vill;
            acc_resp_valid_o  <= 1'b1;
            acc_resp_o.result <= 64'(new_vl);
          end else if (dec.op.vl == '0 && !dec.scalar_res) begin
            acc_resp_valid_o <= 1'b1;   // nothing to do
          end else begin
            op_q      <= dec.op;
            wr_vd_q   <= !is_store_op(dec.op.op) && !is_mask_scalar_op(dec.op.op);
            vd_ew_q   <= is_cmp_op(dec.op.op) ? EW8 : dec.op.ew;
            rs_pend_q <= need_rs;
            for (int k = 0; k < 32; k++) rs_ew_q[k] <= need_ew[k];
            state_q   <= (need_rs != '0) ? S_RESHUF : S_ISSUE;
          end
        end
        S_RESHUF: if (seq_req_ready_i) begin
          eew_q[rs_sel]     <= rs_ew_q[rs_sel];
          rs_pend_q[rs_sel] <= 1'b0;
          if ((rs_pend_q & ~(32'd1 << rs_sel)) == '0) state_q <= S_ISSUE;
        end
        S_ISSUE: if (seq_req_ready_i) begin
          if (wr_vd_q) begin
            eew_q[op_q.vd]       <= vd_ew_q;
            eew_valid_q[op_q.vd] <= 1'b1;
          end
          if (is_load_op(op_q.op) || is_store_op(op_q.op)) state_q <= S_WAIT_ACK;
          else if (is_mask_scalar_op(op_q.op))             state_q <= S_WAIT_RES;
          else begin
            acc_resp_valid_o <= 1'b1;
            state_q          <= S_IDLE;
          end
        end
        S_WAIT_ACK: if (vlsu_ack_i) begin
          acc_resp_valid_o <= 1'b1;
          acc_resp_o.err   <= vlsu_ack_err_i;
          state_q          <= S_IDLE;
        end
        S_WAIT_RES: if (mask_res_valid_i) begin
          acc_resp_valid_o  <= 1'b1;
          acc_resp_o.result <= mask_res_i;
          state_q           <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_one_at_a_time: assert property (@(posedge clk_i) disable iff (!rst_ni)
    state_q != S_IDLE |-> !acc_req_ready_o);
endmodule
