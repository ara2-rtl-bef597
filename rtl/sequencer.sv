// sequencer: keeps track of the instructions in flight in the vector unit.
//
// Up to NrInsnWindow instructions can be in flight; each gets the index of a
// free window entry as its identifier. An instruction is broadcast to the
// lanes and units (pe_valid_o) when
//  * a window entry is free,
//  * it has no register hazard with an instruction in flight: it reads no
//    register an earlier one still writes (RAW), and writes no register an
//    earlier one still reads or writes (WAR, WAW), and
//  * every unit that takes part in it can accept it (unit_ready_i).
// Dependent instructions therefore wait for their producer to finish; there is
// no operand chaining in this implementation. The entry is freed when every
// unit that completes the instruction has reported it: all lanes for VALU or
// VMFPU operations, otherwise the load/store, slide or mask unit.
module sequencer
  import ara_pkg::*;
#(
  parameter int unsigned NrLanes = ara_pkg::NrLanes,
  parameter int unsigned Window  = ara_pkg::NrInsnWindow
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               req_valid_i,
  input  pe_req_t            req_i,
  output logic               req_ready_o,
  output logic               pe_valid_o,
  output pe_req_t            pe_req_o,
  input  logic [NrUnits-1:0] unit_ready_i,
  input  logic [NrLanes-1:0] alu_done_i,
  input  insn_id_t           alu_done_id_i [NrLanes],
  input  logic [NrLanes-1:0] mul_done_i,
  input  insn_id_t           mul_done_id_i [NrLanes],
  input  logic               vlsu_done_i,
  input  insn_id_t           vlsu_done_id_i,
  input  logic               sldu_done_i,
  input  insn_id_t           sldu_done_id_i,
  input  logic               masku_done_i,
  input  insn_id_t           masku_done_id_i,
  output logic               idle_o,
  output logic [$clog2(Window+1)-1:0] inflight_o
);
  logic [Window-1:0]  valid_q;
  logic [NrUnits-1:0] pend_q  [Window];
  logic [NrLanes-1:0] alu_q   [Window];
  logic [NrLanes-1:0] mul_q   [Window];
  logic [31:0]        rd_q    [Window];
  logic [31:0]        wr_q    [Window];

  function automatic logic [31:0] reads_of(pe_req_t r);
    logic [31:0] m;
    m = '0;
    if (!is_load_op(r.op) && !(r.op == OP_VMERGE && r.vm)) m[r.vs2] = 1'b1;
    if (r.use_vs1 || is_red_op(r.op))                       m[r.vs1] = 1'b1;
    if (is_store_op(r.op) || r.op == OP_VMACC)              m[r.vd]  = 1'b1;
    if (!r.vm)                                              m[0]     = 1'b1;
    return m;
  endfunction
  function automatic logic [31:0] writes_of(pe_req_t r);
    logic [31:0] m;
    m = '0;
    if (!is_store_op(r.op) && !is_mask_scalar_op(r.op)) m[r.vd] = 1'b1;
    return m;
  endfunction

  logic [31:0]        all_rd, all_wr, new_rd, new_wr;
  logic               hazard, has_free, units_ok;
  insn_id_t           free_id;
  logic [NrUnits-1:0] part;

  always_comb begin
    all_rd   = '0;
    all_wr   = '0;
    has_free = 1'b0;
    free_id  = '0;
    for (int i = Window - 1; i >= 0; i--) begin
      if (valid_q[i]) begin
        all_rd |= rd_q[i];
        all_wr |= wr_q[i];
      end else begin
        has_free = 1'b1;
        free_id  = insn_id_t'(i);
      end
    end
  end

  assign new_rd      = reads_of(req_i);
  assign new_wr      = writes_of(req_i);
  assign hazard      = ((new_rd & all_wr) != '0) || ((new_wr & (all_wr | all_rd)) != '0);
  assign part        = participants(req_i.op, req_i.vm);
  assign units_ok    = ((part & ~unit_ready_i) == '0);
  assign req_ready_o = has_free && !hazard && units_ok;
  assign pe_valid_o  = req_valid_i && req_ready_o;
  always_comb begin
    pe_req_o    = req_i;
    pe_req_o.id = free_id;
  end
  assign idle_o = (valid_q == '0);
  always_comb begin
    inflight_o = '0;
    for (int i = 0; i < Window; i++) inflight_o += $bits(inflight_o)'(valid_q[i]);
  end

  // Units still to report, after this cycle's completions
  logic [NrUnits-1:0] pend_nx [Window];
  always_comb begin
    for (int i = 0; i < Window; i++) begin
      pend_nx[i] = pend_q[i];
      if (&alu_q[i])                                         pend_nx[i][U_LANES] = 1'b0;
      if (&mul_q[i])                                         pend_nx[i][U_MUL]   = 1'b0;
      if (vlsu_done_i  && vlsu_done_id_i  == insn_id_t'(i)) pend_nx[i][U_VLSU]  = 1'b0;
      if (sldu_done_i  && sldu_done_id_i  == insn_id_t'(i)) pend_nx[i][U_SLDU]  = 1'b0;
      if (masku_done_i && masku_done_id_i == insn_id_t'(i)) pend_nx[i][U_MASKU] = 1'b0;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
      for (int i = 0; i < Window; i++) begin
        pend_q[i] <= '0; alu_q[i] <= '0; mul_q[i] <= '0; rd_q[i] <= '0; wr_q[i] <= '0;
      end
    end else begin
      // completions
      for (int l = 0; l < NrLanes; l++) begin
        if (alu_done_i[l]) alu_q[alu_done_id_i[l]][l] <= 1'b1;
        if (mul_done_i[l]) mul_q[mul_done_id_i[l]][l] <= 1'b1;
      end
      for (int i = 0; i < Window; i++) begin
        if (valid_q[i]) begin
          pend_q[i] <= pend_nx[i];
          if (pend_nx[i] == '0) valid_q[i] <= 1'b0;
        end
      end
      // issue
      if (pe_valid_o) begin
        valid_q[free_id] <= 1'b1;
        pend_q[free_id]  <= completers(req_i.op);
        alu_q[free_id]   <= '0;
        mul_q[free_id]   <= '0;
        rd_q[free_id]    <= new_rd;
        wr_q[free_id]    <= new_wr;
      end
    end
  end
endmodule
