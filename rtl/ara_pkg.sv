// ara_pkg: types, constants and layout functions shared by the vector unit.
//
// The vector register file (VRF) is split over NrLanes lanes. Element e of a
// register lives in lane (e mod NrLanes); inside the lane the elements of one
// register are packed into consecutive 64-bit words. A register therefore
// occupies WordsPerRegLane words in every lane, and the same memory byte can sit
// in different lanes depending on the element width (EW) the register was
// written with. vrf_byte_idx() gives that mapping ("shuffle"): it is the one
// place where the byte layout is defined, and every unit that moves bytes
// between memory order and VRF order uses it.
//
// A "row" is one word of every lane (8 x NrLanes bytes). The shuffle only
// permutes bytes inside a row, which is what lets the slide unit stream a
// register row by row.
//
// Default sizes follow the paper: 4 lanes, VLEN = 1024 bit per lane, 8 VRF
// banks per lane, up to 8 instructions in flight, 64-bit elements at most.
// Widths of struct fields are fixed generous maxima so that modules can be
// instantiated with other lane counts.
package ara_pkg;

  parameter int unsigned NrLanes      = 4;
  parameter int unsigned VLENPerLane  = 1024;
  parameter int unsigned VLEN         = VLENPerLane * NrLanes;
  parameter int unsigned NrVRegs      = 32;
  parameter int unsigned NrBanks      = 8;
  parameter int unsigned NrInsnWindow = 8;
  parameter int unsigned ELEN         = 64;

  // Operand queues of a lane
  parameter int unsigned NrOpQueues = 9;
  typedef enum logic [3:0] {
    Q_ALU_A  = 4'd0,  // vs2 for the VALU
    Q_ALU_B  = 4'd1,  // vs1 for the VALU
    Q_MUL_A  = 4'd2,  // vs2 for the VMFPU
    Q_MUL_B  = 4'd3,  // vs1 for the VMFPU
    Q_MUL_C  = 4'd4,  // vd (accumulator) for the VMFPU
    Q_ST     = 4'd5,  // store data for the VSTU
    Q_SLD    = 4'd6,  // source register for the SLDU
    Q_MASK_M = 4'd7,  // v0 for the MASKU (masked execution)
    Q_MASK_A = 4'd8   // mask operand for vcpop/vfirst
  } opq_e;

  // VRF write ports of a lane
  parameter int unsigned NrWrPorts = 5;
  typedef enum logic [2:0] {
    WP_ALU = 3'd0, WP_MUL = 3'd1, WP_LD = 3'd2, WP_SLD = 3'd3, WP_MASK = 3'd4
  } wrport_e;

  typedef enum logic [1:0] { EW8 = 2'd0, EW16 = 2'd1, EW32 = 2'd2, EW64 = 2'd3 } vew_e;

  typedef enum logic [5:0] {
    OP_VADD, OP_VSUB, OP_VRSUB, OP_VAND, OP_VOR, OP_VXOR,
    OP_VSLL, OP_VSRL, OP_VSRA,
    OP_VMINU, OP_VMIN, OP_VMAXU, OP_VMAX,
    OP_VMERGE,                       // vmerge (masked) / vmv.v.* (vm=1)
    OP_VMSEQ, OP_VMSNE, OP_VMSLTU, OP_VMSLT, OP_VMSLEU, OP_VMSLE, OP_VMSGTU, OP_VMSGT,
    OP_VREDSUM, OP_VREDAND, OP_VREDOR, OP_VREDXOR,
    OP_VREDMINU, OP_VREDMIN, OP_VREDMAXU, OP_VREDMAX,
    OP_VMUL, OP_VMACC,
    OP_VLE, OP_VLSE, OP_VSE, OP_VSSE,
    OP_VSLIDEUP, OP_VSLIDEDOWN, OP_RESHUFFLE,
    OP_VCPOP, OP_VFIRST
  } ara_op_e;

  typedef logic [2:0]  insn_id_t;
  typedef logic [15:0] vlen_t;     // vl, element counts
  typedef logic [4:0]  vreg_t;

  // Instruction as broadcast by the sequencer to lanes and units
  typedef struct packed {
    insn_id_t    id;
    ara_op_e     op;
    vreg_t       vs1;
    vreg_t       vs2;
    vreg_t       vd;
    logic        use_vs1;   // vs1 is a vector operand (.vv); else scalar
    logic        vm;        // 1: unmasked
    vew_e        ew;        // element width of the operation (EEW for memory ops)
    vew_e        ew_old;    // reshuffle: encoding to read the register with
    vlen_t       vl;
    logic [63:0] scalar;    // rs1 / immediate / base address / slide amount
    logic [63:0] stride;    // rs2 for strided memory operations
  } pe_req_t;

  // Units that take part in an instruction (bit positions)
  parameter int unsigned NrUnits = 5;
  parameter int unsigned U_LANES = 0;
  parameter int unsigned U_VLSU  = 1;
  parameter int unsigned U_SLDU  = 2;
  parameter int unsigned U_MASKU = 3;
  parameter int unsigned U_MUL   = 4;   // lanes, VMFPU (completion source only)

  // Write request of a functional unit into one lane's VRF
  typedef struct packed {
    logic [9:0]  addr;   // lane-local word address: vreg * WordsPerRegLane + word
    logic [63:0] data;
    logic [7:0]  be;
  } vrf_wr_t;

  // Scalar core <-> vector unit instruction interface
  typedef struct packed {
    logic [31:0] insn;
    logic [63:0] rs1;
    logic [63:0] rs2;
    logic [3:0]  id;
  } acc_req_t;

  typedef struct packed {
    logic [63:0] result;
    logic [3:0]  id;
    logic        err;
  } acc_resp_t;

  // Single-cycle event flags of the system, for performance counting
  typedef struct packed {
    logic seq_stall;        // sequencer held an operation back
    logic reshuffle;        // dispatcher injected a reshuffle
    logic mem_conflict;     // vector unit and scalar caches hit memory together
    logic scalar_ld_stall;  // scalar load held back by a vector store
    logic scalar_st_stall;  // scalar store held back by a vector load/store
    logic vec_mem_stall;    // vector memory instruction held back by a scalar store
    logic inval_sent;       // D$ set invalidation accepted
    logic inval_merged;     // vector write covered by the previous invalidation
  } sys_events_t;

  function automatic int unsigned ew_bytes(vew_e ew);
    return 1 << ew;
  endfunction

  function automatic logic is_alu_op(ara_op_e op);
    return op inside {OP_VADD, OP_VSUB, OP_VRSUB, OP_VAND, OP_VOR, OP_VXOR, OP_VSLL, OP_VSRL,
                      OP_VSRA, OP_VMINU, OP_VMIN, OP_VMAXU, OP_VMAX, OP_VMERGE};
  endfunction
  function automatic logic is_cmp_op(ara_op_e op);
    return op inside {OP_VMSEQ, OP_VMSNE, OP_VMSLTU, OP_VMSLT, OP_VMSLEU, OP_VMSLE,
                      OP_VMSGTU, OP_VMSGT};
  endfunction
  function automatic logic is_red_op(ara_op_e op);
    return op inside {OP_VREDSUM, OP_VREDAND, OP_VREDOR, OP_VREDXOR,
                      OP_VREDMINU, OP_VREDMIN, OP_VREDMAXU, OP_VREDMAX};
  endfunction
  function automatic logic is_mul_op(ara_op_e op);
    return op inside {OP_VMUL, OP_VMACC};
  endfunction
  function automatic logic is_load_op(ara_op_e op);
    return op inside {OP_VLE, OP_VLSE};
  endfunction
  function automatic logic is_store_op(ara_op_e op);
    return op inside {OP_VSE, OP_VSSE};
  endfunction
  function automatic logic is_sld_op(ara_op_e op);
    return op inside {OP_VSLIDEUP, OP_VSLIDEDOWN, OP_RESHUFFLE};
  endfunction
  function automatic logic is_mask_scalar_op(ara_op_e op);
    return op inside {OP_VCPOP, OP_VFIRST};
  endfunction

  // Units that must accept the instruction
  function automatic logic [NrUnits-1:0] participants(ara_op_e op, logic vm);
    logic [NrUnits-1:0] p;
    p = '0;
    if (!is_load_op(op))                                         p[U_LANES] = 1'b1;
    if (is_load_op(op) || is_store_op(op))                       p[U_VLSU]  = 1'b1;
    if (is_sld_op(op) || is_red_op(op))                          p[U_SLDU]  = 1'b1;
    if (is_cmp_op(op) || is_mask_scalar_op(op) || !vm)           p[U_MASKU] = 1'b1;
    return p;
  endfunction

  // Units whose completion retires the instruction
  function automatic logic [NrUnits-1:0] completers(ara_op_e op);
    logic [NrUnits-1:0] c;
    c = '0;
    if (is_alu_op(op) || is_red_op(op))                   c[U_LANES] = 1'b1;
    if (is_mul_op(op))                                    c[U_MUL]   = 1'b1;
    if (is_load_op(op) || is_store_op(op))                c[U_VLSU]  = 1'b1;
    if (is_sld_op(op))                                    c[U_SLDU]  = 1'b1;
    if (is_cmp_op(op) || is_mask_scalar_op(op))           c[U_MASKU] = 1'b1;
    return c;
  endfunction

  // Byte layout. Memory byte b of a register written with element width ew
  // sits in lane ((b/ewb) mod L), at lane byte ((b/ewb)/L)*ewb + b mod ewb.
  // Returned: flat VRF byte index row*8L + lane*8 + (lane byte mod 8), where
  // row = lane byte / 8 (equal to b / 8L: the shuffle never leaves a row).
  function automatic int unsigned vrf_byte_idx(int unsigned b, vew_e ew, int unsigned lanes);
    int unsigned ewb, e, k, lane, lbyte;
    ewb   = ew_bytes(ew);
    e     = b / ewb;
    k     = b % ewb;
    lane  = e % lanes;
    lbyte = (e / lanes) * ewb + k;
    return (lbyte / 8) * 8 * lanes + lane * 8 + (lbyte % 8);
  endfunction

  // Number of elements of a vl-long vector that fall in lane `lane`
  function automatic vlen_t lane_elems(vlen_t vl, int unsigned lane, int unsigned lanes);
    vlen_t n;
    n = (vl > vlen_t'(lane)) ? vlen_t'((int'(vl) - int'(lane) + int'(lanes) - 1) / int'(lanes)) : '0;
    return n;
  endfunction

  // Number of 64-bit lane words holding n elements of width ew
  function automatic vlen_t words_of(vlen_t n, vew_e ew);
    return vlen_t'((int'(n) * int'(ew_bytes(ew)) + 7) / 8);
  endfunction

  // Byte enables of the element slots of word w (lane `lane`) whose element
  // index is in [lo, hi)
  function automatic logic [7:0] slot_be(int unsigned w, int unsigned lane, vew_e ew,
                                         int unsigned lo, int unsigned hi, int unsigned lanes);
    logic [7:0]  be;
    int unsigned ewb, e;
    be  = '0;
    ewb = ew_bytes(ew);
    for (int unsigned k = 0; k < 8; k++) begin
      e = ((w * 8 + k) / ewb) * lanes + lane;
      be[k] = (e >= lo) && (e < hi);
    end
    return be;
  endfunction

endpackage
