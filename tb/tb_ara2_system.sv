// tb_ara2_system: end-to-end test of the full-size system (default
// parameters: 4 lanes, VLEN = 4096 bit, 7/5-cycle memory latencies).
//
// The testbench plays the scalar core: it offloads a fixed program of RVV
// instructions over the accelerator interface, one after the other as fast as
// the vector unit accepts them (the scalar core itself is not modelled), and
// at the same time
//  * issues random scalar cache reads on the caches' memory port and checks
//    their data and latency order,
//  * raises random scalar load/store requests and a "scalar store pending"
//    window, checking that the memory-ordering rules are respected,
//  * accepts D$ invalidations with random back-pressure.
// A byte-level reference model of the 32 vector registers computes the
// expected results; the program stores every result register to memory and
// the testbench compares main memory with the model at the end. The scalar
// results of vsetvli, vcpop and vfirst are checked in the responses.
//
// Mechanism counters (each must be non-zero): sequencer stalls, VRF bank
// conflicts, injected reshuffles, power-of-two slide passes, inter-lane
// reduction steps, masked-element streams, memory-ordering stalls, D$
// invalidations and merged writes.
module tb_ara2_system;
  import ara_pkg::*;

  localparam int unsigned VB  = VLEN / 8;      // bytes per vector register
  localparam logic [63:0] A   = 64'h1_0000;
  localparam logic [63:0] B   = 64'h2_0000;
  localparam logic [63:0] C   = 64'h3_0000;
  localparam logic [63:0] D   = 64'h4_0000;
  localparam logic [63:0] S   = 64'h8_0000;    // scalar-only region

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        acc_req_valid, acc_req_ready, acc_resp_valid;
  acc_req_t    acc_req;
  acc_resp_t   acc_resp;
  logic        sld_req, sst_req, sst_pend, ld_allow, st_allow;
  logic        cva_valid, cva_ready, cva_rsp_valid;
  logic [63:0] cva_addr;
  logic [127:0] cva_rdata;
  logic        inval_valid, inval_ready;
  logic [5:0]  inval_index;
  logic        idle;
  sys_events_t ev;

  ara2_system dut (
    .clk_i(clk), .rst_ni(rst_n),
    .acc_req_valid_i(acc_req_valid), .acc_req_i(acc_req), .acc_req_ready_o(acc_req_ready),
    .acc_resp_valid_o(acc_resp_valid), .acc_resp_o(acc_resp),
    .scalar_ld_req_i(sld_req), .scalar_st_req_i(sst_req), .scalar_st_pending_i(sst_pend),
    .scalar_ld_allow_o(ld_allow), .scalar_st_allow_o(st_allow),
    .cva_req_valid_i(cva_valid), .cva_req_ready_o(cva_ready), .cva_req_addr_i(cva_addr),
    .cva_req_we_i(1'b0), .cva_req_wdata_i('0), .cva_req_be_i('0),
    .cva_rsp_valid_o(cva_rsp_valid), .cva_rsp_rdata_o(cva_rdata),
    .inval_valid_o(inval_valid), .inval_index_o(inval_index), .inval_ready_i(inval_ready),
    .ara_idle_o(idle), .events_o(ev)
  );

  int unsigned checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ reference
  byte unsigned rv  [32][VB];
  byte unsigned mimg [logic [63:0]];   // expected memory image of checked bytes
  byte unsigned bmem [logic [63:0]];   // preloaded memory contents

  function automatic logic [63:0] rget(int r, int i, int ewb);
    logic [63:0] v = '0;
    for (int k = 0; k < ewb; k++) v[k*8 +: 8] = rv[r][i*ewb + k];
    return v;
  endfunction
  task automatic rset(int r, int i, int ewb, logic [63:0] v);
    for (int k = 0; k < ewb; k++) rv[r][i*ewb + k] = v[k*8 +: 8];
  endtask
  function automatic logic [63:0] trunc(logic [63:0] v, int ewb);
    return (ewb == 8) ? v : (v & ((64'd1 << (ewb * 8)) - 1));
  endfunction
  function automatic logic mbit(int i);
    return rv[0][i / 8][i % 8];
  endfunction

  // ------------------------------------------------------------ encodings
  localparam logic [6:0] OPV = 7'b1010111, LOAD = 7'b0000111, STORE = 7'b0100111;
  function automatic logic [31:0] opv(logic [5:0] f6, logic vm, logic [4:0] vs2, logic [4:0] vs1,
                                      logic [2:0] f3, logic [4:0] vd);
    return {f6, vm, vs2, vs1, f3, vd, OPV};
  endfunction
  function automatic logic [31:0] vsetvli(int sew);
    return {1'b0, 11'(sew << 3), 5'd1, 3'b111, 5'd1, OPV};
  endfunction
  function automatic logic [2:0] wid(int ewb);
    case (ewb) 1: return 3'b000; 2: return 3'b101; 4: return 3'b110; default: return 3'b111; endcase
  endfunction
  function automatic logic [31:0] vmem(bit st, bit strided, int ewb, logic [4:0] v);
    return {3'b000, 1'b0, strided ? 2'b10 : 2'b00, 1'b1, strided ? 5'd2 : 5'd0, 5'd1, wid(ewb), v,
            st ? STORE : LOAD};
  endfunction

  // ------------------------------------------------------------ driver
  logic [3:0]  next_id = '0;
  int unsigned sent = 0, got = 0;
  logic [63:0] resp_res [16];
  logic        resp_err [16];
  logic        resp_seen [16];

  task automatic issue(logic [31:0] insn, logic [63:0] rs1 = '0, logic [63:0] rs2 = '0,
                       output logic [3:0] id);
    // inputs change on the falling edge; ready is sampled just before the
    // rising edge that completes the handshake
    @(negedge clk);
    acc_req_valid = 1'b1;
    acc_req.insn  = insn;
    acc_req.rs1   = rs1;
    acc_req.rs2   = rs2;
    acc_req.id    = next_id;
    id            = next_id;
    resp_seen[next_id] = 1'b0;
    #1;
    while (!acc_req_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1;
    acc_req_valid = 1'b0;
    next_id++;
    sent++;
  endtask
  task automatic wait_resp(logic [3:0] id);
    while (!resp_seen[id]) @(posedge clk);
  endtask
  always @(posedge clk) if (rst_n && acc_resp_valid) begin
    resp_res[acc_resp.id]  <= acc_resp.result;
    resp_err[acc_resp.id]  <= acc_resp.err;
    resp_seen[acc_resp.id] <= 1'b1;
    got++;
  end

  int cur_ewb = 4, cur_vl = 0;
  task automatic setvl(int ewb, int vl);
    logic [3:0] id;
    int sew;
    sew = (ewb == 1) ? 0 : (ewb == 2) ? 1 : (ewb == 4) ? 2 : 3;
    issue(vsetvli(sew), 64'(vl), '0, id);
    wait_resp(id);
    check(resp_res[id] == 64'(vl) && !resp_err[id], $sformatf("vsetvli vl=%0d got %0d", vl, resp_res[id]));
    cur_ewb = ewb;
    cur_vl  = vl;
  endtask
  task automatic op(logic [31:0] insn, logic [63:0] rs1 = '0, logic [63:0] rs2 = '0);
    logic [3:0] id;
    issue(insn, rs1, rs2, id);
  endtask

  // reference of a unit-stride / strided access
  task automatic ref_load(int vd, logic [63:0] base, logic [63:0] stride, int ewb);
    for (int i = 0; i < cur_vl; i++)
      for (int k = 0; k < ewb; k++) rv[vd][i*ewb + k] = bmem[base + 64'(i) * stride + 64'(k)];
  endtask
  task automatic ref_store(int vs, logic [63:0] base, logic [63:0] stride, int ewb);
    for (int i = 0; i < cur_vl; i++)
      for (int k = 0; k < ewb; k++) mimg[base + 64'(i) * stride + 64'(k)] = rv[vs][i*ewb + k];
  endtask

  // ------------------------------------------------------------ scalar side
  logic [63:0] cva_exp [$];
  int unsigned cva_sent = 0, cva_got = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      cva_valid   <= 1'b0;
      cva_addr    <= S;
      sld_req     <= 1'b0;
      sst_req     <= 1'b0;
      inval_ready <= 1'b0;
    end else begin
      if (cva_valid && cva_ready) begin
        cva_exp.push_back(cva_addr);
        cva_sent++;
      end
      if (!cva_valid || cva_ready) begin
        cva_valid <= ($urandom % 8) == 0;
        cva_addr  <= S + 64'(($urandom % 64) * 16);
      end
      sld_req     <= ($urandom % 4) == 0;
      sst_req     <= ($urandom % 4) == 0;
      inval_ready <= ($urandom % 4) != 0;
      if (cva_rsp_valid) begin
        logic [63:0] a;
        a = cva_exp.pop_front();
        check(cva_rdata[63:0] == {a[31:0] ^ 32'hA5A5_0000, a[31:0]}, "scalar read data");
        cva_got++;
      end
      // ordering rules
      if (dut.i_ara.store_pending_o) begin
        check(!ld_allow, "scalar load allowed during vector store");
        check(!st_allow, "scalar store allowed during vector store");
      end
    end
  end

  // ------------------------------------------------------------ counters
  int unsigned n_stall = 0, n_conf = 0, n_resh = 0, n_pass = 0, n_red = 0, n_mask = 0, n_ord = 0,
               n_inval = 0, n_merge = 0, n_memconf = 0;
  always @(posedge clk) if (rst_n) begin
    n_stall   += int'(ev.seq_stall);
    n_resh    += int'(ev.reshuffle);
    n_ord     += int'(ev.scalar_ld_stall) + int'(ev.scalar_st_stall) + int'(ev.vec_mem_stall);
    n_inval   += int'(ev.inval_sent);
    n_merge   += int'(ev.inval_merged);
    n_memconf += int'(ev.mem_conflict);
    n_conf    += int'((dut.i_ara.g_lane[0].i_lane.i_opreq.rd_want &
                       ~dut.i_ara.g_lane[0].i_lane.i_opreq.rd_gnt) != '0);
    n_pass    += int'(int'(dut.i_ara.i_sldu.state_q) == 2 &&
                      dut.i_ara.i_sldu.offset[dut.i_ara.i_sldu.k_q] &&
                      dut.i_ara.i_sldu.row_q == '0);
    n_red     += int'(dut.i_ara.i_sldu.red_in_valid_o);
    n_mask    += $countones(dut.i_ara.i_masku.mask_valid_o & dut.i_ara.i_masku.mask_pop_i);
  end

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (sent %0d answered %0d, idle %0b)", sent, got, idle);
    $display("state: dispatcher %0d seqv %0b seqr %0b op %0d unit_ready %b valid %b", dut.i_ara.i_disp.state_q, dut.i_ara.seq_valid, dut.i_ara.seq_ready, dut.i_ara.seq_req.op, dut.i_ara.unit_ready, dut.i_ara.i_seq.valid_q);
    for (int i=0;i<8;i++) $display("state: window entry %0d %b alu %b mul %b", i, dut.i_ara.i_seq.pend_q[i], dut.i_ara.i_seq.alu_q[i], dut.i_ara.i_seq.mul_q[i]);
    $display("state: vlsu %0d sldu %0d masku %0d", dut.i_ara.i_vlsu.state_q, dut.i_ara.i_sldu.state_q, dut.i_ara.i_masku.state_q);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ program
  initial begin : main
    logic [3:0]  id_pop, id_first;
    logic [63:0] a, exp_pop, exp_first, got_pop, got_first, acc;
    int          sh;
    acc_req_valid = 1'b0;
    acc_req       = '0;
    sst_pend      = 1'b0;
    for (int i = 0; i < 16; i++) resp_seen[i] = 1'b0;
    // memory images: A and B random, S has a known pattern
    for (int i = 0; i < 2048; i++) begin
      bmem[A + 64'(i)] = 8'($urandom);
      bmem[B + 64'(i)] = 8'($urandom);
    end
    for (int w = 0; w < 2048 / 16; w++) begin
      logic [127:0] wa, wb;
      for (int k = 0; k < 16; k++) begin
        wa[k*8 +: 8] = bmem[A + 64'(w*16 + k)];
        wb[k*8 +: 8] = bmem[B + 64'(w*16 + k)];
      end
      dut.i_mem.mem_q[(A >> 4) + 64'(w)] = wa;
      dut.i_mem.mem_q[(B >> 4) + 64'(w)] = wb;
    end
    for (int w = 0; w < 64; w++) begin
      a = S + 64'(w * 16);
      dut.i_mem.mem_q[a >> 4] = {64'd0, a[31:0] ^ 32'hA5A5_0000, a[31:0]};
    end
    for (int w = 0; w < 8192 / 16; w++) dut.i_mem.mem_q[(C >> 4) + 64'(w)] = '0;
    for (int w = 0; w < 2048 / 16; w++) dut.i_mem.mem_q[(D >> 4) + 64'(w)] = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    // ---- e32, vl = VLMAX
    setvl(4, VB / 4);
    // a scalar store is pending while the first vector load is offered
    @(negedge clk);
    sst_pend = 1'b1;
    fork
      begin repeat (20) @(negedge clk); sst_pend = 1'b0; end
      op(vmem(0, 0, 4, 5'd1), A);
    join
    ref_load(1, A, 4, 4);
    op(vmem(0, 0, 4, 5'd2), B);                                ref_load(2, B, 4, 4);
    op(opv(6'b000000, 1, 5'd2, 5'd1, 3'b000, 5'd3));            // vadd.vv v3, v2, v1
    for (int i = 0; i < cur_vl; i++) rset(3, i, 4, rget(2, i, 4) + rget(1, i, 4));
    op(opv(6'b100101, 1, 5'd2, 5'd1, 3'b010, 5'd4));            // vmul.vv v4, v2, v1
    for (int i = 0; i < cur_vl; i++) rset(4, i, 4, trunc(rget(2, i, 4) * rget(1, i, 4), 4));
    op(opv(6'b010111, 1, 5'd0, 5'd3, 3'b011, 5'd5));            // vmv.v.i v5, 3
    for (int i = 0; i < cur_vl; i++) rset(5, i, 4, 3);
    op(opv(6'b011011, 1, 5'd2, 5'd1, 3'b000, 5'd0));            // vmslt.vv v0, v2, v1
    for (int i = 0; i < VB * 8; i++) rv[0][i / 8][i % 8] = 1'b1;
    for (int i = 0; i < cur_vl; i++)
      rv[0][i / 8][i % 8] = $signed(rget(2, i, 4)[31:0]) < $signed(rget(1, i, 4)[31:0]);
    op(opv(6'b000010, 0, 5'd2, 5'd1, 3'b000, 5'd5));            // vsub.vv v5, v2, v1, v0.t
    for (int i = 0; i < cur_vl; i++) if (mbit(i)) rset(5, i, 4, trunc(rget(2, i, 4) - rget(1, i, 4), 4));
    op(opv(6'b010111, 1, 5'd0, 5'd0, 3'b100, 5'd7), 64'd100);   // vmv.v.x v7, 100
    for (int i = 0; i < cur_vl; i++) rset(7, i, 4, 100);
    op(opv(6'b000000, 1, 5'd3, 5'd7, 3'b010, 5'd6));            // vredsum.vs v6, v3, v7
    acc = 100;
    for (int i = 0; i < cur_vl; i++) acc = trunc(acc + rget(3, i, 4), 4);
    rset(6, 0, 4, acc);
    op(opv(6'b000110, 1, 5'd1, 5'd7, 3'b010, 5'd11));           // vredmaxu.vs v11, v1, v7
    acc = 100;
    for (int i = 0; i < cur_vl; i++) if (rget(1, i, 4) > acc) acc = rget(1, i, 4);
    rset(11, 0, 4, acc);
    op(opv(6'b001111, 1, 5'd3, 5'd1, 3'b100, 5'd8), 64'd13);    // vslidedown.vx v8, v3, 13
    for (int i = 0; i < cur_vl; i++) rset(8, i, 4, (i + 13 < cur_vl) ? rget(3, i + 13, 4) : 64'd0);
    op(opv(6'b010111, 1, 5'd0, 5'd7, 3'b011, 5'd9));            // vmv.v.i v9, 7
    for (int i = 0; i < cur_vl; i++) rset(9, i, 4, 7);
    op(opv(6'b001110, 1, 5'd3, 5'd6, 3'b011, 5'd9));            // vslideup.vi v9, v3, 6
    for (int i = cur_vl - 1; i >= 6; i--) rset(9, i, 4, rget(3, i - 6, 4));
    issue(opv(6'b010000, 1, 5'd0, 5'b10000, 3'b010, 5'd10), '0, '0, id_pop);    // vcpop.m
    issue(opv(6'b010000, 1, 5'd0, 5'b10001, 3'b010, 5'd10), '0, '0, id_first);  // vfirst.m
    exp_pop = 0; exp_first = '1;
    for (int i = cur_vl - 1; i >= 0; i--) if (mbit(i)) begin exp_pop++; exp_first = 64'(i); end
    wait_resp(id_pop);
    wait_resp(id_first);
    got_pop   = resp_res[id_pop];
    got_first = resp_res[id_first];
    op(opv(6'b101101, 1, 5'd2, 5'd1, 3'b010, 5'd4));            // vmacc.vv v4, v1, v2
    for (int i = 0; i < cur_vl; i++)
      rset(4, i, 4, trunc(rget(4, i, 4) + rget(1, i, 4) * rget(2, i, 4), 4));
    op(opv(6'b100101, 1, 5'd1, 5'd5, 3'b011, 5'd12));           // vsll.vi v12, v1, 5
    for (int i = 0; i < cur_vl; i++) rset(12, i, 4, trunc(rget(1, i, 4) << 5, 4));

    // ---- e8: v3 is read with another width -> reshuffle
    setvl(1, VB);
    op(opv(6'b000000, 1, 5'd3, 5'd3, 3'b000, 5'd10));           // vadd.vv v10, v3, v3
    for (int i = 0; i < cur_vl; i++) rset(10, i, 1, trunc(rget(3, i, 1) * 2, 1));
    op(vmem(1, 0, 1, 5'd10), C + 64'h0A00);                     ref_store(10, C + 64'h0A00, 1, 1);
    setvl(1, VB / 4 / 8);                                       // bytes holding the 128 mask bits
    op(vmem(1, 0, 1, 5'd0), C + 64'h0C00);                      ref_store(0, C + 64'h0C00, 1, 1);
    // ---- e16 strided load over A: v13 (partly written afterwards: tail kept)
    setvl(2, VB / 2);
    op(vmem(0, 1, 2, 5'd13), A, 64'd4);                         ref_load(13, A, 4, 2);

    // ---- back to e32: the stores reshuffle v3 back
    setvl(4, VB / 4);
    op(vmem(1, 0, 4, 5'd3),  C + 64'h0000);                     ref_store(3,  C + 64'h0000, 4, 4);
    op(vmem(1, 0, 4, 5'd4),  C + 64'h0200);                     ref_store(4,  C + 64'h0200, 4, 4);
    op(vmem(1, 0, 4, 5'd5),  C + 64'h0400);                     ref_store(5,  C + 64'h0400, 4, 4);
    op(vmem(1, 0, 4, 5'd8),  C + 64'h0600);                     ref_store(8,  C + 64'h0600, 4, 4);
    op(vmem(1, 0, 4, 5'd9),  C + 64'h0800);                     ref_store(9,  C + 64'h0800, 4, 4);
    op(vmem(1, 0, 4, 5'd12), C + 64'h1000);                     ref_store(12, C + 64'h1000, 4, 4);
    op(vmem(1, 0, 4, 5'd13), C + 64'h1200);                     ref_store(13, C + 64'h1200, 4, 4);
    op(vmem(1, 1, 4, 5'd1),  D, 64'd8);                         ref_store(1,  D, 8, 4);
    setvl(4, 1);
    op(vmem(1, 0, 4, 5'd6),  C + 64'h0E00);                     ref_store(6,  C + 64'h0E00, 4, 4);
    op(vmem(1, 0, 4, 5'd11), C + 64'h0E10);                     ref_store(11, C + 64'h0E10, 4, 4);

    // an unsupported instruction (vrgather.vv) must answer with an error
    begin
      logic [3:0] id;
      issue(opv(6'b001100, 1, 5'd1, 5'd2, 3'b000, 5'd14), '0, '0, id);
      wait_resp(id);
      check(resp_err[id], "vrgather not rejected");
    end

    // drain
    while (got != sent || !idle || dut.i_order.vld_q != 0 || dut.i_order.vst_q != 0) @(posedge clk);
    repeat (20) @(posedge clk);

    check(got_pop == exp_pop, $sformatf("vcpop %0d exp %0d", got_pop, exp_pop));
    check(got_first == exp_first,
          $sformatf("vfirst %0d exp %0d", $signed(got_first), $signed(exp_first)));
    foreach (mimg[ad]) begin
      logic [127:0] w;
      w = dut.i_mem.mem_q[ad >> 4];
      check(w[ad[3:0]*8 +: 8] == mimg[ad],
            $sformatf("mem[%h] = %h exp %h", ad, w[ad[3:0]*8 +: 8], mimg[ad]));
    end
    check(cva_got == cva_sent && cva_sent > 0, "scalar reads answered");
    // every mechanism must have happened
    check(n_stall > 0,   "no sequencer stall");
    check(n_conf > 0,    "no bank conflict");
    check(n_resh >= 2,   "no reshuffle");
    // slides by 13 (8+4+1) and 6 (4+2): one pass per set bit of the amount
    check(n_pass == 5,   $sformatf("power-of-two slide passes %0d, expected 5", n_pass));
    // two reductions, log2(L) inter-lane steps each
    check(n_red == 2 * $clog2(NrLanes), $sformatf("inter-lane reduction steps %0d", n_red));
    check(n_mask > 0,    "no masked element stream");
    check(n_ord > 0,     "no memory-ordering stall");
    check(n_inval > 0,   "no D$ invalidation");
    check(n_merge > 0,   "no merged invalidation");
    $display("events: stalls=%0d bank_conflicts=%0d reshuffles=%0d slide_passes=%0d red_steps=%0d",
             n_stall, n_conf, n_resh, n_pass, n_red);
    $display("        mask_streams=%0d ordering_stalls=%0d invals=%0d merged=%0d mem_conflicts=%0d",
             n_mask, n_ord, n_inval, n_merge, n_memconf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
