// tb_acc_mem_ordering: drives random offloaded instructions (vector loads,
// vector stores, arithmetic) and random completions, scalar requests and
// scalar-store-pending windows into the ordering logic. A reference counts
// the vector loads and stores in flight and checks the three rules: scalar
// loads only without vector stores in flight, scalar stores only without
// any vector memory operation in flight, vector memory instructions held
// while a scalar store is pending.
module tb_acc_mem_ordering;
  import ara_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic     cvalid, cready, avalid, aready, ld_done, st_done, drop, drop_st;
  acc_req_t creq, areq;
  logic     sld, sst, spend, ld_allow, st_allow, ld_stall, st_stall, vm_stall;
  logic [3:0] vld_cnt, vst_cnt;
  int unsigned checks = 0, failures = 0, n_ld_stall = 0, n_st_stall = 0, n_vm_stall = 0;
  int m_ld = 0, m_st = 0;

  acc_mem_ordering dut (.clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(cvalid), .core_req_i(creq), .core_req_ready_o(cready),
    .ara_req_valid_o(avalid), .ara_req_o(areq), .ara_req_ready_i(aready),
    .load_done_i(ld_done), .store_done_i(st_done), .drop_i(drop), .drop_st_i(drop_st),
    .scalar_ld_req_i(sld), .scalar_st_req_i(sst), .scalar_st_pending_i(spend),
    .scalar_ld_allow_o(ld_allow), .scalar_st_allow_o(st_allow),
    .scalar_ld_stall_o(ld_stall), .scalar_st_stall_o(st_stall), .vec_mem_stall_o(vm_stall),
    .vld_cnt_o(vld_cnt), .vst_cnt_o(vst_cnt));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cvalid = 1'b0; creq = '0; aready = 1'b0; ld_done = 1'b0; st_done = 1'b0; drop = 1'b0;
    drop_st = 1'b0; sld = 1'b0; sst = 1'b0; spend = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      bit is_ld, is_st;
      @(negedge clk);
      // rules, against the reference counts
      check(ld_allow == (m_st == 0), "scalar load rule");
      check(st_allow == (m_st == 0 && m_ld == 0), "scalar store rule");
      check(int'(vld_cnt) == m_ld && int'(vst_cnt) == m_st, "counters");
      if (!cvalid || cready) begin
        int k;
        k = $urandom % 3;
        cvalid    = ($urandom % 2) == 0;
        creq.insn = (k == 0) ? 32'h0200_6087 : (k == 1) ? 32'h0200_60A7 : 32'h0220_8157;
        creq.id   = 4'($urandom);
      end
      aready  = ($urandom % 3) != 0;
      spend   = ((n / 50) % 3) == 0;
      sld     = ($urandom % 2) == 0;
      sst     = ($urandom % 2) == 0;
      ld_done = (m_ld > 0) && ($urandom % 6 == 0);
      st_done = (m_st > 0) && ($urandom % 6 == 0);
      drop    = 1'b0;
      #1;
      is_ld = creq.insn[6:0] == 7'b0000111;
      is_st = creq.insn[6:0] == 7'b0100111;
      if ((is_ld || is_st) && spend) check(!avalid && !cready && (vm_stall == cvalid), "held by scalar store");
      check(areq == creq, "request passes");
      n_ld_stall += int'(ld_stall);
      n_st_stall += int'(st_stall);
      n_vm_stall += int'(vm_stall);
      @(posedge clk);
      if (avalid && aready) begin
        m_ld += int'(is_ld);
        m_st += int'(is_st);
      end
      m_ld -= int'(ld_done);
      m_st -= int'(st_done);
      if (m_ld > 12 || m_st > 12) begin
        // keep the counters in range: retire everything
        @(negedge clk);
        cvalid = 1'b0; ld_done = 1'b0; st_done = 1'b0;
        while (m_ld > 0 || m_st > 0) begin
          @(negedge clk);
          ld_done = m_ld > 0; st_done = m_st > 0;
          @(posedge clk);
          m_ld -= int'(ld_done); m_st -= int'(st_done);
        end
        @(negedge clk);
        ld_done = 1'b0; st_done = 1'b0;
      end
    end
    check(n_ld_stall > 0 && n_st_stall > 0 && n_vm_stall > 0, "every rule held something back");
    $display("stalls: scalar ld %0d, scalar st %0d, vector mem %0d", n_ld_stall, n_st_stall, n_vm_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
