// tb_mem_interconnect: two random masters share the memory through the
// interconnect, in front of a main_mem. Checks the round-robin grant on
// conflicts, that each port's responses come back in order with the right
// data, and exactly AraLatency (port 0) / CvaLatency (port 1) cycles after
// the request was accepted.
module tb_mem_interconnect;
  localparam int unsigned Lat [2] = '{7, 5};
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [1:0]   valid, ready, we, rsp_valid;
  logic [63:0]  addr [2];
  logic [127:0] wdata [2], rdata [2];
  logic [15:0]  be [2];
  logic         m_valid, m_we, m_rsp_valid, conflict;
  logic [63:0]  m_addr;
  logic [127:0] m_wdata, m_rdata;
  logic [15:0]  m_be;
  int unsigned  checks = 0, failures = 0, cycle = 0, n_conf = 0;
  logic [127:0] model [32];
  logic [127:0] exp_data [2][$];
  int unsigned  exp_time [2][$];
  logic         last_gnt;

  mem_interconnect dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(valid), .req_ready_o(ready),
    .req_addr_i(addr), .req_we_i(we), .req_wdata_i(wdata), .req_be_i(be),
    .rsp_valid_o(rsp_valid), .rsp_rdata_o(rdata),
    .mem_valid_o(m_valid), .mem_addr_o(m_addr), .mem_we_o(m_we), .mem_wdata_o(m_wdata),
    .mem_be_o(m_be), .mem_rsp_valid_i(m_rsp_valid), .mem_rsp_rdata_i(m_rdata), .conflict_o(conflict));
  main_mem #(.NrWords(1024)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(m_valid),
    .req_addr_i(m_addr), .req_we_i(m_we), .req_wdata_i(m_wdata), .req_be_i(m_be),
    .rsp_valid_o(m_rsp_valid), .rsp_rdata_o(m_rdata));

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

  always @(posedge clk) if (rst_n) begin
    cycle++;
    for (int p = 0; p < 2; p++) if (rsp_valid[p]) begin
      check(exp_data[p].size() != 0, "unexpected response");
      if (exp_data[p].size() != 0) begin
        logic [127:0] d;
        int unsigned  t;
        d = exp_data[p].pop_front();
        t = exp_time[p].pop_front();
        check(rdata[p] == d, $sformatf("port %0d data", p));
        check(cycle == t, $sformatf("port %0d latency: at %0d exp %0d", p, cycle, t));
      end
    end
  end

  initial begin
    valid = '0; we = '0;
    for (int p = 0; p < 2; p++) begin addr[p] = '0; wdata[p] = '0; be[p] = '0; end
    last_gnt = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // initialise the words used
    for (int w = 0; w < 32; w++) begin
      i_mem.mem_q[w] = {$urandom, $urandom, $urandom, $urandom};
      model[w] = i_mem.mem_q[w];
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        valid[p] = ($urandom % 3) != 0;
        we[p]    = ($urandom % 3) == 0;
        addr[p]  = 64'(($urandom % 32) * 16);
        wdata[p] = {$urandom, $urandom, $urandom, $urandom};
        be[p]    = 16'($urandom);
      end
      #1;
      if (valid == 2'b11) begin
        n_conf++;
        check(ready == (2'b01 << !last_gnt), "round robin");
      end
      check($countones(ready) <= 1 && (ready & ~valid) == '0, "one grant to a requester");
      for (int p = 0; p < 2; p++) if (valid[p] && ready[p]) begin
        int w;
        w = int'(addr[p] >> 4);
        if (valid == 2'b11) last_gnt = p[0];
        exp_data[p].push_back(model[w]);     // a write answers with the old word
        if (we[p])
          for (int b = 0; b < 16; b++) if (be[p][b]) model[w][b*8 +: 8] = wdata[p][b*8 +: 8];
        exp_time[p].push_back(cycle + 1 + Lat[p]);
      end
    end
    @(negedge clk);
    valid = '0;
    repeat (12) @(negedge clk);
    check(exp_data[0].size() == 0 && exp_data[1].size() == 0, "all answered");
    check(n_conf > 0, "no conflict");
    $display("conflicts=%0d", n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
