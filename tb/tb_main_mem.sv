// tb_main_mem: random byte-enable writes and reads of the main memory over a
// small address range, checked against a reference; every request must be
// answered exactly one cycle later.
module tb_main_mem;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic         valid, we, rsp_valid;
  logic [63:0]  addr;
  logic [127:0] wdata, rdata;
  logic [15:0]  be;
  logic [127:0] model [64];
  int unsigned  checks = 0, failures = 0;

  main_mem dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(valid), .req_addr_i(addr),
    .req_we_i(we), .req_wdata_i(wdata), .req_be_i(be), .rsp_valid_o(rsp_valid), .rsp_rdata_o(rdata));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = 1'b0; we = 1'b0; addr = '0; wdata = '0; be = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 64; w++) begin
      @(negedge clk);
      valid = 1'b1; we = 1'b1; be = '1; addr = 64'h10_0000 + 64'(w * 16);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      model[w] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      int w;
      bit rd;
      @(negedge clk);
      w = $urandom % 64;
      valid = 1'b1; we = $urandom % 2; be = 16'($urandom);
      addr = 64'h10_0000 + 64'(w * 16) + 64'($urandom % 16);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      rd = !we;
      if (we) for (int b = 0; b < 16; b++) if (be[b]) model[w][b*8 +: 8] = wdata[b*8 +: 8];
      @(negedge clk);
      valid = 1'b0;
      check(rsp_valid, "response one cycle after the request");
      if (rd) check(rdata == model[w], $sformatf("read word %0d", w));
      check(dut.rsp_valid_o == 1'b1, "single response");
      @(negedge clk);
      check(!rsp_valid, "no extra response");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
