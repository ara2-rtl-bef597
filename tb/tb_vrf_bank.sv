// tb_vrf_bank: random writes with byte enables and reads of one VRF bank,
// checked against a reference array. The read data must appear one cycle
// after the request (registered read).
module tb_vrf_bank;
  localparam int unsigned Depth = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic        req, we;
  logic [5:0]  addr;
  logic [63:0] wdata, rdata;
  logic [7:0]  be;
  logic [63:0] ref_mem [Depth];
  int unsigned checks = 0, failures = 0;

  vrf_bank #(.Depth(Depth)) dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr),
                                 .wdata_i(wdata), .be_i(be), .rdata_o(rdata));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 1'b0; we = 1'b0; addr = '0; wdata = '0; be = '0;
    // fill every row
    for (int a = 0; a < Depth; a++) begin
      @(negedge clk);
      req = 1'b1; we = 1'b1; addr = 6'(a); be = '1;
      wdata = {$urandom, $urandom};
      ref_mem[a] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      logic [5:0] a;
      @(negedge clk);
      a = 6'($urandom % Depth);
      req = ($urandom % 4) != 0; we = $urandom % 2; addr = a; be = 8'($urandom);
      wdata = {$urandom, $urandom};
      if (req && we)
        for (int b = 0; b < 8; b++) if (be[b]) ref_mem[a][b*8 +: 8] = wdata[b*8 +: 8];
      if (req && !we) begin
        logic [63:0] exp;
        exp = ref_mem[a];
        @(negedge clk);
        req = 1'b0;
        checks++;
        if (rdata !== exp) begin
          failures++;
          $display("FAIL: row %0d read %h exp %h", a, rdata, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
