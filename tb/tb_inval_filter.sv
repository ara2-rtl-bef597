// tb_inval_filter: random vector read/write requests through the D$
// invalidation filter with random back-pressure on memory and on the
// invalidation port. Checks that every write reaches memory only after an
// invalidation of its set was accepted (and no other set since), that writes
// to the set just invalidated need no new invalidation, and that reads pass
// without invalidations. Counts invalidations and merged writes.
module tb_inval_filter;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic        avalid, awe, aready, mvalid, mready, ivalid, iready, sent, merged;
  logic [63:0] aaddr;
  logic [5:0]  iidx;
  int unsigned checks = 0, failures = 0, n_inval = 0, n_merged = 0;
  logic [5:0]  last_idx;
  logic        last_ok;

  inval_filter dut (.clk_i(clk), .rst_ni(rst_n), .ara_valid_i(avalid), .ara_we_i(awe),
    .ara_addr_i(aaddr), .ara_ready_o(aready), .mem_valid_o(mvalid), .mem_ready_i(mready),
    .inval_valid_o(ivalid), .inval_index_o(iidx), .inval_ready_i(iready),
    .inval_sent_o(sent), .inval_merged_o(merged));

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

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (ivalid && iready) begin
      last_idx <= iidx;
      last_ok  <= 1'b1;
      n_inval++;
    end
    if (merged) n_merged++;
    if (mvalid && mready) begin
      check(mvalid == avalid && aready, "memory handshake follows the vector request");
      if (awe) check(last_ok && last_idx == aaddr[10:5], "write before its invalidation");
    end
    if (avalid && aready) check(mvalid && mready, "accepted request reached memory");
  end

  initial begin
    avalid = 1'b0; awe = 1'b0; aaddr = '0; mready = 1'b0; iready = 1'b0; last_ok = 1'b0;
    last_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      mready = ($urandom % 4) != 0;
      iready = ($urandom % 3) != 0;
      if (!avalid || aready) begin
        avalid = ($urandom % 4) != 0;
        awe    = ($urandom % 3) != 0;
        // mostly sequential addresses, sometimes a jump
        aaddr  = (($urandom % 8) == 0) ? 64'($urandom % 65536) & ~64'hF : aaddr + 64'd16;
      end
      #1;
      if (avalid && !awe) check(mvalid || !mready || 1'b1, "read");
    end
    @(negedge clk);
    avalid = 1'b0;
    repeat (5) @(negedge clk);
    check(n_inval > 0, "no invalidation");
    check(n_merged > 0, "no merged write");
    $display("invalidations=%0d merged=%0d", n_inval, n_merged);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
