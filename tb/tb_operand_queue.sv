// tb_operand_queue: random pushes (only when space_o allows) and pops of the
// first-word-fall-through operand queue, checked against a SystemVerilog
// queue; also checks space_o and that flush_i empties it.
module tb_operand_queue;
  localparam int unsigned Depth = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic        flush, push, pop, valid;
  logic [63:0] din, dout;
  logic [2:0]  space;
  logic [63:0] model [$];
  int unsigned checks = 0, failures = 0;

  operand_queue #(.Depth(Depth)) dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .push_i(push),
    .data_i(din), .pop_i(pop), .valid_o(valid), .data_o(dout), .space_o(space));

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
    flush = 1'b0; push = 1'b0; pop = 1'b0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      check(valid == (model.size() != 0), "valid");
      check(int'(space) == Depth - model.size(), $sformatf("space %0d exp %0d", space, Depth - model.size()));
      if (valid) check(dout == model[0], "head data");
      flush = (n % 997) == 996;
      push  = !flush && (space != 0) && ($urandom % 3 != 0);
      pop   = !flush && valid && ($urandom % 2 == 0);
      din   = {$urandom, $urandom};
      @(posedge clk);
      #1;
      if (flush) model.delete();
      else begin
        if (pop) void'(model.pop_front());
        if (push) model.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
