// vrf_bank: one bank of a lane's slice of the vector register file.
//
// A single-port (1RW) memory of Depth 64-bit words. One access per cycle: a
// write stores the bytes selected by be_i, a read returns the word on rdata_o
// in the next cycle (the output register holds its value until the next read).
// The paper builds each lane's VRF from eight such SRAM banks; here the bank is
// written as an array so that it simulates and synthesises anywhere, and a
// foundry macro with the same ports can replace it. Byte enables are this
// design's choice: they let every unit honour the tail-undisturbed policy.
module vrf_bank #(
  parameter int unsigned Depth = 64,
  localparam int unsigned AW   = $clog2(Depth)
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [AW-1:0] addr_i,
  input  logic [63:0]   wdata_i,
  input  logic [7:0]    be_i,
  output logic [63:0]   rdata_o
);
  logic [63:0] mem [Depth];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 8; b++)
          if (be_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
