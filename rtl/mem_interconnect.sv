// mem_interconnect: connects the vector unit and the scalar core's caches to
// the single-port main memory.
//
// Two request ports (0 = vector unit, 1 = scalar caches) share the memory.
// When both are valid, a round-robin arbiter alternates between them; the
// granted port sees req_ready high. Each port then receives its response a
// fixed number of cycles after its request was accepted: AraLatency for port
// 0 and CvaLatency for port 1 (the paper's system has 7 and 5 cycles; the
// memory itself takes one of them). Responses of one port come back in
// request order, one per request, reads and writes alike.
//
// conflict_o pulses when both ports requested in the same cycle.
module mem_interconnect #(
  parameter int unsigned WordBytes  = 16,
  parameter int unsigned AraLatency = 7,
  parameter int unsigned CvaLatency = 5,
  localparam int unsigned DW        = WordBytes * 8
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [1:0]           req_valid_i,
  output logic [1:0]           req_ready_o,
  input  logic [63:0]          req_addr_i  [2],
  input  logic [1:0]           req_we_i,
  input  logic [DW-1:0]        req_wdata_i [2],
  input  logic [WordBytes-1:0] req_be_i    [2],
  output logic [1:0]           rsp_valid_o,
  output logic [DW-1:0]        rsp_rdata_o [2],
  // memory side
  output logic                 mem_valid_o,
  output logic [63:0]          mem_addr_o,
  output logic                 mem_we_o,
  output logic [DW-1:0]        mem_wdata_o,
  output logic [WordBytes-1:0] mem_be_o,
  input  logic                 mem_rsp_valid_i,
  input  logic [DW-1:0]        mem_rsp_rdata_i,
  output logic                 conflict_o
);
  logic rr_q;       // port with priority on the next conflict
  logic gnt;        // granted port
  logic owner_q;    // port owning the memory response

  always_comb begin
    gnt = 1'b0;
    if (req_valid_i == 2'b11) gnt = rr_q;
    else if (req_valid_i[1])  gnt = 1'b1;
  end
  assign req_ready_o = (req_valid_i != '0) ? (2'b01 << gnt) : 2'b00;
  assign mem_valid_o = |req_valid_i;
  assign mem_addr_o  = req_addr_i[gnt];
  assign mem_we_o    = req_we_i[gnt];
  assign mem_wdata_o = req_wdata_i[gnt];
  assign mem_be_o    = req_be_i[gnt];
  assign conflict_o  = (req_valid_i == 2'b11);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q    <= 1'b0;
      owner_q <= 1'b0;
    end else begin
      if (req_valid_i == 2'b11) rr_q <= !gnt;
      if (mem_valid_o)          owner_q <= gnt;
    end
  end

  // Per-port delay lines: the memory answers after one cycle, the remaining
  // Latency-1 cycles are added here.
  localparam int unsigned Lat [2] = '{AraLatency, CvaLatency};
  for (genvar p = 0; p < 2; p++) begin : g_port
    localparam int unsigned D = Lat[p] - 1;
    logic          v_q [D];
    logic [DW-1:0] d_q [D];
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        for (int i = 0; i < D; i++) begin v_q[i] <= 1'b0; d_q[i] <= '0; end
      end else begin
        v_q[0] <= mem_rsp_valid_i && (owner_q == 1'(p));
        d_q[0] <= mem_rsp_rdata_i;
        for (int i = 1; i < D; i++) begin v_q[i] <= v_q[i-1]; d_q[i] <= d_q[i-1]; end
      end
    end
    assign rsp_valid_o[p] = v_q[D-1];
    assign rsp_rdata_o[p] = d_q[D-1];
  end

  initial begin
    assert (AraLatency >= 2 && CvaLatency >= 2)
      else $error("mem_interconnect: latencies must be at least 2");
  end
endmodule
