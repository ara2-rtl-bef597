// operand_requester: VRF access control of one lane.
//
// Every operand queue of the lane has a requester. A fetch command (register,
// number of words) makes it read words 0..nwords-1 of that register, one per
// cycle at most, and only while its queue has room for the word (counting the
// word already on its way). The functional units write through NrWrPorts write
// ports (valid/ready, held until granted).
//
// The bank arbiter grants each of the NrBanks single-port banks to at most one
// access per cycle: write ports first, then the read requesters, both in
// fixed index order. A requester that loses waits, which is the bank-conflict
// stall the paper discusses. Word w of register v is at lane address
// v*WordsPerRegLane + w, bank = address mod NrBanks: there is no Barber's Pole
// offset, so the same word of two registers always collides. Read data comes
// back one cycle after the grant and is steered to the queue that asked for it
// (the banks-to-queues crossbar).
module operand_requester
  import ara_pkg::*;
#(
  parameter int unsigned NrBanks         = ara_pkg::NrBanks,
  parameter int unsigned WordsPerRegLane = ara_pkg::VLENPerLane / 64,
  parameter int unsigned NrQ             = ara_pkg::NrOpQueues,
  parameter int unsigned NrWp            = ara_pkg::NrWrPorts,
  parameter int unsigned QDepth          = 4,
  localparam int unsigned BankDepth      = NrVRegs * WordsPerRegLane / NrBanks,
  localparam int unsigned BAW            = $clog2(BankDepth),
  localparam int unsigned QCW            = $clog2(QDepth + 1)
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // Fetch commands, one per queue
  input  logic [NrQ-1:0]          cmd_valid_i,
  input  vreg_t                   cmd_vreg_i   [NrQ],
  input  vlen_t                   cmd_nwords_i [NrQ],
  output logic [NrQ-1:0]          cmd_ready_o,
  // Operand queues
  input  logic [QCW-1:0]          q_space_i    [NrQ],
  output logic [NrQ-1:0]          q_push_o,
  output logic [63:0]             q_data_o     [NrQ],
  // Write ports
  input  logic [NrWp-1:0]         wr_valid_i,
  input  vrf_wr_t                 wr_i         [NrWp],
  output logic [NrWp-1:0]         wr_ready_o,
  // Banks
  output logic [NrBanks-1:0]      bank_req_o,
  output logic [NrBanks-1:0]      bank_we_o,
  output logic [BAW-1:0]          bank_addr_o  [NrBanks],
  output logic [63:0]             bank_wdata_o [NrBanks],
  output logic [7:0]              bank_be_o    [NrBanks],
  input  logic [63:0]             bank_rdata_i [NrBanks]
);
  localparam int unsigned BW = (NrBanks > 1) ? $clog2(NrBanks) : 1;
  localparam int unsigned QW = $clog2(NrQ);

  logic [NrQ-1:0] active_q, inflight_q;
  vreg_t          vreg_q   [NrQ];
  vlen_t          word_q   [NrQ];
  vlen_t          nwords_q [NrQ];

  logic [NrQ-1:0] rd_want, rd_gnt;
  logic [9:0]     rd_addr  [NrQ];

  logic [NrBanks-1:0] rsp_valid_q;
  logic [QW-1:0]      rsp_q_q [NrBanks];

  assign cmd_ready_o = ~active_q;

  always_comb begin
    for (int q = 0; q < NrQ; q++) begin
      rd_addr[q] = 10'(int'(vreg_q[q]) * WordsPerRegLane + int'(word_q[q]));
      rd_want[q] = active_q[q] && (word_q[q] < nwords_q[q]) &&
                   (int'(q_space_i[q]) > int'(inflight_q[q]));
    end
  end

  // Bank arbitration
  logic [NrBanks-1:0] taken;
  int unsigned        b;
  always_comb begin
    b            = 0;
    taken        = '0;
    wr_ready_o   = '0;
    rd_gnt       = '0;
    bank_req_o   = '0;
    bank_we_o    = '0;
    for (int i = 0; i < NrBanks; i++) begin
      bank_addr_o[i]  = '0;
      bank_wdata_o[i] = '0;
      bank_be_o[i]    = '0;
    end
    for (int p = 0; p < NrWp; p++) begin
      b = int'(wr_i[p].addr) % NrBanks;
      if (wr_valid_i[p] && !taken[b]) begin
        taken[b]        = 1'b1;
        wr_ready_o[p]   = 1'b1;
        bank_req_o[b]   = 1'b1;
        bank_we_o[b]    = 1'b1;
        bank_addr_o[b]  = BAW'(int'(wr_i[p].addr) / NrBanks);
        bank_wdata_o[b] = wr_i[p].data;
        bank_be_o[b]    = wr_i[p].be;
      end
    end
    for (int q = 0; q < NrQ; q++) begin
      b = int'(rd_addr[q]) % NrBanks;
      if (rd_want[q] && !taken[b]) begin
        taken[b]       = 1'b1;
        rd_gnt[q]      = 1'b1;
        bank_req_o[b]  = 1'b1;
        bank_addr_o[b] = BAW'(int'(rd_addr[q]) / NrBanks);
      end
    end
  end

  // Requester state
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q    <= '0;
      inflight_q  <= '0;
      rsp_valid_q <= '0;
      for (int q = 0; q < NrQ; q++) begin
        vreg_q[q] <= '0; word_q[q] <= '0; nwords_q[q] <= '0;
      end
      for (int i = 0; i < NrBanks; i++) rsp_q_q[i] <= '0;
    end else begin
      inflight_q  <= rd_gnt;
      rsp_valid_q <= '0;
      for (int q = 0; q < NrQ; q++) begin
        if (rd_gnt[q]) begin
          rsp_valid_q[int'(rd_addr[q]) % NrBanks] <= 1'b1;
          rsp_q_q[int'(rd_addr[q]) % NrBanks]     <= QW'(q);
          word_q[q] <= word_q[q] + 1'b1;
        end
        if (active_q[q] && (word_q[q] >= nwords_q[q])) active_q[q] <= 1'b0;
        if (cmd_valid_i[q] && cmd_ready_o[q]) begin
          active_q[q] <= 1'b1;
          vreg_q[q]   <= cmd_vreg_i[q];
          nwords_q[q] <= cmd_nwords_i[q];
          word_q[q]   <= '0;
        end
      end
    end
  end

  // Banks-to-queues crossbar
  always_comb begin
    q_push_o = '0;
    for (int q = 0; q < NrQ; q++) q_data_o[q] = '0;
    for (int i = 0; i < NrBanks; i++) begin
      if (rsp_valid_q[i]) begin
        q_push_o[rsp_q_q[i]] = 1'b1;
        q_data_o[rsp_q_q[i]] = bank_rdata_i[i];
      end
    end
  end

  // A write port holds its request until it is granted
  for (genvar p = 0; p < NrWp; p++) begin : g_wr_stable
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      wr_valid_i[p] && !wr_ready_o[p] |=> wr_valid_i[p]);
  end
endmodule
