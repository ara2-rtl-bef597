// addrgen: address generator of the vector load/store unit.
//
// For a unit-stride or strided vector memory instruction it produces, one per
// cycle, the address base + e * stride of every element e < vl (the stride of
// a unit-stride access is the element size). Each address is checked: an
// element address not aligned to the element width raises an exception. From
// the faulting element on, the remaining elements are still produced, marked
// skip, so that the load and store units stay in step with the lanes; they
// perform no memory access. When the last element has been produced, ack_o
// pulses with ack_err_o telling whether an exception occurred (reported to the
// scalar core through the dispatcher).
module addrgen
  import ara_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  input  logic [63:0] base_i,
  input  logic [63:0] stride_i,
  input  logic        strided_i,
  input  vew_e        ew_i,
  input  vlen_t       vl_i,
  output logic        busy_o,
  // Element address stream
  output logic        addr_valid_o,
  output logic [63:0] addr_o,
  output vlen_t       elem_o,
  output logic        skip_o,
  input  logic        addr_ready_i,
  // End of the instruction
  output logic        ack_o,
  output logic        ack_err_o
);
  logic        busy_q, err_q;
  logic [63:0] addr_q, stride_q;
  vlen_t       e_q, vl_q;
  vew_e        ew_q;
  logic        misaligned;

  assign busy_o       = busy_q;
  assign addr_valid_o = busy_q && (e_q < vl_q);
  assign addr_o       = addr_q;
  assign elem_o       = e_q;
  assign misaligned   = (addr_q & 64'(ew_bytes(ew_q) - 1)) != '0;
  assign skip_o       = err_q || misaligned;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0; err_q <= 1'b0; addr_q <= '0; stride_q <= '0;
      e_q <= '0; vl_q <= '0; ew_q <= EW8; ack_o <= 1'b0; ack_err_o <= 1'b0;
    end else begin
      ack_o <= 1'b0;
      if (start_i && !busy_q) begin
        busy_q   <= 1'b1;
        err_q    <= 1'b0;
        addr_q   <= base_i;
        stride_q <= strided_i ? stride_i : 64'(ew_bytes(ew_i));
        e_q      <= '0;
        vl_q     <= vl_i;
        ew_q     <= ew_i;
      end else if (busy_q) begin
        if (addr_valid_o && addr_ready_i) begin
          e_q    <= e_q + 1'b1;
          addr_q <= addr_q + stride_q;
          if (misaligned) err_q <= 1'b1;
        end
        if (e_q >= vl_q) begin
          busy_q    <= 1'b0;
          ack_o     <= 1'b1;
          ack_err_o <= err_q;
        end
      end
    end
  end
endmodule
