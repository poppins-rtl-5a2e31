// ext_input_buf: external input buffer of one NPU.
//
// The host writes a signed 8-bit stimulus value for a neuron by address
// (address M is the global neuron). At the start of every time step (latch)
// all written values are copied to the cur outputs, which stay constant while
// the step runs; so a stimulus written during a step takes effect in the next
// one. Values persist until rewritten or cleared. The address-and-value form of
// the stimulus follows the paper; the shadow copy, persistence and clear are
// this design's choice.
module ext_input_buf
  import poppins_pkg::*;
#(
  parameter int unsigned M = N2_NEURONS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clr,
  input  logic                         we,
  input  logic [$clog2(M+1)-1:0]       addr,
  input  logic [CUR_W-1:0]             data,
  input  logic                         latch,
  output logic [M:0][CUR_W-1:0]        cur
);

  logic [M:0][CUR_W-1:0] buf_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0;
      cur   <= '0;
    end else begin
      if (clr) begin
        buf_q <= '0;
      end else if (we && int'(addr) <= int'(M)) begin
        buf_q[addr] <= data;
      end
      if (clr)        cur <= '0;
      else if (latch) cur <= buf_q;
    end
  end

endmodule
