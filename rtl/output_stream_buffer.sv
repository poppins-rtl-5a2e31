// output_stream_buffer: one-entry output register for the spikes of a step.
//
// At the end of every time step the top controller pushes the spike vectors
// of both NPUs (population neurons plus global neuron) and the step number.
// The entry is offered with out_valid until the host takes it (out_ready).
// can_push tells the controller that a push will not overwrite an entry the
// host has not taken; the controller stalls the next time step otherwise. The
// buffer is the paper's; a single entry with valid/ready is this design's
// choice.
module output_stream_buffer #(
  parameter int unsigned N1 = 33,
  parameter int unsigned N2 = 129
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           push,
  input  logic [N1-1:0]  spk1,
  input  logic [N2-1:0]  spk2,
  input  logic [15:0]    step,
  output logic           can_push,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [N1-1:0]  out_spk1,
  output logic [N2-1:0]  out_spk2,
  output logic [15:0]    out_step
);

  assign can_push = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_spk1  <= '0;
      out_spk2  <= '0;
      out_step  <= '0;
    end else if (push && can_push) begin
      out_valid <= 1'b1;
      out_spk1  <= spk1;
      out_spk2  <= spk2;
      out_step  <= step;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) push |-> can_push)
    else $error("output_stream_buffer: push while full");

endmodule
