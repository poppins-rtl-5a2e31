// hier_scheduler: hierarchy-population scheduler.
//
// Synaptic paths between the two NPUs are uni-directional, from the first
// hierarchy (NPU1) to the second (NPU2). At the end of a time step (cap) this
// block stores NPU1's population spikes; during the next time step it presents
// them to NPU2, which scans them as extra presynaptic rows. With en low the
// path is cut (stored spikes read as zero). Follows the paper's description;
// leaving NPU1's global neuron out of the path is this design's choice.
module hier_scheduler #(
  parameter int unsigned N = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          cap,
  input  logic          en,
  input  logic [N-1:0]  spk_in,
  output logic [N-1:0]  hier_spk,
  output logic [15:0]   n_events     // spikes scheduled for the current step
);

  logic [N-1:0] q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   q <= '0;
    else if (clr) q <= '0;
    else if (cap) q <= spk_in;
  end

  assign hier_spk = en ? q : '0;
  assign n_events = en ? 16'($countones(q)) : 16'd0;

endmodule
