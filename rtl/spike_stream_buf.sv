// spike_stream_buf: spike stream buffer of one NPU.
//
// Captures the neuron cluster's spike flags (population neurons and the global
// neuron) once per time step (cap) and holds them through the next time step,
// where the spike decoder scans them and the output stream buffer reports
// them. Follows the paper's block; clearing is this design's choice.
module spike_stream_buf #(
  parameter int unsigned M = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        cap,
  input  logic [M:0]  spk_in,
  output logic [M:0]  spk
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   spk <= '0;
    else if (clr) spk <= '0;
    else if (cap) spk <= spk_in;
  end

endmodule
