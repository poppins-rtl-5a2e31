// neuron_cluster: the I-QIF neurons of one NPU, updated in parallel.
//
// M population neurons plus one global neuron (index M), all sharing one
// parameter set. One en strobe updates every active neuron in the same cycle.
// The neuron count M+1 follows the paper; the shared parameter set is this
// design's choice.
module neuron_cluster
  import poppins_pkg::*;
#(
  parameter int unsigned M = N2_NEURONS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,
  input  logic                          clr,
  input  logic [M:0]                    active,
  input  logic [M:0][NEU_IN_W-1:0]      neu_in,
  input  iqif_par_t                     par,
  output logic [M:0][VM_W-1:0]          vm,
  output logic [M:0]                    spk
);

  for (genvar i = 0; i <= M; i++) begin : g_neu
    iqif_neuron u_neu (
      .clk       (clk),
      .rst_n     (rst_n),
      .en        (en),
      .clr       (clr),
      .active    (active[i]),
      .neu_in    (neu_in[i]),
      .par       (par),
      .membrane  (vm[i]),
      .spike_out (spk[i])
    );
  end

endmodule
