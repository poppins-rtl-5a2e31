// postsyn_core: post-synaptic core of one NPU (the "virtualized crossbar").
//
// Holds one signed 8-bit synaptic register per neuron lane. When a lane's
// w_en is high its 4-bit weight is added (saturating at -128/+127); when its
// decay_en bit is high, it is decayed by a reciprocal_decay unit. The output
// neu_in = syn + cur (9 bits) is the neuron's input current, cur being the
// lane's external stimulus. Accumulation has priority over decay; in normal
// operation the two occur in different phases of a time step. The per-lane
// accumulate/decay structure and the 8/8/9-bit widths follow the paper;
// saturation and the priority order are this design's choice.
module postsyn_core
  import poppins_pkg::*;
#(
  parameter int unsigned M = N2_NEURONS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              clr,
  input  logic [M-1:0][WEIGHT_W-1:0]        w,
  input  logic [M-1:0]                      w_en,
  input  logic [M-1:0]                      decay_en,
  input  logic [2:0]                        decay_alpha,
  input  logic [M-1:0][CUR_W-1:0]           cur,
  output logic [M-1:0][SYN_W-1:0]           syn,
  output logic [M-1:0][NEU_IN_W-1:0]        neu_in
);

  logic [M-1:0][SYN_W-1:0] syn_q;
  logic [M-1:0][SYN_W-1:0] syn_dec;

  for (genvar i = 0; i < M; i++) begin : g_lane
    logic signed [SYN_W:0] acc;

    reciprocal_decay u_decay (
      .syn_in      (syn_q[i]),
      .decay_alpha (decay_alpha),
      .decay_en    (decay_en[i]),
      .syn_out     (syn_dec[i])
    );

    assign acc = $signed({syn_q[i][SYN_W-1], syn_q[i]}) + (SYN_W+1)'($signed(w[i]));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)          syn_q[i] <= '0;
      else if (clr)        syn_q[i] <= '0;
      else if (w_en[i]) begin
        if (acc > 9'sd127)       syn_q[i] <= 8'h7f;
        else if (acc < -9'sd128) syn_q[i] <= 8'h80;
        else                     syn_q[i] <= acc[SYN_W-1:0];
      end
      else if (decay_en[i]) syn_q[i] <= syn_dec[i];
    end

    assign neu_in[i] = NEU_IN_W'($signed(syn_q[i])) + NEU_IN_W'($signed(cur[i]));
  end

  assign syn = syn_q;

endmodule
