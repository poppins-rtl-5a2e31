// iqif_neuron: one integer quadratic integrate-and-fire (I-QIF) neuron.
//
// The membrane V_m is an unsigned 8-bit value held, with a 1-bit overflow flag,
// in a 9-bit register. On each update strobe (en) the neuron computes
//   dV = a*(V_r - V_m) + I   when V_m <  V_pde,th
//   dV = b*(V_m - V_t) + I   when V_m >= V_pde,th
// where a and b are 3-bit codes meaning code/8. If V_m + dV exceeds 255 the
// neuron fires: the overflow flag (spike_out) is set and V_m becomes V_reset.
// The equations, the 8-bit membrane, the 3-bit a/b and the (8+1)-bit register
// follow the paper. Own choices: a*(x) is computed as (code*x)>>>3 (floor),
// a sum below 0 clamps to 0, reset clears V_m to 0, and clr loads V_r.
//
// Interface: en is a one-cycle strobe; neu_in is the signed 9-bit input
// current I[t] (synaptic value plus external current). spike_out and membrane
// are valid the cycle after en and hold until the next en. An inactive neuron
// keeps its state and does not fire.
module iqif_neuron
  import poppins_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  logic                       clr,
  input  logic                       active,
  input  logic signed [NEU_IN_W-1:0] neu_in,
  input  iqif_par_t                  par,
  output logic [VM_W-1:0]            membrane,
  output logic                       spike_out
);

  logic [VM_W:0]        mem_q;        // {overflow, V_m}
  logic                 above;        // V_m >= V_pde,th
  logic signed [9:0]    diff;         // V_r - V_m or V_m - V_t
  logic signed [3:0]    k;            // a or b as a positive signed value
  logic signed [13:0]   prod;
  logic signed [11:0]   sum;
  logic                 ovf;
  logic [VM_W:0]        mem_d;

  always_comb begin
    above = mem_q[VM_W-1:0] >= par.v_pde;
    if (above) begin
      diff = $signed({2'b00, mem_q[VM_W-1:0]}) - $signed({2'b00, par.v_th});
      k    = $signed({1'b0, par.b});
    end else begin
      diff = $signed({2'b00, par.v_rest}) - $signed({2'b00, mem_q[VM_W-1:0]});
      k    = $signed({1'b0, par.a});
    end
    prod  = diff * k;
    sum   = $signed({4'b0000, mem_q[VM_W-1:0]}) + 12'(prod >>> 3) + 12'(neu_in);
    ovf   = sum > 12'sd255;
    if (ovf)                mem_d = {1'b1, par.v_reset};
    else if (sum < 12'sd0)  mem_d = '0;
    else                    mem_d = {1'b0, sum[VM_W-1:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             mem_q <= '0;
    else if (clr)           mem_q <= {1'b0, par.v_rest};
    else if (en && active)  mem_q <= mem_d;
    else if (en)            mem_q <= {1'b0, mem_q[VM_W-1:0]};
  end

  assign membrane  = mem_q[VM_W-1:0];
  assign spike_out = mem_q[VM_W];

endmodule
