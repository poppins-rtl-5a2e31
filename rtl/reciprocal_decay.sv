// reciprocal_decay: decay of one signed synaptic value (combinational).
//
// y[t] = y[t-1] - SEL(y[t-1] >>> decay_alpha, decay_min), applied only when
// decay_en is high. The shift approximates multiplying by (2^a-1)/2^a; when
// the shifted value is 0 the unit subtracts decay_min = +1 (y > 0) or -1
// (y < 0, chosen by the sign bit) instead, so small values still reach zero
// ("decay fatigue" avoidance). Structure (shifter, =0 detector, +/-1 mux by the
// sign bit, subtractor, output mux by decay_en) follows the paper. Own choice:
// y = 0 is held at 0, since subtracting +1 from 0 would make it oscillate.
module reciprocal_decay
  import poppins_pkg::*;
#(
  parameter int unsigned SYN_BITS = SYN_W
) (
  input  logic signed [SYN_BITS-1:0] syn_in,
  input  logic [2:0]                 decay_alpha,
  input  logic                       decay_en,
  output logic signed [SYN_BITS-1:0] syn_out
);

  logic signed [SYN_BITS-1:0] shifted;
  logic signed [SYN_BITS-1:0] dmin;
  logic signed [SYN_BITS-1:0] sub;

  always_comb begin
    shifted = syn_in >>> decay_alpha;
    dmin    = syn_in[SYN_BITS-1] ? '1 : SYN_BITS'(1);   // -1 or +1
    sub     = (shifted == '0) ? dmin : shifted;
    if (decay_en && syn_in != '0) syn_out = syn_in - sub;
    else                          syn_out = syn_in;
  end

endmodule
