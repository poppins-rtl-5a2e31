// gs_weight_arrange: group-sparse weight arrangement.
//
// A synaptic SRAM word carries the 4-bit signed weights of one group of eight
// post-synaptic neurons. This block steers the word to the lanes of the
// addressed group: lane group*8+k receives bits [4k+3:4k] and an enable, all
// other lanes are disabled. It lets one spike be served by only the groups its
// group-sparse code marks non-zero. Purely combinational. The group-of-8 view
// follows the paper (M/8 groups, 32-bit SRAM read); the bit order inside the
// word is this design's choice.
module gs_weight_arrange
  import poppins_pkg::*;
#(
  parameter int unsigned M = N2_NEURONS
) (
  input  logic [WORD_W-1:0]                      dout,
  input  logic                                   out_en,
  input  logic [$clog2(M/GROUP_SIZE+1)-1:0]      group,
  output logic [M-1:0][WEIGHT_W-1:0]             w,
  output logic [M-1:0]                           w_en
);

  always_comb begin
    for (int i = 0; i < M; i++) begin
      w[i]    = dout[(i % GROUP_SIZE)*WEIGHT_W +: WEIGHT_W];
      w_en[i] = out_en && (int'(group) == i / GROUP_SIZE);
    end
  end

endmodule
