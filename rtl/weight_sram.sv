// weight_sram: synaptic weight memory of one NPU.
//
// DEPTH words of 32 bits, each holding eight signed 4-bit weights. One write
// port for the host and one read port for the population controller. A read
// issued with reb in cycle t returns dout with out_en in cycle t+1 (dout holds
// its value otherwise). On the chip this is a foundry SRAM macro (8 Kb for
// NPU1, 128 Kb for NPU2); here it is a plain array that synthesis maps to a
// memory. Contents are not reset. Write and read of the same word in one cycle
// return the old word.
module weight_sram
  import poppins_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  logic [WORD_W-1:0]         wdata,
  input  logic                      reb,
  input  logic [$clog2(DEPTH)-1:0]  raddr,
  output logic [WORD_W-1:0]         dout,
  output logic                      out_en
);

  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (reb) dout <= mem[raddr];
  end

  always_ff @(posedge clk) begin
    out_en <= reb;
  end

endmodule
