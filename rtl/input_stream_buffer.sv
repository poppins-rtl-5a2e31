// input_stream_buffer: FIFO for host command words.
//
// Host commands (weights, group-sparse codes, stimuli, parameters, run and
// clear) enter through a valid/ready handshake and leave in order through a
// second valid/ready handshake to the setting decoder. DEPTH entries, first
// word fall-through: out_valid rises the cycle after a word is written. The
// buffer is the paper's; its depth and the handshake are this design's choice.
module input_stream_buffer
  import poppins_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  host_cmd_t  in_cmd,
  output logic       out_valid,
  input  logic       out_ready,
  output host_cmd_t  out_cmd
);

  localparam int unsigned PW = $clog2(DEPTH);

  host_cmd_t      mem [DEPTH];
  logic [PW-1:0]  wp_q, rp_q;
  logic [PW:0]    cnt_q;
  logic           push, pop;

  assign in_ready  = (cnt_q != (PW+1)'(DEPTH));
  assign out_valid = (cnt_q != '0);
  assign out_cmd   = mem[rp_q];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp_q] <= in_cmd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wp_q <= (int'(wp_q) == DEPTH - 1) ? '0 : wp_q + 1'b1;
      if (pop)  rp_q <= (int'(rp_q) == DEPTH - 1) ? '0 : rp_q + 1'b1;
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

endmodule
