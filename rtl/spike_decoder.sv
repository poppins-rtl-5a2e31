// spike_decoder: scans a spike stream two bits per clock.
//
// On load the stream is copied into a circular-shift register. Each cycle the
// decoder looks at the two least significant bits (a "window"). An empty
// window is skipped in one cycle by rotating the register right by two. If the
// window holds a spike, its index is presented (spk_valid/spk_idx, lower bit
// first) and held until the population controller acknowledges it (spk_ack,
// given in the cycle its last weight read is issued), so a spike costs as many
// cycles as its MAC-cycles. After ceil(len/2) windows the decoder raises done
// for one cycle. The 2-bit LSB window and the circular shift follow the paper;
// the handshake is this design's choice.
//
// Timing: spk_valid/spk_idx are registered-state outputs (no combinational path
// from spk_ack). A scan of len bits with s spikes that need c_i cycles each
// takes about ceil(len/2) + sum(c_i) - (windows holding spikes) cycles.
module spike_decoder #(
  parameter int unsigned W = 128
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  logic [W-1:0]             stream,
  input  logic [$clog2(W):0]       len,
  input  logic                     spk_ack,
  output logic                     spk_valid,
  output logic [$clog2(W)-1:0]     spk_idx,
  output logic                     busy,
  output logic                     done
);

  localparam int unsigned IW = $clog2(W);

  logic [W-1:0]   sh_q;
  logic [IW:0]    win_left_q;   // windows still to check, including the current one
  logic [IW-1:0]  pos_q;        // index of bit 0 of the current window
  logic           done0_q;      // bit 0 of the window already served
  logic           busy_q;
  logic           b0, b1;
  logic           advance;

  always_comb begin
    b0        = busy_q && sh_q[0] && !done0_q;
    b1        = busy_q && sh_q[1];
    spk_valid = b0 || b1;
    spk_idx   = b0 ? pos_q : pos_q + IW'(1);
    // move to the next window: empty window, or the last spike in it acknowledged
    advance   = busy_q && (!(b0 || b1) || (spk_ack && !(b0 && b1)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_q       <= '0;
      win_left_q <= '0;
      pos_q      <= '0;
      done0_q    <= 1'b0;
      busy_q     <= 1'b0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (load) begin
        sh_q       <= stream;
        win_left_q <= (len + 1'b1) >> 1;
        pos_q      <= '0;
        done0_q    <= 1'b0;
        busy_q     <= (len != '0);
        done       <= (len == '0);
      end else if (busy_q) begin
        if (advance) begin
          sh_q       <= {sh_q[1:0], sh_q[W-1:2]};
          pos_q      <= pos_q + IW'(2);
          done0_q    <= 1'b0;
          win_left_q <= win_left_q - 1'b1;
          if (win_left_q == 1) begin
            busy_q <= 1'b0;
            done   <= 1'b1;
          end
        end else if (spk_ack) begin
          done0_q <= 1'b1;           // bit 0 served, bit 1 still pending
        end
      end
    end
  end

  assign busy = busy_q;

endmodule
