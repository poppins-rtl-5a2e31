// top_controller: time-step sequencer of the processor.
//
// After a run command it executes n_steps time steps. Each step follows the
// paper's operation order: external input check (ext_latch), inter-spike
// accumulation in both NPUs in parallel (start, then wait for both acc_done;
// NPU2 also serves the hierarchy spikes), decay check (decay), neuron update in
// both NPUs at once (pde), spike capture (cap), and output (push). If the
// output stream buffer still holds an untaken step, the controller stalls in
// the output state. The phase order is the paper's; the one-cycle strobes,
// the capture cycle and the stall are this design's.
//
// A step takes 6 cycles plus the longer of the two accumulation phases.
module top_controller (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         run,
  input  logic [15:0]  n_steps,
  output logic         busy,
  output logic         ext_latch,
  output logic         start,
  input  logic         acc_done1,
  input  logic         acc_done2,
  output logic         decay,
  output logic         pde,
  output logic         cap,
  output logic         push,
  input  logic         can_push,
  output logic [15:0]  step,
  output logic         stall
);

  typedef enum logic [2:0] {T_IDLE, T_EXT, T_START, T_ACC, T_DECAY, T_PDE, T_CAP, T_OUT} tstate_e;
  tstate_e st_q;
  logic    d1_q, d2_q;
  logic [15:0] left_q;

  assign busy      = (st_q != T_IDLE);
  assign ext_latch = (st_q == T_EXT);
  assign start     = (st_q == T_START);
  assign decay     = (st_q == T_DECAY);
  assign pde       = (st_q == T_PDE);
  assign cap       = (st_q == T_CAP);
  assign push      = (st_q == T_OUT) && can_push;
  assign stall     = (st_q == T_OUT) && !can_push;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= T_IDLE;
      d1_q   <= 1'b0;
      d2_q   <= 1'b0;
      left_q <= '0;
      step   <= '0;
    end else begin
      unique case (st_q)
        T_IDLE:  if (run) begin left_q <= n_steps; st_q <= T_EXT; end
        T_EXT:   st_q <= T_START;
        T_START: begin d1_q <= 1'b0; d2_q <= 1'b0; st_q <= T_ACC; end
        T_ACC: begin
          if (acc_done1) d1_q <= 1'b1;
          if (acc_done2) d2_q <= 1'b1;
          if ((d1_q || acc_done1) && (d2_q || acc_done2)) st_q <= T_DECAY;
        end
        T_DECAY: st_q <= T_PDE;
        T_PDE:   st_q <= T_CAP;
        T_CAP:   st_q <= T_OUT;
        T_OUT: if (can_push) begin
          step   <= step + 16'd1;
          left_q <= left_q - 16'd1;
          st_q   <= (left_q == 16'd1) ? T_IDLE : T_EXT;
        end
        default: st_q <= T_IDLE;
      endcase
    end
  end

endmodule
