// poppins_top: POPPINS population-based spiking neuromorphic processor.
//
// Two neuromorphic processing units run side by side: NPU1 with N1 = 32
// population neurons and an 8 Kb weight memory, NPU2 with N2 = 128 neurons and
// a 128 Kb weight memory; each also has one global neuron. NPU1's spikes reach
// NPU2 one time step later through the hierarchy-population scheduler
// (one-way). Host commands enter through the input stream buffer and are
// decoded by the setting arrangement; the top controller sequences the time
// steps; each step's spikes leave through the output stream buffer.
//
// Interface: host_cmd with valid/ready (see poppins_pkg for the command
// format); out_* with valid/ready, one word per time step holding NPU1's 33 and
// NPU2's 129 spike flags (index N is the global neuron) and the step number.
// busy is high while a run is in progress.
module poppins_top
  import poppins_pkg::*;
#(
  parameter int unsigned N1   = N1_NEURONS,
  parameter int unsigned N2   = N2_NEURONS,
  parameter int unsigned FIFO = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           host_valid,
  output logic           host_ready,
  input  host_cmd_t      host_cmd,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [N1:0]    out_spk1,
  output logic [N2:0]    out_spk2,
  output logic [15:0]    out_step,
  output logic           busy
);

  localparam int unsigned G1 = N1 / GROUP_SIZE;
  localparam int unsigned G2 = N2 / GROUP_SIZE;
  localparam int unsigned A1 = $clog2(2 * N1 * G1);
  localparam int unsigned A2 = $clog2(2 * N2 * G2);

  // ---------------- host side ----------------
  logic      cmd_valid, cmd_ready;
  host_cmd_t cmd;

  input_stream_buffer #(.DEPTH(FIFO)) u_in (
    .clk, .rst_n,
    .in_valid (host_valid), .in_ready (host_ready), .in_cmd (host_cmd),
    .out_valid (cmd_valid), .out_ready (cmd_ready), .out_cmd (cmd)
  );

  logic              w1_we, gs1_we, ext1_we, w2_we, gs2_we, ext2_we;
  logic [A1-1:0]     w1_addr;
  logic [A2-1:0]     w2_addr;
  logic [15:0]       wr_addr;
  logic [31:0]       wr_data;
  npu_cfg_t          cfg1, cfg2;
  logic              run, clr;
  logic [15:0]       n_steps;

  set_arrange #(.M1(N1), .M2(N2), .A1(A1), .A2(A2)) u_set (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy,
    .w1_we, .w1_addr, .gs1_we, .ext1_we,
    .w2_we, .w2_addr, .gs2_we, .ext2_we,
    .wr_addr, .wr_data, .cfg1, .cfg2, .run, .n_steps, .clr
  );

  // ---------------- sequencing ----------------
  logic        ext_latch, start, acc_done1, acc_done2, decay, pde, cap, push, can_push, stall;
  logic        busy1, busy2;
  logic [15:0] step;

  top_controller u_ctrl (
    .clk, .rst_n, .run, .n_steps, .busy,
    .ext_latch, .start, .acc_done1, .acc_done2, .decay, .pde, .cap,
    .push, .can_push, .step, .stall
  );

  // ---------------- populations ----------------
  logic [N1:0]            spk1, spk1_next;
  logic [N2:0]            spk2_next;
  logic [N2:0]            spk2;
  logic [N1:0][VM_W-1:0]  vm1;
  logic [N2:0][VM_W-1:0]  vm2;
  logic [N1-1:0]          hier_spk;
  logic [15:0]            hier_events;

  npu #(.M(N1), .H(2), .HAS_HIER(1'b0)) u_npu1 (
    .clk, .rst_n, .clr, .cfg (cfg1),
    .w_we (w1_we), .w_addr (w1_addr), .w_data (wr_data),
    .gs_we (gs1_we), .gs_row ($clog2(2*N1)'(wr_addr)), .gs_code (G1'(wr_data)),
    .ext_we (ext1_we), .ext_addr ($clog2(N1+1)'(wr_addr)), .ext_data (wr_data[CUR_W-1:0]),
    .ext_latch, .start, .acc_done (acc_done1), .busy (busy1),
    .decay, .pde, .cap,
    .hier_spk (2'b00), .spk (spk1), .spk_new (spk1_next), .vm (vm1)
  );

  hier_scheduler #(.N(N1)) u_sched (
    .clk, .rst_n, .clr, .cap, .en (cfg2.hier_en),
    .spk_in (spk1_next[N1-1:0]), .hier_spk, .n_events (hier_events)
  );

  npu #(.M(N2), .H(N1), .HAS_HIER(1'b1)) u_npu2 (
    .clk, .rst_n, .clr, .cfg (cfg2),
    .w_we (w2_we), .w_addr (w2_addr), .w_data (wr_data),
    .gs_we (gs2_we), .gs_row ($clog2(2*N2)'(wr_addr)), .gs_code (G2'(wr_data)),
    .ext_we (ext2_we), .ext_addr ($clog2(N2+1)'(wr_addr)), .ext_data (wr_data[CUR_W-1:0]),
    .ext_latch, .start, .acc_done (acc_done2), .busy (busy2),
    .decay, .pde, .cap,
    .hier_spk, .spk (spk2), .spk_new (spk2_next), .vm (vm2)
  );

  // ---------------- output ----------------
  output_stream_buffer #(.N1(N1+1), .N2(N2+1)) u_out (
    .clk, .rst_n, .push, .spk1, .spk2, .step, .can_push,
    .out_valid, .out_ready, .out_spk1, .out_spk2, .out_step
  );

endmodule
