// npu: neuromorphic processing unit (one population).
//
// Contains the weight SRAM with its write control (host writes) and output
// buffer (registered word plus out_en), the external input buffer, the
// population controller with its group-sparse register file, the spike decoder,
// the group-sparse weight arrangement, the post-synaptic core, the I-QIF neuron
// cluster (M neurons plus one global neuron) and the spike stream buffer.
//
// A time step is driven from outside by one-cycle strobes, in this order:
//   ext_latch  copy the external stimuli into the Cur registers
//   start      accumulate: serve the global neuron's, the own population's and
//              (NPU2) the hierarchy's spikes of the previous step; acc_done
//              pulses when every weight has been added
//   decay      apply the reciprocal decay to lanes whose decay_en is set
//   pde        update every active neuron with Syn + Cur
//   cap        copy the new spikes into the spike stream buffer
// spk_new shows the neurons' spike flags (valid from the cycle after pde).
// Accumulation pipeline: SRAM read (cycle t) -> word and group registered
// (t+1) -> steered to the group's 8 lanes and added at the end of t+1.
// The block list follows the paper's NPU; the strobe protocol is this design's.
// Host writes (weights, codes, parameters) must only be made while busy is
// low; stimulus writes may be made at any time.
module npu
  import poppins_pkg::*;
#(
  parameter int unsigned M        = N2_NEURONS,
  parameter int unsigned H        = N1_NEURONS,
  parameter bit          HAS_HIER = 1'b1,
  parameter int unsigned ROWS     = 2 * M,
  parameter int unsigned GROUPS   = M / GROUP_SIZE,
  parameter int unsigned DEPTH    = ROWS * GROUPS,
  parameter int unsigned ADDR_W   = $clog2(DEPTH),
  parameter int unsigned RW       = $clog2(ROWS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr,
  input  npu_cfg_t                  cfg,
  // host writes
  input  logic                      w_we,
  input  logic [ADDR_W-1:0]         w_addr,
  input  logic [WORD_W-1:0]         w_data,
  input  logic                      gs_we,
  input  logic [RW-1:0]             gs_row,
  input  logic [GROUPS-1:0]         gs_code,
  input  logic                      ext_we,
  input  logic [$clog2(M+1)-1:0]    ext_addr,
  input  logic [CUR_W-1:0]          ext_data,
  // time step strobes
  input  logic                      ext_latch,
  input  logic                      start,
  output logic                      acc_done,
  output logic                      busy,
  input  logic                      decay,
  input  logic                      pde,
  input  logic                      cap,
  // spikes
  input  logic [H-1:0]              hier_spk,
  output logic [M:0]                spk,
  output logic [M:0]                spk_new,
  output logic [M:0][VM_W-1:0]      vm
);

  localparam int unsigned GW = $clog2(GROUPS + 1);

  // ---------------- control and decoder ----------------
  logic                 dec_load, dec_ack, dec_valid, dec_done, dec_busy;
  logic [M-1:0]         dec_stream;
  logic [$clog2(M):0]   dec_len;
  logic [$clog2(M)-1:0] dec_idx;
  logic                 reb;
  logic [ADDR_W-1:0]    raddr;
  logic [GW-1:0]        rgroup, rgroup_q;
  logic [M:0]           active;
  logic [M-1:0]         decay_en;

  pop_controller #(.M(M), .H(H), .HAS_HIER(HAS_HIER), .ROWS(ROWS), .GROUPS(GROUPS),
                   .ADDR_W(ADDR_W), .GW(GW), .RW(RW)) u_ctrl (
    .clk, .rst_n, .clr, .cfg,
    .gs_we, .gs_row, .gs_code,
    .start, .acc_done, .busy,
    .self_spk (spk[M-1:0]), .glob_spk (spk[M]), .hier_spk,
    .dec_load, .dec_stream, .dec_len, .dec_ack, .dec_valid, .dec_idx, .dec_done,
    .reb, .raddr, .rgroup,
    .active, .decay_en
  );

  spike_decoder #(.W(M)) u_dec (
    .clk, .rst_n,
    .load (dec_load), .stream (dec_stream), .len (dec_len),
    .spk_ack (dec_ack), .spk_valid (dec_valid), .spk_idx (dec_idx),
    .busy (dec_busy), .done (dec_done)
  );

  // ---------------- weight memory ----------------
  logic [WORD_W-1:0] dout;
  logic              out_en;

  weight_sram #(.DEPTH(DEPTH)) u_sram (
    .clk, .we (w_we), .waddr (w_addr), .wdata (w_data),
    .reb, .raddr, .dout, .out_en
  );

  always_ff @(posedge clk) begin
    if (reb) rgroup_q <= rgroup;
  end

  // ---------------- post-synaptic core ----------------
  logic [M-1:0][WEIGHT_W-1:0] lane_w;
  logic [M-1:0]               lane_en;
  logic [M:0][CUR_W-1:0]      cur;
  logic [M-1:0][SYN_W-1:0]    syn;
  logic [M:0][NEU_IN_W-1:0]   neu_in;
  logic [M:0]                 spk_now;

  gs_weight_arrange #(.M(M)) u_arr (
    .dout, .out_en, .group (rgroup_q), .w (lane_w), .w_en (lane_en)
  );

  ext_input_buf #(.M(M)) u_ext (
    .clk, .rst_n, .clr, .we (ext_we), .addr (ext_addr), .data (ext_data),
    .latch (ext_latch), .cur
  );

  postsyn_core #(.M(M)) u_core (
    .clk, .rst_n, .clr,
    .w (lane_w), .w_en (lane_en),
    .decay_en (decay ? decay_en : '0), .decay_alpha (cfg.decay_alpha),
    .cur (cur[M-1:0]), .syn, .neu_in (neu_in[M-1:0])
  );

  // the global neuron is driven by its external stimulus only
  assign neu_in[M] = NEU_IN_W'($signed(cur[M]));

  neuron_cluster #(.M(M)) u_neurons (
    .clk, .rst_n, .en (pde), .clr, .active, .neu_in, .par (cfg.par),
    .vm, .spk (spk_now)
  );

  spike_stream_buf #(.M(M)) u_spk (
    .clk, .rst_n, .clr, .cap, .spk_in (spk_now), .spk
  );

  assign spk_new = spk_now;

  assert property (@(posedge clk) disable iff (!rst_n) !(w_we && busy))
    else $error("npu: weight write while a time step is running");

endmodule
