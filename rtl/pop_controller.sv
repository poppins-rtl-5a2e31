// pop_controller: population local controller of one NPU, with its
// group-sparse parameter register file.
//
// Presynaptic "rows" address the weight SRAM: rows 0..M-1 are the NPU's own
// neurons, rows M..M+H-1 the spikes forwarded from the first hierarchy (NPU2
// only), and row ROWS-1 the NPU's global neuron. Row r, group g is SRAM word
// r*GROUPS+g, holding the weights from r to neurons 8g..8g+7.
//
// The register file holds a group-sparse code (GS_code) per row: bit g set
// means group g has non-zero weights. When a spike from row r is served the
// controller reads only the groups set in GS_code[r] and enabled as receivers,
// one SRAM word per clock, so the spike takes GS_num = popcount cycles (at
// least one). Rows are served in this order after start: the global neuron's
// spike; the own population's spikes (or, in chopped mode, sub-population #1
// then sub-population #2); the hierarchy spikes. The own population and the
// hierarchy streams are scanned by the spike decoder.
//
// Population size: 2**act_log2 neurons from 0 are active. In chopped mode the
// lower half is sub-population #1 (2**sub1_log2 active neurons from 0) and
// the upper half sub-population #2 (2**sub2_log2 from M/2); own-population
// spikes then address only sub-population #2's groups, so connections inside
// the population become one-way (#1 -> #2, #2 <-> #2) and about half the SRAM
// reads are saved. Global and hierarchy spikes reach every active group.
//
// An operation counter counts time steps and raises decay_en (for active
// neurons) in every (decay_period+1)-th step.
//
// What follows the paper: 2^n active neurons, groups of 8 and GS_code/GS_num,
// MAC-cycles per spike set by GS_num, the chopped population with one-way
// paths, the operation counter deciding decay_en. Own choices: the row map,
// one GS_code per row, which sub-population receives in chopped mode, the
// decay period register, and the serving order.
//
// Timing: acc_done pulses one cycle after the last weight has been accumulated
// (two cycles after the last SRAM read).
module pop_controller
  import poppins_pkg::*;
#(
  parameter int unsigned M        = N2_NEURONS,
  parameter int unsigned H        = N1_NEURONS,
  parameter bit          HAS_HIER = 1'b1,
  parameter int unsigned ROWS     = 2 * M,
  parameter int unsigned GROUPS   = M / GROUP_SIZE,
  parameter int unsigned ADDR_W   = $clog2(ROWS * GROUPS),
  parameter int unsigned GW       = $clog2(GROUPS + 1),
  parameter int unsigned RW       = $clog2(ROWS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  npu_cfg_t                 cfg,
  // sparse register file write
  input  logic                     gs_we,
  input  logic [RW-1:0]            gs_row,
  input  logic [GROUPS-1:0]        gs_code,
  // time step control
  input  logic                     start,
  output logic                     acc_done,
  output logic                     busy,
  // spike sources (stable while busy)
  input  logic [M-1:0]             self_spk,
  input  logic                     glob_spk,
  input  logic [H-1:0]             hier_spk,
  // spike decoder
  output logic                     dec_load,
  output logic [M-1:0]             dec_stream,
  output logic [$clog2(M):0]       dec_len,
  output logic                     dec_ack,
  input  logic                     dec_valid,
  input  logic [$clog2(M)-1:0]     dec_idx,
  input  logic                     dec_done,
  // weight SRAM read
  output logic                     reb,
  output logic [ADDR_W-1:0]        raddr,
  output logic [GW-1:0]            rgroup,
  // neuron and decay control
  output logic [M:0]               active,
  output logic [M-1:0]             decay_en
);

  localparam int unsigned LOGM  = $clog2(M);
  localparam int unsigned HALF  = M / 2;

  typedef enum logic [2:0] {S_IDLE, S_GLOB, S_SCAN_A, S_SCAN_B, S_SCAN_H, S_DRAIN, S_DONE} state_e;
  state_e state_q, state_d;

  logic [GROUPS-1:0] gs_file [ROWS];
  logic [GROUPS-1:0] rem_q;
  logic              have_rem_q;
  logic [7:0]        op_cnt_q;
  logic              decay_on_q;

  // ---------------- active neurons and receiving groups ----------------
  int unsigned act_n, sub1_n, sub2_n;
  logic [GROUPS-1:0] mask_all, mask_sub2;

  always_comb begin
    act_n  = 1 << ((int'(cfg.act_log2)  > LOGM)     ? LOGM     : int'(cfg.act_log2));
    sub1_n = 1 << ((int'(cfg.sub1_log2) > LOGM - 1) ? LOGM - 1 : int'(cfg.sub1_log2));
    sub2_n = 1 << ((int'(cfg.sub2_log2) > LOGM - 1) ? LOGM - 1 : int'(cfg.sub2_log2));
    for (int i = 0; i < M; i++) begin
      if (cfg.chop_en) active[i] = (i < sub1_n) || (i >= HALF && i < HALF + sub2_n);
      else             active[i] = (i < act_n);
    end
    active[M] = 1'b1;
    for (int g = 0; g < GROUPS; g++) begin
      mask_all[g]  = active[g * GROUP_SIZE];
      mask_sub2[g] = cfg.chop_en && (g * GROUP_SIZE >= HALF) && active[g * GROUP_SIZE];
    end
  end

  assign decay_en = decay_on_q ? active[M-1:0] : '0;

  // ---------------- spike being served ----------------
  logic              serve_valid;
  logic [RW-1:0]     serve_row;
  logic [GROUPS-1:0] row_mask;
  logic [GROUPS-1:0] cur_mask, rem_d, lowest;
  logic              ack;

  always_comb begin
    serve_valid = 1'b0;
    serve_row   = '0;
    row_mask    = mask_all;
    unique case (state_q)
      S_GLOB: begin
        serve_valid = glob_spk;
        serve_row   = RW'(ROWS - 1);
      end
      S_SCAN_A: begin
        serve_valid = dec_valid;
        serve_row   = RW'(dec_idx);
        row_mask    = cfg.chop_en ? mask_sub2 : mask_all;
      end
      S_SCAN_B: begin
        serve_valid = dec_valid;
        serve_row   = RW'(HALF) + RW'(dec_idx);
        row_mask    = mask_sub2;
      end
      S_SCAN_H: begin
        serve_valid = dec_valid;
        serve_row   = RW'(M) + RW'(dec_idx);
      end
      default: ;
    endcase

    cur_mask = have_rem_q ? rem_q : (gs_file[serve_row] & row_mask);
    lowest   = cur_mask & (~cur_mask + 1'b1);     // lowest set bit
    rem_d    = cur_mask & ~lowest;
    reb      = serve_valid && (cur_mask != '0);
    ack      = serve_valid && (rem_d == '0);
    rgroup   = '0;
    for (int g = GROUPS - 1; g >= 0; g--) if (lowest[g]) rgroup = GW'(g);
    raddr    = ADDR_W'(int'(serve_row) * GROUPS + int'(rgroup));
  end

  assign dec_ack = ack && (state_q != S_GLOB);

  // ---------------- job sequencing ----------------
  always_comb begin
    state_d    = state_q;
    dec_load   = 1'b0;
    dec_stream = '0;
    dec_len    = '0;
    unique case (state_q)
      S_IDLE:  if (start) state_d = S_GLOB;
      S_GLOB:  if (!glob_spk || ack) begin
        dec_load = 1'b1;
        if (cfg.chop_en) begin
          for (int i = 0; i < HALF; i++) dec_stream[i] = self_spk[i] && active[i];
          dec_len = ($clog2(M)+1)'(sub1_n);
        end else begin
          dec_stream = self_spk & active[M-1:0];
          dec_len    = ($clog2(M)+1)'(act_n);
        end
        state_d = S_SCAN_A;
      end
      S_SCAN_A: if (dec_done) begin
        if (cfg.chop_en) begin
          dec_load = 1'b1;
          for (int i = 0; i < HALF; i++) dec_stream[i] = self_spk[HALF + i] && active[HALF + i];
          dec_len  = ($clog2(M)+1)'(sub2_n);
          state_d  = S_SCAN_B;
        end else if (HAS_HIER && cfg.hier_en) begin
          dec_load = 1'b1;
          dec_stream[H-1:0] = hier_spk;
          dec_len  = ($clog2(M)+1)'(H);
          state_d  = S_SCAN_H;
        end else state_d = S_DRAIN;
      end
      S_SCAN_B: if (dec_done) begin
        if (HAS_HIER && cfg.hier_en) begin
          dec_load = 1'b1;
          dec_stream[H-1:0] = hier_spk;
          dec_len  = ($clog2(M)+1)'(H);
          state_d  = S_SCAN_H;
        end else state_d = S_DRAIN;
      end
      S_SCAN_H: if (dec_done) state_d = S_DRAIN;
      S_DRAIN:  state_d = S_DONE;
      S_DONE:   state_d = S_IDLE;
      default:  state_d = S_IDLE;
    endcase
  end

  assign acc_done = (state_q == S_DONE);
  assign busy     = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      rem_q      <= '0;
      have_rem_q <= 1'b0;
      op_cnt_q   <= '0;
      decay_on_q <= 1'b0;
    end else begin
      state_q <= state_d;
      if (serve_valid && !ack) begin
        rem_q      <= rem_d;
        have_rem_q <= 1'b1;
      end else if (ack) begin
        have_rem_q <= 1'b0;
      end
      if (clr) begin
        op_cnt_q   <= '0;
        decay_on_q <= 1'b0;
      end else if (start && state_q == S_IDLE) begin
        decay_on_q <= (op_cnt_q >= cfg.decay_period);
        op_cnt_q   <= (op_cnt_q >= cfg.decay_period) ? 8'd0 : op_cnt_q + 8'd1;
      end
    end
  end

  // sparse parameter register file; resets to dense (all groups enabled)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) gs_file[r] <= '1;
    end else if (gs_we) begin
      gs_file[gs_row] <= gs_code;
    end
  end

  // a new spike is only presented after the previous one was acknowledged
  assert property (@(posedge clk) disable iff (!rst_n) (start |-> state_q == S_IDLE))
    else $error("pop_controller: start while busy");

endmodule
