// set_arrange: population-local and global setting arrangement.
//
// Decodes host commands from the input stream buffer into writes of each
// NPU's weight SRAM, group-sparse register file, external input buffer and
// configuration registers, and into the global run command (number of time
// steps, given with the run strobe) and clear. While a run is in progress (busy) only stimulus writes and
// no-ops are taken; any other command waits at the head of the FIFO until the
// run ends. Every command is taken in one cycle. The paper names these blocks
// but gives no register map; the map (see poppins_pkg) is this design's choice.
module set_arrange
  import poppins_pkg::*;
#(
  parameter int unsigned M1 = N1_NEURONS,
  parameter int unsigned M2 = N2_NEURONS,
  parameter int unsigned A1 = $clog2(2 * M1 * (M1 / GROUP_SIZE)),
  parameter int unsigned A2 = $clog2(2 * M2 * (M2 / GROUP_SIZE))
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         cmd_valid,
  output logic                         cmd_ready,
  input  host_cmd_t                    cmd,
  input  logic                         busy,
  // NPU1 writes
  output logic                         w1_we,
  output logic [A1-1:0]                w1_addr,
  output logic                         gs1_we,
  output logic                         ext1_we,
  // NPU2 writes
  output logic                         w2_we,
  output logic [A2-1:0]                w2_addr,
  output logic                         gs2_we,
  output logic                         ext2_we,
  // shared write fields
  output logic [15:0]                  wr_addr,
  output logic [31:0]                  wr_data,
  // configuration and run
  output npu_cfg_t                     cfg1,
  output npu_cfg_t                     cfg2,
  output logic                         run,
  output logic [15:0]                  n_steps,
  output logic                         clr
);

  logic take;

  assign cmd_ready = !busy || cmd.op == CMD_W_EXT || cmd.op == CMD_NOP;
  assign take      = cmd_valid && cmd_ready;
  assign wr_addr   = cmd.addr;
  assign wr_data   = cmd.data;
  assign w1_addr   = A1'(cmd.addr);
  assign w2_addr   = A2'(cmd.addr);
  assign n_steps   = cmd.data[15:0];   // valid with run

  always_comb begin
    w1_we   = take && cmd.op == CMD_W_WEIGHT && !cmd.npu;
    w2_we   = take && cmd.op == CMD_W_WEIGHT &&  cmd.npu;
    gs1_we  = take && cmd.op == CMD_W_GS     && !cmd.npu;
    gs2_we  = take && cmd.op == CMD_W_GS     &&  cmd.npu;
    ext1_we = take && cmd.op == CMD_W_EXT    && !cmd.npu;
    ext2_we = take && cmd.op == CMD_W_EXT    &&  cmd.npu;
    run     = take && cmd.op == CMD_RUN && cmd.data[15:0] != '0;
    clr     = take && cmd.op == CMD_CLEAR;
  end

  function automatic npu_cfg_t set_par(npu_cfg_t c, logic [15:0] idx, logic [31:0] d);
    npu_cfg_t r;
    r = c;
    unique case (idx)
      PAR_AB:      begin r.par.a = d[2:0]; r.par.b = d[5:3]; end
      PAR_VREST:   r.par.v_rest  = d[7:0];
      PAR_VTH:     r.par.v_th    = d[7:0];
      PAR_VRESET:  r.par.v_reset = d[7:0];
      PAR_VPDE:    r.par.v_pde   = d[7:0];
      PAR_ACT:     r.act_log2    = d[2:0];
      PAR_CHOP:    begin r.chop_en = d[0]; r.sub1_log2 = d[6:4]; r.sub2_log2 = d[10:8]; end
      PAR_DALPHA:  r.decay_alpha  = d[2:0];
      PAR_DPERIOD: r.decay_period = d[7:0];
      PAR_HIER:    r.hier_en      = d[0];
      default: ;
    endcase
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg1    <= cfg_default(M1);
      cfg2    <= cfg_default(M2);
    end else if (take) begin
      if (cmd.op == CMD_W_PAR && !cmd.npu) cfg1 <= set_par(cfg1, cmd.addr, cmd.data);
      if (cmd.op == CMD_W_PAR &&  cmd.npu) cfg2 <= set_par(cfg2, cmd.addr, cmd.data);
    end
  end

endmodule
