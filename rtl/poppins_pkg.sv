// poppins_pkg: types and constants shared by the POPPINS processor.
//
// The processor has two neuromorphic processing units (NPUs): NPU1 with 32
// population neurons and NPU2 with 128, each with one extra "global" neuron.
// Weights are signed 4-bit, packed eight to a 32-bit SRAM word; membranes are
// unsigned 8-bit; synaptic registers are signed 8-bit. These numbers follow the
// paper. The host command format and the parameter register map below are this
// design's own choice (the paper does not define a host protocol).
package poppins_pkg;

  // ---- sizes taken from the paper ----
  localparam int unsigned N1_NEURONS   = 32;   // NPU1 population size
  localparam int unsigned N2_NEURONS   = 128;  // NPU2 population size
  localparam int unsigned WEIGHT_W     = 4;    // signed weight, -8..+7
  localparam int unsigned WORD_W       = 32;   // SRAM word = 8 weights
  localparam int unsigned GROUP_SIZE   = WORD_W / WEIGHT_W;  // 8 lanes per group
  localparam int unsigned VM_W         = 8;    // unsigned membrane
  localparam int unsigned SYN_W        = 8;    // signed synaptic register
  localparam int unsigned CUR_W        = 8;    // signed external current
  localparam int unsigned NEU_IN_W     = 9;    // Syn + Cur
  localparam int unsigned PAR_W        = 3;    // a, b codes (value = code/8)

  // I-QIF neuron parameters (Eq. 1-2). v_pde is V_pde,th = (a*Vr+b*Vt)/(a+b),
  // computed by the host.
  typedef struct packed {
    logic [PAR_W-1:0] a;
    logic [PAR_W-1:0] b;
    logic [VM_W-1:0]  v_rest;
    logic [VM_W-1:0]  v_th;
    logic [VM_W-1:0]  v_reset;
    logic [VM_W-1:0]  v_pde;
  } iqif_par_t;

  // Per-NPU configuration (population local settings).
  typedef struct packed {
    logic [2:0] act_log2;      // active neurons = 2**act_log2 (non-chopped)
    logic       chop_en;       // half-hierarchy-chopped population
    logic [2:0] sub1_log2;     // sub-population #1 size = 2**sub1_log2
    logic [2:0] sub2_log2;     // sub-population #2 size = 2**sub2_log2
    logic [2:0] decay_alpha;   // shift of the reciprocal decay
    logic [7:0] decay_period;  // decay every decay_period+1 time steps
    logic       hier_en;       // accept spikes from the first hierarchy (NPU2)
    iqif_par_t  par;
  } npu_cfg_t;

  // ---- host command word (own choice) ----
  typedef enum logic [2:0] {
    CMD_NOP      = 3'd0,
    CMD_W_WEIGHT = 3'd1,  // addr = SRAM word address, data = 8 weights
    CMD_W_GS     = 3'd2,  // addr = presynaptic row, data = group-sparse code
    CMD_W_EXT    = 3'd3,  // addr = neuron (M = global neuron), data[7:0] signed
    CMD_W_PAR    = 3'd4,  // addr = parameter index (PAR_*), data = value
    CMD_RUN      = 3'd5,  // data[15:0] = number of time steps
    CMD_CLEAR    = 3'd6   // clear synapses, membranes and spike buffers
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e     op;
    logic        npu;     // 0 = NPU1, 1 = NPU2
    logic [15:0] addr;
    logic [31:0] data;
  } host_cmd_t;

  // parameter register indices for CMD_W_PAR
  localparam logic [15:0] PAR_AB      = 16'd0;  // data[2:0]=a, data[5:3]=b
  localparam logic [15:0] PAR_VREST   = 16'd1;
  localparam logic [15:0] PAR_VTH     = 16'd2;
  localparam logic [15:0] PAR_VRESET  = 16'd3;
  localparam logic [15:0] PAR_VPDE    = 16'd4;
  localparam logic [15:0] PAR_ACT     = 16'd5;  // data[2:0]=act_log2
  localparam logic [15:0] PAR_CHOP    = 16'd6;  // data[0]=chop_en, [6:4]=sub1_log2, [10:8]=sub2_log2
  localparam logic [15:0] PAR_DALPHA  = 16'd7;
  localparam logic [15:0] PAR_DPERIOD = 16'd8;
  localparam logic [15:0] PAR_HIER    = 16'd9;

  // reset values of a population's configuration
  function automatic npu_cfg_t cfg_default(int unsigned m);
    npu_cfg_t c;
    c = '0;
    c.act_log2     = 3'($clog2(m));
    c.sub1_log2    = 3'($clog2(m) - 1);
    c.sub2_log2    = 3'($clog2(m) - 1);
    c.decay_alpha  = 3'd2;
    c.hier_en      = 1'b1;
    c.par.a        = 3'd2;
    c.par.b        = 3'd2;
    c.par.v_rest   = 8'd40;
    c.par.v_th     = 8'd120;
    c.par.v_reset  = 8'd40;
    c.par.v_pde    = 8'd80;
    return c;
  endfunction

endpackage
