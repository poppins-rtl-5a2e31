// tb_decision: the obstacle-avoidance decision network on the full-size
// processor. Eight motion neurons in NPU1 (act_log2 = 3) form a
// winner-take-all population: each neuron excites itself (+3) and inhibits
// the other seven (-6). The eight inputs carry motion evidence as external
// stimuli; one direction gets a stronger stimulus (36 against 24). NPU2 is
// shrunk to one neuron with the hierarchy path off, so the step time is set
// by NPU1. For each of the eight directions the network runs 50 time steps;
// then the evidence switches to another direction without clearing, and it
// runs 50 more. Checked: every output word against the reference model, the
// winning neuron (most spikes) of each half, that the winner fires more than
// any other neuron, and the cycles per time step (reported).
module tb_decision;
  import poppins_pkg::*;
  import poppins_ref_pkg::*;

  localparam int N1 = 32, N2 = 128, STEPS = 50;

  logic clk = 0, rst_n = 0;
  logic host_valid = 0, host_ready, out_valid, out_ready = 1, busy;
  host_cmd_t host_cmd;
  logic [N1:0] out_spk1;
  logic [N2:0] out_spk2;
  logic [15:0] out_step;

  poppins_top dut (.*);

  npu_model m1, m2;
  int checks = 0, failures = 0, outputs = 0;
  int count[8];
  longint busy_cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (busy) busy_cycles++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  task automatic send(cmd_op_e op, bit n, int addr, int data);
    @(negedge clk);
    host_valid = 1;
    host_cmd = '{op: op, npu: n, addr: 16'(addr), data: 32'(data)};
    #1;
    while (!host_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    host_valid = 0;
  endtask

  // output side: compare with the models and count the motion neurons' spikes
  initial begin
    forever begin
      @(negedge clk);
      #1;
      if (out_valid) begin
        bit h0[], h[];
        h0 = new[2]; h = new[N1];
        m1.step(h0);
        m2.step(h);
        outputs++;
        for (int i = 0; i <= N1; i++)
          chk(out_spk1[i] == m1.spk[i], $sformatf("step %0d neuron %0d", out_step, i));
        for (int i = 0; i < 8; i++) if (out_spk1[i]) count[i]++;
      end
    end
  end

  task automatic evidence(int win);
    for (int i = 0; i < 8; i++) begin
      int v; v = (i == win) ? 36 : 24;
      m1.cur_buf[i] = v;
      send(CMD_W_EXT, 0, i, v);
    end
  endtask

  task automatic run_and_judge(int win);
    int target, best;
    foreach (count[i]) count[i] = 0;
    target = outputs + STEPS;
    send(CMD_RUN, 0, 0, STEPS);
    while (outputs < target) @(negedge clk);
    best = 0;
    for (int i = 1; i < 8; i++) if (count[i] > count[best]) best = i;
    chk(best == win, $sformatf("winner %0d expected %0d, counts %p", best, win, count));
    for (int i = 0; i < 8; i++)
      if (i != win) chk(count[win] > count[i], $sformatf("direction %0d not above %0d", win, i));
  endtask

  initial begin
    m1 = new(N1, 2, 0);
    m2 = new(N2, N1, 1);
    host_cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // NPU1: 8 neurons, winner-take-all weights; other rows left at zero
    send(CMD_W_PAR, 0, int'(PAR_ACT), 3);   m1.act_log2 = 3;
    send(CMD_W_PAR, 0, int'(PAR_DALPHA), 1); m1.alpha = 1;
    for (int r = 0; r < m1.ROWS; r++) begin
      for (int n = 0; n < N1; n++) m1.w[r][n] = (r < 8 && n < 8) ? ((r == n) ? 3 : -6) : 0;
      for (int g = 0; g < m1.GROUPS; g++) send(CMD_W_WEIGHT, 0, r * m1.GROUPS + g, int'(m1.word(r, g)));
      // only group 0 is used by the eight neurons
      for (int g = 0; g < m1.GROUPS; g++) m1.gs[r][g] = (g == 0);
      send(CMD_W_GS, 0, r, 1);
    end
    // NPU2: one neuron, no hierarchy input, zero weights (its memory is not used)
    send(CMD_W_PAR, 1, int'(PAR_ACT), 0);  m2.act_log2 = 0;
    send(CMD_W_PAR, 1, int'(PAR_HIER), 0); m2.hier_en = 0;
    for (int r = 0; r < m2.ROWS; r++) send(CMD_W_GS, 1, r, 0);
    foreach (m2.gs[r, g]) m2.gs[r][g] = 0;
    for (int d = 0; d < 8; d++) begin
      send(CMD_CLEAR, 0, 0, 0); m1.clear(); m2.clear();
      evidence(d);
      run_and_judge(d);
      // new stimulus half way: switch to the opposite direction
      evidence((d + 4) % 8);
      run_and_judge((d + 4) % 8);
    end
    $display("decision network: %0d steps, %0d cycles per time step on average", outputs, busy_cycles / outputs);
    chk(busy_cycles / outputs < 68, "time step shorter than the published 68 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
