// tb_poppins_top: end-to-end test of the processor at its full size (NPU1 32+1
// neurons, NPU2 128+1 neurons, 8 Kb and 128 Kb weight memories), driven only
// through the host command port and observed only at the output stream port.
//
// It loads every weight word and group-sparse code of both populations, sets
// neuron parameters, writes stimuli, and runs four runs: the default
// configuration; NPU2 chopped into two sub-populations with a smaller NPU1 and
// a slower decay; the hierarchy path off with a smaller NPU2; and a run after
// a clear command. Every output word (spikes of all 162 neurons) is compared
// with the reference model, and the output port applies random back-pressure.
// Each mechanism of the design is counted and must occur: spikes and reset,
// global-neuron spikes, hierarchy events, group-sparse skips, chopped steps,
// decay steps, the +/-1 minimum decay, output stalls, host back-pressure and
// clear.
module tb_poppins_top;
  import poppins_pkg::*;
  import poppins_ref_pkg::*;

  localparam int N1 = 32, N2 = 128;

  logic clk = 0, rst_n = 0;
  logic host_valid = 0, host_ready, out_valid, out_ready = 0, busy;
  host_cmd_t host_cmd;
  logic [N1:0] out_spk1;
  logic [N2:0] out_spk2;
  logic [15:0] out_step;

  poppins_top dut (.*);

  npu_model m1, m2;
  int checks = 0, failures = 0, outputs = 0, expected_outputs = 0;
  int n_spk1 = 0, n_spk2 = 0, n_glob = 0, n_hier = 0, n_skip = 0, n_chop = 0, n_decay = 0;
  int n_fatigue = 0, n_stall = 0, n_host_bp = 0, n_clear = 0, n_small = 0;
  longint step_cycles = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ---------------- host port ----------------
  task automatic send(cmd_op_e op, bit n, int addr, int data);
    @(negedge clk);
    host_valid = 1;
    host_cmd = '{op: op, npu: n, addr: 16'(addr), data: 32'(data)};
    #1;
    while (!host_ready) begin n_host_bp++; @(negedge clk); #1; end
    @(negedge clk);
    host_valid = 0;
  endtask

  task automatic set_par(bit n, logic [15:0] idx, int v);
    send(CMD_W_PAR, n, int'(idx), v);
  endtask

  // ---------------- monitors ----------------
  // membranes as they were when each step's spikes were pushed to the output
  typedef struct { logic [N1:0][7:0] v1; logic [N2:0][7:0] v2; } vm_snap_t;
  vm_snap_t snaps[$];

  always @(posedge clk) begin
    if (dut.u_ctrl.push) snaps.push_back('{dut.vm1, dut.vm2});
    if (dut.u_ctrl.stall) n_stall++;
    if (busy) step_cycles++;
    // lane 0 of NPU2: decay whose shifted value is zero uses the +/-1 minimum
    if (dut.u_npu2.u_core.g_lane[0].u_decay.decay_en &&
        dut.u_npu2.u_core.g_lane[0].u_decay.syn_in != 0 &&
        dut.u_npu2.u_core.g_lane[0].u_decay.shifted == 0) n_fatigue++;
  end

  // output side: random back-pressure, every word checked against the models
  initial begin
    forever begin
      @(negedge clk);
      // now and then the host stops reading for a while
      if ($urandom_range(0, 999) == 0) begin
        out_ready = 0;
        repeat ($urandom_range(100, 400)) @(negedge clk);
      end
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (out_valid && out_ready) begin
        bit h[], h0[];
        h = new[N1];
        h0 = new[2];
        foreach (h[j]) h[j] = m2.hier_en ? m1.spk[j] : 1'b0;
        foreach (h[j]) if (h[j]) n_hier++;
        m1.step(h0);
        m2.step(h);
        outputs++;
        if (m2.decayed) n_decay++;
        if (m2.chop) n_chop++;
        n_skip += m2.skipped + m1.skipped;
        for (int i = 0; i <= N1; i++) begin
          chk(out_spk1[i] == m1.spk[i], $sformatf("step %0d NPU1 neuron %0d spike %0d expected %0d", out_step, i, out_spk1[i], m1.spk[i]));
          if (out_spk1[i]) begin if (i == N1) n_glob++; else n_spk1++; end
        end
        for (int i = 0; i <= N2; i++) begin
          chk(out_spk2[i] == m2.spk[i], $sformatf("step %0d NPU2 neuron %0d spike %0d expected %0d", out_step, i, out_spk2[i], m2.spk[i]));
          if (out_spk2[i]) begin if (i == N2) n_glob++; else n_spk2++; end
        end
        // membranes, read from the neuron clusters when the step was pushed
        begin
          vm_snap_t sn; sn = snaps.pop_front();
          for (int i = 0; i <= N2; i++)
            chk(sn.v2[i] == 8'(m2.vm[i]), $sformatf("step %0d NPU2 vm[%0d]=%0d expected %0d", out_step, i, sn.v2[i], m2.vm[i]));
          for (int i = 0; i <= N1; i++)
            chk(sn.v1[i] == 8'(m1.vm[i]), $sformatf("step %0d NPU1 vm[%0d]=%0d expected %0d", out_step, i, sn.v1[i], m1.vm[i]));
        end
      end
    end
  end

  // ---------------- loading ----------------
  task automatic load_npu(npu_model m, bit n);
    for (int r = 0; r < m.ROWS; r++) begin
      // mostly excitatory own-population weights, some zero groups
      for (int g = 0; g < m.GROUPS; g++) begin
        bit zero;
        zero = ($urandom_range(0, 3) == 0);
        m.gs[r][g] = !zero;
        for (int k = 0; k < 8; k++) m.w[r][g * 8 + k] = zero ? 0 : $urandom_range(0, 15) - 8;
        send(CMD_W_WEIGHT, n, r * m.GROUPS + g, int'(m.word(r, g)));
      end
      begin
        int code = 0;
        for (int g = 0; g < m.GROUPS; g++) code |= int'(m.gs[r][g]) << g;
        send(CMD_W_GS, n, r, code);
      end
    end
  endtask

  task automatic stimulate(npu_model m, bit n, int lo, int hi);
    for (int i = 0; i <= m.M; i++) begin
      int v; v = int'($urandom_range(0, hi - lo)) + lo;
      m.cur_buf[i] = v;
      send(CMD_W_EXT, n, i, v);
    end
  endtask

  // extra: same-value parameter writes queued behind the run; they wait in the
  // input FIFO until the run ends, so the host sees back-pressure
  task automatic run(int steps, int extra = 0);
    expected_outputs += steps;
    send(CMD_RUN, 0, 0, steps);
    repeat (extra) set_par(0, PAR_VTH, m1.vt);
    while (outputs < expected_outputs) @(negedge clk);
    @(negedge clk);
    chk(!busy, "idle after run");
  endtask

  initial begin
    m1 = new(N1, 2, 0);
    m2 = new(N2, N1, 1);
    host_cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    load_npu(m1, 0);
    load_npu(m2, 1);
    set_par(1, PAR_AB, 3 | (4 << 3)); m2.a = 3; m2.b = 4;
    set_par(1, PAR_VRESET, 20);       m2.vres = 20;
    set_par(0, PAR_VTH, 110);         m1.vt = 110;
    set_par(0, PAR_VPDE, 75);         m1.vpde = 75;
    set_par(0, PAR_DALPHA, 4);        m1.alpha = 4;
    set_par(1, PAR_DALPHA, 5);        m2.alpha = 5;

    // run A: default configuration
    stimulate(m1, 0, 0, 40);
    stimulate(m2, 1, -5, 30);
    run(40);

    // run B: NPU2 chopped (16 + 64 neurons), NPU1 8 neurons, decay every 3rd step
    set_par(1, PAR_CHOP, 1 | (4 << 4) | (6 << 8)); m2.chop = 1; m2.sub1_log2 = 4; m2.sub2_log2 = 6;
    set_par(0, PAR_ACT, 3);                         m1.act_log2 = 3;
    set_par(1, PAR_DPERIOD, 2);                     m2.period = 2;
    stimulate(m2, 1, 0, 35);
    run(40);
    n_small++;

    // run C: hierarchy path off, NPU2 64 neurons, NPU1 back to full size
    set_par(1, PAR_CHOP, 0);   m2.chop = 0;
    set_par(1, PAR_ACT, 6);    m2.act_log2 = 6;
    set_par(1, PAR_HIER, 0);   m2.hier_en = 0;
    set_par(0, PAR_ACT, 5);    m1.act_log2 = 5;
    run(20);

    // run D: clear, then the default sizes again
    send(CMD_CLEAR, 0, 0, 0);  m1.clear(); m2.clear(); n_clear++;
    set_par(1, PAR_ACT, 7);    m2.act_log2 = 7;
    set_par(1, PAR_HIER, 1);   m2.hier_en = 1;
    set_par(1, PAR_DPERIOD, 0); m2.period = 0;
    stimulate(m1, 0, 5, 45);
    stimulate(m2, 1, 0, 30);
    run(30, 12);

    $display("mechanisms: spikes NPU1=%0d NPU2=%0d global=%0d hierarchy events=%0d sparse skips=%0d chopped steps=%0d",
             n_spk1, n_spk2, n_glob, n_hier, n_skip, n_chop);
    $display("mechanisms: decay steps=%0d min-decay=%0d output stalls=%0d host back-pressure=%0d clears=%0d",
             n_decay, n_fatigue, n_stall, n_host_bp, n_clear);
    $display("average cycles per time step: %0d", step_cycles / outputs);
    chk(n_spk1 > 0, "NPU1 spikes");
    chk(n_spk2 > 0, "NPU2 spikes");
    chk(n_glob > 0, "global neuron spikes");
    chk(n_hier > 0, "hierarchy events");
    chk(n_skip > 0, "group-sparse skips");
    chk(n_chop > 0, "chopped population steps");
    chk(n_decay > 0, "decay steps");
    chk(n_fatigue > 0, "minimum (+/-1) decay");
    chk(n_stall > 0, "output stall");
    chk(n_host_bp > 0, "host back-pressure");
    chk(n_clear > 0 && n_small > 0, "clear and reduced size");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
