// tb_npu: one NPU at M = 16 neurons and H = 8 hierarchy inputs, driven through
// complete time steps (ext_latch, start .. acc_done, decay, pde, cap) and
// compared with the reference model after every step: all membranes, all
// spikes and the number of SRAM word reads. Weights, group-sparse codes,
// stimuli and the configuration (active size, chopped mode, hierarchy path,
// decay) are randomised between steps.
module tb_npu;
  import poppins_pkg::*;
  import poppins_ref_pkg::*;
  localparam int M = 16, H = 8, ROWS = 32, G = 2, D = 64;

  logic clk = 0, rst_n = 0, clr = 0;
  npu_cfg_t cfg;
  logic w_we = 0, gs_we = 0, ext_we = 0;
  logic [5:0] w_addr;
  logic [31:0] w_data;
  logic [4:0] gs_row, ext_addr;
  logic [1:0] gs_code;
  logic [7:0] ext_data;
  logic ext_latch = 0, start = 0, acc_done, busy, decay = 0, pde = 0, cap = 0;
  logic [H-1:0] hier_spk;
  logic [M:0] spk, spk_new;
  logic [M:0][7:0] vm;
  int checks = 0, failures = 0, nreads = 0, spikes = 0, decays = 0;
  npu_model mdl;

  npu #(.M(M), .H(H)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (dut.reb) nreads++;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic strobe(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  task automatic load_weights();
    for (int r = 0; r < ROWS; r++) begin
      for (int n = 0; n < M; n++) mdl.w[r][n] = $urandom_range(0, 15) - 8;
      for (int g = 0; g < G; g++) begin
        @(negedge clk); w_we = 1; w_addr = 6'(r * G + g); w_data = mdl.word(r, g);
      end
      mdl.gs[r][0] = ($urandom_range(0, 3) != 0); mdl.gs[r][1] = ($urandom_range(0, 3) != 0);
      @(negedge clk); w_we = 0; gs_we = 1; gs_row = 5'(r); gs_code = {mdl.gs[r][1], mdl.gs[r][0]};
    end
    @(negedge clk); w_we = 0; gs_we = 0;
  endtask

  task automatic set_cfg();
    cfg.act_log2 = 3'($urandom_range(1, 4)); mdl.act_log2 = cfg.act_log2;
    cfg.chop_en = ($urandom_range(0, 3) == 0); mdl.chop = cfg.chop_en;
    cfg.sub1_log2 = 3'($urandom_range(0, 3)); mdl.sub1_log2 = cfg.sub1_log2;
    cfg.sub2_log2 = 3'($urandom_range(0, 3)); mdl.sub2_log2 = cfg.sub2_log2;
    cfg.hier_en = $urandom_range(0, 1); mdl.hier_en = cfg.hier_en;
    cfg.decay_alpha = 3'($urandom_range(0, 4)); mdl.alpha = cfg.decay_alpha;
  endtask

  initial begin
    mdl = new(M, H, 1);
    cfg = cfg_default(M);
    cfg.decay_period = 8'd1; mdl.period = 1;
    w_addr = 0; w_data = 0; gs_row = 0; gs_code = 0; ext_addr = 0; ext_data = 0; hier_spk = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    load_weights();
    for (int t = 0; t < 400; t++) begin
      bit h[];
      if (t % 40 == 0) begin
        set_cfg();
        if (t % 120 == 0) begin
          @(negedge clk); clr = 1; @(negedge clk); clr = 0; mdl.clear();
        end
      end
      // new stimuli for a few neurons (also the global neuron)
      repeat ($urandom_range(0, 4)) begin
        int a, v;
        a = $urandom_range(0, M); v = $urandom_range(0, 70) - 10;
        @(negedge clk); ext_we = 1; ext_addr = 5'(a); ext_data = 8'(v); mdl.cur_buf[a] = v;
      end
      @(negedge clk); ext_we = 0;
      hier_spk = 8'($urandom) & 8'($urandom);
      h = new[H];
      foreach (h[j]) h[j] = hier_spk[j];
      nreads = 0;
      strobe(ext_latch);
      strobe(start);
      while (!acc_done) @(negedge clk);
      strobe(decay);
      strobe(pde);
      strobe(cap);
      mdl.step(h);
      if (mdl.decayed) decays++;
      chk(nreads == mdl.reads, $sformatf("t=%0d reads %0d expected %0d", t, nreads, mdl.reads));
      for (int i = 0; i <= M; i++) begin
        chk(vm[i] == 8'(mdl.vm[i]) && spk[i] == mdl.spk[i],
            $sformatf("t=%0d n=%0d vm %0d/%0d spk %0d/%0d", t, i, vm[i], mdl.vm[i], spk[i], mdl.spk[i]));
        if (spk[i]) spikes++;
      end
    end
    chk(spikes > 100 && decays > 100, $sformatf("activity: %0d spikes, %0d decay steps", spikes, decays));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
