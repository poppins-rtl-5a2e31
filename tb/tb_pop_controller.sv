// tb_pop_controller: the population controller with a spike decoder, at
// M = 16 neurons and H = 8 hierarchy inputs. For random configurations
// (active size, chopped sub-populations, hierarchy on/off, decay period),
// random group-sparse codes and random spikes it checks: the exact list of
// SRAM word addresses read, the number of cycles from start to acc_done
// (one cycle per empty 2-bit window, max(1, GS_num) per spike), the active
// neuron vector and the decay_en bus.
module tb_pop_controller;
  import poppins_pkg::*;
  localparam int M = 16, H = 8, ROWS = 32, G = 2;
  logic clk = 0, rst_n = 0, clr = 0, gs_we = 0, start = 0;
  npu_cfg_t cfg;
  logic [4:0] gs_row;
  logic [G-1:0] gs_code;
  logic acc_done, busy;
  logic [M-1:0] self_spk;
  logic glob_spk;
  logic [H-1:0] hier_spk;
  logic dec_load, dec_ack, dec_valid, dec_done, dec_busy;
  logic [M-1:0] dec_stream;
  logic [4:0] dec_len;
  logic [3:0] dec_idx;
  logic reb;
  logic [5:0] raddr;
  logic [1:0] rgroup;
  logic [M:0] active;
  logic [M-1:0] decay_en;
  bit gs[ROWS][G];
  int checks = 0, failures = 0;
  int reads[$];

  pop_controller #(.M(M), .H(H)) dut (.*);
  spike_decoder #(.W(M)) u_dec (.clk, .rst_n, .load (dec_load), .stream (dec_stream), .len (dec_len),
    .spk_ack (dec_ack), .spk_valid (dec_valid), .spk_idx (dec_idx), .busy (dec_busy), .done (dec_done));

  always #5 clk = ~clk;
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (reb) reads.push_back(raddr);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic bit act(int n);
    int a, s1, s2;
    a = 1 << ((cfg.act_log2 > 4) ? 4 : cfg.act_log2);
    s1 = 1 << ((cfg.sub1_log2 > 3) ? 3 : cfg.sub1_log2);
    s2 = 1 << ((cfg.sub2_log2 > 3) ? 3 : cfg.sub2_log2);
    if (cfg.chop_en) return n < s1 || (n >= 8 && n < 8 + s2);
    return n < a;
  endfunction

  // serve one row: append its reads, return its MAC-cycles
  function automatic int serve(int r, bit sub2_only, ref int exp_reads[$]);
    int n = 0;
    for (int g = 0; g < G; g++)
      if (gs[r][g] && act(8 * g) && (!sub2_only || g == 1)) begin exp_reads.push_back(r * G + g); n++; end
    return (n == 0) ? 1 : n;
  endfunction

  // one scan of len bits starting at row base; returns cycles incl. the done cycle
  function automatic int scan(int first, int len, int base, bit sub2_only, ref int exp_reads[$]);
    int cyc = 0;
    for (int wd = 0; wd < (len + 1) / 2; wd++) begin
      int c; c = 0;
      for (int k = 0; k < 2; k++) begin
        int i; i = first + 2 * wd + k;
        if (2 * wd + k < len && self_or_hier(base, i)) c += serve(base + 2 * wd + k, sub2_only, exp_reads);
      end
      cyc += (c == 0) ? 1 : c;
    end
    return cyc + 1;
  endfunction

  function automatic bit self_or_hier(int base, int i);
    if (base >= M) return hier_spk[i];
    return self_spk[i] && act(i);
  endfunction

  int opcnt = 0;

  initial begin
    cfg = cfg_default(M);
    self_spk = '0; glob_spk = 0; hier_spk = '0; gs_row = '0; gs_code = '0;
    foreach (gs[r, g]) gs[r][g] = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int exp_reads[$], exp_cyc, cyc, s1, s2;
      exp_reads.delete(); reads.delete();
      // new sparse codes for a few rows
      repeat ($urandom_range(0, 6)) begin
        @(negedge clk);
        gs_we = 1; gs_row = 5'($urandom); gs_code = 2'($urandom);
        gs[gs_row][0] = gs_code[0]; gs[gs_row][1] = gs_code[1];
      end
      @(negedge clk); gs_we = 0;
      cfg.act_log2 = 3'($urandom_range(0, 5));
      cfg.chop_en = ($urandom_range(0, 2) == 0);
      cfg.sub1_log2 = 3'($urandom_range(0, 4));
      cfg.sub2_log2 = 3'($urandom_range(0, 4));
      cfg.hier_en = $urandom_range(0, 1);
      if (t % 50 == 0) cfg.decay_period = 8'($urandom_range(0, 3));
      self_spk = 16'($urandom) & 16'($urandom); glob_spk = $urandom_range(0, 1); hier_spk = 8'($urandom);
      s1 = 1 << ((cfg.sub1_log2 > 3) ? 3 : cfg.sub1_log2);
      s2 = 1 << ((cfg.sub2_log2 > 3) ? 3 : cfg.sub2_log2);
      // expected
      exp_cyc = 1;
      exp_cyc += glob_spk ? serve(ROWS - 1, 0, exp_reads) : 1;
      if (cfg.chop_en) begin
        exp_cyc += scan(0, s1, 0, 1, exp_reads);
        exp_cyc += scan(8, s2, 8, 1, exp_reads);
      end else
        exp_cyc += scan(0, 1 << ((cfg.act_log2 > 4) ? 4 : cfg.act_log2), 0, 0, exp_reads);
      if (cfg.hier_en) exp_cyc += scan(0, H, M, 0, exp_reads);
      exp_cyc += 1;
      #1;
      for (int n = 0; n < M; n++) chk(active[n] == act(n), $sformatf("active[%0d]", n));
      start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!acc_done && cyc < 1000) begin @(negedge clk); cyc++; end
      chk(reads == exp_reads, $sformatf("t=%0d reads %p expected %p", t, reads, exp_reads));
      chk(cyc == exp_cyc, $sformatf("t=%0d cycles %0d expected %0d", t, cyc, exp_cyc));
      begin
        bit d; d = (opcnt >= cfg.decay_period);
        opcnt = d ? 0 : opcnt + 1;
        for (int n = 0; n < M; n++) chk(decay_en[n] == (d && act(n)), "decay_en");
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
