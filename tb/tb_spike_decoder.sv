// tb_spike_decoder: random 16-bit spike streams of random length; each spike
// is acknowledged after a random number of MAC-cycles. Checks that every spike
// is presented once, in index order, and that the scan takes exactly
// sum over windows of max(1, MAC-cycles of its spikes) cycles.
module tb_spike_decoder;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, load = 0, spk_ack = 0;
  logic [W-1:0] stream;
  logic [4:0] len;
  logic spk_valid, busy, done;
  logic [3:0] spk_idx;
  int checks = 0, failures = 0;

  spike_decoder #(.W(W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    stream = '0; len = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int l, cyc[W], exp_cycles, cycles, cnt, got[$], exp_idx[$];
      l = $urandom_range(0, W);
      got.delete(); exp_idx.delete();
      @(negedge clk);
      stream = W'($urandom) & W'($urandom);  // about 25% density
      if (l < W) stream &= (W'(1) << l) - 1;
      len = 5'(l);
      foreach (cyc[i]) cyc[i] = $urandom_range(1, 4);
      exp_cycles = 0;
      for (int wdw = 0; wdw < (l + 1) / 2; wdw++) begin
        int c; c = 0;
        for (int k = 0; k < 2; k++) if (stream[2 * wdw + k]) begin c += cyc[2 * wdw + k]; exp_idx.push_back(2 * wdw + k); end
        exp_cycles += (c == 0) ? 1 : c;
      end
      load = 1;
      @(negedge clk); load = 0;
      cycles = 0; cnt = 0;
      while (!done && cycles < 200) begin
        #1;
        spk_ack = 0;
        if (spk_valid) begin
          if (cnt == cyc[spk_idx] - 1) begin spk_ack = 1; got.push_back(spk_idx); cnt = 0; end
          else cnt++;
        end
        @(negedge clk);
        cycles++;
      end
      spk_ack = 0;
      checks++;
      if (got != exp_idx) begin failures++; $display("FAIL: order %p expected %p", got, exp_idx); end
      checks++;
      if (cycles != exp_cycles) begin
        failures++; $display("FAIL: len %0d cycles %0d expected %0d", l, cycles, exp_cycles);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
