// tb_hier_scheduler: spikes captured at the end of one step must be presented
// unchanged during the next, be cut when the path is disabled, and be counted.
module tb_hier_scheduler;
  localparam int N = 32;
  logic clk = 0, rst_n = 0, clr = 0, cap = 0, en = 1;
  logic [N-1:0] spk_in, hier_spk, stored;
  logic [15:0] n_events;
  int checks = 0, failures = 0;

  hier_scheduler #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    spk_in = '0; stored = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      spk_in = $urandom; cap = ($urandom_range(0, 3) == 0); en = ($urandom_range(0, 4) != 0);
      clr = ($urandom_range(0, 199) == 0);
      @(posedge clk); #1;
      if (clr) stored = '0; else if (cap) stored = spk_in;
      checks++;
      if (hier_spk != (en ? stored : '0) || n_events != (en ? $countones(stored) : 0)) begin
        failures++; $display("FAIL: t=%0d %h exp %h", t, hier_spk, stored);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
