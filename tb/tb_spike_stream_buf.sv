// tb_spike_stream_buf: the buffer must take the spike vector only on cap,
// hold it otherwise, and clear on clr.
module tb_spike_stream_buf;
  localparam int M = 32;
  logic clk = 0, rst_n = 0, clr = 0, cap = 0;
  logic [M:0] spk_in, spk, exp_v;
  int checks = 0, failures = 0;

  spike_stream_buf #(.M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    spk_in = '0; exp_v = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      spk_in = {$urandom, $urandom}; cap = ($urandom_range(0, 3) == 0); clr = ($urandom_range(0, 99) == 0);
      @(posedge clk); #1;
      if (clr) exp_v = '0; else if (cap) exp_v = spk_in;
      checks++;
      if (spk != exp_v) begin failures++; $display("FAIL: t=%0d %h exp %h", t, spk, exp_v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
