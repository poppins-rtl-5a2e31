// tb_output_stream_buffer: pushes only when can_push, random out_ready; every
// pushed word must be delivered once and in order.
module tb_output_stream_buffer;
  logic clk = 0, rst_n = 0, push = 0, can_push, out_valid, out_ready = 0;
  logic [32:0] spk1, out_spk1;
  logic [128:0] spk2, out_spk2;
  logic [15:0] step, out_step;
  logic [15:0] sent[$];
  int checks = 0, failures = 0, got = 0;

  output_stream_buffer dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    spk1 = '0; spk2 = '0; step = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      out_ready = $urandom_range(0, 1);
      #1;
      checks++;
      if (can_push != (!out_valid || out_ready)) begin failures++; $display("FAIL: can_push"); end
      if (out_valid && out_ready) begin
        logic [15:0] e; e = sent.pop_front(); got++;
        checks++;
        if (out_step != e || out_spk1 != {17'(e), 16'(~e)} || out_spk2 != 129'(e) << 7) begin
          failures++; $display("FAIL: got step %0d exp %0d", out_step, e);
        end
      end
      push = can_push && $urandom_range(0, 1);
      if (push) begin
        step = step + 1; spk1 = {17'(step), 16'(~step)}; spk2 = 129'(step) << 7;
        sent.push_back(step);
      end
    end
    checks++;
    if (got < 500) begin failures++; $display("FAIL: only %0d delivered", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
