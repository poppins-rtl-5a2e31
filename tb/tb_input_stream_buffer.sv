// tb_input_stream_buffer: random pushes and pops with random back-pressure on
// both sides; the command words must come out complete and in order, in_ready
// must fall exactly when 8 words are held.
module tb_input_stream_buffer;
  import poppins_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0, in_ready, out_valid;
  host_cmd_t in_cmd, out_cmd;
  host_cmd_t q[$];
  int checks = 0, failures = 0;

  input_stream_buffer #(.DEPTH(8)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_cmd = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 2) != 0);
      in_cmd = host_cmd_t'({$urandom, $urandom});
      out_ready = ($urandom_range(0, 2) == 0) || (t > 4500);
      #1;
      checks++;
      if (in_ready != (q.size() < 8) || out_valid != (q.size() > 0)) begin
        failures++; $display("FAIL: flags ready=%0d valid=%0d size=%0d", in_ready, out_valid, q.size());
      end
      if (out_valid && out_ready) begin
        host_cmd_t e; e = q.pop_front();
        checks++;
        if (out_cmd != e) begin failures++; $display("FAIL: out %h exp %h", out_cmd, e); end
      end
      if (in_valid && in_ready) q.push_back(in_cmd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
