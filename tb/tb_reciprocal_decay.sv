// tb_reciprocal_decay: exhaustive check of the decay unit against Eq. (5):
// every 8-bit value, every shift 0..7, decay_en on and off.
module tb_reciprocal_decay;
  import poppins_ref_pkg::*;

  logic clk = 0;
  logic signed [7:0] syn_in, syn_out;
  logic [2:0] decay_alpha;
  logic decay_en;
  int checks = 0, failures = 0;

  reciprocal_decay dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int en = 0; en < 2; en++)
      for (int al = 0; al < 8; al++)
        for (int y = -128; y < 128; y++) begin
          int exp_v;
          syn_in = 8'(y); decay_alpha = 3'(al); decay_en = en[0];
          #1;
          exp_v = en ? decay(y, al) : y;
          checks++;
          if (int'(syn_out) != exp_v) begin
            failures++;
            $display("FAIL: y=%0d a=%0d en=%0d -> %0d expected %0d", y, al, en, syn_out, exp_v);
          end
        end
    // decay fatigue: a small value must reach 0 with a large shift
    begin
      int y = 5, n = 0;
      syn_in = 8'(y); decay_alpha = 3'd7; decay_en = 1;
      while (syn_in != 0 && n < 10) begin #1; syn_in = syn_out; n++; end
      checks++;
      if (syn_in != 0 || n != 5) begin failures++; $display("FAIL: fatigue n=%0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
