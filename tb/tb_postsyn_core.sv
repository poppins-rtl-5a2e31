// tb_postsyn_core: random accumulate / decay / clear sequences on 16 lanes,
// with phases of only positive and only negative weights that reach both
// saturation limits, compared with a saturating integer model; neu_in = syn + cur is checked
// every cycle.
module tb_postsyn_core;
  import poppins_ref_pkg::*;
  localparam int M = 16;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [M-1:0][3:0] w;
  logic [M-1:0] w_en, decay_en;
  logic [2:0] decay_alpha;
  logic [M-1:0][7:0] cur, syn;
  logic [M-1:0][8:0] neu_in;
  int model[M];
  int checks = 0, failures = 0;

  postsyn_core #(.M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w = '0; w_en = '0; decay_en = '0; decay_alpha = 0; cur = '0;
    foreach (model[i]) model[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      clr = ($urandom_range(0, 499) == 0);
      decay_alpha = 3'($urandom);
      for (int i = 0; i < M; i++) begin
        // phases of positive and negative weights drive the registers into saturation
        if (t % 600 < 200)      w[i] = 4'($urandom_range(0, 7));
        else if (t % 600 < 400) w[i] = 4'($urandom_range(8, 15));
        else                    w[i] = 4'($urandom);
        cur[i] = 8'($urandom);
        w_en[i] = ($urandom_range(0, 2) != 0);
        decay_en[i] = ($urandom_range(0, 3) == 0);
      end
      @(posedge clk); #1;
      for (int i = 0; i < M; i++) begin
        if (clr) model[i] = 0;
        else if (w_en[i]) model[i] = sat8(model[i] + int'($signed(w[i])));
        else if (decay_en[i]) model[i] = decay(model[i], decay_alpha);
        checks++;
        if (int'($signed(syn[i])) != model[i] ||
            int'($signed(neu_in[i])) != model[i] + int'($signed(cur[i]))) begin
          failures++;
          $display("FAIL: t=%0d lane %0d syn=%0d exp %0d", t, i, $signed(syn[i]), model[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
