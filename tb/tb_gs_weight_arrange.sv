// tb_gs_weight_arrange: random SRAM words and groups; every lane's weight and
// enable are compared with the group/lane mapping.
module tb_gs_weight_arrange;
  localparam int M = 32;
  logic clk = 0;
  logic [31:0] dout;
  logic out_en;
  logic [2:0] group;
  logic [M-1:0][3:0] w;
  logic [M-1:0] w_en;
  int checks = 0, failures = 0;

  gs_weight_arrange #(.M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      dout = $urandom; out_en = ($urandom_range(0, 3) != 0); group = 3'($urandom_range(0, 3));
      #1;
      for (int n = 0; n < M; n++) begin
        bit e; logic [3:0] ew;
        e = out_en && (n >= 8 * group) && (n < 8 * group + 8);
        ew = (dout >> (4 * (n % 8))) & 4'hf;
        checks++;
        if (w_en[n] != e || (e && w[n] != ew)) begin
          failures++;
          $display("FAIL: lane %0d grp %0d en %0d w %h exp %0d %h", n, group, w_en[n], w[n], e, ew);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
