// tb_weight_sram: fills a 256-word memory with random words, reads them back
// in random order and checks data and the one-cycle read latency (out_en).
module tb_weight_sram;
  localparam int D = 256;
  logic clk = 0, we = 0, reb = 0, out_en;
  logic [7:0] waddr, raddr;
  logic [31:0] wdata, dout;
  logic [31:0] ref_mem [D];
  int checks = 0, failures = 0;

  weight_sram #(.DEPTH(D)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 8'(i); wdata = $urandom; ref_mem[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      int a; a = $urandom_range(0, D - 1);
      @(negedge clk); reb = 1; raddr = 8'(a);
      // random overlapping write to another word
      we = $urandom_range(0, 1); waddr = 8'($urandom); wdata = $urandom;
      if (waddr == raddr) we = 0;
      @(negedge clk);
      if (we) ref_mem[waddr] = wdata;
      reb = 0; we = 0;
      checks++;
      if (!out_en || dout != ref_mem[a]) begin failures++; $display("FAIL: addr %0d got %h exp %h", a, dout, ref_mem[a]); end
      @(negedge clk);
      checks++;
      if (out_en) begin failures++; $display("FAIL: out_en without read"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
