// tb_ext_input_buf: random stimulus writes by address; the Cur outputs must
// change only on latch, to the values written so far; clear zeroes them.
module tb_ext_input_buf;
  localparam int M = 16;
  logic clk = 0, rst_n = 0, clr = 0, we = 0, latch = 0;
  logic [4:0] addr;
  logic [7:0] data;
  logic [M:0][7:0] cur;
  logic [7:0] shadow [M+1], visible [M+1];
  int checks = 0, failures = 0;

  ext_input_buf #(.M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr = 0; data = 0;
    foreach (shadow[i]) begin shadow[i] = 0; visible[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); addr = 5'($urandom_range(0, M + 2)); data = 8'($urandom);
      latch = ($urandom_range(0, 7) == 0); clr = ($urandom_range(0, 299) == 0);
      @(posedge clk); #1;
      if (clr) begin foreach (shadow[i]) shadow[i] = 0; foreach (visible[i]) visible[i] = 0; end
      else begin
        if (latch) foreach (visible[i]) visible[i] = shadow[i];
        if (we && addr <= M) shadow[addr] = data;
      end
      for (int i = 0; i <= M; i++) begin
        checks++;
        if (cur[i] != visible[i]) begin failures++; $display("FAIL: t=%0d cur[%0d]=%h exp %h", t, i, cur[i], visible[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
