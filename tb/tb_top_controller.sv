// tb_top_controller: runs of random length with random accumulation times in
// the two NPUs and random output back-pressure. Checks the phase order of
// every step (ext_latch, start, both acc_done, decay, pde, cap, push), the
// step count, that a step lasts 6 cycles plus the slower accumulation, and
// that a full output buffer stalls the step.
module tb_top_controller;
  logic clk = 0, rst_n = 0, run = 0, busy, ext_latch, start, acc_done1 = 0, acc_done2 = 0;
  logic decay, pde, cap, push, can_push = 1, stall;
  logic [15:0] n_steps, step;
  int checks = 0, failures = 0, stalls = 0;

  top_controller dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // NPU stand-ins: acc_done after a random delay
  int d1, d2, c1, c2;
  bit run1, run2;
  always @(posedge clk) begin
    acc_done1 <= 0; acc_done2 <= 0;
    if (start) begin d1 = $urandom_range(1, 20); d2 = $urandom_range(1, 20); c1 = 0; c2 = 0; run1 = 1; run2 = 1; end
    else begin
      if (run1) begin c1++; if (c1 == d1) begin acc_done1 <= 1; run1 = 0; end end
      if (run2) begin c2++; if (c2 == d2) begin acc_done2 <= 1; run2 = 0; end end
    end
  end

  initial begin
    n_steps = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      int n, s0;
      n = $urandom_range(1, 6); s0 = step;
      @(negedge clk); run = 1; n_steps = 16'(n);
      @(negedge clk); run = 0;
      for (int k = 0; k < n; k++) begin
        int cyc, acc;
        cyc = 0;
        while (!ext_latch && cyc < 50) begin @(negedge clk); cyc++; end
        chk(ext_latch, "ext_latch");
        @(negedge clk); chk(start, "start after ext_latch");
        @(negedge clk);
        acc = 0;
        while (!decay && acc < 100) begin
          chk(!pde && !cap && !push, "no later phase during accumulation");
          @(negedge clk); acc++;
        end
        chk(acc == ((d1 > d2) ? d1 : d2) + 1, $sformatf("decay waits for both NPUs: %0d vs %0d/%0d", acc, d1, d2));
        @(negedge clk); chk(pde, "pde after decay");
        @(negedge clk); chk(cap, "cap after pde");
        can_push = ($urandom_range(0, 2) != 0);
        @(negedge clk);
        cyc = 0;
        while (!push && cyc < 20) begin
          chk(stall, "stall while buffer full"); stalls++;
          if (cyc == 3) begin can_push = 1; #1; end
          else @(negedge clk);
          cyc++;
        end
        chk(push, "push");
        can_push = 1;
      end
      @(negedge clk);
      chk(!busy && step == 16'(s0 + n), "run finished with n steps");
    end
    chk(stalls > 0, "stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
