// tb_neuron_cluster: 17 neurons (16 + global) with random inputs and a random
// active mask; every neuron's membrane and spike are compared with the
// reference after each parallel update.
module tb_neuron_cluster;
  import poppins_pkg::*;
  import poppins_ref_pkg::*;
  localparam int M = 16;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  logic [M:0] active, spk;
  logic [M:0][8:0] neu_in;
  iqif_par_t par;
  logic [M:0][7:0] vm;
  int vref[M+1];
  bit sref[M+1];
  int checks = 0, failures = 0;

  neuron_cluster #(.M(M)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    par = '{a: 3'd3, b: 3'd5, v_rest: 8'd30, v_th: 8'd140, v_reset: 8'd20, v_pde: 8'd90};
    active = '1; neu_in = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    foreach (vref[i]) begin vref[i] = 30; sref[i] = 0; end
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      for (int i = 0; i <= M; i++) begin
        neu_in[i] = 9'($urandom_range(0, 160) - 40);
        active[i] = ($urandom_range(0, 7) != 0);
      end
      en = 1;
      for (int i = 0; i <= M; i++) begin
        int vn; bit s;
        neuron_step(vref[i], par.a, par.b, par.v_rest, par.v_th, par.v_reset, par.v_pde,
                    int'($signed(neu_in[i])), vn, s);
        if (active[i]) begin vref[i] = vn; sref[i] = s; end else sref[i] = 0;
      end
      @(negedge clk); en = 0;
      for (int i = 0; i <= M; i++) begin
        checks++;
        if (vm[i] != 8'(vref[i]) || spk[i] != sref[i]) begin
          failures++; $display("FAIL: t=%0d n=%0d vm=%0d/%0d spk=%0d/%0d", t, i, vm[i], vref[i], spk[i], sref[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
