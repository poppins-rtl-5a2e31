// tb_iqif_neuron: checks one I-QIF neuron against the integer reference of
// Eq. (1)-(2): directed cases (rest, growth above the PDE threshold, firing
// and reset, clamp at 0, inactive hold, clear) and 4000 random updates with
// random parameters. Spikes must appear the cycle after the update strobe.
module tb_iqif_neuron;
  import poppins_pkg::*;
  import poppins_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, clr = 0, active = 1;
  logic signed [8:0] neu_in = '0;
  iqif_par_t par;
  logic [7:0] membrane;
  logic spike_out;
  int checks = 0, failures = 0;
  int vm_ref; bit spk_ref;

  iqif_neuron dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic update(int i_in);
    int vn; bit s;
    neuron_step(vm_ref, par.a, par.b, par.v_rest, par.v_th, par.v_reset, par.v_pde, i_in, vn, s);
    if (active) begin vm_ref = vn; spk_ref = s; end else spk_ref = 0;
    @(negedge clk); neu_in = 9'(i_in); en = 1;
    @(negedge clk); en = 0;
    chk(membrane == 8'(vm_ref) && spike_out == spk_ref,
        $sformatf("vm=%0d spk=%0d expected %0d %0d (I=%0d)", membrane, spike_out, vm_ref, spk_ref, i_in));
  endtask

  initial begin
    par = '{a: 3'd4, b: 3'd4, v_rest: 8'd40, v_th: 8'd120, v_reset: 8'd30, v_pde: 8'd80};
    repeat (2) @(negedge clk); rst_n = 1;
    chk(membrane == 0 && !spike_out, "reset");
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    vm_ref = 40; spk_ref = 0;
    chk(membrane == 40, "clear loads V_rest");
    // at rest with no input: stays
    update(0);
    chk(membrane == 40, "rest is a fixed point");
    // push above threshold, then self-growth until firing
    update(100);
    begin
      int n = 0;
      while (!spike_out && n < 50) begin update(0); n++; end
      chk(spike_out == 1, "fires by quadratic growth");
      chk(membrane == 30, "reset to V_reset after spike");
    end
    update(0);
    chk(!spike_out, "spike lasts one update");
    // large negative input clamps to 0
    update(-256);
    chk(membrane == 0, "clamp at 0");
    // inactive neuron holds
    active = 0; update(200); active = 1;
    // random
    for (int t = 0; t < 4000; t++) begin
      if (t % 200 == 0) begin
        par.a = 3'($urandom); par.b = 3'($urandom);
        par.v_rest = 8'($urandom_range(0, 100)); par.v_th = 8'($urandom_range(100, 250));
        par.v_reset = 8'($urandom); par.v_pde = 8'($urandom_range(par.v_rest, par.v_th));
      end
      active = ($urandom_range(0, 9) != 0);
      update($urandom_range(0, 511) - 256);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
