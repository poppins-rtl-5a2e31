// tb_set_arrange: every command type is decoded into the right write strobe
// and register field; while busy only stimulus writes are accepted.
module tb_set_arrange;
  import poppins_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, busy = 0;
  host_cmd_t cmd;
  logic w1_we, gs1_we, ext1_we, w2_we, gs2_we, ext2_we, run, clr;
  logic [7:0] w1_addr;
  logic [11:0] w2_addr;
  logic [15:0] wr_addr, n_steps;
  logic [31:0] wr_data;
  npu_cfg_t cfg1, cfg2;
  int checks = 0, failures = 0;

  set_arrange dut (.*);

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

  task automatic send(cmd_op_e op, bit n, int addr, int data);
    @(negedge clk);
    cmd = '{op: op, npu: n, addr: 16'(addr), data: 32'(data)};
    cmd_valid = 1;
    #1;
  endtask

  initial begin
    cmd = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    chk(cfg1.act_log2 == 5 && cfg2.act_log2 == 7, "reset sizes");
    send(CMD_W_WEIGHT, 0, 17, 32'hdeadbeef);
    chk(w1_we && !w2_we && w1_addr == 17 && wr_data == 32'hdeadbeef, "weight NPU1");
    send(CMD_W_WEIGHT, 1, 4000, 5);
    chk(w2_we && !w1_we && w2_addr == 4000, "weight NPU2");
    send(CMD_W_GS, 1, 200, 16'h00f0);
    chk(gs2_we && !gs1_we && wr_addr == 200, "gs NPU2");
    send(CMD_W_EXT, 0, 32, 8'h85);
    chk(ext1_we && wr_data[7:0] == 8'h85, "ext NPU1");
    send(CMD_W_PAR, 0, PAR_AB, 6'o53);
    send(CMD_W_PAR, 1, PAR_VPDE, 77);
    send(CMD_W_PAR, 1, PAR_CHOP, 32'h0321);
    send(CMD_W_PAR, 0, PAR_DPERIOD, 9);
    send(CMD_W_PAR, 1, PAR_HIER, 0);
    send(CMD_NOP, 0, 0, 0);
    chk(cfg1.par.a == 3 && cfg1.par.b == 5, "a,b");
    chk(cfg2.par.v_pde == 77, "vpde");
    chk(cfg2.chop_en && cfg2.sub1_log2 == 2 && cfg2.sub2_log2 == 3, "chop fields");
    chk(cfg1.decay_period == 9 && !cfg2.hier_en && cfg1.hier_en, "period, hier");
    send(CMD_RUN, 0, 0, 12);
    chk(run && cmd_ready && n_steps == 12, "run strobe and step count");
    send(CMD_CLEAR, 0, 0, 0);
    chk(clr, "clear strobe");
    busy = 1;
    send(CMD_W_WEIGHT, 0, 1, 1);
    chk(!cmd_ready && !w1_we, "weight blocked while busy");
    send(CMD_W_PAR, 0, PAR_VTH, 1);
    chk(!cmd_ready, "param blocked while busy");
    send(CMD_W_EXT, 1, 3, 9);
    chk(cmd_ready && ext2_we, "stimulus accepted while busy");
    busy = 0;
    send(CMD_W_PAR, 0, PAR_VTH, 1);
    @(negedge clk); cmd_valid = 0;
    chk(cfg1.par.v_th == 1, "param after busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
