// tb_output_core: test of the top-layer core.
//
// Random rounds: set a label and a hinge value, accumulate random weighted inputs into the
// ten output neurons (some with add_en low), run the classify/error sweep and compare the
// class, the correct flag and the ten hinge-loss errors (read back through CMD_TARGET)
// with values computed here from Eq. e_z[i] = theta(z[i]+H-z[p]), e_z[p] = -sum.  The sweep
// must take exactly C = 10 cycles from the command to its response, and the other commands
// one cycle.
module tb_output_core;
  import bsn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic signed [ACC_W-1:0] hinge;
  logic cmd_valid, rsp_valid, correct_o, busy;
  core_cmd_t cmd;
  core_rsp_t rsp;
  logic [3:0] class_o;
  int checks = 0, failures = 0;

  output_core #(.CORE_ID(15), .C(10)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic issue(input core_op_e op, input int n, input int data, input bit add, output int lat);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.core = 4'd15; cmd.neuron = 8'(n); cmd.data = data; cmd.add_en = add;
    @(negedge clk);
    cmd_valid = 0;
    lat = 1;
    while (!rsp_valid && lat < 50) begin @(negedge clk); lat++; end
  endtask

  initial main();

  task automatic main();
    int z[10], ez[10], lat, p, best, cnt;
    cmd_valid = 0; cmd = '0; hinge = 0;
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      p = $urandom_range(9);
      hinge = (r % 3 == 0) ? 0 : $urandom_range(3000);
      issue(CMD_SET_LABEL, 0, p, 0, lat);
      check(lat == 1, "set label latency");
      foreach (z[i]) z[i] = 0;
      for (int k = 0; k < 40; k++) begin
        int n = $urandom_range(9);
        int d = (r % 5 == 0) ? 100 : int'($urandom_range(4000)) - 2000;  // r%5==0: ties
        bit add = ($urandom_range(4) != 0);
        issue(CMD_TARGET, n, d, add, lat);
        check(lat == 1, "target latency");
        if (add) z[n] += d;
      end
      issue(CMD_TOP_UPDATE, 0, 0, 0, lat);
      check(lat == 10, $sformatf("classification takes %0d cycles, expected C = 10", lat));
      best = 0; cnt = 0;
      for (int i = 0; i < 10; i++) begin
        if (z[i] > z[best]) best = i;
        ez[i] = (i != p && z[i] + int'(hinge) - z[p] > 0) ? 1 : 0;
        cnt += ez[i];
      end
      ez[p] = -cnt;
      @(negedge clk);
      check(class_o == 4'(best), $sformatf("class %0d expected %0d", class_o, best));
      check(correct_o == (best == p), "correct flag");
      for (int i = 0; i < 10; i++) begin
        issue(CMD_TARGET, i, 0, 0, lat);
        check(int'(rsp.err) == ez[i], $sformatf("round %0d error[%0d] %0d expected %0d", r, i, rsp.err, ez[i]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
