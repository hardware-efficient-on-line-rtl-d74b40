// tb_neuron_core: random command test of one generic neuron core.
//
// An independent model of every neuron (accumulator, ternary error, list of past states)
// predicts each response and the final contents.  Commands are random over a handful of
// neurons and include large and small accumulator values around the gradient window edges
// for both weight widths, dropout on and off, and every delay K from 0 to 4.  The response
// must come exactly one cycle after the command is taken, and commands for another core id
// must be ignored.
module tb_neuron_core;
  import bsn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [KD_W-1:0] k_delay;
  logic w16, cmd_valid, dropout, rsp_valid, init_busy;
  core_cmd_t cmd;
  core_rsp_t rsp;
  int checks = 0, failures = 0;

  neuron_core #(.CORE_ID(5), .NEURONS(256)) dut (.*);

  localparam int NN = 6;
  int  m_acc [NN];
  int  m_err [NN];
  bit  m_v [NN][$], m_g [NN][$], m_d [NN][$];   // index 0 is the newest state

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic int pick_acc();
    int lim = w16 ? 65536 : 256;
    case ($urandom_range(5))
      0: return lim;
      1: return -lim;
      2: return lim + 1;
      3: return -lim - 1;
      4: return 0;
      default: return int'($urandom_range(4*lim)) - 2*lim;
    endcase
  endfunction

  task automatic issue(input core_op_e op, input int n, input int data, input bit add, input bit drp,
                       input int core_id);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.core = 4'(core_id); cmd.neuron = 8'(n);
    cmd.data = data; cmd.add_en = add; dropout = drp;
    @(negedge clk);
    cmd_valid = 0; dropout = 0;
    check(rsp_valid == (core_id == 5), $sformatf("response timing op %0d", op));
  endtask

  initial main();

  task automatic main();
    cmd_valid = 0; cmd = '0; dropout = 0; w16 = 1; k_delay = 1;
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NN; i++) begin
      m_acc[i] = 0; m_err[i] = 0;
      for (int s = 0; s < 5; s++) begin m_v[i].push_back(0); m_g[i].push_back(0); m_d[i].push_back(0); end
    end
    begin
      int c = 0;
      while (init_busy) begin @(negedge clk); c++; end
      check(c >= 250 && c <= 258, $sformatf("memory clear takes %0d cycles", c));
    end
    for (int it = 0; it < 4000; it++) begin
      int n = $urandom_range(NN-1);
      int op = $urandom_range(5);
      if (it % 500 == 0) begin w16 = $urandom_range(1); k_delay = 3'($urandom_range(4)); end
      case (op)
        0: begin
          int a = pick_acc();
          issue(CMD_SET_ACC, n, a, 0, 0, 5);
          m_acc[n] = a;
        end
        1: begin
          bit drp = $urandom_range(3) == 0;
          int lim = w16 ? 65536 : 256;
          issue(CMD_UPDATE, n, 0, 0, drp, 5);
          void'(m_v[n].pop_back()); void'(m_g[n].pop_back()); void'(m_d[n].pop_back());
          m_v[n].push_front(m_acc[n] >= 0);
          m_g[n].push_front(m_acc[n] >= -lim && m_acc[n] <= lim);
          m_d[n].push_front(drp);
          m_acc[n] = 0;
          #1;
          check(rsp.value == m_v[n][0] && rsp.drop == m_d[n][0], "update current state");
          check(rsp.dvalue == m_v[n][k_delay] && rsp.dgrad == m_g[n][k_delay] &&
                rsp.ddrop == m_d[n][k_delay], $sformatf("update delayed state K=%0d", k_delay));
        end
        2: begin
          int d = int'($urandom_range(4000)) - 2000;
          bit add = $urandom_range(1);
          issue(CMD_TARGET, n, d, add, 0, 5);
          #1 check(int'(rsp.err) == m_err[n], $sformatf("target returns error %0d got %0d", m_err[n], rsp.err));
          if (add) m_acc[n] += d;
        end
        3: begin
          int d = int'($urandom_range(4000)) - 2000;
          issue(CMD_SRC_ACC, n, d, 0, 0, 5);
          m_acc[n] += d;
        end
        4: begin
          issue(CMD_FINALIZE, n, 0, 0, 0, 5);
          m_err[n] = (m_g[n][k_delay] && !m_d[n][k_delay]) ? ((m_acc[n] > 0) ? 1 : (m_acc[n] < 0) ? -1 : 0) : 0;
          m_acc[n] = 0;
          #1 check(int'(rsp.err) == m_err[n], "finalize error");
        end
        default: begin
          // a command for another core must change nothing
          issue(CMD_SET_ACC, n, 12345, 0, 0, 6);
        end
      endcase
    end
    // final contents
    for (int n = 0; n < NN; n++) begin
      check(int'(dut.mem[n].acc) == m_acc[n], $sformatf("final acc of %0d", n));
      check(int'(dut.mem[n].err) == m_err[n], $sformatf("final error of %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
