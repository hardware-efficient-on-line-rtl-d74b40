// tb_bsn_full: the learning engine at full size, configured as the paper's 784-600-600-10
// network (input layer on cores 0-3, unipolar; hidden layers on cores 4-6 and 7-9; output
// core 15), dropout 0.2, in two of the four configurations side by side: 16-bit weights with
// bipolar hidden layers and update magnitude 128, and 8-bit weights with unipolar hidden
// layers and update magnitude 1.
// It trains on five random binarized examples, enough for weight updates to reach every
// weight matrix (the input layer's are delayed by three passes), then classifies one example
// with learning off.  bsn_tb_harness checks classifications, all 836,400 weights and the
// traffic counters against the behavioural reference.  bsn_top keeps its default parameters.
module tb_bsn_full;
  logic clk = 0;
  always #5 clk = ~clk;

  logic done, done_u;
  int   checks, failures, checks_u, failures_u;
  int   mech [10], mech_u [10];

  bsn_tb_harness #(.N_IN(784), .N_H1(600), .N_H2(600), .PASSES(5), .TEST_PASSES(1),
                   .W16(1), .BIP(1), .LR_SHIFT(7), .HINGE(4000), .PROB(51), .WMAG(2000), .SEED(5))
    u_h (.clk, .done, .checks, .failures, .mech);

  bsn_tb_harness #(.N_IN(784), .N_H1(600), .N_H2(600), .PASSES(5), .TEST_PASSES(1),
                   .W16(0), .BIP(0), .LR_SHIFT(0), .HINGE(60), .PROB(51), .WMAG(20), .SEED(9))
    u_u (.clk, .done(done_u), .checks(checks_u), .failures(failures_u), .mech(mech_u));

  initial begin
    @(posedge clk);  // the harness clears done at time 0
    wait (done && done_u);
    checks += checks_u + 2;
    failures += failures_u;
    if (mech[3] == 0 || mech_u[3] == 0) begin
      failures++;
      $display("FAIL no weight update happened");
    end
    if (mech[4] + mech_u[4] == 0) begin
      failures++;
      $display("FAIL no weight reached the end of its range");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + checks_u + 1, failures + failures_u + 1);
    $finish;
  end
endmodule
