// tb_bsn_top: end-to-end test of the learning engine on a reduced 40-300-20-10 network.
//
// Four independent systems run side by side, one for each of the four network configurations
// (16-bit or 8-bit weights, bipolar -1/+1 or unipolar 0/1 hidden layers), all with dropout
// and a unipolar input layer.  Each trains on eight examples and then classifies two with
// learning off; bsn_tb_harness compares all results with the behavioural reference.  This
// testbench then requires each mechanism to have occurred at least once: dropout, skipped
// weight fetch, pipeline-fill gating, weight steps, clipping at the weight range, repeated
// addition of an output error of magnitude > 1, weight lists longer than one 64-word burst,
// word write-back, DRAM write stalls, and the learning-off mode.
module tb_bsn_top;
  logic clk = 0;
  always #5 clk = ~clk;

  logic done_a, done_b, done_c, done_d;
  int   ch_a, ch_b, ch_c, ch_d, fl_a, fl_b, fl_c, fl_d;
  int   mech_a [10], mech_b [10], mech_c [10], mech_d [10];
  int   checks, failures;
  string names [10] = '{"dropout", "skipped fetch", "pipeline-fill gating", "weight step",
                        "weight clipping", "repeated addition", "multi-burst list",
                        "word write-back", "DRAM write stall", "learning off"};

  bsn_tb_harness #(.N_IN(40), .N_H1(300), .N_H2(20), .PASSES(8), .TEST_PASSES(2),
                   .W16(1), .BIP(1), .LR_SHIFT(7), .HINGE(2000), .PROB(51), .WMAG(3000), .SEED(11))
    u_a (.clk, .done(done_a), .checks(ch_a), .failures(fl_a), .mech(mech_a));

  bsn_tb_harness #(.N_IN(40), .N_H1(300), .N_H2(20), .PASSES(8), .TEST_PASSES(2),
                   .W16(0), .BIP(0), .LR_SHIFT(0), .HINGE(40), .PROB(51), .WMAG(40), .SEED(23))
    u_b (.clk, .done(done_b), .checks(ch_b), .failures(fl_b), .mech(mech_b));

  bsn_tb_harness #(.N_IN(40), .N_H1(300), .N_H2(20), .PASSES(8), .TEST_PASSES(2),
                   .W16(1), .BIP(0), .LR_SHIFT(7), .HINGE(2000), .PROB(51), .WMAG(3000), .SEED(37))
    u_c (.clk, .done(done_c), .checks(ch_c), .failures(fl_c), .mech(mech_c));

  bsn_tb_harness #(.N_IN(40), .N_H1(300), .N_H2(20), .PASSES(8), .TEST_PASSES(2),
                   .W16(0), .BIP(1), .LR_SHIFT(0), .HINGE(40), .PROB(51), .WMAG(40), .SEED(41))
    u_d (.clk, .done(done_d), .checks(ch_d), .failures(fl_d), .mech(mech_d));

  initial begin
    @(posedge clk);  // the harnesses clear done at time 0
    wait (done_a && done_b && done_c && done_d);
    checks = ch_a + ch_b + ch_c + ch_d; failures = fl_a + fl_b + fl_c + fl_d;
    for (int m = 0; m < 10; m++) begin
      checks++;
      $display("mechanism %-22s : %0d + %0d + %0d + %0d", names[m], mech_a[m], mech_b[m],
               mech_c[m], mech_d[m]);
      if (mech_a[m] + mech_b[m] + mech_c[m] + mech_d[m] == 0) begin
        failures++;
        $display("FAIL mechanism never occurred: %s", names[m]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ch_a + ch_b + ch_c + ch_d + 1,
             fl_a + fl_b + fl_c + fl_d + 1);
    $finish;
  end
endmodule
