// tb_prng: test of the dropout generator.
//
// A software copy of the two opposite-shifting LFSRs predicts the random byte each cycle;
// the dropout bit must equal (byte < prob) while enabled and stay low while disabled.  The
// measured dropout rate over 20,000 cycles must be close to prob/256 for several settings
// (including 51, i.e. 0.2), and the prob register must read back what was written.
module tb_prng;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, enable, prob_we, dropout;
  logic [7:0] prob_wdata, prob, rnd;
  int checks = 0, failures = 0;

  prng dut (.*);

  logic [30:0] a;
  logic [18:0] b;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [7:0] model_rnd();
    logic [7:0] r;
    for (int i = 0; i < 8; i++) r[i] = a[3*i+2] ^ b[18-2*i];
    return r;
  endfunction

  task automatic step_model();
    a = {a[29:0], a[30] ^ a[27]};
    b = {b[0] ^ b[1] ^ b[2] ^ b[5], b[18:1]};
  endtask

  initial main();

  task automatic main();
    int p_list[4] = '{51, 0, 128, 250};
    enable = 0; prob_we = 0; prob_wdata = 0;
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    a = 31'h2B3C_4D5E; b = 19'h5_A5A5;
    foreach (p_list[k]) begin
      int hits = 0, bad = 0;
      @(negedge clk); prob_we = 1; prob_wdata = 8'(p_list[k]); step_model();
      @(negedge clk); prob_we = 0; step_model();
      check(prob == 8'(p_list[k]), "probability register");
      enable = 1;
      #1;
      for (int c = 0; c < 20000; c++) begin
        if (rnd != model_rnd() || dropout != (model_rnd() < prob)) bad++;
        hits += dropout;
        @(negedge clk); step_model();
      end
      check(bad == 0, $sformatf("%0d cycles differ from the LFSR model", bad));
      check(hits >= 20000*p_list[k]/256 - 400 && hits <= 20000*p_list[k]/256 + 400,
            $sformatf("prob %0d: %0d drops in 20000", p_list[k], hits));
      enable = 0;
      bad = 0;
      #1;
      for (int c = 0; c < 100; c++) begin
        if (dropout) bad++;
        @(negedge clk); step_model();
      end
      check(bad == 0, "no dropout while disabled");
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
