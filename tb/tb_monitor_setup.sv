// tb_monitor_setup: test of the host setup registers and monitoring counters.
//
// Writes every configuration register and reads it back, checks the decoded global and
// per-core configuration outputs, the one-cycle start pulse and the PRNG probability write
// strobe; then drives random event streams and compares the 48-bit counters (read through
// their low and high halves) with counts kept here, including a count that crosses 2^32,
// and finally checks that CLR_CNT clears them.
module tb_monitor_setup;
  import bsn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, host_we, start, prob_we, busy;
  logic [7:0] host_addr, prob_wdata, prob;
  logic [31:0] host_wdata, host_rdata;
  glob_cfg_t gcfg;
  core_cfg_t ccfg [NUM_CORES];
  logic ev_rd_word, ev_wr_word, ev_rd_burst, ev_src, ev_example, last_correct;
  logic [15:0] ev_src_pipe_words, ev_src_std_words;
  logic [3:0] last_class;
  int checks = 0, failures = 0;
  int starts = 0, probs = 0;

  monitor_setup dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); host_we = 1; host_addr = a; host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask

  function automatic logic [31:0] rd(input logic [7:0] a);
    host_addr = a;
    return host_rdata;
  endfunction

  task automatic rd_now(input logic [7:0] a, output logic [31:0] v);
    host_addr = a; #1 v = host_rdata;
  endtask

  always @(posedge clk) begin
    if (start) starts++;
    if (prob_we) probs++;
  end
  always_ff @(posedge clk) if (prob_we) prob <= prob_wdata;

  initial main();

  task automatic main();
    logic [31:0] v, lo, hi;
    longint e_rd = 0, e_wr = 0, e_bu = 0, e_std = 0, e_pipe = 0, e_ex = 0, e_ok = 0;
    host_we = 0; host_addr = 0; host_wdata = 0; busy = 0; prob = 0;
    {ev_rd_word, ev_wr_word, ev_rd_burst, ev_src, ev_example, last_correct} = '0;
    ev_src_pipe_words = 0; ev_src_std_words = 0; last_class = 0;
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wr(8'h01, 32'd7);          wr(8'h02, 32'hFFFF_F000);  wr(8'h03, 32'd51);
    wr(8'h04, 32'h0100_0000);  wr(8'h05, 32'd60000);      wr(8'h06, 32'd784);
    for (int c = 0; c < 16; c++) wr(8'h10 + 8'(c), {19'd0, 1'(c % 2), 3'(c % 5), 9'(c * 17)});
    wr(8'h00, 32'b111);
    @(negedge clk);
    check(starts == 1, "start pulses once");
    check(probs == 1 && prob == 8'd51, "probability write strobe");
    check(gcfg.learn_en && gcfg.w16 && gcfg.lr_shift == 4'd7 && gcfg.hinge == -32'sd4096 &&
          gcfg.img_base == 32'h0100_0000 && gcfg.num_images == 60000 && gcfg.n_input == 12'd784,
          "global configuration outputs");
    for (int c = 0; c < 16; c++)
      check(ccfg[c].count == 9'(c * 17) && ccfg[c].k == 3'(c % 5) && ccfg[c].bipolar == 1'(c % 2),
            $sformatf("core %0d configuration", c));
    rd_now(8'h01, v); check(v == 7, "read LR_SHIFT");
    rd_now(8'h02, v); check(v == 32'hFFFF_F000, "read HINGE");
    rd_now(8'h03, v); check(v == 51, "read DROP_PROB");
    rd_now(8'h06, v); check(v == 784, "read N_INPUT");
    rd_now(8'h13, v); check(v == {19'd0, 1'b1, 3'd3, 9'd51}, "read CORE_CFG 3");
    // events
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      ev_rd_word  = $urandom_range(1); ev_wr_word = $urandom_range(1);
      ev_rd_burst = $urandom_range(1); ev_src = $urandom_range(1);
      ev_src_pipe_words = 16'($urandom_range(400)); ev_src_std_words = 16'($urandom_range(800));
      ev_example = ($urandom_range(9) == 0); last_correct = $urandom_range(1);
      busy = $urandom_range(1); last_class = 4'($urandom_range(9));
      e_rd += ev_rd_word; e_wr += ev_wr_word; e_bu += ev_rd_burst;
      if (ev_src) begin e_std += ev_src_std_words; e_pipe += ev_src_pipe_words; end
      if (ev_example) begin e_ex++; e_ok += last_correct; end
      if (c == 1500) begin
        rd_now(8'h20, v);
        check(v == {23'd0, last_correct, last_class, 3'd0, busy}, "status register");
      end
    end
    // a large count to cross 32 bits
    for (int c = 0; c < 70000; c++) begin
      @(negedge clk);
      {ev_rd_word, ev_wr_word, ev_rd_burst, ev_example} = '0;
      ev_src = 1; ev_src_pipe_words = 16'hFFFF; ev_src_std_words = 16'hFFFF;
      e_std += 16'hFFFF; e_pipe += 16'hFFFF;
    end
    @(negedge clk);
    ev_src = 0;
    @(negedge clk);
    rd_now(8'h22, lo); rd_now(8'h23, hi); check({hi, lo} == e_rd, "words read counter");
    rd_now(8'h24, lo); rd_now(8'h25, hi); check({hi, lo} == e_wr, "words written counter");
    rd_now(8'h26, lo); rd_now(8'h27, hi); check({hi, lo} == e_bu, "bursts counter");
    rd_now(8'h28, lo); rd_now(8'h29, hi); check({hi, lo} == e_std && hi != 0, "plain-backprop prediction counter");
    rd_now(8'h2A, lo); rd_now(8'h2B, hi); check({hi, lo} == e_pipe, "pipelined read counter");
    rd_now(8'h2C, lo); rd_now(8'h2D, hi); check({hi, lo} == e_ex, "examples counter");
    rd_now(8'h2E, lo); rd_now(8'h2F, hi); check({hi, lo} == e_ok, "correct counter");
    wr(8'h07, 32'd1);
    rd_now(8'h22, lo); check(lo == 0, "counters cleared");
    rd_now(8'h28, lo); rd_now(8'h29, hi); check({hi, lo} == 0, "prediction counter cleared");
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
