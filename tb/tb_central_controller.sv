// tb_central_controller: the controller driving real cores and a DRAM model, without the
// setup block and PRNG.  Configuration comes straight from the testbench and the dropout
// line is a random bit made here.
//
// A small 3-130-3-10 network with 8-bit weights and bipolar hidden layers is trained for
// six examples: its 130-target lists (33 words) and the 130-neuron first hidden layer feeding
// 3 neurons exercise burst and word handling; the output errors exercise repeated addition.
// Classes, final weights, and the DRAM traffic seen on the memory port (words read, bursts,
// words written) are compared with the bsn_ref_pkg reference, and the controller's
// per-neuron traffic reports are summed and compared too.  A read burst must never exceed
// 64 words.
module tb_central_controller;
  import bsn_pkg::*;
  import bsn_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  glob_cfg_t gcfg;
  core_cfg_t ccfg [NUM_CORES];
  logic start, busy, cmd_valid, dropout;
  core_cmd_t cmd;
  logic [NUM_CORES-1:0] rsp_valid, init_busy;
  core_rsp_t rsp [NUM_CORES];
  logic rd_req, rd_ready, rd_valid, wr_req, wr_ready;
  logic [MEM_ADDR_W-1:0] rd_addr, wr_addr;
  logic [6:0] rd_len;
  logic [31:0] rd_data, wr_data;
  logic ev_src, ev_example;
  logic [15:0] ev_src_pipe_words, ev_src_std_words;
  logic [3:0] class_o;
  logic correct_o;
  int checks = 0, failures = 0;

  central_controller dut (.clk, .rst_n, .gcfg, .ccfg, .start, .cores_init(|init_busy), .busy,
    .cmd_valid, .cmd, .rsp_valid, .rsp, .rd_req, .rd_addr, .rd_len, .rd_ready, .rd_valid,
    .rd_data, .wr_req, .wr_addr, .wr_data, .wr_ready, .ev_src, .ev_src_pipe_words,
    .ev_src_std_words, .ev_example);

  for (genvar c = 0; c < 3; c++) begin : g_core
    neuron_core #(.CORE_ID(c)) u_core (.clk, .rst_n, .k_delay(ccfg[c].k), .w16(gcfg.w16),
      .cmd_valid, .cmd, .dropout, .rsp_valid(rsp_valid[c]), .rsp(rsp[c]),
      .init_busy(init_busy[c]));
  end
  for (genvar c = 3; c < 15; c++) begin : g_none
    assign rsp_valid[c] = 1'b0;
    assign rsp[c] = '0;
    assign init_busy[c] = 1'b0;
  end
  output_core u_out (.clk, .rst_n, .hinge(gcfg.hinge), .cmd_valid, .cmd,
    .rsp_valid(rsp_valid[15]), .rsp(rsp[15]), .class_o, .correct_o, .busy());
  assign init_busy[15] = 1'b0;

  ddr2_model #(.AW(MEM_ADDR_W)) u_mem (.clk, .rst_n, .rd_req, .rd_addr, .rd_len, .rd_ready,
    .rd_valid, .rd_data, .wr_req, .wr_addr, .wr_data, .wr_ready);

  localparam int NEX = 6;
  int sizes[4] = '{3, 130, 3, 10};
  int bases[4] = '{0, 256, 512, 3840};
  bit bips[4]  = '{0, 1, 1, 0};
  int ks[4]    = '{3, 2, 1, 0};
  bsn_ref ref_m;
  bit drop_log[NEX][int];
  int hw_class[$];
  int ex_seen = 0;
  longint n_rd = 0, n_wr = 0, n_bu = 0, s_pipe = 0, s_std = 0, long_burst = 0;
  int wl[3][];

  always @(posedge clk) begin
    dropout <= ($urandom_range(9) < 2);
  end
  always @(negedge clk) if (rst_n) begin
    if (cmd_valid && cmd.op == CMD_UPDATE && ex_seen < NEX) drop_log[ex_seen][{cmd.core, cmd.neuron}] = dropout;
    if (ev_example) begin hw_class.push_back(int'(class_o)); ex_seen++; end
    if (rd_valid) n_rd++;
    if (wr_req && wr_ready) n_wr++;
    if (rd_req && rd_ready) begin n_bu++; if (rd_len > 64 || rd_len == 0) long_burst++; end
    if (ev_src) begin s_pipe += ev_src_pipe_words; s_std += ev_src_std_words; end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial main();

  task automatic main();
    int ptr = 32'h1000;
    int bad = 0;
    ref_m = new(sizes, bases, bips, ks);
    ref_m.w16 = 0; ref_m.lr_shift = 0; ref_m.hinge = 30; ref_m.learn = 1;
    gcfg = '0; gcfg.learn_en = 1; gcfg.w16 = 0; gcfg.lr_shift = 0; gcfg.hinge = 30;
    gcfg.img_base = 32'h8000; gcfg.num_images = NEX; gcfg.n_input = 3;
    foreach (ccfg[c]) ccfg[c] = '0;
    ccfg[0] = '{bipolar: 1'b0, k: 3'd3, count: 9'd3};
    ccfg[1] = '{bipolar: 1'b1, k: 3'd2, count: 9'd130};
    ccfg[2] = '{bipolar: 1'b1, k: 3'd1, count: 9'd3};
    start = 0;
    for (int l = 0; l < 3; l++) begin
      wl[l] = new[sizes[l]];
      for (int i = 0; i < sizes[l]; i++) begin
        int nt = sizes[l+1];
        wl[l][i] = ptr;
        u_mem.mem[2*(bases[l]+i)] = ptr;
        u_mem.mem[2*(bases[l]+i)+1] = {4'd0, 12'(bases[l+1]), 16'(nt)};
        for (int t = 0; t < nt; t++) begin
          int wv = int'($urandom_range(254)) - 127;
          logic [31:0] wd = u_mem.peek(ptr + t/4);
          wd[8*(t%4) +: 8] = 8'(wv);
          u_mem.mem[ptr + t/4] = wd;
          ref_m.w[l][i*nt+t] = wv;
        end
        ptr += (nt + 3) / 4;
      end
    end
    for (int e = 0; e < NEX; e++) u_mem.mem[32'h8000 + e] = {25'd0, 4'(e % 10), 3'($urandom_range(7))};
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int e = 0; e < NEX; e++) begin
      bit x[] = new[3];
      logic [31:0] rec = u_mem.peek(32'h8000 + e);
      for (int i = 0; i < 3; i++) x[i] = rec[i];
      ref_m.drop = drop_log[e];
      ref_m.pass(x, e % 10, 1);
      check(hw_class.size() > e && hw_class[e] == ref_m.cls, $sformatf("example %0d class", e));
    end
    for (int l = 0; l < 3; l++)
      for (int i = 0; i < sizes[l]; i++)
        for (int t = 0; t < sizes[l+1]; t++) begin
          logic [31:0] wd = u_mem.peek(wl[l][i] + t/4);
          if (int'($signed(wd[8*(t%4) +: 8])) != ref_m.w[l][i*sizes[l+1]+t]) bad++;
        end
    check(bad == 0, $sformatf("%0d weights differ", bad));
    check(n_rd == ref_m.rd_words, $sformatf("read words %0d ref %0d", n_rd, ref_m.rd_words));
    check(n_bu == ref_m.bursts, $sformatf("bursts %0d ref %0d", n_bu, ref_m.bursts));
    check(n_wr == ref_m.wr_words, $sformatf("written words %0d ref %0d", n_wr, ref_m.wr_words));
    check(s_pipe + NEX == n_rd, "per-neuron traffic reports add up to the words read");
    check(s_std == ref_m.std_words, "predicted plain-backprop words");
    check(long_burst == 0, "no burst longer than 64 words");
    check(ref_m.n_rep > 0 && ref_m.n_step > 0 && ref_m.n_drop > 0, "repeated addition, steps and dropout occurred");
    $display("rd %0d wr %0d bursts %0d steps %0d rep %0d", n_rd, n_wr, n_bu, ref_m.n_step, ref_m.n_rep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
