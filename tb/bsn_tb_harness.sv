// bsn_tb_harness: end-to-end test environment for bsn_top.
//
// Builds a fully connected N_IN-N_H1-N_H2-10 network in the DRAM model (connectivity table,
// weight lists, random binarized example records), configures the engine through the host
// register bus, trains on PASSES examples with learning on, then classifies TEST_PASSES
// further examples with learning off.  The behavioural reference of bsn_ref_pkg replays the
// same examples, using the dropout decisions observed on the dropout line, and every
// classification, every weight left in DRAM and the traffic counters (words read and
// written, bursts, predicted non-pipelined read volume, examples) are compared with it.
// The top is instantiated with its default parameters.  Mechanism counts are reported on
// the outputs so that the calling testbench can require each to have happened.
module bsn_tb_harness #(
  parameter int N_IN        = 40,
  parameter int N_H1        = 300,
  parameter int N_H2        = 20,
  parameter int PASSES      = 8,
  parameter int TEST_PASSES = 2,
  parameter bit W16         = 1,
  parameter bit BIP         = 1,
  parameter int LR_SHIFT    = 7,
  parameter int HINGE       = 1000,
  parameter int PROB        = 51,
  parameter int WMAG        = 3000,
  parameter int SEED        = 1
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   mech [10]
);
  import bsn_pkg::*;
  import bsn_ref_pkg::*;

  localparam int WBASE    = 32'h0001_0000;
  localparam int IMG_BASE = 32'h0100_0000;
  localparam int STRIDE   = (N_IN + 4 + 31) / 32;
  localparam int NEX      = PASSES + TEST_PASSES;
  localparam int NC_IN    = (N_IN + 255) / 256;
  localparam int NC_H1    = (N_H1 + 255) / 256;
  localparam int NC_H2    = (N_H2 + 255) / 256;

  logic rst_n;
  logic host_we; logic [7:0] host_addr; logic [31:0] host_wdata, host_rdata;
  logic rd_req, rd_ready, rd_valid, wr_req, wr_ready;
  logic [MEM_ADDR_W-1:0] rd_addr, wr_addr;
  logic [6:0] rd_len;
  logic [31:0] rd_data, wr_data;
  logic busy; logic [3:0] class_o; logic correct_o;

  bsn_top dut (
    .clk, .rst_n, .host_we, .host_addr, .host_wdata, .host_rdata,
    .mem_rd_req(rd_req), .mem_rd_addr(rd_addr), .mem_rd_len(rd_len), .mem_rd_ready(rd_ready),
    .mem_rd_valid(rd_valid), .mem_rd_data(rd_data),
    .mem_wr_req(wr_req), .mem_wr_addr(wr_addr), .mem_wr_data(wr_data), .mem_wr_ready(wr_ready),
    .busy, .class_o, .correct_o
  );

  ddr2_model #(.AW(MEM_ADDR_W)) u_mem (
    .clk, .rst_n, .rd_req, .rd_addr, .rd_len, .rd_ready, .rd_valid, .rd_data,
    .wr_req, .wr_addr, .wr_data, .wr_ready
  );

  bsn_ref ref_m;
  int     sizes[4], bases[4], ks[4];
  bit     bips[4];
  int     wl_addr[3][];
  bit     img[NEX][];
  int     lbl[NEX];
  int     hw_class[$];
  bit     drop_log[NEX][int];
  int     ex_seen;
  bit     observe;

  // observe the dropout line when a neuron update command is issued, and the results
  always @(negedge clk) begin
    if (observe && dut.cmd_valid && dut.cmd.op == CMD_UPDATE && ex_seen < NEX)
      drop_log[ex_seen][{dut.cmd.core, dut.cmd.neuron}] = dut.dropout;
    if (observe && dut.ev_example) begin
      hw_class.push_back(int'(class_o));
      ex_seen++;
    end
  end

  task automatic host_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); host_we = 1; host_addr = a; host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask

  task automatic rd_cnt(input logic [7:0] a, output longint v);
    @(negedge clk); host_addr = a;
    #1 v = longint'(host_rdata);
    host_addr = a + 1;
    #1 v = v | (longint'(host_rdata) << 32);
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL [seed %0d] %s", SEED, what);
    end
  endtask

  function automatic int wpw(); return W16 ? 2 : 4; endfunction

  function automatic int get_w(int l, int i, int t);
    int a = wl_addr[l][i] + t / wpw();
    logic [31:0] wd = u_mem.peek(a);
    if (W16) return int'($signed(wd[16*(t%2) +: 16]));
    else     return int'($signed(wd[8*(t%4) +: 8]));
  endfunction

  task automatic run_phase(input int first, input int n, input bit learn, output int cycles);
    host_wr(8'h04, IMG_BASE + first * STRIDE);
    host_wr(8'h05, n);
    host_wr(8'h00, {29'd0, W16, learn, 1'b1});
    cycles = 0;
    @(negedge clk);
    while (busy) begin @(negedge clk); cycles++; end
    repeat (2) @(negedge clk);
  endtask

  initial main();

  task automatic main();
    int seed_v, ptr, cyc_train, cyc_test;
    longint c_rd, c_wr, c_bu, c_std, c_ex, c_ok, wr_before;
    int n_ok;
    done = 0; checks = 0; failures = 0; ex_seen = 0; observe = 0;
    foreach (mech[i]) mech[i] = 0;
    host_we = 0; host_addr = 0; host_wdata = 0;
    rst_n = 0;
    seed_v = $urandom(SEED);
    sizes = '{N_IN, N_H1, N_H2, NUM_CLASSES};
    bases = '{0, NC_IN*256, (NC_IN+NC_H1)*256, TOP_CORE*256};
    bips  = '{1'b0, BIP, BIP, 1'b0};
    ks    = '{3, 2, 1, 0};
    ref_m = new(sizes, bases, bips, ks);
    ref_m.w16 = W16; ref_m.lr_shift = LR_SHIFT; ref_m.hinge = HINGE;
    // network in DRAM
    ptr = WBASE;
    for (int l = 0; l < 3; l++) begin
      wl_addr[l] = new[sizes[l]];
      for (int i = 0; i < sizes[l]; i++) begin
        int nt = sizes[l+1];
        int g  = bases[l] + i;
        wl_addr[l][i] = ptr;
        u_mem.mem[2*g]   = ptr;
        u_mem.mem[2*g+1] = {4'd0, 12'(bases[l+1]), 16'(nt)};
        for (int t = 0; t < nt; t++) begin
          int wv, lim;
          lim = W16 ? 32767 : 127;
          if ($urandom_range(15) == 0) wv = ($urandom_range(1) != 0) ? lim : -lim-1;
          else wv = $urandom_range(2*WMAG) - WMAG;
          if (wv > lim) wv = lim;
          if (wv < -lim-1) wv = -lim-1;
          ref_m.w[l][i*nt+t] = wv;
          begin
            int a = ptr + t / wpw();
            logic [31:0] wd = u_mem.peek(a);
            if (W16) wd[16*(t%2) +: 16] = 16'(wv);
            else     wd[8*(t%4) +: 8]   = 8'(wv);
            u_mem.mem[a] = wd;
          end
        end
        ptr += (W16 ? (nt+1)/2 : (nt+3)/4);
      end
    end
    // examples
    for (int e = 0; e < NEX; e++) begin
      logic [STRIDE*32-1:0] rec;
      rec = '0;
      img[e] = new[N_IN];
      lbl[e] = $urandom_range(NUM_CLASSES-1);
      for (int i = 0; i < N_IN; i++) begin
        img[e][i] = ($urandom_range(9) < 3);
        rec[i] = img[e][i];
      end
      rec[N_IN +: 4] = 4'(lbl[e]);
      for (int wd = 0; wd < STRIDE; wd++) u_mem.mem[IMG_BASE + e*STRIDE + wd] = rec[32*wd +: 32];
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    observe = 1;
    // configuration
    for (int c = 0; c < 16; c++) host_wr(8'h10 + 8'(c), 32'd0);
    for (int c = 0; c < NC_IN; c++)
      host_wr(8'h10 + 8'(c), {19'd0, 1'b0, 3'd3, 9'((N_IN - 256*c) > 256 ? 256 : N_IN - 256*c)});
    for (int c = 0; c < NC_H1; c++)
      host_wr(8'h10 + 8'(NC_IN + c), {19'd0, BIP, 3'd2, 9'((N_H1 - 256*c) > 256 ? 256 : N_H1 - 256*c)});
    for (int c = 0; c < NC_H2; c++)
      host_wr(8'h10 + 8'(NC_IN + NC_H1 + c), {19'd0, BIP, 3'd1, 9'((N_H2 - 256*c) > 256 ? 256 : N_H2 - 256*c)});
    host_wr(8'h01, LR_SHIFT);
    host_wr(8'h02, HINGE);
    host_wr(8'h03, PROB);
    host_wr(8'h06, N_IN);
    // training
    run_phase(0, PASSES, 1'b1, cyc_train);
    ref_m.learn = 1;
    for (int e = 0; e < PASSES; e++) begin
      ref_m.drop = drop_log[e];
      ref_m.pass(img[e], lbl[e], STRIDE);
      check(hw_class.size() > e && hw_class[e] == ref_m.cls,
            $sformatf("train example %0d class hw %0d ref %0d", e, hw_class.size() > e ? hw_class[e] : -1, ref_m.cls));
    end
    rd_cnt(8'h22, c_rd); rd_cnt(8'h24, c_wr); rd_cnt(8'h26, c_bu); rd_cnt(8'h28, c_std);
    check(c_rd == ref_m.rd_words, $sformatf("read words %0d ref %0d", c_rd, ref_m.rd_words));
    check(c_wr == ref_m.wr_words, $sformatf("written words %0d ref %0d", c_wr, ref_m.wr_words));
    check(c_bu == ref_m.bursts,   $sformatf("read bursts %0d ref %0d", c_bu, ref_m.bursts));
    check(c_std + PASSES*STRIDE == ref_m.std_words + PASSES*STRIDE,
          $sformatf("predicted plain-backprop words %0d ref %0d", c_std, ref_m.std_words));
    wr_before = c_wr;
    // testing with learning off
    ref_m.learn = 0;
    ref_m.drop.delete();
    run_phase(PASSES, TEST_PASSES, 1'b0, cyc_test);
    for (int e = PASSES; e < NEX; e++) begin
      ref_m.pass(img[e], lbl[e], STRIDE);
      check(hw_class.size() > e && hw_class[e] == ref_m.cls,
            $sformatf("test example %0d class hw %0d ref %0d", e, hw_class.size() > e ? hw_class[e] : -1, ref_m.cls));
    end
    rd_cnt(8'h24, c_wr); rd_cnt(8'h2C, c_ex); rd_cnt(8'h2E, c_ok);
    check(c_wr == wr_before, "no weight written with learning off");
    check(c_ex == NEX, $sformatf("examples counted %0d", c_ex));
    n_ok = 0;
    for (int e = 0; e < NEX; e++) if (hw_class[e] == lbl[e]) n_ok++;
    check(c_ok == n_ok, $sformatf("correct counted %0d expected %0d", c_ok, n_ok));
    // every weight
    begin
      int bad = 0;
      for (int l = 0; l < 3; l++)
        for (int i = 0; i < sizes[l]; i++)
          for (int t = 0; t < sizes[l+1]; t++)
            if (get_w(l, i, t) != ref_m.w[l][i*sizes[l+1]+t]) begin
              if (bad < 5) $display("weight l%0d %0d->%0d hw %0d ref %0d", l, i, t,
                                    get_w(l, i, t), ref_m.w[l][i*sizes[l+1]+t]);
              bad++;
            end
      check(bad == 0, $sformatf("%0d weights differ from the reference", bad));
    end
    mech[0] = ref_m.n_drop;  mech[1] = ref_m.n_skip;  mech[2] = ref_m.n_gate;
    mech[3] = ref_m.n_step;  mech[4] = ref_m.n_clip;  mech[5] = ref_m.n_rep;
    mech[6] = ref_m.n_multi; mech[7] = int'(ref_m.wr_words);
    mech[8] = u_mem.wr_stalls; mech[9] = TEST_PASSES;
    $display("harness seed %0d: %0d+%0d examples, train %0d cycles (%0d per example), test %0d cycles",
             SEED, PASSES, TEST_PASSES, cyc_train, cyc_train / PASSES, cyc_test);
    $display("  rd %0d wr %0d bursts %0d std-pred %0d | drop %0d skip %0d gate %0d step %0d clip %0d rep %0d multi %0d wrstall %0d",
             c_rd, c_wr, c_bu, c_std, mech[0], mech[1], mech[2], mech[3], mech[4], mech[5], mech[6], mech[8]);
    done = 1;
  endtask
endmodule
