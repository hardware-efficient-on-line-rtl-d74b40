// bsn_top: on-line learning engine for binary-state networks (FPGA core).
//
// Wires together the central controller, fifteen generic neuron cores (0..14) of 256
// neurons, the output core (15) with C output neurons, the dropout PRNG and the host
// setup/monitor registers, as in the paper's block diagram.  The controller drives one
// command bus shared by all cores and selects the response of the addressed core; the PRNG's
// single dropout bit goes to every core and is sampled by the core whose neuron updates.
// The DRAM, its DDR2 controller and the USB link to the host are outside this module: the
// DRAM side is the controller's burst read / single-word write port, the host side is the
// register bus of monitor_setup (see there for the map).  Dropout is only enabled while
// learning is on.  Timing: a pass costs roughly two cycles per core command plus DRAM
// latency; see central_controller.
module bsn_top
  import bsn_pkg::*;
#(
  parameter int unsigned C = NUM_CLASSES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host register bus
  input  logic                  host_we,
  input  logic [7:0]            host_addr,
  input  logic [31:0]           host_wdata,
  output logic [31:0]           host_rdata,
  // DRAM port
  output logic                  mem_rd_req,
  output logic [MEM_ADDR_W-1:0] mem_rd_addr,
  output logic [6:0]            mem_rd_len,
  input  logic                  mem_rd_ready,
  input  logic                  mem_rd_valid,
  input  logic [31:0]           mem_rd_data,
  output logic                  mem_wr_req,
  output logic [MEM_ADDR_W-1:0] mem_wr_addr,
  output logic [31:0]           mem_wr_data,
  input  logic                  mem_wr_ready,
  // status
  output logic                  busy,
  output logic [3:0]            class_o,
  output logic                  correct_o
);

  glob_cfg_t            gcfg;
  core_cfg_t            ccfg [NUM_CORES];
  logic                 start;
  logic                 prob_we;
  logic [7:0]           prob_wdata, prob, rnd;
  logic                 dropout;

  logic                 cmd_valid;
  core_cmd_t            cmd;
  logic [NUM_CORES-1:0] rsp_valid;
  core_rsp_t            rsp [NUM_CORES];
  logic [NUM_CORES-1:0] init_busy;

  logic                 ev_src, ev_example;
  logic [15:0]          ev_src_pipe_words, ev_src_std_words;

  monitor_setup u_setup (
    .clk, .rst_n,
    .host_we, .host_addr, .host_wdata, .host_rdata,
    .gcfg, .ccfg, .start, .prob_we, .prob_wdata, .prob,
    .busy,
    .ev_rd_word  (mem_rd_valid),
    .ev_wr_word  (mem_wr_req && mem_wr_ready),
    .ev_rd_burst (mem_rd_req && mem_rd_ready),
    .ev_src, .ev_src_pipe_words, .ev_src_std_words,
    .ev_example,
    .last_class  (class_o),
    .last_correct(correct_o)
  );

  prng u_prng (
    .clk, .rst_n,
    .enable    (gcfg.learn_en),
    .prob_we, .prob_wdata, .prob, .rnd,
    .dropout
  );

  central_controller u_ctrl (
    .clk, .rst_n,
    .gcfg, .ccfg, .start,
    .cores_init (|init_busy),
    .busy,
    .cmd_valid, .cmd, .rsp_valid, .rsp,
    .rd_req  (mem_rd_req),  .rd_addr (mem_rd_addr), .rd_len (mem_rd_len),
    .rd_ready(mem_rd_ready), .rd_valid(mem_rd_valid), .rd_data(mem_rd_data),
    .wr_req  (mem_wr_req),  .wr_addr (mem_wr_addr), .wr_data(mem_wr_data),
    .wr_ready(mem_wr_ready),
    .ev_src, .ev_src_pipe_words, .ev_src_std_words, .ev_example
  );

  for (genvar c = 0; c < TOP_CORE; c++) begin : g_core
    neuron_core #(.CORE_ID(c), .NEURONS(NEURONS_PER_CORE)) u_core (
      .clk, .rst_n,
      .k_delay  (ccfg[c].k),
      .w16      (gcfg.w16),
      .cmd_valid, .cmd, .dropout,
      .rsp_valid(rsp_valid[c]),
      .rsp      (rsp[c]),
      .init_busy(init_busy[c])
    );
  end

  output_core #(.CORE_ID(TOP_CORE), .C(C)) u_out (
    .clk, .rst_n,
    .hinge    (gcfg.hinge),
    .cmd_valid, .cmd,
    .rsp_valid(rsp_valid[TOP_CORE]),
    .rsp      (rsp[TOP_CORE]),
    .class_o, .correct_o,
    .busy     ()
  );
  assign init_busy[TOP_CORE] = 1'b0;

endmodule
