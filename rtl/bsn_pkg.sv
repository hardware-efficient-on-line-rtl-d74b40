// bsn_pkg: types and constants shared by the binary-state-network learning engine.
//
// The engine trains a fully connected binary-state network on line with pipelined,
// truncated-error backpropagation.  Neurons live in sixteen cores of 256 neurons; every
// neuron keeps a 49-bit word: a 2-bit ternary error, a 15-bit history of five 3-bit
// past states and a 32-bit accumulator.  These sizes follow the paper.  The command and
// response records exchanged between the central controller and the cores, the 2-bit
// error encoding and the bit order inside a history slot are this design's own choices.
package bsn_pkg;

  localparam int NUM_CORES        = 16;   // cores 0..14 generic, core 15 is the output core
  localparam int TOP_CORE         = 15;
  localparam int NEURONS_PER_CORE = 256;
  localparam int NADDR_W          = 8;    // neuron address inside a core
  localparam int CORE_W           = 4;
  localparam int GADDR_W          = CORE_W + NADDR_W;  // global neuron address {core, neuron}
  localparam int HIST_SLOTS       = 5;
  localparam int SLOT_W           = 3;
  localparam int HIST_W           = HIST_SLOTS * SLOT_W; // 15
  localparam int ACC_W            = 32;
  localparam int TERR_W           = 2;
  localparam int STATE_W          = TERR_W + HIST_W + ACC_W; // 49
  localparam int ERR_W            = 6;    // error on the core bus, signed; top errors reach -(C-1)
  localparam int NUM_CLASSES      = 10;
  localparam int MAX_BURST        = 64;   // longest DRAM read burst, in 32-bit words
  localparam int MEM_ADDR_W       = 25;   // 1 Gb of 32-bit words
  localparam int KD_W             = 3;    // delay K, 0..4

  // One 3-bit history slot.
  typedef struct packed {
    logic value;   // binary output (1: +1 or 1, 0: -1 or 0)
    logic grad;    // virtual (straight-through) gradient
    logic drop;    // neuron was dropped out in that pass
  } nstate_t;

  // One neuron's 49-bit word in core memory, fields in the order error | history | accumulator.
  typedef struct packed {
    logic signed [TERR_W-1:0] err;   // two's complement: 01 = +1, 11 = -1, 00 = 0
    logic [HIST_W-1:0]        hist;  // slot k at bits [3k+2:3k], slot 0 is the newest
    logic signed [ACC_W-1:0]  acc;
  } neuron_word_t;

  typedef enum logic [2:0] {
    CMD_NOP        = 3'd0,
    CMD_SET_ACC    = 3'd1,  // acc <= data (input layer encoding, +1/-1)
    CMD_UPDATE     = 3'd2,  // step 1/2: decide output and gradient, shift history, clear acc
    CMD_TARGET     = 3'd3,  // step 3: acc += data when add_en, return stored error
    CMD_SRC_ACC    = 3'd4,  // step 4: acc += data (backpropagated weighted error)
    CMD_FINALIZE   = 3'd5,  // step 5: err <= sgn(grad_K * acc), clear acc
    CMD_SET_LABEL  = 3'd6,  // output core: label of the current example
    CMD_TOP_UPDATE = 3'd7   // output core: classify and compute hinge-loss errors
  } core_op_e;

  typedef struct packed {
    core_op_e                op;
    logic [CORE_W-1:0]       core;
    logic [NADDR_W-1:0]      neuron;
    logic                    add_en;
    logic signed [ACC_W-1:0] data;
  } core_cmd_t;

  typedef struct packed {
    logic                    value;   // current binary output
    logic                    drop;    // current dropout state
    logic                    dvalue;  // output K passes ago
    logic                    ddrop;   // dropout state K passes ago
    logic                    dgrad;   // virtual gradient K passes ago
    logic signed [ERR_W-1:0] err;     // stored error of the addressed neuron
  } core_rsp_t;

  // Ternarize: sgn(x) as a 2-bit two's complement value.
  function automatic logic signed [TERR_W-1:0] ternarize(input logic signed [ACC_W-1:0] x);
    if (x > 0)      return 2'sb01;
    else if (x < 0) return 2'sb11;
    else            return 2'sb00;
  endfunction

  // Saturating straight-through gradient: |acc| <= 2^16 for 16-bit weights, 2^8 for 8-bit.
  function automatic logic grad_window(input logic signed [ACC_W-1:0] x, input logic w16);
    logic signed [ACC_W-1:0] lim;
    lim = w16 ? 32'sd65536 : 32'sd256;
    return (x >= -lim) && (x <= lim);
  endfunction

  // Per-core configuration written by the host.
  typedef struct packed {
    logic             bipolar;  // bit 12: 1: -1/+1 interpretation, 0: 0/1 interpretation
    logic [KD_W-1:0]  k;        // bits 11:9: history delay K of the layer held in this core
    logic [NADDR_W:0] count;    // bits 8:0: neurons used in this core, 0..256 (0: unused)
  } core_cfg_t;

  // Global configuration written by the host.
  typedef struct packed {
    logic                    learn_en;   // learning (weight updates, dropout) on
    logic                    w16;        // 16-bit weights (else 8-bit)
    logic [3:0]              lr_shift;   // weight update magnitude = 2^lr_shift
    logic signed [ACC_W-1:0] hinge;      // hinge hyper-parameter H
    logic [31:0]             img_base;   // word address of the first image record
    logic [31:0]             num_images; // examples to present after start
    logic [11:0]             n_input;    // input-layer neurons (pixels)
  } glob_cfg_t;

endpackage
