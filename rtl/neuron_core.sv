// neuron_core: one generic neuron core (input or hidden layer) of 256 neurons.
//
// Every neuron owns a 49-bit word in a local memory: ternary error, five 3-bit history
// slots (output, virtual gradient, dropout) and a 32-bit accumulator that first sums the
// forward input from the layer below and is then reused to sum the errors coming back
// from the layer above.  The central controller drives one shared command bus; a core acts
// on the commands that carry its CORE_ID.  Each command reads the neuron's word in the
// cycle it is accepted, and in the next cycle the core writes the word back and raises
// rsp_valid with the response (latency 2 cycles, one command in flight).  The controller
// must not issue the next command to the core before it has seen rsp_valid.
//
// CMD_UPDATE follows the paper's neuron update: output = (acc >= 0), gradient = acc inside
// [-2^16, 2^16] (16-bit weights) or [-2^8, 2^8] (8-bit weights), the PRNG dropout bit is
// sampled, the 3-bit state is shifted into the history (oldest slot lost), the accumulator is
// cleared, and the current state plus the state K passes ago are returned.  CMD_FINALIZE
// multiplies the accumulated backpropagated sum by the gradient K passes ago and stores its
// sign as the new ternary error (paper step 5).  That a neuron dropped out K passes ago also
// stores a zero error, the 2-bit error encoding and the slot bit order are choices of this
// design.  After reset the core walks its memory once and clears every word (init_busy high,
// NEURONS cycles); commands are ignored meanwhile.
module neuron_core
  import bsn_pkg::*;
#(
  parameter int unsigned CORE_ID = 0,
  parameter int unsigned NEURONS = NEURONS_PER_CORE
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration (held in the setup registers)
  input  logic [KD_W-1:0]      k_delay,   // history delay K of this core's layer
  input  logic                 w16,       // 1: 16-bit weights, 0: 8-bit weights
  // command bus from the central controller
  input  logic                 cmd_valid,
  input  core_cmd_t            cmd,
  input  logic                 dropout,   // 1-bit dropout signal from the PRNG
  output logic                 rsp_valid,
  output core_rsp_t            rsp,
  output logic                 init_busy
);

  localparam int AW = (NEURONS > 1) ? $clog2(NEURONS) : 1;

  neuron_word_t mem [NEURONS];

  // stage 1 registers
  logic                 s1_valid;
  core_op_e             s1_op;
  logic [AW-1:0]        s1_addr;
  logic                 s1_add_en;
  logic signed [ACC_W-1:0] s1_data;
  logic                 s1_drop;
  neuron_word_t         rd_q;

  // init sweep
  logic [AW:0]          init_cnt;

  wire sel = cmd_valid && (cmd.core == CORE_ID[CORE_W-1:0]) && !init_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_op     <= CMD_NOP;
      s1_addr   <= '0;
      s1_add_en <= 1'b0;
      s1_data   <= '0;
      s1_drop   <= 1'b0;
      init_busy <= 1'b1;
      init_cnt  <= '0;
    end else begin
      s1_valid <= sel;
      if (sel) begin
        s1_op     <= cmd.op;
        s1_addr   <= cmd.neuron[AW-1:0];
        s1_add_en <= cmd.add_en;
        s1_data   <= cmd.data;
        s1_drop   <= dropout;
      end
      if (init_busy) begin
        init_cnt <= init_cnt + 1'b1;
        if (init_cnt == (AW+1)'(NEURONS - 1)) init_busy <= 1'b0;
      end
    end
  end

  // synchronous read port
  always_ff @(posedge clk) begin
    if (sel) rd_q <= mem[cmd.neuron[AW-1:0]];
  end

  // stage 2: compute new word and response
  neuron_word_t         wr_word;
  logic                 wr_en;
  nstate_t              cur_st, del_st;
  logic [HIST_W-1:0]    new_hist;

  function automatic nstate_t slot_of(input logic [HIST_W-1:0] h, input logic [KD_W-1:0] k);
    nstate_t s;
    s = '0;
    for (int i = 0; i < HIST_SLOTS; i++)
      if (k == KD_W'(i)) s = nstate_t'(h[i*SLOT_W +: SLOT_W]);
    return s;
  endfunction

  always_comb begin
    cur_st.value = (rd_q.acc >= 0);
    cur_st.grad  = grad_window(rd_q.acc, w16);
    cur_st.drop  = s1_drop;
    new_hist     = {rd_q.hist[HIST_W-SLOT_W-1:0], cur_st};

    wr_word = rd_q;
    wr_en   = 1'b0;
    rsp     = '0;
    del_st  = slot_of(rd_q.hist, k_delay);
    rsp.err = ERR_W'(rd_q.err);  // sign-extended
    if (s1_valid) begin
      unique case (s1_op)
        CMD_SET_ACC: begin
          wr_word.acc = s1_data;
          wr_en       = 1'b1;
        end
        CMD_UPDATE: begin
          del_st       = slot_of(new_hist, k_delay);
          wr_word.hist = new_hist;
          wr_word.acc  = '0;
          wr_en        = 1'b1;
          rsp.value    = cur_st.value;
          rsp.drop     = cur_st.drop;
          rsp.dvalue   = del_st.value;
          rsp.ddrop    = del_st.drop;
          rsp.dgrad    = del_st.grad;
        end
        CMD_TARGET: begin
          if (s1_add_en) wr_word.acc = rd_q.acc + s1_data;
          wr_en = 1'b1;
        end
        CMD_SRC_ACC: begin
          wr_word.acc = rd_q.acc + s1_data;
          wr_en       = 1'b1;
        end
        CMD_FINALIZE: begin
          wr_word.err = (del_st.grad && !del_st.drop) ? ternarize(rd_q.acc) : 2'sb00;
          wr_word.acc = '0;
          wr_en       = 1'b1;
          rsp.err     = ERR_W'(wr_word.err);
          rsp.dvalue  = del_st.value;
          rsp.ddrop   = del_st.drop;
          rsp.dgrad   = del_st.grad;
        end
        default: ;
      endcase
    end
  end

  assign rsp_valid = s1_valid;

  always_ff @(posedge clk) begin
    if (init_busy)  mem[init_cnt[AW-1:0]] <= '0;
    else if (wr_en) mem[s1_addr]          <= wr_word;
  end

endmodule
