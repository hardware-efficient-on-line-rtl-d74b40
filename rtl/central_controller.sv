// central_controller: sequencer of the pipelined truncated-error backpropagation engine.
//
// One pass presents one example: the controller reads the example's record from DRAM (784
// binarized pixels and a 4-bit label in the paper's configuration), sets the input
// neurons' accumulators to +1/-1, gives the label to the output core, and then sends the
// update command to each used core in ascending order (lower layers in lower cores), one
// neuron after the other, and finally lets the output core classify and compute its errors.
//
// For each updating (source) neuron, with the state returned by the core:
//   forward  = not dropped now and (bipolar or output 1)
//   backward = learning on, pipeline filled for this layer (passes done >= K), not dropped
//              K passes ago, and (delayed output nonzero, or delayed gradient set and the
//              layer is not the input layer)
// If either holds, the neuron's two-word entry of the connectivity table is read from DRAM
// word address 2*{core,neuron}: word 0 = address of its weight list, word 1 = {first target
// (bits 31:16), number of targets (bits 15:0)}.  The weight list is read in bursts of at most
// 64 words, 2 weights (16-bit) or 4 weights (8-bit) per word, lowest weight in the lowest
// bits.  Every weight is fetched once and serves both directions: the forward value (+w, or
// -w for a bipolar neuron at -1) goes to the target's accumulator, and the target's stored
// error e comes back.  On the backward side the controller adds sgn(e)*w into the source's
// accumulator |e| times (repeated addition also covers the untruncated output-layer errors,
// |e| <= C-1), and, when the delayed output is nonzero, steps the weight |e| times by
// -sgn(e)*h_delayed*2^lr_shift, saturating at the weight range.  A weight word is written
// back only when one of its weights changed.  Then the source's new ternary error is formed
// (finalize).  Neurons that need neither direction cost no DRAM access.
//
// Memory interface: a read request (rd_req, rd_addr, rd_len 1..64) is taken when rd_ready is
// high; the words then arrive in order on rd_valid/rd_data at any rate and cannot be
// stalled, so a 64-word buffer receives them.  A write (wr_req, wr_addr, wr_data) is taken
// when wr_ready is high.  Core commands follow the 2-cycle protocol of the cores.  The
// table packing, image record layout (bit b of the record in word b/32, bit b%32; record
// stride ceil((n_input+4)/32) words) and the handshakes are this design's choices; the
// step order follows the paper.  ev_src reports, per source neuron that touched DRAM, the
// words read and the words plain forward-then-backward training would have read.
module central_controller
  import bsn_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  glob_cfg_t             gcfg,
  input  core_cfg_t             ccfg [NUM_CORES],
  input  logic                  start,
  input  logic                  cores_init,   // some core is still clearing its memory
  output logic                  busy,
  // core command bus
  output logic                  cmd_valid,
  output core_cmd_t             cmd,
  input  logic [NUM_CORES-1:0]  rsp_valid,
  input  core_rsp_t             rsp [NUM_CORES],
  // DRAM (through the memory controller)
  output logic                  rd_req,
  output logic [MEM_ADDR_W-1:0] rd_addr,
  output logic [6:0]            rd_len,
  input  logic                  rd_ready,
  input  logic                  rd_valid,
  input  logic [31:0]           rd_data,
  output logic                  wr_req,
  output logic [MEM_ADDR_W-1:0] wr_addr,
  output logic [31:0]           wr_data,
  input  logic                  wr_ready,
  // monitoring events
  output logic                  ev_src,
  output logic [15:0]           ev_src_pipe_words,
  output logic [15:0]           ev_src_std_words,
  output logic                  ev_example
);

  typedef enum logic [4:0] {
    S_IDLE, S_IMG_REQ, S_IMG_WAIT, S_LABEL, S_SET_IN, S_CORE, S_UPD, S_GREEN_REQ,
    S_GREEN_WAIT, S_GSETUP, S_W_REQ, S_W_WAIT, S_LOADW, S_TGT, S_BWD, S_NEXTW, S_WR,
    S_ADV, S_FINAL, S_TOP, S_PASS_END
  } state_e;

  state_e state;

  logic                 start_pend;
  logic [31:0]          img_idx;
  logic [2:0]           pass_cnt;     // completed passes, saturating
  logic [11:0]          in_idx;
  logic [CORE_W-1:0]    cur_core;
  logic [NADDR_W:0]     cur_n;
  logic                 issued;
  logic [CORE_W-1:0]    cmd_core_q;
  // source neuron state
  logic                 s_value, s_dvalue, s_fwd, s_bwd, s_upd, s_bp;
  // connectivity of the source
  logic [31:0]          wl_addr;
  logic [GADDR_W-1:0]   first_t;
  logic [15:0]          n_tgt;
  logic [15:0]          nwords;
  logic [15:0]          word_base;    // weight-list word index of wbuf[0]
  logic [6:0]           buf_cnt;
  logic [6:0]           rx_cnt;
  logic [6:0]           wi;           // word index inside wbuf
  logic [1:0]           slot;
  logic [15:0]          j;            // target index
  logic [31:0]          wbuf [MAX_BURST];
  logic [31:0]          word_acc;
  logic                 dirty;
  logic signed [ACC_W-1:0]  cur_w, new_w;
  logic signed [ERR_W-1:0]  tgt_err;
  logic [ERR_W-1:0]     rep;

  // ---------------------------------------------------------------- helpers
  core_cfg_t cc;
  assign cc = ccfg[cur_core];

  wire rsp_ok = issued && rsp_valid[cmd_core_q];
  core_rsp_t r;
  assign r = rsp[cmd_core_q];

  logic [6:0] img_words;
  assign img_words = 7'((gcfg.n_input + 12'd35) >> 5);

  function automatic logic rec_bit(input logic [11:0] b, input logic [31:0] buf_w [MAX_BURST]);
    logic [31:0] w;
    w = buf_w[b[10:5]];
    return w[b[4:0]];
  endfunction

  // current weight out of the working word
  logic signed [ACC_W-1:0] w_ext;
  always_comb begin
    if (gcfg.w16) w_ext = ACC_W'($signed(word_acc[16*slot[0] +: 16]));
    else          w_ext = ACC_W'($signed(word_acc[8*slot +: 8]));
  end

  logic [GADDR_W-1:0] tgt_addr;
  assign tgt_addr = first_t + GADDR_W'(j);

  wire is_input_core = ({cur_core, 8'd0} < gcfg.n_input);
  wire commit        = gcfg.learn_en && (pass_cnt >= 3'(cc.k));
  // forward and backward duties of the neuron whose update response is on the bus
  wire f_dir = !r.drop && (cc.bipolar || r.value);
  wire b_dir = commit && !r.ddrop && (cc.bipolar || r.dvalue || (r.dgrad && !is_input_core));

  // weight step with saturation
  logic signed [ACC_W-1:0] w_max, w_min, step, w_stepped;
  always_comb begin
    w_max = gcfg.w16 ? 32'sd32767 : 32'sd127;
    w_min = -w_max - 32'sd1;
    step  = ACC_W'(32'sd1 <<< gcfg.lr_shift);
    // dW = -sgn(e) * h_delayed * step, h_delayed = +1, or -1 for a bipolar neuron at 0
    if ((tgt_err > 0) == (cc.bipolar && !s_dvalue)) w_stepped = new_w + step;
    else                                            w_stepped = new_w - step;
    if (w_stepped > w_max) w_stepped = w_max;
    if (w_stepped < w_min) w_stepped = w_min;
  end

  logic [ERR_W-1:0] err_mag;
  assign err_mag = tgt_err[ERR_W-1] ? ERR_W'(-tgt_err) : ERR_W'(tgt_err);

  // word with the processed weight put back
  logic [31:0] word_next;
  wire         w_changed = (new_w != cur_w);
  always_comb begin
    word_next = word_acc;
    if (gcfg.w16) word_next[16*slot[0] +: 16] = new_w[15:0];
    else          word_next[8*slot +: 8]      = new_w[7:0];
  end
  wire last_in_word = (gcfg.w16 ? (slot[0] == 1'b1) : (slot == 2'd3)) || (j + 16'd1 == n_tgt);

  logic [15:0] nwords_c;
  assign nwords_c = gcfg.w16 ? 16'((17'(n_tgt) + 17'd1) >> 1) : 16'((17'(n_tgt) + 17'd3) >> 2);
  logic [15:0] remain;
  assign remain = nwords - word_base;

  // ---------------------------------------------------------------- outputs
  always_comb begin
    cmd_valid = 1'b0;
    cmd       = '0;
    rd_req    = 1'b0;
    rd_addr   = '0;
    rd_len    = 7'd1;
    wr_req    = 1'b0;
    wr_addr   = '0;
    wr_data   = word_acc;
    unique case (state)
      S_IMG_REQ: begin
        rd_req  = 1'b1;
        rd_addr = MEM_ADDR_W'(gcfg.img_base + img_idx * 32'(img_words));
        rd_len  = img_words;
      end
      S_LABEL: begin
        cmd_valid = !issued;
        cmd.op    = CMD_SET_LABEL;
        cmd.core  = CORE_W'(TOP_CORE);
        for (int b = 0; b < 4; b++) cmd.data[b] = rec_bit(gcfg.n_input + 12'(b), wbuf);
      end
      S_SET_IN: begin
        cmd_valid = !issued;
        cmd.op    = CMD_SET_ACC;
        cmd.core  = in_idx[11:8];
        cmd.neuron= in_idx[7:0];
        cmd.data  = rec_bit(in_idx, wbuf) ? 32'sd1 : -32'sd1;
      end
      S_UPD: begin
        cmd_valid = !issued;
        cmd.op    = CMD_UPDATE;
        cmd.core  = cur_core;
        cmd.neuron= cur_n[7:0];
      end
      S_GREEN_REQ: begin
        rd_req  = 1'b1;
        rd_addr = MEM_ADDR_W'({cur_core, cur_n[7:0], 1'b0});
        rd_len  = 7'd2;
      end
      S_W_REQ: begin
        rd_req  = 1'b1;
        rd_addr = MEM_ADDR_W'(wl_addr + 32'(word_base));
        rd_len  = (remain > 16'd64) ? 7'd64 : remain[6:0];
      end
      S_TGT: begin
        cmd_valid  = !issued;
        cmd.op     = CMD_TARGET;
        cmd.core   = tgt_addr[GADDR_W-1:NADDR_W];
        cmd.neuron = tgt_addr[NADDR_W-1:0];
        cmd.add_en = s_fwd;
        cmd.data   = (cc.bipolar && !s_value) ? -w_ext : w_ext;
      end
      S_BWD: begin
        cmd_valid  = s_bp && !issued;
        cmd.op     = CMD_SRC_ACC;
        cmd.core   = cur_core;
        cmd.neuron = cur_n[7:0];
        cmd.data   = (tgt_err > 0) ? cur_w : -cur_w;
      end
      S_WR: begin
        wr_req  = 1'b1;
        wr_addr = MEM_ADDR_W'(wl_addr + 32'(word_base) + 32'(wi));
      end
      S_FINAL: begin
        cmd_valid  = !issued;
        cmd.op     = CMD_FINALIZE;
        cmd.core   = cur_core;
        cmd.neuron = cur_n[7:0];
      end
      S_TOP: begin
        cmd_valid = !issued;
        cmd.op    = CMD_TOP_UPDATE;
        cmd.core  = CORE_W'(TOP_CORE);
      end
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE) || start_pend;

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      start_pend <= 1'b0;
      img_idx    <= '0;
      pass_cnt   <= '0;
      in_idx     <= '0;
      cur_core   <= '0;
      cur_n      <= '0;
      issued     <= 1'b0;
      cmd_core_q <= '0;
      {s_value, s_dvalue, s_fwd, s_bwd, s_upd, s_bp} <= '0;
      wl_addr    <= '0;
      first_t    <= '0;
      n_tgt      <= '0;
      nwords     <= '0;
      word_base  <= '0;
      buf_cnt    <= '0;
      rx_cnt     <= '0;
      wi         <= '0;
      slot       <= '0;
      j          <= '0;
      word_acc   <= '0;
      dirty      <= 1'b0;
      cur_w      <= '0;
      new_w      <= '0;
      tgt_err    <= '0;
      rep        <= '0;
      ev_src     <= 1'b0;
      ev_src_pipe_words <= '0;
      ev_src_std_words  <= '0;
      ev_example <= 1'b0;
    end else begin
      ev_src     <= 1'b0;
      ev_example <= 1'b0;
      if (start) start_pend <= 1'b1;
      if (cmd_valid) begin
        issued     <= 1'b1;
        cmd_core_q <= cmd.core;
      end
      unique case (state)
        S_IDLE: begin
          if ((start_pend || start) && !cores_init) begin
            start_pend <= 1'b0;
            img_idx    <= '0;
            pass_cnt   <= '0;
            if (gcfg.num_images != 0) state <= S_IMG_REQ;
          end
        end
        S_IMG_REQ: if (rd_ready) begin
          buf_cnt <= img_words;
          rx_cnt  <= '0;
          state   <= S_IMG_WAIT;
        end
        S_IMG_WAIT: if (rd_valid) begin
          rx_cnt <= rx_cnt + 1'b1;
          if (rx_cnt == buf_cnt - 7'd1) state <= S_LABEL;
        end
        S_LABEL: if (rsp_ok) begin
          issued <= 1'b0;
          in_idx <= '0;
          state  <= (gcfg.n_input == 0) ? S_CORE : S_SET_IN;
          cur_core <= '0;
        end
        S_SET_IN: if (rsp_ok) begin
          issued <= 1'b0;
          in_idx <= in_idx + 1'b1;
          if (in_idx + 12'd1 == gcfg.n_input) begin
            cur_core <= '0;
            state    <= S_CORE;
          end
        end
        S_CORE: begin
          if (cur_core == CORE_W'(TOP_CORE))  state <= S_TOP;
          else if (cc.count == '0)            cur_core <= cur_core + 1'b1;
          else begin
            cur_n <= '0;
            state <= S_UPD;
          end
        end
        S_UPD: if (rsp_ok) begin
          issued   <= 1'b0;
          s_value  <= r.value;
          s_dvalue <= r.dvalue;
          s_fwd    <= f_dir;
          s_bwd    <= b_dir;
          s_upd    <= b_dir && (cc.bipolar || r.dvalue);
          s_bp     <= b_dir && r.dgrad && !is_input_core;
          state    <= (f_dir || b_dir) ? S_GREEN_REQ : S_FINAL;
        end
        S_GREEN_REQ: if (rd_ready) begin
          rx_cnt <= '0;
          state  <= S_GREEN_WAIT;
        end
        S_GREEN_WAIT: if (rd_valid) begin
          rx_cnt <= rx_cnt + 1'b1;
          if (rx_cnt == 7'd0) wl_addr <= rd_data;
          else begin
            first_t <= rd_data[16 +: GADDR_W];
            n_tgt   <= rd_data[15:0];
            state   <= S_GSETUP;
          end
        end
        S_GSETUP: begin
          nwords            <= nwords_c;
          word_base         <= '0;
          j                 <= '0;
          ev_src            <= 1'b1;
          ev_src_pipe_words <= 16'd2 + nwords_c;
          ev_src_std_words  <= (s_fwd ? 16'd2 + nwords_c : 16'd0) + (s_bwd ? 16'd2 + nwords_c : 16'd0);
          state             <= (n_tgt == 16'd0) ? S_FINAL : S_W_REQ;
        end
        S_W_REQ: if (rd_ready) begin
          buf_cnt <= (remain > 16'd64) ? 7'd64 : remain[6:0];
          rx_cnt  <= '0;
          state   <= S_W_WAIT;
        end
        S_W_WAIT: if (rd_valid) begin
          rx_cnt <= rx_cnt + 1'b1;
          if (rx_cnt == buf_cnt - 7'd1) begin
            wi    <= '0;
            state <= S_LOADW;
          end
        end
        S_LOADW: begin
          word_acc <= wbuf[wi[5:0]];
          dirty    <= 1'b0;
          slot     <= '0;
          state    <= S_TGT;
        end
        S_TGT: if (rsp_ok) begin
          issued  <= 1'b0;
          tgt_err <= r.err;
          cur_w   <= w_ext;
          new_w   <= w_ext;
          rep     <= '0;
          state   <= (s_bwd && r.err != 0 && (s_upd || s_bp)) ? S_BWD : S_NEXTW;
        end
        S_BWD: begin
          if (!s_bp || rsp_ok) begin
            issued <= 1'b0;
            if (s_upd) new_w <= w_stepped;
            rep <= rep + 1'b1;
            if (rep + 1'b1 == err_mag) state <= S_NEXTW;
          end
        end
        S_NEXTW: begin
          word_acc <= word_next;
          dirty    <= dirty || w_changed;
          j        <= j + 16'd1;
          if (last_in_word) state <= (dirty || w_changed) ? S_WR : S_ADV;
          else begin
            slot  <= slot + 1'b1;
            state <= S_TGT;
          end
        end
        S_WR: if (wr_ready) state <= S_ADV;
        S_ADV: begin
          if (j == n_tgt) state <= S_FINAL;
          else if (wi + 7'd1 == buf_cnt) begin
            word_base <= word_base + 16'(buf_cnt);
            state     <= S_W_REQ;
          end else begin
            wi    <= wi + 1'b1;
            state <= S_LOADW;
          end
        end
        S_FINAL: if (rsp_ok) begin
          issued <= 1'b0;
          if (cur_n + 1'b1 == cc.count) begin
            cur_core <= cur_core + 1'b1;
            state    <= S_CORE;
          end else begin
            cur_n <= cur_n + 1'b1;
            state <= S_UPD;
          end
        end
        S_TOP: if (rsp_ok) begin
          issued <= 1'b0;
          state  <= S_PASS_END;
        end
        S_PASS_END: begin
          ev_example <= 1'b1;
          if (pass_cnt != 3'd7) pass_cnt <= pass_cnt + 1'b1;
          img_idx <= img_idx + 1'b1;
          state   <= (img_idx + 32'd1 == gcfg.num_images) ? S_IDLE : S_IMG_REQ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // receive buffer
  always_ff @(posedge clk) begin
    if (rd_valid && (state == S_IMG_WAIT || state == S_W_WAIT)) wbuf[rx_cnt[5:0]] <= rd_data;
  end

  // A core command is only issued when no other is outstanding.
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n) cmd_valid |-> !issued);

endmodule
