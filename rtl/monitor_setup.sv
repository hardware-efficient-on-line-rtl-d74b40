// monitor_setup: host-side setup registers and monitoring counters.
//
// The host (a PC behind a USB bridge in the paper's system) configures the engine and reads
// statistics through a simple synchronous register bus: host_we writes host_wdata to
// host_addr at the clock edge; host_rdata is the combinational read of host_addr.  Writing
// bit 0 of CTRL pulses start for one cycle.  The counters follow the monitoring the paper
// describes: 32-bit words read from and written to DRAM, read bursts, and the read volume
// that plain (non-pipelined) backpropagation would have needed, as predicted by the
// controller; plus examples processed and correctly classified.  Counters are 48 bits wide
// (one epoch of the largest configuration reads about 6.3e9 words, beyond 32 bits) and are
// cleared by writing CLR_CNT.  Register map and widths are this design's.
//
//  addr  name        bits
//  0x00  CTRL        [0] start (write 1), [1] learn_en, [2] w16
//  0x01  LR_SHIFT    [3:0]
//  0x02  HINGE       [31:0] signed
//  0x03  DROP_PROB   [7:0]  (stored in the PRNG, see prob_we)
//  0x04  IMG_BASE    [31:0]
//  0x05  NUM_IMAGES  [31:0]
//  0x06  N_INPUT     [11:0]
//  0x07  CLR_CNT     write: clear all counters
//  0x10+c CORE_CFG c [8:0] count, [11:9] K, [12] bipolar
//  0x20  STATUS      [0] busy, [7:4] last class, [8] last correct   (read only)
//  0x22/0x23 RD_WORDS lo/hi, 0x24/0x25 WR_WORDS, 0x26/0x27 RD_BURSTS,
//  0x28/0x29 STD_RD_WORDS, 0x2A/0x2B PIPE_RD_WORDS, 0x2C/0x2D EXAMPLES, 0x2E/0x2F CORRECT
module monitor_setup
  import bsn_pkg::*;
#(
  parameter int unsigned CNT_W = 48
) (
  input  logic              clk,
  input  logic              rst_n,
  // host register bus
  input  logic              host_we,
  input  logic [7:0]        host_addr,
  input  logic [31:0]       host_wdata,
  output logic [31:0]       host_rdata,
  // configuration out
  output glob_cfg_t         gcfg,
  output core_cfg_t         ccfg [NUM_CORES],
  output logic              start,
  output logic              prob_we,
  output logic [7:0]        prob_wdata,
  input  logic [7:0]        prob,
  // events in
  input  logic              busy,
  input  logic              ev_rd_word,
  input  logic              ev_wr_word,
  input  logic              ev_rd_burst,
  input  logic              ev_src,
  input  logic [15:0]       ev_src_pipe_words,
  input  logic [15:0]       ev_src_std_words,
  input  logic              ev_example,
  input  logic [3:0]        last_class,
  input  logic              last_correct
);

  logic [CNT_W-1:0] c_rd, c_wr, c_burst, c_std, c_pipe, c_ex, c_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gcfg  <= '0;
      start <= 1'b0;
      for (int c = 0; c < NUM_CORES; c++) ccfg[c] <= '0;
    end else begin
      start <= 1'b0;
      if (host_we) begin
        if (host_addr[7:4] == 4'h1) begin
          ccfg[host_addr[3:0]] <= core_cfg_t'(host_wdata[12:0]);
        end else begin
          unique case (host_addr)
            8'h00: begin
              start         <= host_wdata[0];
              gcfg.learn_en <= host_wdata[1];
              gcfg.w16      <= host_wdata[2];
            end
            8'h01: gcfg.lr_shift   <= host_wdata[3:0];
            8'h02: gcfg.hinge      <= host_wdata;
            8'h04: gcfg.img_base   <= host_wdata;
            8'h05: gcfg.num_images <= host_wdata;
            8'h06: gcfg.n_input    <= host_wdata[11:0];
            default: ;
          endcase
        end
      end
    end
  end

  assign prob_we    = host_we && (host_addr == 8'h03);
  assign prob_wdata = host_wdata[7:0];
  wire   clr        = host_we && (host_addr == 8'h07);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {c_rd, c_wr, c_burst, c_std, c_pipe, c_ex, c_ok} <= '0;
    end else if (clr) begin
      {c_rd, c_wr, c_burst, c_std, c_pipe, c_ex, c_ok} <= '0;
    end else begin
      if (ev_rd_word)  c_rd    <= c_rd + 1'b1;
      if (ev_wr_word)  c_wr    <= c_wr + 1'b1;
      if (ev_rd_burst) c_burst <= c_burst + 1'b1;
      if (ev_src) begin
        c_std  <= c_std  + CNT_W'(ev_src_std_words);
        c_pipe <= c_pipe + CNT_W'(ev_src_pipe_words);
      end
      if (ev_example) begin
        c_ex <= c_ex + 1'b1;
        if (last_correct) c_ok <= c_ok + 1'b1;
      end
    end
  end

  function automatic logic [31:0] half(input logic [CNT_W-1:0] v, input logic hi);
    logic [63:0] w;
    w = 64'(v);
    return hi ? w[63:32] : w[31:0];
  endfunction

  always_comb begin
    host_rdata = '0;
    if (host_addr[7:4] == 4'h1) begin
      host_rdata[12:0] = ccfg[host_addr[3:0]];
    end else begin
      unique case (host_addr)
        8'h00: host_rdata = {29'd0, gcfg.w16, gcfg.learn_en, 1'b0};
        8'h01: host_rdata = {28'd0, gcfg.lr_shift};
        8'h02: host_rdata = gcfg.hinge;
        8'h03: host_rdata = {24'd0, prob};
        8'h04: host_rdata = gcfg.img_base;
        8'h05: host_rdata = gcfg.num_images;
        8'h06: host_rdata = {20'd0, gcfg.n_input};
        8'h20: host_rdata = {23'd0, last_correct, last_class, 3'd0, busy};
        8'h22, 8'h23: host_rdata = half(c_rd,    host_addr[0]);
        8'h24, 8'h25: host_rdata = half(c_wr,    host_addr[0]);
        8'h26, 8'h27: host_rdata = half(c_burst, host_addr[0]);
        8'h28, 8'h29: host_rdata = half(c_std,   host_addr[0]);
        8'h2A, 8'h2B: host_rdata = half(c_pipe,  host_addr[0]);
        8'h2C, 8'h2D: host_rdata = half(c_ex,    host_addr[0]);
        8'h2E, 8'h2F: host_rdata = half(c_ok,    host_addr[0]);
        default: host_rdata = '0;
      endcase
    end
  end

endmodule
