// ddr2_model: behavioural stand-in for the DDR2 DRAM and its memory controller.
//
// Not synthesizable and not part of the design.  Holds a sparse word-addressed memory
// (unwritten words read as 0).  A read request (rd_req with rd_ready) returns rd_len words
// in order after LAT cycles, one per cycle with an occasional idle cycle; a write is taken
// when wr_ready is high, which it is not while a read is streaming and, at random, in about
// one cycle out of four, to exercise the controller's wait states.
module ddr2_model #(
  parameter int unsigned LAT = 6,
  parameter int unsigned AW  = 25
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rd_req,
  input  logic [AW-1:0] rd_addr,
  input  logic [6:0]    rd_len,
  output logic          rd_ready,
  output logic          rd_valid,
  output logic [31:0]   rd_data,
  input  logic          wr_req,
  input  logic [AW-1:0] wr_addr,
  input  logic [31:0]   wr_data,
  output logic          wr_ready
);
  logic [31:0] mem [int unsigned];

  logic          streaming;
  logic [AW-1:0] ptr;
  int unsigned   left, wait_cnt;
  logic          wr_gap;
  int unsigned   wr_stalls;

  function automatic logic [31:0] peek(input int unsigned a);
    return mem.exists(a) ? mem[a] : 32'd0;
  endfunction

  assign rd_ready = !streaming;
  assign wr_ready = !streaming && !wr_gap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      streaming <= 1'b0;
      rd_valid  <= 1'b0;
      rd_data   <= '0;
      ptr       <= '0;
      left      <= 0;
      wait_cnt  <= 0;
      wr_gap    <= 1'b0;
      wr_stalls <= 0;
    end else begin
      wr_gap   <= ($urandom_range(3) == 0);
      rd_valid <= 1'b0;
      if (wr_req && !wr_ready) wr_stalls <= wr_stalls + 1;
      if (wr_req && wr_ready) mem[int'(wr_addr)] = wr_data;
      if (!streaming && rd_req) begin
        streaming <= 1'b1;
        ptr       <= rd_addr;
        left      <= rd_len;
        wait_cnt  <= LAT;
      end else if (streaming) begin
        if (wait_cnt != 0) wait_cnt <= wait_cnt - 1;
        else if ($urandom_range(7) != 0) begin
          rd_valid <= 1'b1;
          rd_data  <= peek(int'(ptr));
          ptr      <= ptr + 1'b1;
          left     <= left - 1;
          if (left == 1) streaming <= 1'b0;
        end
      end
    end
  end
endmodule
