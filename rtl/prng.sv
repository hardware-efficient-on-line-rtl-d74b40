// prng: dropout-signal generator.
//
// Two linear feedback shift registers of different length run side by side and shift in
// opposite directions, register A towards its MSB and register B towards its LSB; the
// paper's PRNG is built this way.  Each cycle an 8-bit random number is formed by XORing
// bits of A with bits of B taken from the far end, so that neighbouring output bits mix
// taps that are travelling apart.  The dropout bit is asserted when that number is below the
// 8-bit probability register, so P(dropout) = prob/256 (0.2 is prob = 51); it is forced low
// while enable is low (learning off).  The lengths (31 and 19 bits, maximal-length
// polynomials x^31+x^28+1 and x^19+x^18+x^17+x^14+1), the tap choice and the comparison
// are this design's; with the probability register they make 58 flip-flops.  Output
// changes every clock; prob is written through prob_we.
module prng #(
  parameter int unsigned LEN_A  = 31,
  parameter int unsigned LEN_B  = 19,
  parameter logic [30:0] SEED_A = 31'h2B3C_4D5E,
  parameter logic [18:0] SEED_B = 19'h5_A5A5
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,
  input  logic       prob_we,
  input  logic [7:0] prob_wdata,
  output logic [7:0] prob,
  output logic [7:0] rnd,
  output logic       dropout
);

  logic [LEN_A-1:0] lfsr_a;
  logic [LEN_B-1:0] lfsr_b;

  wire fb_a = lfsr_a[30] ^ lfsr_a[27];                          // x^31 + x^28 + 1
  wire fb_b = lfsr_b[0] ^ lfsr_b[1] ^ lfsr_b[2] ^ lfsr_b[5];    // reversed x^19+x^18+x^17+x^14+1

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr_a <= SEED_A[LEN_A-1:0];
      lfsr_b <= SEED_B[LEN_B-1:0];
      prob   <= 8'd0;
    end else begin
      lfsr_a <= {lfsr_a[LEN_A-2:0], fb_a};        // shifts up
      lfsr_b <= {fb_b, lfsr_b[LEN_B-1:1]};        // shifts down
      if (prob_we) prob <= prob_wdata;
    end
  end

  always_comb begin
    for (int i = 0; i < 8; i++) rnd[i] = lfsr_a[3*i + 2] ^ lfsr_b[LEN_B - 1 - 2*i];
  end

  assign dropout = enable && (rnd < prob);

endmodule
