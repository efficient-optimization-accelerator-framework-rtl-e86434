// lfsr16 -- 16-bit pseudo-random number generator for the spin updates.
//
// A Fibonacci linear feedback shift register with taps 16, 14, 13, 11
// (polynomial x^16 + x^14 + x^13 + x^11 + 1, maximal length 65535). It
// starts from a fixed seed after reset and steps once per cycle in which en
// is high. rnd is the register itself; it is never zero. The paper gives the
// 16-bit width and the fixed seed; the polynomial, shift direction and seed
// value are this design's choice.
module lfsr16 #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [15:0] rnd
);

  logic fb;
  assign fb = rnd[15] ^ rnd[13] ^ rnd[12] ^ rnd[10];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rnd <= SEED;
    else if (en) rnd <= {rnd[14:0], fb};
  end

endmodule
