// neuron_update -- sigmoid activation, random number and threshold.
//
// The saturated, signed 8-bit Delta-H addresses a 256-entry look-up table of
// 16-bit probabilities P(s=1) = sigmoid(-Delta-H / T). A 16-bit LFSR supplies
// a uniform random number r, and the new spin is 1 when r < P. The paper
// gives the 256 x 16-bit table, the 16-bit LFSR with fixed seed and the
// comparison. This design makes the table a RAM written by the host, which
// thereby chooses temperature and scaling:
//   LUT[a] = round(65535 * 1 / (1 + exp(a_signed * scale / T))),
// where a_signed is the address read as a two's-complement number.
// A single LFSR serves all spins, because only one spin is updated per clock.
//
// Timing: table read and comparison are combinational, so s_new is valid in
// the same cycle as dh; the LFSR steps at the clock edge that ends a cycle
// with upd_en high, so each update uses a fresh number. The host port writes
// at the clock edge and reads combinationally (registered by mmio_ctrl).
module neuron_update
  import vec_pkg::*;
#(
  parameter int unsigned DHW_  = DHW,
  parameter int unsigned LUTW_ = LUTW
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [DHW_-1:0]  dh,
  input  logic                    upd_en,
  // host access to the sigmoid table
  input  logic                    lut_we,
  input  logic [DHW_-1:0]         lut_addr,
  input  logic [LUTW_-1:0]        lut_wdata,
  output logic [LUTW_-1:0]        lut_rdata,
  // result
  output logic [LUTW_-1:0]        prob,
  output logic [15:0]             rnd,
  output logic                    s_new
);

  logic [LUTW_-1:0] lut [2**DHW_];

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_addr] <= lut_wdata;
  end

  assign lut_rdata = lut[lut_addr];
  assign prob      = lut[dh];

  lfsr16 u_lfsr (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (upd_en),
    .rnd   (rnd)
  );

  assign s_new = 32'(rnd) < 32'(prob);

endmodule
