// neuron_states -- color vectors of all graph nodes.
//
// N registers of NB bits; register i holds the binary color vector
// {s_i(NB-1), ..., s_i0} of node i. All of them are presented every cycle on
// `states`, because every vecmul unit needs its neighbour's color. A spin
// update writes one bit (upd_bit of node upd_node) at the clock edge; the
// host can write a whole color vector (to set a start state) and read any of
// them. A spin update and a host write in the same cycle are not expected
// (the controller blocks host writes while a run is busy); the update wins.
// Reset clears all colors to 0.
//
// The paper keeps the states in local FPGA memory; holding them in
// flip-flops, which the all-to-all read requires, is this design's choice.
module neuron_states
  import vec_pkg::*;
#(
  parameter int unsigned N  = N_MAX,
  parameter int unsigned NB = NB_MAX
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic [N-1:0][NB-1:0]      states,
  // spin update
  input  logic                      upd_en,
  input  logic [$clog2(N)-1:0]      upd_node,
  input  logic [$clog2(NB)-1:0]     upd_bit,
  input  logic                      upd_val,
  // host access
  input  logic                      h_we,
  input  logic [$clog2(N)-1:0]      h_node,
  input  logic [NB-1:0]             h_wdata,
  output logic [NB-1:0]             h_rdata
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      states <= '0;
    else if (upd_en)
      states[upd_node][upd_bit] <= upd_val;
    else if (h_we)
      states[h_node] <= h_wdata;
  end

  assign h_rdata = states[h_node];

endmodule
