// delta_h_unit -- the "vecmul addition" stage: energy change of one spin flip.
//
// For the spin bit k of node i selected this cycle, one vecmul unit per
// neighbour j computes W_ij * (F(S_i|s_ik=1, S_j) - F(S_i|s_ik=0, S_j)). All N
// units work in parallel on the whole weight row of node i; the self term
// j == i and the nodes at or above the programmed node count are masked (so
// the host need only program the active block of the weight matrix), and the
// results are summed together with the bias b_ik:
//   dH = H(s_ik=1) - H(s_ik=0) = b_ik + sum_{j != i} dH_ij.
// The sum is carried at full width and then saturated to the DHW-bit signed
// value that addresses the sigmoid table (the paper gives the 8-bit precision
// of the accumulated product; saturating rather than wrapping is this
// design's choice).
//
// Purely combinational: the paper updates one spin per clock, so the whole
// state-to-Delta-H path settles within one cycle. Ports: all color vectors,
// the node and bit being updated, the weight row, the bias, the multiplexer
// data patterns from f_operator; output the saturated Delta-H and, for
// observation, the unsaturated sum. Masking the unused nodes is this
// design's choice.
module delta_h_unit
  import vec_pkg::*;
#(
  parameter int unsigned N    = N_MAX,
  parameter int unsigned NB   = NB_MAX,
  parameter int unsigned WW_  = WW,
  parameter int unsigned DHW_ = DHW
) (
  input  logic [N-1:0][NB-1:0]                 states,
  input  logic [$clog2(N):0]                   num_nodes,
  input  logic [$clog2(N)-1:0]                 node,
  input  logic [$clog2(NB)-1:0]                bit_sel,
  input  logic [N-1:0][WW_-1:0]                wrow,
  input  logic signed [7:0]                    bias,
  input  logic [NB-1:0][1:0][2**(2*NB-1)-1:0]  mux_tt,
  output logic signed [WW_+$clog2(N)+1:0]      dh_full,
  output logic signed [DHW_-1:0]               dh_sat
);

  localparam int unsigned SW = WW_ + $clog2(N) + 2;    // holds N*(+-W) + bias

  logic signed [WW_:0]      term [N];
  logic [NB-1:0]            si;
  logic [2**(2*NB-1)-1:0]   tt1, tt0;

  assign si  = states[node];
  assign tt1 = mux_tt[bit_sel][1];
  assign tt0 = mux_tt[bit_sel][0];

  for (genvar j = 0; j < N; j++) begin : g_vecmul
    logic signed [WW_:0] dh_j;
    vecmul #(.NB(NB), .WW_(WW_)) u_vecmul (
      .tt1     (tt1),
      .tt0     (tt0),
      .si      (si),
      .sj      (states[j]),
      .bit_sel (bit_sel),
      .w       (wrow[j]),
      .dh      (dh_j)
    );
    assign term[j] = (node == ($clog2(N))'(j) || 32'(num_nodes) <= j) ? '0 : dh_j;
  end

  // Accumulate
  always_comb begin
    dh_full = SW'(bias);
    for (int j = 0; j < N; j++)
      dh_full = dh_full + SW'(term[j]);
  end

  // Saturate to the LUT address range
  localparam logic signed [SW-1:0] DH_MAX = SW'((1 <<< (DHW_-1)) - 1);
  localparam logic signed [SW-1:0] DH_MIN = -SW'(1 <<< (DHW_-1));

  always_comb begin
    if (dh_full > DH_MAX)      dh_sat = DH_MAX[DHW_-1:0];
    else if (dh_full < DH_MIN) dh_sat = DH_MIN[DHW_-1:0];
    else                       dh_sat = dh_full[DHW_-1:0];
  end

endmodule
