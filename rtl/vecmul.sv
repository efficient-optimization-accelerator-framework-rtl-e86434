// vecmul -- Delta-H contribution of one neighbour to one spin bit.
//
// When spin bit k of node i is sampled, the machine needs
//   dH_ij = W_ij * ( F(S_i with s_ik=1, S_j) - F(S_i with s_ik=0, S_j) ).
// As in the paper this is two higher-order multiplexers and a subtractor.
// Each multiplexer has 2**(2*NB-1) data inputs, each tied to W_ij or to 0
// according to the F truth table (tt1: the table with s_ik = 1, tt0: with
// s_ik = 0, both produced by f_operator), and is selected by the other 2*NB-1
// state bits: the bits of S_i other than k, lowest first, then all of S_j.
// The difference of the two outputs is the signed contribution.
//
// Purely combinational. Output: a signed WW_+1-bit value in [-W, +W]. The
// weight width and the select-bit order are this design's choices.
module vecmul
  import vec_pkg::*;
#(
  parameter int unsigned NB  = NB_MAX,
  parameter int unsigned WW_ = WW
) (
  input  logic [2**(2*NB-1)-1:0] tt1,        // data pattern of the s_ik = 1 multiplexer
  input  logic [2**(2*NB-1)-1:0] tt0,        // data pattern of the s_ik = 0 multiplexer
  input  logic [NB-1:0]          si,         // color vector of the node being updated
  input  logic [NB-1:0]          sj,         // color vector of the neighbour
  input  logic [$clog2(NB)-1:0]  bit_sel,    // k
  input  logic [WW_-1:0]         w,          // W_ij
  output logic signed [WW_:0]    dh
);

  logic [2*NB-2:0] sel;
  logic [WW_-1:0]  mux1, mux0;

  always_comb begin
    logic [NB-2:0] rest;
    int unsigned p;
    rest = '0;
    p = 0;
    for (int unsigned b = 0; b < NB; b++) begin
      if (b != 32'(bit_sel)) begin
        rest[p] = si[b];
        p++;
      end
    end
    sel = {rest, sj};
  end

  assign mux1 = tt1[sel] ? w : '0;
  assign mux0 = tt0[sel] ? w : '0;
  assign dh   = $signed({1'b0, mux1}) - $signed({1'b0, mux0});

endmodule
