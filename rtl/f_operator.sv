// f_operator -- truth table of the graph-coloring interaction F(S_i, S_j).
//
// Two neighbouring nodes carry NB-bit color vectors S_i and S_j. F is 1 when
// the two colors are equal, or when either color is not a legal color
// (value >= Q); otherwise F is 0. The energy of the vectorized Hamiltonian is
// H = sum over edges of W_ij * F(S_i, S_j), which is zero for a proper
// coloring. The rule is the paper's (Algorithm 1).
//
// Outputs:
//  * ftab: the whole table, 2**(2*NB) one-bit entries indexed by {S_i, S_j}
//    (S_i in the upper NB bits).
//  * mux_tt[k][v]: the table slice with spin bit s_ik forced to v, indexed by
//    the other 2*NB-1 select bits {S_i without bit k, S_j}. These slices are
//    the "W or 0" patterns on the data inputs of the two higher-order
//    multiplexers in every vecmul unit that updates bit k.
//
// The table is combinational in the programmable color count Q, so one table
// serves every problem with up to 2**NB colors and is shared by all vecmul
// units; Q changes only between runs, so it is static while spins are
// updated. Computing it from a register rather than hard-wiring it is this
// design's choice.
module f_operator
  import vec_pkg::*;
#(
  parameter int unsigned NB = NB_MAX
) (
  input  logic [4:0]                             num_colors,   // Q
  output logic [2**(2*NB)-1:0]                   ftab,         // F, index {S_i, S_j}
  output logic [NB-1:0][1:0][2**(2*NB-1)-1:0]    mux_tt        // [k][s_ik][select]
);

  localparam int unsigned SELW = 2*NB-1;

  function automatic logic f_color(input logic [NB-1:0] ci, input logic [NB-1:0] cj,
                                   input logic [4:0] q);
    return (ci == cj) || (5'(ci) >= q) || (5'(cj) >= q);
  endfunction

  always_comb begin
    for (int unsigned idx = 0; idx < 2**(2*NB); idx++)
      ftab[idx] = f_color(NB'(idx >> NB), NB'(idx), num_colors);
  end

  // Slice the table per updated bit: select m = {rest of S_i, S_j}, where
  // "rest" holds the bits of S_i other than k, lowest first.
  always_comb begin
    for (int unsigned k = 0; k < NB; k++) begin
      for (int unsigned m = 0; m < 2**SELW; m++) begin
        logic [NB-1:0] ci1, ci0, cj;
        int unsigned   p;
        cj = NB'(m);
        p  = NB;
        for (int unsigned b = 0; b < NB; b++) begin
          if (b == k) begin
            ci1[b] = 1'b1;
            ci0[b] = 1'b0;
          end else begin
            ci1[b] = m[p];
            ci0[b] = m[p];
            p++;
          end
        end
        mux_tt[k][1][m] = ftab[{ci1, cj}];
        mux_tt[k][0][m] = ftab[{ci0, cj}];
      end
    end
  end

endmodule
