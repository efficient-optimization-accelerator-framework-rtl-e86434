// delta_h_unit_tb -- checks the all-to-all Delta-H stage.
//
// A 16-node instance (4-bit colors) is driven with random colors, weights,
// biases, Q, node and bit. The saturated output must equal the reference
// H(s_ik=1) - H(s_ik=0) + bias (each energy summed directly over all
// neighbours, then clipped to -128..127), and the full-width output the
// unclipped value. Nodes at or above a random active-node count carry
// random colors and weights that must be ignored. Small weights exercise the linear range, large ones the
// saturation at both ends, which is counted.
module delta_h_unit_tb;
  import tb_ref_pkg::*;

  localparam int N = 16, NB = 4;
  logic [4:0] num_colors;
  logic [2**(2*NB)-1:0] ftab;
  logic [NB-1:0][1:0][2**(2*NB-1)-1:0] mux_tt;
  logic [N-1:0][NB-1:0] states;
  logic [3:0] node;
  logic [4:0] num_nodes;
  logic [1:0] bit_sel;
  logic [N-1:0][7:0] wrow;
  logic signed [7:0] bias;
  logic signed [13:0] dh_full;
  logic signed [7:0] dh_sat;
  int checks = 0, failures = 0, n_sat_hi = 0, n_sat_lo = 0;
  int col[], w[];

  f_operator #(.NB(NB)) u_f (.num_colors, .ftab, .mux_tt);
  delta_h_unit #(.N(N), .NB(NB), .WW_(8), .DHW_(8)) dut (
    .states, .num_nodes, .node, .bit_sel, .wrow, .bias, .mux_tt, .dh_full, .dh_sat);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int q, i, k, b, e, wmax, m;
      q = 2 + $urandom % 15;
      m = (t % 2 == 0) ? N : 2 + $urandom % (N-1);
      i = $urandom % m;
      k = $urandom % 4;
      b = int'($urandom % 256) - 128;
      wmax = (t % 3 == 0) ? 256 : 8;
      if (t % 5 == 0) b = 0;
      col = new[m];
      w = new[m*m];
      for (int j = 0; j < m; j++) col[j] = $urandom % 16;
      for (int x = 0; x < m*m; x++) w[x] = $urandom % wmax;
      num_colors = 5'(q);
      num_nodes = 5'(m);
      for (int j = 0; j < N; j++) begin
        states[j] = (j < m) ? NB'(col[j]) : NB'($urandom);
        wrow[j]   = (j < m) ? 8'(w[i*m + j]) : 8'($urandom);
      end
      node = 4'(i); bit_sel = 2'(k); bias = 8'(b);
      #1;
      e = delta_h_ref(i, k, m, q, b, col, w);
      checks++;
      if (int'(dh_full) != e || int'(dh_sat) != sat8(e)) begin
        failures++;
        if (failures < 6) $display("t=%0d full=%0d sat=%0d exp=%0d", t, dh_full, dh_sat, e);
      end
      if (e > 127) n_sat_hi++;
      if (e < -128) n_sat_lo++;
    end
    checks++;
    if (n_sat_hi == 0 || n_sat_lo == 0) begin
      failures++;
      $display("saturation not exercised: hi=%0d lo=%0d", n_sat_hi, n_sat_lo);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
