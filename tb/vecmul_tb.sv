// vecmul_tb -- checks one vecmul unit against the energy difference.
//
// The F slices come from an f_operator instance. For random Q, colors, bit
// index and weight, the output must equal W*(F(S_i|s_ik=1,S_j) -
// F(S_i|s_ik=0,S_j)) computed by the reference rule. A few fixed cases of the
// 3-color example are checked as well.
module vecmul_tb;
  import tb_ref_pkg::*;

  localparam int NB = 4;
  logic [4:0] num_colors;
  logic [2**(2*NB)-1:0] ftab;
  logic [NB-1:0][1:0][2**(2*NB-1)-1:0] mux_tt;
  logic [NB-1:0] si, sj;
  logic [1:0] bit_sel;
  logic [7:0] w;
  logic signed [8:0] dh;
  int checks = 0, failures = 0;

  f_operator #(.NB(NB)) u_f (.num_colors, .ftab, .mux_tt);
  vecmul #(.NB(NB), .WW_(8)) dut (
    .tt1 (mux_tt[bit_sel][1]), .tt0 (mux_tt[bit_sel][0]),
    .si, .sj, .bit_sel, .w, .dh
  );

  task automatic check(input int q, input int ci, input int cj, input int k, input int wt);
    int exp_dh;
    num_colors = 5'(q); si = NB'(ci); sj = NB'(cj); bit_sel = 2'(k); w = 8'(wt);
    #1;
    exp_dh = wt * (f_ref(ci | (1 << k), cj, q) - f_ref(ci & ~(1 << k), cj, q));
    checks++;
    if (int'(dh) != exp_dh) begin
      failures++;
      if (failures < 8) $display("q=%0d si=%0d sj=%0d k=%0d w=%0d: dh=%0d exp=%0d", q, ci, cj, k, wt, dh, exp_dh);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // 3 colors, 2-bit vectors: S_j = 1 (01); S_i = 00 -> flipping bit0 makes it equal: +W
    check(3, 0, 1, 0, 5);
    // S_i = 10, S_j = 01: bit0 -> 11 is illegal (+W), 10 legal & different -> +W
    check(3, 2, 1, 0, 7);
    // S_i = 01, S_j = 01, bit1: 11 illegal (1), 01 equal (1) -> 0
    check(3, 1, 1, 1, 9);
    // S_i = 00, S_j = 00, bit0: 01 differs (0), 00 equal (1) -> -W
    check(3, 0, 0, 0, 200);
    for (int t = 0; t < 20000; t++)
      check(1 + ($urandom % 16), $urandom % 16, $urandom % 16, $urandom % 4, $urandom % 256);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
