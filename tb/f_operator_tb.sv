// f_operator_tb -- checks the F truth table and its multiplexer slices.
//
// For every color count Q from 1 to 16 and every pair of 4-bit colors the
// table entry must equal the reference rule (equal colors or a color >= Q
// gives 1). For every bit k, value v and select m, mux_tt[k][v][m] must be
// F of the colors rebuilt from (k, v, m) by the reference.
module f_operator_tb;
  import tb_ref_pkg::*;

  localparam int NB = 4;
  logic [4:0] num_colors;
  logic [2**(2*NB)-1:0] ftab;
  logic [NB-1:0][1:0][2**(2*NB-1)-1:0] mux_tt;
  int checks = 0, failures = 0;

  f_operator #(.NB(NB)) dut (.num_colors, .ftab, .mux_tt);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int q = 1; q <= 16; q++) begin
      num_colors = 5'(q);
      #1;
      for (int ci = 0; ci < 16; ci++)
        for (int cj = 0; cj < 16; cj++) begin
          checks++;
          if (ftab[ci*16 + cj] !== 1'(f_ref(ci, cj, q))) begin
            failures++;
            if (failures < 5) $display("q=%0d F(%0d,%0d)=%b", q, ci, cj, ftab[ci*16+cj]);
          end
        end
      for (int k = 0; k < NB; k++)
        for (int v = 0; v < 2; v++)
          for (int m = 0; m < 128; m++) begin
            int rest, cj, ci, p;
            cj = m & 15;
            rest = m >> 4;
            ci = 0; p = 0;
            for (int b = 0; b < NB; b++)
              if (b == k) ci |= v << b;
              else begin ci |= ((rest >> p) & 1) << b; p++; end
            checks++;
            if (mux_tt[k][v][m] !== 1'(f_ref(ci, cj, q))) begin
              failures++;
              if (failures < 5) $display("q=%0d k=%0d v=%0d m=%0d", q, k, v, m);
            end
          end
    end
    // Example of the paper's 4-node, 3-color case: colors 0..2 legal, 3 not
    num_colors = 5'd3;
    #1;
    checks++; if (ftab[{4'd1, 4'd2}] !== 1'b0) failures++;
    checks++; if (ftab[{4'd2, 4'd2}] !== 1'b1) failures++;
    checks++; if (ftab[{4'd3, 4'd0}] !== 1'b1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
