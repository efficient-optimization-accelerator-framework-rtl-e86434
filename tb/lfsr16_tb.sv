// lfsr16_tb -- checks the random number generator.
//
// After reset the register must hold the seed; with en high it must follow
// the reference recurrence for 70000 steps, never reach zero and return to
// the seed after exactly 65535 steps (maximal length); with en low it must
// hold its value.
module lfsr16_tb;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0] rnd, ref_r;
  int checks = 0, failures = 0;
  int period = -1;

  lfsr16 #(.SEED(16'hACE1)) dut (.clk, .rst_n, .en, .rnd);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (rnd !== 16'hACE1) begin failures++; $display("seed wrong %h", rnd); end
    ref_r = 16'hACE1;
    en = 1;
    for (int s = 1; s <= 70000; s++) begin
      @(negedge clk);
      ref_r = lfsr_step(ref_r);
      checks++;
      if (rnd !== ref_r || rnd == 0) begin
        failures++;
        if (failures < 5) $display("step %0d: got %h exp %h", s, rnd, ref_r);
      end
      if (period < 0 && rnd == 16'hACE1) period = s;
    end
    checks++; if (period != 65535) begin failures++; $display("period %0d", period); end
    en = 0;
    ref_r = rnd;
    repeat (5) @(negedge clk);
    checks++; if (rnd !== ref_r) begin failures++; $display("moved while en low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
