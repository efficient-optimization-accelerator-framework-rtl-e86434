// neuron_update_tb -- checks the sigmoid table, random number and threshold.
//
// The table is filled through its host port with the sigmoid for T = 8 (one
// Delta-H unit per address) and read back. Then, for random Delta-H values
// with upd_en high, the output spin must equal (r < LUT[dh]) where r follows
// the reference LFSR from the seed; the LFSR must not step while upd_en is
// low. Finally the fraction of ones at a few Delta-H values must match the
// sigmoid within a statistical margin.
module neuron_update_tb;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic signed [7:0] dh;
  logic upd_en = 0, lut_we = 0;
  logic [7:0] lut_addr;
  logic [15:0] lut_wdata, lut_rdata, prob, rnd;
  logic s_new;
  logic [15:0] ref_r;
  logic [15:0] table_ref [256];
  int checks = 0, failures = 0;
  int dh_pts[5] = '{-20, -5, 0, 6, 25};

  neuron_update #(.DHW_(8), .LUTW_(16)) dut (
    .clk, .rst_n, .dh, .upd_en, .lut_we, .lut_addr, .lut_wdata, .lut_rdata,
    .prob, .rnd, .s_new);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dh = 0; lut_addr = 0; lut_wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 256; a++) begin
      table_ref[a] = lut_entry(int'($signed(8'(a))), 1.0, 8.0);
      @(negedge clk);
      lut_we = 1; lut_addr = 8'(a); lut_wdata = table_ref[a];
    end
    @(negedge clk);
    lut_we = 0;
    for (int a = 0; a < 256; a++) begin
      lut_addr = 8'(a);
      #1;
      checks++;
      if (lut_rdata !== table_ref[a]) failures++;
    end
    // exact sampling against the reference
    ref_r = 16'hACE1;
    for (int t = 0; t < 5000; t++) begin
      logic en_now;
      @(negedge clk);
      en_now = ($urandom % 4) != 0;
      dh = 8'($urandom);
      upd_en = en_now;
      #1;
      checks++;
      if (rnd !== ref_r || prob !== table_ref[8'(dh)] ||
          s_new !== (ref_r < table_ref[8'(dh)])) begin
        failures++;
        if (failures < 6) $display("t=%0d rnd=%h exp=%h s=%b", t, rnd, ref_r, s_new);
      end
      if (en_now) ref_r = lfsr_step(ref_r);
    end
    // statistics at a few Delta-H values
    foreach (dh_pts[p]) begin
      int ones;
      real pexp, pgot;
      ones = 0;
      for (int t = 0; t < 4000; t++) begin
        @(negedge clk);
        dh = 8'(dh_pts[p]);
        upd_en = 1;
        #1;
        ones += int'(s_new);
      end
      pexp = 1.0 / (1.0 + $exp(real'(dh_pts[p]) / 8.0));
      pgot = real'(ones) / 4000.0;
      checks++;
      if (pgot > pexp + 0.04 || pgot < pexp - 0.04) begin
        failures++;
        $display("dh=%0d p=%f exp=%f", dh_pts[p], pgot, pexp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
