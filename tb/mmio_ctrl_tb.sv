// mmio_ctrl_tb -- checks the host register file and address decoding.
//
// Small memory models stand behind the controller's memory ports. The test
// checks: reset values; register writes with clamping of N and Q and the
// derived n = ceil(log2 Q) for every Q; that weight, bias, LUT and state
// accesses reach the right memory port with the right address; that read
// data arrives exactly one cycle after the request; that start pulses once;
// that done is sticky until the next start; and that all writes are dropped
// while busy.
module mmio_ctrl_tb;
  import vec_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 256, NB = 4;
  logic clk = 0, rst_n = 0;
  logic mm_req = 0, mm_we = 0, mm_rvalid;
  logic [19:0] mm_addr = 0;
  logic [31:0] mm_wdata = 0, mm_rdata;
  cfg_t cfg;
  logic start, busy = 0, run_done = 0;
  logic [31:0] sweep = 32'd77;
  logic wb_we, wb_sel_bias;
  logic [7:0] wb_row, wb_col, wb_wdata, wb_rdata;
  logic [9:0] wb_bidx;
  logic lut_we;
  logic [7:0] lut_addr;
  logic [15:0] lut_wdata, lut_rdata;
  logic st_we;
  logic [7:0] st_node;
  logic [3:0] st_wdata, st_rdata;
  int checks = 0, failures = 0, starts = 0;

  // memory models
  logic [7:0]  wm [65536];
  logic [7:0]  bm [1024];
  logic [15:0] lm [256];
  logic [3:0]  sm [256];
  initial begin
    foreach (wm[i]) wm[i] = '0;
    foreach (bm[i]) bm[i] = '0;
    foreach (lm[i]) lm[i] = '0;
    foreach (sm[i]) sm[i] = '0;
  end
  always_ff @(posedge clk) begin
    if (wb_we && !wb_sel_bias) wm[{wb_row, wb_col}] <= wb_wdata;
    if (wb_we &&  wb_sel_bias) bm[wb_bidx] <= wb_wdata;
    if (lut_we) lm[lut_addr] <= lut_wdata;
    if (st_we) sm[st_node] <= st_wdata;
    if (start) starts <= starts + 1;
  end
  assign wb_rdata  = wb_sel_bias ? bm[wb_bidx] : wm[{wb_row, wb_col}];
  assign lut_rdata = lm[lut_addr];
  assign st_rdata  = sm[st_node];

  mmio_ctrl #(.N(N), .NB(NB)) dut (
    .clk, .rst_n, .mm_req, .mm_we, .mm_addr, .mm_wdata, .mm_rvalid, .mm_rdata,
    .cfg, .start, .busy, .run_done, .sweep,
    .wb_we, .wb_sel_bias, .wb_row, .wb_col, .wb_bidx, .wb_wdata, .wb_rdata,
    .lut_we, .lut_addr, .lut_wdata, .lut_rdata,
    .st_we, .st_node, .st_wdata, .st_rdata);

  always #5 clk = ~clk;

  task automatic wr(input logic [19:0] a, input logic [31:0] d);
    @(negedge clk);
    mm_req = 1; mm_we = 1; mm_addr = a; mm_wdata = d;
    @(negedge clk);
    mm_req = 0; mm_we = 0;
  endtask

  task automatic rd(input logic [19:0] a, output logic [31:0] d);
    @(negedge clk);
    mm_req = 1; mm_we = 0; mm_addr = a;
    @(negedge clk);
    mm_req = 0;
    checks++;
    if (!mm_rvalid) begin failures++; $display("no rvalid for %h", a); end
    d = mm_rdata;
    #1;
    @(negedge clk);
    checks++; if (mm_rvalid) failures++;
  endtask

  task automatic expect_rd(input logic [19:0] a, input logic [31:0] e);
    logic [31:0] d;
    rd(a, d);
    checks++;
    if (d !== e) begin
      failures++;
      $display("read %h: %h exp %h", a, d, e);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    expect_rd(20'h00001, 256);
    expect_rd(20'h00002, 16);
    expect_rd(20'h00005, 4);
    expect_rd(20'h00003, 1);
    expect_rd(20'h00004, 77);
    // clamping
    wr(20'h00001, 0);    expect_rd(20'h00001, 1);
    wr(20'h00001, 1000); expect_rd(20'h00001, 256);
    wr(20'h00001, 87);   expect_rd(20'h00001, 87);
    for (int q = 1; q <= 20; q++) begin
      int qe;
      qe = (q > 16) ? 16 : q;
      wr(20'h00002, q);
      expect_rd(20'h00002, qe);
      expect_rd(20'h00005, ceil_log2_min1(qe));
      checks++; if (int'(cfg.nbits) != ceil_log2_min1(qe)) failures++;
    end
    wr(20'h00003, 1000); expect_rd(20'h00003, 1000);
    checks++; if (cfg.num_sweeps != 1000 || cfg.num_nodes != 87) failures++;
    // memories
    wr(20'h1_0305, 8'h5A);  expect_rd(20'h1_0305, 8'h5A);
    checks++; if (wm[16'h0305] != 8'h5A) failures++;
    wr(20'h1_FF00, 8'hC3);  expect_rd(20'h1_FF00, 8'hC3);
    wr(20'h2_0007, 8'hF0);  expect_rd(20'h2_0007, 8'hF0);
    checks++; if (bm[7] != 8'hF0) failures++;
    wr(20'h3_0080, 16'hBEEF); expect_rd(20'h3_0080, 16'hBEEF);
    wr(20'h4_0011, 4'hB);  expect_rd(20'h4_0011, 4'hB);
    expect_rd(20'h9_0000, 0);
    // start and done
    wr(20'h00000, 1);
    expect_rd(20'h00000, 0);
    checks++; if (starts != 1) begin failures++; $display("starts=%0d", starts); end
    busy = 1;
    expect_rd(20'h00000, 1);
    // all writes dropped while busy
    wr(20'h1_0305, 8'h11);
    wr(20'h2_0007, 8'h11);
    wr(20'h3_0080, 16'h1111);
    wr(20'h4_0011, 4'h1);
    wr(20'h00001, 5);
    wr(20'h00000, 1);
    expect_rd(20'h1_0305, 8'h5A);
    expect_rd(20'h2_0007, 8'hF0);
    expect_rd(20'h3_0080, 16'hBEEF);
    expect_rd(20'h4_0011, 4'hB);
    expect_rd(20'h00001, 87);
    checks++; if (starts != 1) failures++;
    @(negedge clk);
    busy = 0; run_done = 1;
    @(negedge clk);
    run_done = 0;
    expect_rd(20'h00000, 2);
    expect_rd(20'h00000, 2);
    wr(20'h00000, 1);
    expect_rd(20'h00000, 0);
    checks++; if (starts != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
