// weight_bias_mem_tb -- checks the weight and bias store (32 nodes x 4 bits).
//
// Every weight and bias is written with a random value through the host port
// and read back; then every row read must present all its weights in order,
// and every bias read the right bias. Finally single entries are overwritten
// and the neighbouring entries must be unchanged.
module weight_bias_mem_tb;
  localparam int N = 32, NB = 4;
  logic clk = 0;
  logic [4:0] row_sel;
  logic [N-1:0][7:0] wrow;
  logic [6:0] bias_sel;
  logic signed [7:0] bias;
  logic h_we = 0, h_sel_bias = 0;
  logic [4:0] h_row, h_col;
  logic [6:0] h_bidx;
  logic [7:0] h_wdata, h_rdata;
  logic [7:0] wref [N][N];
  logic [7:0] bref [N*NB];
  int checks = 0, failures = 0;

  weight_bias_mem #(.N(N), .NB(NB), .WW_(8)) dut (
    .clk, .row_sel, .wrow, .bias_sel, .bias,
    .h_we, .h_sel_bias, .h_row, .h_col, .h_bidx, .h_wdata, .h_rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    row_sel = 0; bias_sel = 0; h_row = 0; h_col = 0; h_bidx = 0; h_wdata = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        @(negedge clk);
        wref[i][j] = 8'($urandom);
        h_we = 1; h_sel_bias = 0; h_row = 5'(i); h_col = 5'(j); h_wdata = wref[i][j];
      end
    for (int b = 0; b < N*NB; b++) begin
      @(negedge clk);
      bref[b] = 8'($urandom);
      h_we = 1; h_sel_bias = 1; h_bidx = 7'(b); h_wdata = bref[b];
    end
    @(negedge clk);
    h_we = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        h_sel_bias = 0; h_row = 5'(i); h_col = 5'(j);
        #1;
        checks++; if (h_rdata !== wref[i][j]) failures++;
      end
    for (int i = 0; i < N; i++) begin
      row_sel = 5'(i);
      #1;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (wrow[j] !== wref[i][j]) begin
          failures++;
          if (failures < 5) $display("row %0d col %0d: %h exp %h", i, j, wrow[j], wref[i][j]);
        end
      end
    end
    for (int b = 0; b < N*NB; b++) begin
      bias_sel = 7'(b); h_sel_bias = 1; h_bidx = 7'(b);
      #1;
      checks++; if (bias !== bref[b] || h_rdata !== bref[b]) failures++;
    end
    // overwrite single entries
    for (int t = 0; t < 50; t++) begin
      int i, j;
      i = $urandom % N; j = $urandom % N;
      @(negedge clk);
      wref[i][j] = 8'($urandom);
      h_we = 1; h_sel_bias = 0; h_row = 5'(i); h_col = 5'(j); h_wdata = wref[i][j];
      @(negedge clk);
      h_we = 0;
      row_sel = 5'(i);
      #1;
      for (int c = 0; c < N; c++) begin
        checks++; if (wrow[c] !== wref[i][c]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
