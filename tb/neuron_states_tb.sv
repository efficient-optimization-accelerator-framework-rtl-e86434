// neuron_states_tb -- checks the color-vector register file (64 nodes).
//
// After reset all colors must be 0. Host writes set whole colors and read
// back; spin updates change exactly one bit of one node; when an update and a
// host write arrive together the update must win and the host write be lost.
// A shadow model tracks every node.
module neuron_states_tb;
  localparam int N = 64, NB = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0][NB-1:0] states;
  logic upd_en = 0, upd_val = 0, h_we = 0;
  logic [5:0] upd_node = 0, h_node = 0;
  logic [1:0] upd_bit = 0;
  logic [NB-1:0] h_wdata = 0, h_rdata;
  logic [NB-1:0] shadow [N];
  int checks = 0, failures = 0, n_conflict = 0;

  neuron_states #(.N(N), .NB(NB)) dut (
    .clk, .rst_n, .states, .upd_en, .upd_node, .upd_bit, .upd_val,
    .h_we, .h_node, .h_wdata, .h_rdata);

  always #5 clk = ~clk;

  task automatic compare_all();
    for (int i = 0; i < N; i++) begin
      checks++;
      if (states[i] !== shadow[i]) begin
        failures++;
        if (failures < 5) $display("node %0d: %h exp %h", i, states[i], shadow[i]);
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) shadow[i] = '0;
    compare_all();
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      shadow[i] = NB'($urandom);
      h_we = 1; h_node = 6'(i); h_wdata = shadow[i];
    end
    @(negedge clk);
    h_we = 0;
    compare_all();
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // apply the previous cycle's effect was already captured; draw new stimulus
      upd_en = ($urandom % 2) == 1;
      h_we = ($urandom % 3) == 0;
      upd_node = 6'($urandom); upd_bit = 2'($urandom); upd_val = 1'($urandom);
      h_node = 6'($urandom); h_wdata = NB'($urandom);
      #1;
      checks++; if (h_rdata !== shadow[h_node]) failures++;
      if (upd_en) shadow[upd_node][upd_bit] = upd_val;
      else if (h_we) shadow[h_node] = h_wdata;
      if (upd_en && h_we) n_conflict++;
      @(posedge clk);
      #1;
      compare_all();
    end
    checks++; if (n_conflict == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
