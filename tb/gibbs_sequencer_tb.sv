// gibbs_sequencer_tb -- checks the update schedule.
//
// For several problem sizes (nodes, bits per node, sweeps) a run is started
// and every cycle with upd_en high must visit the next (node, bit) of the
// reference order: bits 0..nbits-1 of node 0, then node 1, ..., repeated per
// sweep. The run must take exactly nodes*nbits*sweeps update cycles, done
// must pulse once right after, and a start while busy must be ignored.
module gibbs_sequencer_tb;
  localparam int N = 256, NB = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic [8:0] num_nodes;
  logic [2:0] nbits;
  logic [31:0] num_sweeps, sweep;
  logic upd_en, busy, done;
  logic [7:0] node;
  logic [1:0] bit_sel;
  int checks = 0, failures = 0;

  gibbs_sequencer #(.N(N), .NB(NB)) dut (
    .clk, .rst_n, .start, .num_nodes, .nbits, .num_sweeps,
    .upd_en, .node, .bit_sel, .busy, .done, .sweep);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int nn, input int nb, input int ns);
    int cycles = 0, exp_n = 0, exp_b = 0, exp_s = 0, dones = 0;
    @(negedge clk);
    num_nodes = 9'(nn); nbits = 3'(nb); num_sweeps = 32'(ns);
    start = 1;
    @(negedge clk);
    start = 0;
    while (busy) begin
      checks++;
      if (!upd_en || int'(node) != exp_n || int'(bit_sel) != exp_b || int'(sweep) != exp_s) begin
        failures++;
        if (failures < 6) $display("cycle %0d: node %0d bit %0d sweep %0d, exp %0d %0d %0d",
                                   cycles, node, bit_sel, sweep, exp_n, exp_b, exp_s);
      end
      if (cycles == 3) start = 1;      // ignored while busy
      else start = 0;
      cycles++;
      exp_b++;
      if (exp_b == nb) begin
        exp_b = 0; exp_n++;
        if (exp_n == nn) begin exp_n = 0; exp_s++; end
      end
      @(negedge clk);
    end
    start = 0;
    checks++;
    if (cycles != nn*nb*ns) begin
      failures++;
      $display("run %0dx%0dx%0d took %0d cycles", nn, nb, ns, cycles);
    end
    repeat (3) begin
      if (done) dones++;
      checks++; if (upd_en) failures++;
      @(negedge clk);
    end
    checks++; if (dones != 1) begin failures++; $display("done pulses %0d", dones); end
    checks++; if (int'(sweep) != ns) failures++;
  endtask

  initial begin
    num_nodes = 0; nbits = 1; num_sweeps = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(4, 2, 3);
    run(11, 3, 2);
    run(256, 4, 2);
    run(1, 1, 5);
    run(87, 4, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
