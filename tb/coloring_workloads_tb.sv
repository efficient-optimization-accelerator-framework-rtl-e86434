// coloring_workloads_tb -- the COLOR-benchmark graphs that can be generated
// from their definition, run on the full-size accelerator.
//
// The Mycielski graphs myciel3..myciel7 and the queen graphs queen5_5 ..
// queen13_13 are built by tb_ref_pkg (their node and edge counts are checked
// against the published sizes), loaded with unit edge weights, a sigmoid
// table for T = 0.2 and random start colors, and sampled for SWEEPS sweeps
// of single-flip Gibbs updates. For every graph the final colors must equal
// the cycle-level reference exactly, the run must take nodes * n * SWEEPS
// update cycles, and the number of wrongly colored edges must not have grown.
// The wrongly colored edges of this single run are printed next to the best
// of 200 runs reported for the FPGA accelerator; that comparison is
// informative only, as one chain from one seed is not the published
// experiment.
module coloring_workloads_tb;
  import tb_ref_pkg::*;

  localparam int SWEEPS = 1000;

  typedef struct {
    string name;
    bit    is_queen;
    int    a, b;            // myciel order, or board rows and columns
    int    nodes, edges, colors;
    int    reported;        // wrongly colored edges reported for the FPGA
  } workload_t;

  workload_t wl[13] = '{
    '{"myciel3",    0,  3,  0,  11,   20,  4, 0},
    '{"myciel4",    0,  4,  0,  23,   71,  5, 0},
    '{"myciel5",    0,  5,  0,  47,  236,  6, 0},
    '{"myciel6",    0,  6,  0,  95,  755,  7, 0},
    '{"myciel7",    0,  7,  0, 191, 2360,  8, 0},
    '{"queen5_5",   1,  5,  5,  25,  160,  5, 0},
    '{"queen6_6",   1,  6,  6,  36,  290,  7, 1},
    '{"queen7_7",   1,  7,  7,  49,  476,  7, 5},
    '{"queen8_8",   1,  8,  8,  64,  728,  9, 2},
    '{"queen9_9",   1,  9,  9,  81, 1056, 10, 4},
    '{"queen8_12",  1,  8, 12,  96, 1368, 12, 2},
    '{"queen11_11", 1, 11, 11, 121, 1980, 11, 18},
    '{"queen13_13", 1, 13, 13, 169, 3328, 13, 26}
  };

  logic clk = 0, rst_n = 0;
  logic done_irq;
  int checks = 0, failures = 0;

  host_bus_if bus (.clk);

  vec_ising_top dut (
    .clk, .rst_n,
    .mm_req (bus.req), .mm_we (bus.we), .mm_addr (bus.addr), .mm_wdata (bus.wdata),
    .mm_rvalid (bus.rvalid), .mm_rdata (bus.rdata),
    .done_irq);

  always #5 clk = ~clk;

  initial begin
    repeat (10000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    ref_machine m;
    int n, e0, e1, cycles, mism;
    int adj[];
    logic [15:0] rng;
    logic [31:0] d;
    bus.init();
    repeat (3) @(negedge clk);
    rst_n = 1;
    rng = 16'hACE1;
    foreach (wl[g]) begin
      if (wl[g].is_queen) queen(wl[g].a, wl[g].b, n, adj);
      else                myciel(wl[g].a, n, adj);
      check(n == wl[g].nodes && edge_count(n, adj) == wl[g].edges,
            $sformatf("%s: generated %0d nodes %0d edges", wl[g].name, n, edge_count(n, adj)));
      m = new(n, wl[g].colors);
      m.r = rng;
      foreach (m.w[x]) m.w[x] = adj[x];
      foreach (m.col[x]) m.col[x] = $urandom % wl[g].colors;
      for (int a = 0; a < 256; a++) m.lut[a] = lut_entry(int'($signed(8'(a))), 1.0, 0.2);
      // load
      bus.wr(20'h00001, n);
      bus.wr(20'h00002, wl[g].colors);
      bus.wr(20'h00003, SWEEPS);
      for (int i = 0; i < n; i++)
        for (int j = 0; j < n; j++)
          bus.wr(20'h10000 | 20'(i*256 + j), m.w[i*n + j]);
      for (int x = 0; x < n*4; x++) bus.wr(20'h20000 | 20'(x), 0);
      for (int a = 0; a < 256; a++) bus.wr(20'h30000 | 20'(a), m.lut[a]);
      for (int i = 0; i < n; i++) bus.wr(20'h40000 | 20'(i), m.col[i]);
      bus.wr(20'h00000, 1);
      bus.idle();
      e0 = conflicts(n, wl[g].colors, adj, m.col);
      cycles = 0;
      while (!done_irq) begin
        @(negedge clk);
        cycles++;
      end
      for (int s = 0; s < SWEEPS; s++) m.sweep();
      rng = m.r;
      check(cycles == n * m.nb * SWEEPS + 2,
            $sformatf("%s: %0d cycles, expected %0d", wl[g].name, cycles, n*m.nb*SWEEPS + 2));
      mism = 0;
      for (int i = 0; i < n; i++) begin
        bus.rd(20'h40000 | 20'(i), d);
        if (int'(d) != m.col[i]) mism++;
      end
      check(mism == 0, $sformatf("%s: %0d colors differ from the reference", wl[g].name, mism));
      e1 = conflicts(n, wl[g].colors, adj, m.col);
      check(e1 <= e0, $sformatf("%s: wrongly colored edges grew", wl[g].name));
      $display("%-11s %3d nodes %4d edges %2d colors %0d bits: wrongly colored edges %4d -> %3d (reported best of 200 runs: %0d), %0d cycles",
               wl[g].name, n, wl[g].edges, wl[g].colors, m.nb, e0, e1, wl[g].reported, cycles);
    end
    check(bus.protocol_errors == 0, "read protocol errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
