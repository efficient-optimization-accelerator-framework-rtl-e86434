// vec_ising_top_tb -- end-to-end test of the accelerator at its full size
// (256 nodes x 4 bits, parameters left at their defaults).
//
// A host driver programs the machine over the memory-mapped port and a
// cycle-level reference (tb_ref_pkg::ref_machine) samples the same chain:
// same update order, same LFSR numbers, energy differences computed from full
// energies rather than from multiplexers. After each run every node's color
// is read back and must equal the reference exactly; the run must take
// nodes * ceil(log2 Q) * sweeps update cycles (plus three fixed cycles from
// driving the start write to seeing done_irq), and done_irq must pulse once.
//
// Scenarios:
//  1. 256 nodes, 16 colors, dense random weights 0..255 and random biases:
//     drives Delta-H into saturation at both ends. A write attempted while
//     busy must be dropped; status reads while busy must work.
//  2. myciel3 (11 nodes, 20 edges, 4 colors), unit weights, low temperature,
//     run twice to check that a second start continues the chain; nodes
//     11..255 keep weights and colors from scenario 1, which must be ignored.
//  3. queen5_5 (25 nodes, 160 edges, 5 colors): 3-bit vectors, so illegal
//     colors 5..7 occur and are penalised.
// Every mechanism (saturation high and low, illegal colors, dropped write,
// busy read, continued run, masking of unused nodes) is counted, and one
// that never happened is a failure.
module vec_ising_top_tb;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic done_irq;
  int checks = 0, failures = 0;
  int n_dropped = 0, n_busy_read = 0, n_continue = 0, n_masked = 0;
  int sat_hi = 0, sat_lo = 0, illegal = 0;

  host_bus_if bus (.clk);

  vec_ising_top dut (
    .clk, .rst_n,
    .mm_req (bus.req), .mm_we (bus.we), .mm_addr (bus.addr), .mm_wdata (bus.wdata),
    .mm_rvalid (bus.rvalid), .mm_rdata (bus.rdata),
    .done_irq);

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // Program size, weights, biases, table and start colors
  task automatic load_problem(input ref_machine m, input real scale, input real t, input int sweeps);
    bus.wr(20'h00001, m.n);
    bus.wr(20'h00002, m.q);
    bus.wr(20'h00003, sweeps);
    for (int i = 0; i < m.n; i++)
      for (int j = 0; j < m.n; j++)
        bus.wr(20'h10000 | 20'(i*256 + j), m.w[i*m.n + j]);
    for (int x = 0; x < m.n*4; x++)
      bus.wr(20'h20000 | 20'(x), 32'(m.bias[x] & 255));
    for (int a = 0; a < 256; a++) begin
      m.lut[a] = lut_entry(int'($signed(8'(a))), scale, t);
      bus.wr(20'h30000 | 20'(a), m.lut[a]);
    end
    for (int i = 0; i < m.n; i++)
      bus.wr(20'h40000 | 20'(i), m.col[i]);
    bus.idle();
  endtask

  // Start a run, optionally poke the bus while busy, wait for done, compare
  task automatic run(input ref_machine m, input int sweeps, input bit poke, input string name);
    int cycles = 0, irqs = 0;
    logic [31:0] d;
    int mism = 0;
    fork
      begin
        bus.wr(20'h00000, 1);
        bus.idle();
        if (poke) begin
          bus.wr(20'h10000 | 20'(1*256 + 0), 8'hA5);   // must be dropped
          bus.idle();
          bus.rd(20'h00000, d);
          check(d[0] == 1'b1, "busy flag while running");
          n_busy_read++;
          bus.rd(20'h00004, d);
          check(d < sweeps, "sweep counter while running");
        end
      end
      begin
        @(negedge clk);               // the cycle in which the start write is sampled
        while (irqs == 0 && cycles < 2000000) begin
          @(negedge clk);
          cycles++;
          if (done_irq) irqs++;
        end
        repeat (3) begin
          @(negedge clk);
          if (done_irq) irqs++;
        end
      end
    join
    for (int s = 0; s < sweeps; s++) m.sweep();
    check(irqs == 1, $sformatf("%s: done_irq pulses %0d", name, irqs));
    check(cycles == m.n * m.nb * sweeps + 3,
          $sformatf("%s: run took %0d cycles, expected %0d", name, cycles, m.n*m.nb*sweeps + 3));
    bus.rd(20'h00000, d);
    check(d[1:0] == 2'b10, "done flag after run");
    bus.rd(20'h00004, d);
    check(d == sweeps, "sweep count after run");
    for (int i = 0; i < m.n; i++) begin
      bus.rd(20'h40000 | 20'(i), d);
      if (int'(d) != m.col[i]) mism++;
    end
    check(mism == 0, $sformatf("%s: %0d node colors differ from the reference", name, mism));
    if (poke) begin
      bus.rd(20'h10000 | 20'(1*256 + 0), d);
      check(int'(d) == m.w[1*m.n + 0], "write while busy was dropped");
      if (int'(d) == m.w[1*m.n + 0]) n_dropped++;
    end
    sat_hi += m.sat_hi; sat_lo += m.sat_lo; illegal += m.illegal;
    m.sat_hi = 0; m.sat_lo = 0; m.illegal = 0;
    $display("%s: %0d sweeps, %0d cycles, colors match=%0d", name, sweeps, cycles, mism == 0);
  endtask

  initial begin
    ref_machine m;
    int n, e0, e1;
    int adj[];
    logic [15:0] rng;
    bus.init();
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. full-size random problem
    m = new(256, 16);
    foreach (m.w[x]) m.w[x] = (x / 256 == x % 256) ? 0 : int'($urandom % 256);
    foreach (m.bias[x]) m.bias[x] = int'($urandom % 256) - 128;
    foreach (m.col[x]) m.col[x] = $urandom % 16;
    load_problem(m, 1.0, 16.0, 2);
    run(m, 2, 1, "random-256x16");

    // 2. myciel3 with 4 colors
    myciel(3, n, adj);
    check(n == 11 && edge_count(n, adj) == 20, "myciel3 size");
    rng = m.r;                     // the LFSR runs on across problems
    m = new(n, 4);
    m.r = rng;
    foreach (m.w[x]) m.w[x] = adj[x];
    foreach (m.col[x]) m.col[x] = $urandom % 4;
    load_problem(m, 1.0, 0.2, 40);
    e0 = conflicts(n, 4, adj, m.col);
    run(m, 40, 0, "myciel3");
    n_masked++;
    bus.wr(20'h00003, 60);
    bus.idle();
    run(m, 60, 0, "myciel3-continued");
    n_continue++;
    e1 = conflicts(n, 4, adj, m.col);
    $display("myciel3: wrongly colored edges %0d -> %0d", e0, e1);
    check(e1 <= e0, "myciel3 energy did not decrease");

    // 3. queen5_5 with 5 colors
    queen(5, 5, n, adj);
    check(n == 25 && edge_count(n, adj) == 160, "queen5_5 size");
    rng = m.r;
    m = new(n, 5);
    m.r = rng;
    foreach (m.w[x]) m.w[x] = adj[x];
    foreach (m.col[x]) m.col[x] = $urandom % 8;
    load_problem(m, 1.0, 0.5, 200);
    e0 = conflicts(n, 5, adj, m.col);
    run(m, 200, 0, "queen5_5");
    e1 = conflicts(n, 5, adj, m.col);
    $display("queen5_5: wrongly colored edges %0d -> %0d", e0, e1);
    check(e1 <= e0, "queen5_5 energy did not decrease");

    $display("mechanisms: sat_hi=%0d sat_lo=%0d illegal=%0d dropped=%0d busy_read=%0d continued=%0d masked=%0d",
             sat_hi, sat_lo, illegal, n_dropped, n_busy_read, n_continue, n_masked);
    check(sat_hi > 0, "positive saturation never happened");
    check(sat_lo > 0, "negative saturation never happened");
    check(illegal > 0, "illegal color never sampled");
    check(n_dropped > 0, "dropped write never happened");
    check(n_busy_read > 0, "busy read never happened");
    check(n_continue > 0, "continued run never happened");
    check(bus.protocol_errors == 0, "read protocol errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
