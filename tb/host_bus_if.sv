// host_bus_if -- the accelerator's memory-mapped host port, seen from a
// testbench, with the access tasks a host driver needs.
//
// wr() drives one write for one clock (back-to-back writes take one cycle
// each; idle() ends a burst). rd() issues one read and returns the data that
// arrives with rvalid one cycle later; it counts a protocol error if rvalid
// does not come exactly then.
interface host_bus_if (input logic clk);
  logic        req;
  logic        we;
  logic [19:0] addr;
  logic [31:0] wdata;
  logic        rvalid;
  logic [31:0] rdata;
  int          protocol_errors = 0;

  task automatic init();
    req = 0; we = 0; addr = '0; wdata = '0;
  endtask

  task automatic wr(input logic [19:0] a, input logic [31:0] d);
    @(negedge clk);
    req = 1; we = 1; addr = a; wdata = d;
  endtask

  task automatic idle();
    @(negedge clk);
    req = 0; we = 0;
  endtask

  task automatic rd(input logic [19:0] a, output logic [31:0] d);
    @(negedge clk);
    req = 1; we = 0; addr = a;
    @(negedge clk);
    req = 0;
    if (!rvalid) protocol_errors++;
    d = rdata;
  endtask
endinterface
