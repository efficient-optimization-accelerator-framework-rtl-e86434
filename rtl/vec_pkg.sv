// vec_pkg -- shared constants, types and helper functions of the vectorized
// probabilistic Ising accelerator for graph coloring.
//
// The sizes follow the accelerator described for the FPGA: 256 graph nodes,
// all-to-all connected, at most 16 colors, so every node carries a 4-bit color
// vector and the machine holds 1024 probabilistic spins. The accumulated
// Delta-H is 8 bits wide and addresses a 256-entry, 16-bit sigmoid table; the
// random numbers are 16 bits. The 8-bit weight width, the host bus widths and
// the address map are this design's own choices.
package vec_pkg;

  // Problem capacity
  localparam int unsigned N_MAX  = 256;  // graph nodes
  localparam int unsigned Q_MAX  = 16;   // colors
  localparam int unsigned NB_MAX = 4;    // bits per color vector, ceil(log2(Q_MAX))

  // Datapath widths
  localparam int unsigned WW   = 8;      // weight width (unsigned)
  localparam int unsigned DHW  = 8;      // saturated Delta-H width (signed), LUT address
  localparam int unsigned LUTW = 16;     // sigmoid LUT output and random number width

  // Host bus
  localparam int unsigned MM_AW = 20;    // word address
  localparam int unsigned MM_DW = 32;    // data

  // Address regions, selected by mm_addr[19:16]
  typedef enum logic [3:0] {
    REG_REGION    = 4'h0,
    WEIGHT_REGION = 4'h1,   // offset = i*256 + j
    BIAS_REGION   = 4'h2,   // offset = i*4 + k
    LUT_REGION    = 4'h3,   // offset = LUT address
    STATE_REGION  = 4'h4    // offset = node
  } region_e;

  // Registers in REG_REGION, by offset
  typedef enum logic [3:0] {
    REG_CTRL    = 4'h0,     // write 1 to bit 0: start; read: {done, busy}
    REG_NODES   = 4'h1,     // N, active nodes (1..256)
    REG_COLORS  = 4'h2,     // Q, colors (1..16)
    REG_SWEEPS  = 4'h3,     // number of full sweeps per run
    REG_SWEEP   = 4'h4,     // read: sweeps completed
    REG_NBITS   = 4'h5      // read: n = ceil(log2 Q)
  } reg_e;

  // Run-time problem configuration
  typedef struct packed {
    logic [8:0]  num_nodes;
    logic [4:0]  num_colors;
    logic [2:0]  nbits;
    logic [31:0] num_sweeps;
  } cfg_t;

  // n = ceil(log2(q)), at least 1
  function automatic logic [2:0] bits_for_colors(input logic [4:0] q);
    logic [2:0] n;
    n = 3'd1;
    for (int b = 1; b <= 4; b++)
      if ((5'd1 << b) < q) n = 3'(b + 1);
    return n;
  endfunction

endpackage
