// vec_ising_top -- vectorized probabilistic Ising accelerator for graph coloring.
//
// A graph with up to N nodes is colored with up to 2**NB colors. Each node's
// color is a binary vector of NB spins (probabilistic bits), so the default
// machine has 256 x 4 = 1024 spins, all-to-all connected. The machine samples
// the Boltzmann distribution of H = sum_edges W_ij * F(S_i, S_j), where F is 1
// for equal or illegal colors, by single-flip Gibbs sampling, one spin per
// clock:
//   gibbs_sequencer picks node i and bit k;
//   delta_h_unit computes Delta-H = H(s_ik=1) - H(s_ik=0) with one vecmul
//     (two F-table multiplexers and a subtractor) per neighbour, summed and
//     saturated to 8 bits;
//   neuron_update looks up P(s_ik=1) in the 256 x 16-bit sigmoid table and
//     compares it with a 16-bit LFSR number;
//   neuron_states stores the new bit at the end of the same cycle.
// f_operator builds the F truth table from the programmed color count Q, and
// weight_bias_mem holds the weight matrix and biases. The host reaches all of
// it through mmio_ctrl (see its address map); the PCIe bridge itself is
// outside this design, its memory-mapped side is the mm_* port.
//
// Timing: one spin update per cycle, so a sweep over a problem of N' nodes and
// Q colors takes N' * ceil(log2 Q) cycles; done_irq pulses once, in the cycle
// after the last update of the last sweep.
//
// Sizes, the one-update-per-cycle schedule, the F rule, the LUT and LFSR
// widths follow the paper. Weight width, bias, saturation, host bus and
// address map are this design's choices.
//
// The all-to-all Delta-H path (N vecmul units and an N-input sum) is one
// combinational stage from the state registers back to them, as one update
// per clock requires.
module vec_ising_top
  import vec_pkg::*;
#(
  parameter int unsigned N  = N_MAX,
  parameter int unsigned NB = NB_MAX
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               mm_req,
  input  logic               mm_we,
  input  logic [MM_AW-1:0]   mm_addr,
  input  logic [MM_DW-1:0]   mm_wdata,
  output logic               mm_rvalid,
  output logic [MM_DW-1:0]   mm_rdata,
  output logic               done_irq
);

  localparam int unsigned NW = $clog2(N);
  localparam int unsigned KW = $clog2(NB);

  cfg_t                               cfg;
  logic                               start, busy, run_done;
  logic [31:0]                        sweep;
  logic                               upd_en;
  logic [NW-1:0]                      node;
  logic [KW-1:0]                      bit_sel;

  logic                               wb_we, wb_sel_bias;
  logic [NW-1:0]                      wb_row, wb_col;
  logic [$clog2(N*NB)-1:0]            wb_bidx;
  logic [7:0]                         wb_wdata, wb_rdata;
  logic                               lut_we;
  logic [DHW-1:0]                     lut_addr;
  logic [LUTW-1:0]                    lut_wdata, lut_rdata;
  logic                               st_we;
  logic [NW-1:0]                      st_node;
  logic [NB-1:0]                      st_wdata, st_rdata;

  logic [N-1:0][NB-1:0]               states;
  logic [N-1:0][WW-1:0]               wrow;
  logic signed [7:0]                  bias;
  logic [2**(2*NB)-1:0]               ftab;
  logic [NB-1:0][1:0][2**(2*NB-1)-1:0] mux_tt;
  logic signed [WW+NW+1:0]            dh_full;
  logic signed [DHW-1:0]              dh_sat;
  logic [LUTW-1:0]                    prob;
  logic [15:0]                        rnd;
  logic                               s_new;

  mmio_ctrl #(.N(N), .NB(NB)) u_mmio (
    .clk, .rst_n,
    .mm_req, .mm_we, .mm_addr, .mm_wdata, .mm_rvalid, .mm_rdata,
    .cfg, .start, .busy, .run_done, .sweep,
    .wb_we, .wb_sel_bias, .wb_row, .wb_col, .wb_bidx, .wb_wdata, .wb_rdata,
    .lut_we, .lut_addr, .lut_wdata, .lut_rdata,
    .st_we, .st_node, .st_wdata, .st_rdata
  );

  gibbs_sequencer #(.N(N), .NB(NB)) u_seq (
    .clk, .rst_n, .start,
    .num_nodes  (($clog2(N)+1)'(cfg.num_nodes)),
    .nbits      (cfg.nbits),
    .num_sweeps (cfg.num_sweeps),
    .upd_en, .node, .bit_sel, .busy,
    .done       (run_done),
    .sweep
  );

  f_operator #(.NB(NB)) u_fop (
    .num_colors (cfg.num_colors),
    .ftab, .mux_tt
  );

  weight_bias_mem #(.N(N), .NB(NB), .WW_(WW)) u_wmem (
    .clk,
    .row_sel    (node),
    .wrow,
    .bias_sel   ($clog2(N*NB)'(32'(node) * NB + 32'(bit_sel))),
    .bias,
    .h_we       (wb_we),
    .h_sel_bias (wb_sel_bias),
    .h_row      (wb_row),
    .h_col      (wb_col),
    .h_bidx     (wb_bidx),
    .h_wdata    (wb_wdata),
    .h_rdata    (wb_rdata)
  );

  neuron_states #(.N(N), .NB(NB)) u_states (
    .clk, .rst_n, .states,
    .upd_en, .upd_node (node), .upd_bit (bit_sel), .upd_val (s_new),
    .h_we (st_we), .h_node (st_node), .h_wdata (st_wdata), .h_rdata (st_rdata)
  );

  delta_h_unit #(.N(N), .NB(NB), .WW_(WW), .DHW_(DHW)) u_dh (
    .states,
    .num_nodes (($clog2(N)+1)'(cfg.num_nodes)),
    .node, .bit_sel, .wrow, .bias, .mux_tt,
    .dh_full, .dh_sat
  );

  neuron_update #(.DHW_(DHW), .LUTW_(LUTW)) u_nu (
    .clk, .rst_n,
    .dh        (dh_sat),
    .upd_en,
    .lut_we, .lut_addr, .lut_wdata, .lut_rdata,
    .prob, .rnd, .s_new
  );

  assign done_irq = run_done;

  // The controller never lets a host state write meet a spin update.
  a_no_state_collision: assert property (@(posedge clk) disable iff (!rst_n)
    !(upd_en && st_we));

endmodule
