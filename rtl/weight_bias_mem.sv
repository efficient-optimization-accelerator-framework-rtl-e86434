// weight_bias_mem -- weight matrix and bias store.
//
// Holds the N x N matrix of unsigned WW_-bit edge weights W_ij and one signed
// 8-bit bias per spin bit (N*NB of them). Each weight row is one N*WW_-bit
// word, so the row of the node being updated is available in full every
// cycle, as the all-to-all vecmul array needs it. Row and bias reads are
// combinational from row_sel / bias_sel.
//
// Host port: one weight or bias per access. h_we with h_sel_bias = 0 writes
// W[h_row][h_col], with h_sel_bias = 1 writes bias[h_bidx]; both at the clock
// edge. h_rdata returns the addressed entry combinationally. The weights are
// not reset: the host programs them before a run.
//
// The paper says weights are fetched from on-chip block memory; the
// row-per-word organisation and the widths are this design's choices.
module weight_bias_mem
  import vec_pkg::*;
#(
  parameter int unsigned N   = N_MAX,
  parameter int unsigned NB  = NB_MAX,
  parameter int unsigned WW_ = WW
) (
  input  logic                          clk,
  // datapath side
  input  logic [$clog2(N)-1:0]          row_sel,
  output logic [N-1:0][WW_-1:0]         wrow,
  input  logic [$clog2(N*NB)-1:0]       bias_sel,
  output logic signed [7:0]             bias,
  // host side
  input  logic                          h_we,
  input  logic                          h_sel_bias,
  input  logic [$clog2(N)-1:0]          h_row,
  input  logic [$clog2(N)-1:0]          h_col,
  input  logic [$clog2(N*NB)-1:0]       h_bidx,
  input  logic [7:0]                    h_wdata,
  output logic [7:0]                    h_rdata
);

  logic [N-1:0][WW_-1:0] wmem [N];
  logic [7:0]            bmem [N*NB];

  always_ff @(posedge clk) begin
    if (h_we && !h_sel_bias) wmem[h_row][h_col] <= h_wdata[WW_-1:0];
    if (h_we &&  h_sel_bias) bmem[h_bidx]       <= h_wdata;
  end

  assign wrow    = wmem[row_sel];
  assign bias    = bmem[bias_sel];
  assign h_rdata = h_sel_bias ? bmem[h_bidx] : 8'(wmem[h_row][h_col]);

endmodule
