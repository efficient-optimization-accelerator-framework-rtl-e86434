// gibbs_sequencer -- single-flip Gibbs sampling schedule.
//
// One spin bit is updated per clock. After start, the sequencer visits bit
// 0 .. nbits-1 of node 0, then of node 1, and so on up to node num_nodes-1;
// that is one sweep (num_nodes * nbits cycles, the paper's N*ceil(log2 Q)
// updates per iteration). It repeats for num_sweeps sweeps, then drops busy
// and raises done for one cycle. A run therefore takes exactly
// num_sweeps * num_nodes * nbits cycles with upd_en high. The sweep order
// within a node and the start/busy/done handshake are this design's choices.
//
// Inputs are sampled at start and must hold during the run. num_sweeps = 0
// is treated as 1.
module gibbs_sequencer
  import vec_pkg::*;
#(
  parameter int unsigned N  = N_MAX,
  parameter int unsigned NB = NB_MAX
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(N):0]        num_nodes,
  input  logic [2:0]                nbits,
  input  logic [31:0]               num_sweeps,
  output logic                      upd_en,
  output logic [$clog2(N)-1:0]      node,
  output logic [$clog2(NB)-1:0]     bit_sel,
  output logic                      busy,
  output logic                      done,
  output logic [31:0]               sweep
);

  typedef enum logic [1:0] {IDLE, RUN, FINISH} state_e;
  state_e st;

  logic last_bit, last_node, last_sweep;
  assign last_bit   = (32'(bit_sel) + 1 >= 32'(nbits));
  assign last_node  = (32'(node) + 1 >= 32'(num_nodes));
  assign last_sweep = (sweep + 1 >= num_sweeps);

  assign upd_en = (st == RUN);
  assign busy   = (st == RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= IDLE;
      node    <= '0;
      bit_sel <= '0;
      sweep   <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        IDLE: if (start) begin
          st      <= RUN;
          node    <= '0;
          bit_sel <= '0;
          sweep   <= '0;
        end
        RUN: begin
          if (!last_bit) begin
            bit_sel <= bit_sel + 1'b1;
          end else begin
            bit_sel <= '0;
            if (!last_node) begin
              node <= node + 1'b1;
            end else begin
              node  <= '0;
              sweep <= sweep + 1;
              if (last_sweep) st <= FINISH;
            end
          end
        end
        FINISH: begin
          done <= 1'b1;
          st   <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end

  // Every update addresses an active node and a bit below n.
  a_update_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    upd_en |-> (32'(node) < 32'(num_nodes) && 32'(bit_sel) < 32'(nbits)));
  // done follows the last update of a run directly.
  a_done_after_run: assert property (@(posedge clk) disable iff (!rst_n)
    done |-> $past(st == FINISH));

endmodule
