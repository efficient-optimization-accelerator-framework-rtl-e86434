// mmio_ctrl -- memory-mapped host interface and run control.
//
// The host (behind a PCIe bridge) programs the problem and reads the solution
// through single-word accesses: mm_req with mm_we = 1 writes mm_wdata to
// mm_addr at the clock edge; mm_req with mm_we = 0 returns the addressed word
// on mm_rdata with mm_rvalid one cycle later. Word address bits [19:16] pick a
// region, bits [15:0] the offset in it:
//   0 registers: 0 CTRL   write bit0=1 starts a run; read {done, busy}
//                1 NODES  N, active graph nodes (clamped to 1..N)
//                2 COLORS Q, colors (clamped to 1..2**NB)
//                3 SWEEPS number of full sweeps per run
//                4 SWEEP  (read) sweeps completed in the current/last run
//                5 NBITS  (read) n = ceil(log2 Q), bits updated per node
//   1 weights:   offset = i*256 + j, W_ij in bits [7:0]
//   2 biases:    offset = i*NB + k, signed bias of spin bit k of node i
//   3 sigmoid:   offset = table address, 16-bit entry
//   4 states:    offset = node, NB-bit color vector
// Unmapped reads return 0. While a run is busy every write is dropped, so the
// problem cannot change under the sampler; reads stay allowed. done is sticky
// until the next start. The paper names a memory-mapped interface with block
// memory and a memory controller; this address map, the 32-bit data width
// and the one-cycle read latency are this design's choices.
module mmio_ctrl
  import vec_pkg::*;
#(
  parameter int unsigned N  = N_MAX,
  parameter int unsigned NB = NB_MAX
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host bus
  input  logic                        mm_req,
  input  logic                        mm_we,
  input  logic [MM_AW-1:0]            mm_addr,
  input  logic [MM_DW-1:0]            mm_wdata,
  output logic                        mm_rvalid,
  output logic [MM_DW-1:0]            mm_rdata,
  // configuration and run control
  output cfg_t                        cfg,
  output logic                        start,
  input  logic                        busy,
  input  logic                        run_done,
  input  logic [31:0]                 sweep,
  // weight / bias memory
  output logic                        wb_we,
  output logic                        wb_sel_bias,
  output logic [$clog2(N)-1:0]        wb_row,
  output logic [$clog2(N)-1:0]        wb_col,
  output logic [$clog2(N*NB)-1:0]     wb_bidx,
  output logic [7:0]                  wb_wdata,
  input  logic [7:0]                  wb_rdata,
  // sigmoid table
  output logic                        lut_we,
  output logic [DHW-1:0]              lut_addr,
  output logic [LUTW-1:0]             lut_wdata,
  input  logic [LUTW-1:0]             lut_rdata,
  // node states
  output logic                        st_we,
  output logic [$clog2(N)-1:0]        st_node,
  output logic [NB-1:0]               st_wdata,
  input  logic [NB-1:0]               st_rdata
);

  region_e     region;
  logic        done_flag;     // sticky: set by run_done, cleared by start
  logic [15:0] off;
  logic        wr;

  assign region = region_e'(mm_addr[19:16]);
  assign off    = mm_addr[15:0];
  assign wr     = mm_req && mm_we && !busy;

  // Memory-side address and data (shared by reads and writes)
  assign wb_sel_bias = (region == BIAS_REGION);
  assign wb_row      = $clog2(N)'(off[15:8]);
  assign wb_col      = $clog2(N)'(off[7:0]);
  assign wb_bidx     = $clog2(N*NB)'(off);
  assign wb_wdata    = mm_wdata[7:0];
  assign wb_we       = wr && (region == WEIGHT_REGION || region == BIAS_REGION);

  assign lut_addr    = off[DHW-1:0];
  assign lut_wdata   = mm_wdata[LUTW-1:0];
  assign lut_we      = wr && (region == LUT_REGION);

  assign st_node     = $clog2(N)'(off);
  assign st_wdata    = mm_wdata[NB-1:0];
  assign st_we       = wr && (region == STATE_REGION);

  // Registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.num_nodes  <= 9'(N);
      cfg.num_colors <= 5'(2**NB);
      cfg.nbits      <= 3'(NB);
      cfg.num_sweeps <= 32'd1;
      start          <= 1'b0;
      done_flag      <= 1'b0;
    end else begin
      start <= 1'b0;
      if (run_done) done_flag <= 1'b1;
      if (wr && region == REG_REGION) begin
        unique case (off[3:0])
          REG_CTRL: if (mm_wdata[0]) begin
            start     <= 1'b1;
            done_flag <= 1'b0;
          end
          REG_NODES:
            cfg.num_nodes <= (mm_wdata == 0) ? 9'd1 :
                             (mm_wdata > N)  ? 9'(N) : 9'(mm_wdata);
          REG_COLORS: begin
            logic [4:0] q;
            q = (mm_wdata == 0)    ? 5'd1 :
                (mm_wdata > 2**NB) ? 5'(2**NB) : 5'(mm_wdata);
            cfg.num_colors <= q;
            cfg.nbits      <= bits_for_colors(q);
          end
          REG_SWEEPS:
            cfg.num_sweeps <= (mm_wdata == 0) ? 32'd1 : mm_wdata;
          default: ;
        endcase
      end
    end
  end

  // Read path: one cycle latency
  logic [MM_DW-1:0] rdata_c;
  always_comb begin
    rdata_c = '0;
    unique case (region)
      REG_REGION:
        unique case (off[3:0])
          REG_CTRL:   rdata_c = {30'd0, done_flag, busy};
          REG_NODES:  rdata_c = 32'(cfg.num_nodes);
          REG_COLORS: rdata_c = 32'(cfg.num_colors);
          REG_SWEEPS: rdata_c = cfg.num_sweeps;
          REG_SWEEP:  rdata_c = sweep;
          REG_NBITS:  rdata_c = 32'(cfg.nbits);
          default:    rdata_c = '0;
        endcase
      WEIGHT_REGION, BIAS_REGION: rdata_c = 32'(wb_rdata);
      LUT_REGION:                 rdata_c = 32'(lut_rdata);
      STATE_REGION:               rdata_c = 32'(st_rdata);
      default:                    rdata_c = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mm_rvalid <= 1'b0;
      mm_rdata  <= '0;
    end else begin
      mm_rvalid <= mm_req && !mm_we;
      if (mm_req && !mm_we) mm_rdata <= rdata_c;
    end
  end

  // Bus rules: a read answers in the next cycle and only then; no memory
  // write reaches a memory while a run is busy.
  a_read_latency: assert property (@(posedge clk) disable iff (!rst_n)
    (mm_req && !mm_we) |=> mm_rvalid);
  a_rvalid_only_for_read: assert property (@(posedge clk) disable iff (!rst_n)
    mm_rvalid |-> $past(mm_req && !mm_we));
  a_no_write_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(wb_we || lut_we || st_we));

endmodule
