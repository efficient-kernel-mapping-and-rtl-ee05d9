// imax_lane: one IMAX compute lane, NUM_PE processing elements in a chain.
//
// The PEs form a one-dimensional pipeline: the bundle leaving PE n is the
// input of PE n+1 (drawn in the paper as eight columns of eight PE/LMM pairs,
// walked column by column). The DMA write bus is broadcast to every LMM and
// each PE keeps the words that fall inside its RANGE window; on a DMA read
// the one PE whose window holds the address answers and the answers are
// OR-combined onto the read-back bus.
//
// Execution: a `start` pulse with an iteration count N clears the PE
// accumulators and the sequencer then injects N valid bundles (iteration
// index 0..N-1, all pipeline registers zero) into PE 0, one per cycle. The
// lane is busy until the N-th bundle leaves the last PE, NUM_PE cycles after
// it entered; `done` pulses then. So one EXEC of N iterations takes
// N + NUM_PE cycles from start to done.
// Follows the paper: 64 PEs per lane, linear PE/LMM array, DMA read
// broadcast and write collection. Own choices: the token-injection
// sequencer, the done rule and the interfaces.
module imax_lane
  import imax_pkg::*;
#(
  parameter int unsigned NUM_PE    = 64,
  parameter int unsigned LMM_BYTES = 65536
)(
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic               cfg_we,
  input  logic [PE_SEL_W-1:0] cfg_pe,
  input  cfgreg_e            cfg_reg,
  input  word_t              cfg_data,
  // execution control
  input  logic               start,
  input  logic [IDX_W:0]     iters,
  input  logic               swap,
  output logic               busy,
  output logic               done,
  output stage_t             last_out,
  // DMA
  input  logic               dma_we,
  input  logic [GADDR_W-1:0] dma_waddr,
  input  word_t              dma_wdata,
  input  logic               dma_re,
  input  logic [GADDR_W-1:0] dma_raddr,
  output word_t              dma_rdata,
  output logic               dma_rhit
);
  stage_t chain [NUM_PE+1];
  word_t  rdata [NUM_PE];
  logic   rhit  [NUM_PE];

  // sequencer
  logic [IDX_W:0] n_left, n_out, n_total;
  logic [IDX_W-1:0] idx;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_left <= '0; n_out <= '0; n_total <= '0; idx <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        n_left <= iters; n_total <= iters; n_out <= '0; idx <= '0;
        busy   <= (iters != 0);
        done   <= (iters == 0);
      end else if (busy) begin
        if (n_left != 0) begin
          n_left <= n_left - 1'b1;
          idx    <= idx + 1'b1;
        end
        if (chain[NUM_PE].valid) begin
          n_out <= n_out + 1'b1;
          if (n_out + 1'b1 == n_total) begin busy <= 1'b0; done <= 1'b1; end
        end
      end
    end
  end

  always_comb begin
    chain[0]       = '0;
    chain[0].valid = busy && (n_left != 0);
    chain[0].idx   = idx;
  end

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    imax_pe #(.LMM_BYTES(LMM_BYTES)) u_pe (
      .clk, .rst_n,
      .s_in(chain[p]), .s_out(chain[p+1]),
      .cfg_we(cfg_we && cfg_pe == PE_SEL_W'(p)), .cfg_reg, .cfg_data,
      .acc_clr(start && !busy), .swap,
      .dma_we, .dma_waddr, .dma_wdata,
      .dma_re, .dma_raddr, .dma_rdata(rdata[p]), .dma_rhit(rhit[p])
    );
  end

  always_comb begin
    dma_rdata = '0;
    dma_rhit  = 1'b0;
    for (int p = 0; p < NUM_PE; p++) begin
      dma_rdata = dma_rdata | rdata[p];
      dma_rhit  = dma_rhit  | rhit[p];
    end
  end

  assign last_out = chain[NUM_PE];

  // a new EXEC may only be started when the lane is idle
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("imax_lane: start while busy");
endmodule
