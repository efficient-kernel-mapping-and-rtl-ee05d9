// imax_lmm: local memory module of one PE, hardware-managed double buffer.
//
// The memory is split into two equal banks. At any time one bank belongs to
// the PE (compute side) and the other to the DMA engine (transfer side), so
// the DMA can fill the next operands, or drain the previous results, while
// the PE works on the current ones. A one-cycle `swap` pulse exchanges the
// two roles. Each side has one synchronous read port (data valid the cycle
// after the request) and one write port.
// Follows the paper: 64 KB per LMM, double buffered, DMA loads one buffer
// while the PEs use the other. Own choices: 64-bit words, the two halves of
// the 64 KB as the two buffers, the swap pulse and reset to bank 0 on the PE
// side. Memory contents are not reset.
module imax_lmm
  import imax_pkg::*;
#(
  parameter int unsigned LMM_BYTES = 65536,
  localparam int unsigned BANK_WORDS = LMM_BYTES / 16,   // two banks of 64-bit words
  localparam int unsigned BAW = $clog2(BANK_WORDS)
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           swap,
  output logic           pe_bank,      // bank currently on the compute side
  // compute side
  input  logic           pe_re,
  input  logic [BAW-1:0] pe_raddr,
  output word_t          pe_rdata,
  input  logic           pe_we,
  input  logic [BAW-1:0] pe_waddr,
  input  word_t          pe_wdata,
  // transfer side
  input  logic           dma_re,
  input  logic [BAW-1:0] dma_raddr,
  output word_t          dma_rdata,
  input  logic           dma_we,
  input  logic [BAW-1:0] dma_waddr,
  input  word_t          dma_wdata
);
  word_t mem0 [BANK_WORDS];
  word_t mem1 [BANK_WORDS];
  word_t q0, q1;
  logic  pe_rd_bank;   // which bank the last compute-side read used

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    pe_bank <= 1'b0;
    else if (swap) pe_bank <= ~pe_bank;

  // bank 0 ports
  logic           we0, re0, we1, re1;
  logic [BAW-1:0] wa0, ra0, wa1, ra1;
  word_t          wd0, wd1;
  always_comb begin
    we0 = pe_bank ? dma_we    : pe_we;
    wa0 = pe_bank ? dma_waddr : pe_waddr;
    wd0 = pe_bank ? dma_wdata : pe_wdata;
    re0 = pe_bank ? dma_re    : pe_re;
    ra0 = pe_bank ? dma_raddr : pe_raddr;
    we1 = pe_bank ? pe_we     : dma_we;
    wa1 = pe_bank ? pe_waddr  : dma_waddr;
    wd1 = pe_bank ? pe_wdata  : dma_wdata;
    re1 = pe_bank ? pe_re     : dma_re;
    ra1 = pe_bank ? pe_raddr  : dma_raddr;
  end

  always_ff @(posedge clk) begin
    if (we0) mem0[wa0] <= wd0;
    if (re0) q0 <= mem0[ra0];
  end
  always_ff @(posedge clk) begin
    if (we1) mem1[wa1] <= wd1;
    if (re1) q1 <= mem1[ra1];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pe_rd_bank <= 1'b0;
    else        pe_rd_bank <= pe_bank;

  assign pe_rdata  = pe_rd_bank ? q1 : q0;
  assign dma_rdata = pe_rd_bank ? q0 : q1;
endmodule
