// tb_imax_lmm: self-checking test of the double-buffered local memory.
// Fills the transfer-side bank through the DMA port while the PE side writes
// its own bank at the same addresses, checks that the two never disturb each
// other, that reads return data one cycle after the request, and that a swap
// hands the DMA-filled bank to the PE and the PE's results to the DMA side.
`timescale 1ns/1ps
module tb_imax_lmm;
  import imax_pkg::*;
  localparam int BYTES = 1024;
  localparam int W = BYTES / 16;
  localparam int BAW = $clog2(W);
  logic clk = 0, rst_n = 0, swap = 0, pe_bank;
  logic pe_re = 0, pe_we = 0, dma_re = 0, dma_we = 0;
  logic [BAW-1:0] pe_raddr = 0, pe_waddr = 0, dma_raddr = 0, dma_waddr = 0;
  word_t pe_rdata, pe_wdata = 0, dma_rdata, dma_wdata = 0;
  word_t ref_dma [W], ref_pe [W];
  int checks = 0, failures = 0;

  imax_lmm #(.LMM_BYTES(BYTES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    chk("reset bank", 64'(pe_bank), 0);
    // both sides write the same addresses of their own bank
    for (int i = 0; i < W; i++) begin
      ref_dma[i] = {$urandom, $urandom}; ref_pe[i] = {$urandom, $urandom};
      @(negedge clk);
      dma_we = 1; dma_waddr = BAW'(i); dma_wdata = ref_dma[i];
      pe_we  = 1; pe_waddr  = BAW'(i); pe_wdata  = ref_pe[i];
    end
    @(negedge clk); dma_we = 0; pe_we = 0;
    // read back both sides; data one cycle after the request
    for (int i = 0; i < W; i++) begin
      @(negedge clk); pe_re = 1; pe_raddr = BAW'(i); dma_re = 1; dma_raddr = BAW'(W - 1 - i);
      @(negedge clk); pe_re = 0; dma_re = 0;
      chk("pe side", pe_rdata, ref_pe[i]);
      chk("dma side", dma_rdata, ref_dma[W-1-i]);
    end
    // swap: PE now sees the DMA-filled bank
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    chk("bank after swap", 64'(pe_bank), 1);
    for (int i = 0; i < W; i++) begin
      @(negedge clk); pe_re = 1; pe_raddr = BAW'(i); dma_re = 1; dma_raddr = BAW'(i);
      @(negedge clk); pe_re = 0; dma_re = 0;
      chk("pe after swap", pe_rdata, ref_dma[i]);
      chk("dma after swap", dma_rdata, ref_pe[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
