// tb_imax_dma: self-checking test of the DMA engine.
// The LMM side is a memory model with one-cycle read latency. A LOAD burst
// with a gapped input stream must land every word at consecutive addresses,
// and a burst with no gaps must take exactly one cycle per word. A DRAIN
// with random back-pressure must deliver the memory contents in order.
`timescale 1ns/1ps
module tb_imax_dma;
  import imax_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load_cmd = 0, drain_cmd = 0, load_busy, drain_busy;
  logic [GADDR_W-1:0] cmd_addr = 0, cmd_len = 0;
  logic ld_valid = 0, ld_ready, dr_valid, dr_ready = 0;
  word_t ld_data = 0, dr_data;
  logic bus_we, bus_re;
  logic [GADDR_W-1:0] bus_waddr, bus_raddr;
  word_t bus_wdata, bus_rdata;
  word_t mem [1024];
  word_t src [256];
  int checks = 0, failures = 0;

  imax_dma dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (bus_we) mem[bus_waddr[9:0]] <= bus_wdata;
    bus_rdata <= bus_re ? mem[bus_raddr[9:0]] : '0;
  end

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    int n, t0, k;
    for (int i = 0; i < 1024; i++) mem[i] = '0;
    for (int i = 0; i < 256; i++) src[i] = {$urandom, $urandom};
    repeat (2) @(posedge clk); rst_n = 1;
    // gapped LOAD of 100 words at address 200
    @(negedge clk); load_cmd = 1; cmd_addr = 200; cmd_len = 100;
    @(negedge clk); load_cmd = 0;
    n = 0;
    while (n < 100) begin
      ld_valid = ($urandom % 3) != 0; ld_data = src[n];
      @(posedge clk); if (ld_valid && ld_ready) n++;
      @(negedge clk);
    end
    ld_valid = 0;
    @(negedge clk);
    chk("load idle", 64'(load_busy), 0);
    for (int i = 0; i < 100; i++) chk("loaded word", mem[200 + i], src[i]);
    // ungapped LOAD of 64 words at 400: one word per cycle
    @(negedge clk); load_cmd = 1; cmd_addr = 400; cmd_len = 64;
    @(negedge clk); load_cmd = 0; t0 = 0; n = 0;
    ld_valid = 1;
    while (load_busy) begin ld_data = src[100 + n]; @(posedge clk); n++; t0++; @(negedge clk); end
    ld_valid = 0;
    chk("load cycles", 64'(t0), 64);
    for (int i = 0; i < 64; i++) chk("loaded word 2", mem[400 + i], src[100 + i]);
    // DRAIN 80 words from 200 with random back-pressure
    @(negedge clk); drain_cmd = 1; cmd_addr = 200; cmd_len = 80;
    @(negedge clk); drain_cmd = 0; k = 0;
    while (k < 80) begin
      dr_ready = ($urandom % 2) != 0;
      @(posedge clk);
      if (dr_valid && dr_ready) begin chk("drained word", dr_data, mem[200 + k]); k++; end
      @(negedge clk);
    end
    dr_ready = 0;
    @(negedge clk); @(negedge clk);
    chk("drain idle", 64'(drain_busy), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
