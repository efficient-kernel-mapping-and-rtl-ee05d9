// tb_imax_ctrl: self-checking test of the PIO register decoder.
// Writes every register class and checks the decoded strobes, fields and
// lane selection (including the buffer swap that can accompany EXEC), then
// checks the status word and the phase cycle counters.
`timescale 1ns/1ps
module tb_imax_ctrl;
  import imax_pkg::*;
  localparam int L = 2;
  logic clk = 0, rst_n = 0, pio_we = 0;
  logic [23:0] pio_addr = 0;
  word_t pio_wdata = 0, pio_rdata;
  logic [L-1:0] cfg_we, start, swap, lane_busy = 0;
  logic [PE_SEL_W-1:0] cfg_pe;
  cfgreg_e cfg_reg;
  word_t cfg_data;
  logic [IDX_W:0] iters;
  logic load_cmd, drain_cmd, load_busy = 0, drain_busy = 0;
  logic [GADDR_W-1:0] cmd_addr, cmd_len;
  int checks = 0, failures = 0;

  imax_ctrl #(.NUM_LANES(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    int lane, pe, r;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      lane = $urandom % L; pe = $urandom % 64; r = $urandom % 5;
      @(negedge clk);
      pio_we = 1; pio_addr = {1'b1, 3'(lane), 6'(pe), 11'd0, 3'(r)}; pio_wdata = {$urandom, $urandom};
      #1;
      chk("cfg_we", cfg_we, 1 << lane); chk("cfg_pe", cfg_pe, pe);
      chk("cfg_reg", cfg_reg, r); chk("cfg_data", cfg_data, pio_wdata);
      chk("no start", start, 0);
    end
    @(negedge clk); pio_addr = 24'd0; pio_wdata = {8'b10, 39'd0, 17'd77}; #1;
    chk("start", start, 2); chk("iters", iters, 77); chk("cfg_we off", cfg_we, 0);
    chk("no swap with plain EXEC", swap, 0);
    @(negedge clk); pio_addr = 24'd0; pio_wdata = {8'b01, 1'b1, 38'd0, 17'd5}; #1;
    chk("start with swap", start, 1); chk("swap with EXEC", swap, 1);
    @(negedge clk); pio_addr = 24'd1; pio_wdata = 64'd3; #1;
    chk("swap", swap, 3); chk("start off", start, 0);
    @(negedge clk); pio_addr = 24'd2; pio_wdata = {32'd500, 32'h1234}; #1;
    chk("load", load_cmd, 1); chk("drain", drain_cmd, 0); chk("addr", cmd_addr, 32'h1234); chk("len", cmd_len, 500);
    @(negedge clk); pio_addr = 24'd3; #1;
    chk("drain2", drain_cmd, 1); chk("load2", load_cmd, 0);
    @(negedge clk); pio_we = 0; lane_busy = 2'b01; load_busy = 1;
    repeat (10) @(negedge clk);
    lane_busy = 0; load_busy = 0; drain_busy = 1;
    repeat (4) @(negedge clk);
    drain_busy = 0; lane_busy = 2'b10;
    pio_addr = 24'd4; #1; chk("status", pio_rdata, 64'b0010);
    pio_addr = 24'd5; #1; chk("exec cycles", pio_rdata, 10);
    pio_addr = 24'd6; #1; chk("load cycles", pio_rdata, 10);
    pio_addr = 24'd7; #1; chk("drain cycles", pio_rdata, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
