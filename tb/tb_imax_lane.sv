// tb_imax_lane: self-checking test of a compute lane running a Q8_0-style
// dot product mapped onto six chained PEs:
//   PE0 load x[i] (4 x int8)        PE1 load w[i] (4 x int8)
//   PE2 SML8 x*w, load scale[i]     PE3 SUM24 (final adder of the tree)
//   PE4 I2F (integer -> FP32)       PE5 FMA with its accumulator, store
// The inputs of all PEs arrive in one coalesced DMA burst whose words are
// spread over the PEs by their RANGE windows. The test checks every partial
// FP32 sum leaving the lane, the stored final result read back over the DMA
// bus after a buffer swap, and that EXEC of N iterations takes N + NUM_PE
// busy cycles.
`timescale 1ns/1ps
module tb_imax_lane;
  import imax_pkg::*;
  localparam int NPE = 6, BYTES = 1024, N = 24;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [PE_SEL_W-1:0] cfg_pe = 0; cfgreg_e cfg_reg = CR_CONF; word_t cfg_data = 0;
  logic start = 0, swap = 0, busy, done;
  logic [IDX_W:0] iters = 0;
  stage_t last_out;
  logic dma_we = 0, dma_re = 0, dma_rhit;
  logic [GADDR_W-1:0] dma_waddr = 0, dma_raddr = 0;
  word_t dma_wdata = 0, dma_rdata;
  int checks = 0, failures = 0;

  imax_lane #(.NUM_PE(NPE), .LMM_BYTES(BYTES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real f32(input logic [31:0] x);
    real m; int e;
    if (x[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(x[22:0]) / 8388608.0;
    e = int'(x[30:23]) - 127;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return x[31] ? -m : m;
  endfunction

  task automatic chkf(string what, logic [31:0] got, real exp, real mag);
    real d;
    checks++;
    d = f32(got) - exp; if (d < 0) d = -d;
    if (d > mag * 1.0e-5 + 1.0e-20) begin failures++; $display("FAIL %s got %g exp %g", what, f32(got), exp); end
  endtask
  task automatic chk(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  task automatic wcfg(int pe, cfgreg_e r, word_t d);
    @(negedge clk); cfg_we = 1; cfg_pe = PE_SEL_W'(pe); cfg_reg = r; cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic word_t cw(alu1_op_e o1, sel_e sa, sel_e sb, sel_e sc, logic re, logic [1:0] rd,
                               logic le, logic [1:0] ld, logic st);
    conf_t c;
    c = '0; c.op1 = o1; c.sel_a = sa; c.sel_b = sb; c.sel_c = sc;
    c.res_en = re; c.res_dst = rd; c.ld_en = le; c.ld_dst = ld; c.st_en = st;
    return 64'(c);
  endfunction

  localparam agcfg_t STREAM = '{base: 16'd0, stride: 16'd1, mask0: 16'hffff, mask1: 16'hffff};
  localparam agcfg_t FIXED  = '{base: 16'd0, stride: 16'd0, mask0: 16'hffff, mask1: 16'hffff};

  initial begin
    logic [31:0] xw [2][N];
    logic [31:0] sc [N];
    real acc, mag, term;
    real part [N];
    int  dot, k, cyc;
    repeat (2) @(posedge clk); rst_n = 1;
    // data: x, w int8 x4, positive FP32 scales
    acc = 0.0; mag = 0.0;
    for (int i = 0; i < N; i++) begin
      xw[0][i] = $urandom; xw[1][i] = $urandom;
      sc[i] = {1'b0, 8'(118 + $urandom % 8), 23'($urandom)};
      dot = 0;
      for (int j = 0; j < 4; j++) dot += int'($signed(xw[0][i][8*j +: 8])) * int'($signed(xw[1][i][8*j +: 8]));
      term = real'(dot) * f32(sc[i]);
      acc += term; mag += (term < 0 ? -term : term);
      part[i] = acc;
    end
    // configuration
    wcfg(0, CR_RANGE, {32'd0,  32'd32});  wcfg(0, CR_AG1, 64'(STREAM));
    wcfg(1, CR_RANGE, {32'd32, 32'd32});  wcfg(1, CR_AG1, 64'(STREAM));
    wcfg(2, CR_RANGE, {32'd64, 32'd32});  wcfg(2, CR_AG1, 64'(STREAM));
    wcfg(5, CR_RANGE, {32'd96, 32'd1});   wcfg(5, CR_AG2, 64'(FIXED));
    wcfg(0, CR_CONF, cw(A1_PASS,  SEL_ZERO, SEL_ZERO, SEL_ZERO, 0, 0, 1, 0, 0));
    wcfg(1, CR_CONF, cw(A1_PASS,  SEL_ZERO, SEL_ZERO, SEL_ZERO, 0, 0, 1, 1, 0));
    wcfg(2, CR_CONF, cw(A1_SML8,  SEL_R0, SEL_R1, SEL_ZERO, 1, 2, 1, 3, 0));
    wcfg(3, CR_CONF, cw(A1_SUM24, SEL_R2, SEL_ZERO, SEL_ZERO, 1, 2, 0, 0, 0));
    wcfg(4, CR_CONF, cw(A1_I2F,   SEL_R2, SEL_ZERO, SEL_ZERO, 1, 2, 0, 0, 0));
    wcfg(5, CR_CONF, cw(A1_FMA,   SEL_R2, SEL_R3, SEL_ACC, 1, 2, 0, 0, 1));
    // one coalesced burst: x at 0, w at 32, scales at 64
    for (int i = 0; i < 96; i++) begin
      @(negedge clk); dma_we = 1; dma_waddr = 32'(i);
      dma_wdata = (i < 32) ? ((i < N) ? 64'(xw[0][i]) : 64'd0)
                : (i < 64) ? ((i - 32 < N) ? 64'(xw[1][i-32]) : 64'd0)
                :            ((i - 64 < N) ? 64'(sc[i-64]) : 64'd0);
    end
    @(negedge clk); dma_we = 0;
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    // EXEC
    @(negedge clk); start = 1; iters = (IDX_W+1)'(N);
    @(negedge clk); start = 0;
    k = 0; cyc = 0;
    while (busy) begin
      cyc++;
      if (last_out.valid) begin chkf("partial sum", last_out.r[2][31:0], part[k], mag); k++; end
      @(negedge clk);
    end
    chk("done pulse", 64'(done), 1);
    chk("outputs", 64'(k), N);
    chk("exec busy cycles", 64'(cyc), N + NPE);
    // results back over the DMA bus
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    @(negedge clk); dma_re = 1; dma_raddr = 32'd96; @(negedge clk); dma_re = 0;
    chk("rhit", 64'(dma_rhit), 1);
    chkf("final dot product", dma_rdata[31:0], acc, mag);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
