// tb_imax_qwen_q8: Q8_0 matrix rows of real Qwen3 sizes on the full-size core.
//
// Runs the same six-PE Q8_0 row mapping as tb_imax_top (load x, load w,
// SML8 + load scale, SUM24, I2F, FMA-accumulate + store) on imax_top at its
// default size (2 lanes x 64 PEs, 64 KB LMMs), 20 rows per call, but with
// the row lengths K of the Qwen3 models' linear layers instead of a short
// test vector. K = 1024 is the hidden size of the 0.6B model (the input
// length of its attention projections), K = 3072 the input length of its
// feed-forward down projection, K = 12288 that of the 8B model, the longest
// row among the evaluated models. These lengths come from the published
// model configurations. Each iteration carries 4 elements, so a row of K
// elements is K/4 iterations and K/4 LMM words per stream; K = 12288 fills
// 3072 of the 4096 words of one LMM buffer. As in the Q8_0 format, one FP32
// scale (activation scale times weight scale) belongs to each 32-element
// block, i.e. to 8 consecutive iterations.
// Per call: one coalesced LOAD with a gapped input stream, SWAP, EXEC,
// SWAP, DRAIN of the 20 results. Each result is compared with a dot
// product computed here in real arithmetic, within a tolerance that allows
// for the truncating FP32 accumulation over K/32 blocks. The EXEC time of
// K/4 + 64 cycles is checked with the PIO cycle counter.
// Own choices: the row sizes chosen, the random data and the tolerance.
`timescale 1ns/1ps
module tb_imax_qwen_q8;
  import imax_pkg::*;
  localparam int NL   = 2;            // imax_top defaults
  localparam int NPE  = 64;
  localparam int G    = NPE / 6;      // row groups per lane
  localparam int R    = NL * G;       // rows per call
  localparam int NMAX = 12288 / 4;    // iterations of the longest row
  localparam int RES  = 32'h100000;
  localparam int NK   = 3;
  localparam int KS [NK] = '{1024, 3072, 12288};

  logic clk = 0, rst_n = 0;
  logic pio_we = 0; logic [23:0] pio_addr = 0; word_t pio_wdata = 0, pio_rdata;
  logic ld_valid = 0, ld_ready, dr_valid, dr_ready = 0;
  word_t ld_data = 0, dr_data;
  logic [NL-1:0] lane_done;
  int checks = 0, failures = 0;
  longint exec_total = 0;

  imax_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    #50000000; failures++;
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
  task automatic chk(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask
  task automatic pio(logic [23:0] a, word_t d);
    @(negedge clk); pio_we = 1; pio_addr = a; pio_wdata = d;
    @(negedge clk); pio_we = 0;
  endtask
  task automatic pe_wr(int lane, int pe, cfgreg_e r, word_t d);
    pio({1'b1, 3'(lane), 6'(pe), 11'd0, 3'(r)}, d);
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

  logic [31:0] X [NMAX];
  logic [31:0] W [R][NMAX];
  logic [31:0] S [R][NMAX / 8];      // one scale per 32-element block
  real ref_acc [R], ref_mag [R];

  // shared address layout of one call: x at [0,N), w of row r at N + r*N,
  // the per-iteration scale stream of row r at N + R*N + r*N
  function automatic word_t burst_word(int n, int a);
    if (a < n)         return 64'(X[a]);
    if (a < n + R*n)   return 64'(W[(a - n) / n][(a - n) % n]);
    return 64'(S[(a - n - R*n) / n][((a - n - R*n) % n) / 8]);
  endfunction

  task automatic run_call(int k);
    int n, dot, cnt, got_k;
    real t, d;
    word_t e0, e1;
    n = k / 4;
    // data and reference
    for (int i = 0; i < n; i++) X[i] = $urandom;
    for (int r = 0; r < R; r++) begin
      ref_acc[r] = 0.0; ref_mag[r] = 0.0;
      for (int b = 0; b < n / 8; b++) S[r][b] = {1'b0, 8'(112 + $urandom % 8), 23'($urandom)};
      for (int i = 0; i < n; i++) begin
        W[r][i] = $urandom;
        dot = 0;
        for (int j = 0; j < 4; j++) dot += int'($signed(X[i][8*j +: 8])) * int'($signed(W[r][i][8*j +: 8]));
        t = real'(dot) * f32(S[r][i / 8]);
        ref_acc[r] += t; ref_mag[r] += (t < 0 ? -t : t);
      end
    end
    // windows of this row length
    for (int l = 0; l < NL; l++)
      for (int g = 0; g < G; g++) begin
        int r, p;
        r = l * G + g; p = 6 * g;
        pe_wr(l, p+0, CR_RANGE, {32'd0, 32'(n)});
        pe_wr(l, p+1, CR_RANGE, {32'(n + r*n), 32'(n)});
        pe_wr(l, p+2, CR_RANGE, {32'(n + R*n + r*n), 32'(n)});
      end
    // one coalesced LOAD
    pio(24'd2, {32'(n + 2*R*n), 32'd0});
    cnt = 0;
    while (cnt < n + 2*R*n) begin
      ld_valid = ($urandom % 8) != 0; ld_data = burst_word(n, cnt);
      @(posedge clk); if (ld_valid && ld_ready) cnt++;
      @(negedge clk);
    end
    ld_valid = 0;
    pio(24'd1, 64'(2**NL - 1));
    @(negedge clk); pio_addr = 24'd5; #1; e0 = pio_rdata;
    pio(24'd0, {8'(2**NL - 1), 39'd0, 17'(n)});
    while (dut.lane_busy != 0) @(negedge clk);
    pio_addr = 24'd5; #1; e1 = pio_rdata;
    chk($sformatf("K=%0d EXEC cycles", k), e1 - e0, n + NPE);
    exec_total += longint'(e1 - e0);
    pio(24'd1, 64'(2**NL - 1));
    // DRAIN the 20 results
    pio(24'd3, {32'(R), 32'(RES)});
    got_k = 0;
    while (got_k < R) begin
      dr_ready = ($urandom % 4) != 0;
      @(posedge clk);
      if (dr_valid && dr_ready) begin
        checks++;
        d = f32(dr_data[31:0]) - ref_acc[got_k]; if (d < 0) d = -d;
        if (d > ref_mag[got_k] * 1.0e-4 + 1.0e-20) begin
          failures++;
          $display("FAIL K=%0d row %0d: got %g exp %g", k, got_k, f32(dr_data[31:0]), ref_acc[got_k]);
        end
        got_k++;
      end
      @(negedge clk);
    end
    dr_ready = 0;
    $display("K=%0d: %0d rows, %0d iterations, %0d LOAD words, last row = %g (reference %g)",
             k, R, n, n + 2*R*n, f32(dr_data[31:0]), ref_acc[R-1]);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // operations and address generators: the same for every row length
    for (int l = 0; l < NL; l++)
      for (int g = 0; g < G; g++) begin
        int r, p;
        r = l * G + g; p = 6 * g;
        pe_wr(l, p+0, CR_AG1, 64'(STREAM));
        pe_wr(l, p+1, CR_AG1, 64'(STREAM));
        pe_wr(l, p+2, CR_AG1, 64'(STREAM));
        pe_wr(l, p+5, CR_RANGE, {32'(RES + r), 32'd1});
        pe_wr(l, p+5, CR_AG2, 64'(FIXED));
        pe_wr(l, p+0, CR_CONF, cw(A1_PASS,  SEL_ZERO, SEL_ZERO, SEL_ZERO, 0, 0, 1, 0, 0));
        pe_wr(l, p+1, CR_CONF, cw(A1_PASS,  SEL_ZERO, SEL_ZERO, SEL_ZERO, 0, 0, 1, 1, 0));
        pe_wr(l, p+2, CR_CONF, cw(A1_SML8,  SEL_R0, SEL_R1, SEL_ZERO, 1, 2, 1, 3, 0));
        pe_wr(l, p+3, CR_CONF, cw(A1_SUM24, SEL_R2, SEL_ZERO, SEL_ZERO, 1, 2, 0, 0, 0));
        pe_wr(l, p+4, CR_CONF, cw(A1_I2F,   SEL_R2, SEL_ZERO, SEL_ZERO, 1, 2, 0, 0, 0));
        pe_wr(l, p+5, CR_CONF, cw(A1_FMA,   SEL_R2, SEL_R3, SEL_ACC, 1, 2, 0, 0, 1));
      end
    for (int i = 0; i < NK; i++) run_call(KS[i]);
    $display("total EXEC cycles %0d", exec_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
