// tb_imax_kernels: the low-bit and FP16 dot-product kernels on one lane.
//
// Maps four kernels onto a 12-PE lane with full-size (64 KB) LMMs and checks
// each final dot product against a reference computed here:
//   Q6_K  PE0 load packed QL/QH weights, PE1 load 8-bit scales,
//         PE2 CVT86 + load int8 activations, PE3 SML16,
//         PE4 SUM24 + load FP32 block scale, PE5 I2F, PE6 FMA-accumulate.
//   Q3_K  the same chain with CVT53 (6-bit scale -> 5 bits, 2+1-bit weights
//         -> 3 bits) at PE2 and SML8 at PE3: the Q8_0 back end reused.
//   FP16  PE0 load two FP16 weights, PE1/PE2 convert them to FP32 by table
//         lookup in their LMMs (the FP16->FP32 table), PE3 merges the two
//         halves and loads two FP32 activations, PE4 2-way FMA-accumulate,
//         PE5/PE6 add the two SIMD halves of the accumulator.
//   Q8_0 with 8 elements per iteration, reduced through AD24 as in the
//         paper's Q8_0 dataflow: PE0 load x, PE1 load w (8 int8 each),
//         PE2 SML8 on the low halves, PE3/PE4 shift x and w down by 32,
//         PE5 SML8 on the high halves + load the block scale, PE6 AD24 of
//         the two partial sums, PE7 SUM24, PE8 I2F, PE9 FMA-accumulate.
//         One FP32 scale per 32-element block, i.e. per 4 iterations.
// The Q3_K and Q6_K chains run once more with 3072 iterations, i.e. rows of
// K = 12288 elements, the longest row of the evaluated models (the Qwen3-8B
// feed-forward down projection, from the published model configuration).
// Tables and operands arrive over the DMA bus; results are read back over it.
`timescale 1ns/1ps
module tb_imax_kernels;
  import imax_pkg::*;
  localparam int NPE = 12, BYTES = 65536, N = 32;
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
    #20000000; failures++;
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
  function automatic real f16(input logic [15:0] x);
    real m; int e;
    m = 1.0 + real'(x[9:0]) / 1024.0;
    e = int'(x[14:10]) - 15;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return x[15] ? -m : m;
  endfunction
  // FP16 -> FP32 bit conversion for normal numbers (the lookup table's formula)
  function automatic logic [31:0] f16_to_f32_bits(input logic [15:0] x);
    return {x[15], 8'(int'(x[14:10]) - 15 + 127), x[9:0], 13'd0};
  endfunction
  function automatic logic [31:0] rnd_scale();
    return {1'b0, 8'(118 + $urandom % 8), 23'($urandom)};
  endfunction

  task automatic chkf(string what, logic [31:0] got, real exp, real mag);
    real d;
    checks++;
    d = f32(got) - exp; if (d < 0) d = -d;
    if (d > mag * 1.0e-5 + 1.0e-20) begin failures++; $display("FAIL %s got %g exp %g", what, f32(got), exp); end
    else $display("%s: %g (reference %g)", what, f32(got), exp);
  endtask
  task automatic wcfg(int pe, cfgreg_e r, word_t d);
    @(negedge clk); cfg_we = 1; cfg_pe = PE_SEL_W'(pe); cfg_reg = r; cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic dwr(int a, word_t d);
    @(negedge clk); dma_we = 1; dma_waddr = 32'(a); dma_wdata = d;
    @(negedge clk); dma_we = 0;
  endtask
  function automatic word_t cw(alu1_op_e o1, alu2_op_e o2, alu3_op_e o3, logic [5:0] sh,
                               sel_e sa, sel_e sb, sel_e sc, logic re, logic [1:0] rd,
                               logic le, logic [1:0] ld, logic lut, logic [1:0] ls, logic st);
    conf_t c;
    c = '0; c.op1 = o1; c.op2 = o2; c.op3 = o3; c.shamt = sh; c.sel_a = sa; c.sel_b = sb; c.sel_c = sc;
    c.res_en = re; c.res_dst = rd; c.ld_en = le; c.ld_dst = ld; c.ld_lut = lut; c.lut_src = ls; c.st_en = st;
    return 64'(c);
  endfunction
  localparam agcfg_t STREAM = '{base: 16'd0, stride: 16'd1, mask0: 16'hffff, mask1: 16'hffff};
  localparam agcfg_t FIXED  = '{base: 16'd0, stride: 16'd0, mask0: 16'hffff, mask1: 16'hffff};
  localparam agcfg_t TABLE  = '{base: 16'd0, stride: 16'd0, mask0: 16'hffff, mask1: 16'h0fff};
  localparam word_t  NOP    = 64'd0;

  // each PE p owns the DMA window [p*4096, p*4096+4096)
  task automatic set_ranges();
    for (int p = 0; p < NPE; p++) wcfg(p, CR_RANGE, {32'(p * 4096), 32'd4096});
  endtask

  task automatic run_and_read(input int rpe, input int n, output logic [31:0] res);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    @(negedge clk); start = 1; iters = (IDX_W+1)'(n);
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    @(negedge clk); dma_re = 1; dma_raddr = 32'(rpe * 4096); @(negedge clk); dma_re = 0;
    res = dma_rdata[31:0];
  endtask

  // Q6_K and Q3_K share the chain; only PE2/PE3 differ
  task automatic lowbit(input bit q6, input int n);
    logic [31:0] wq, sc, y, d, res;
    real acc, mag, t;
    int dot, q, s, v;
    acc = 0.0; mag = 0.0;
    for (int i = 0; i < n; i++) begin
      wq = $urandom; sc = $urandom; y = $urandom; d = rnd_scale();
      dwr(0 * 4096 + i, 64'(wq)); dwr(1 * 4096 + i, 64'(sc));
      dwr(2 * 4096 + i, 64'(y));  dwr(4 * 4096 + i, 64'(d));
      dot = 0;
      for (int j = 0; j < 4; j++) begin
        if (q6) begin
          q = int'((wq[23:16] >> (2*j)) & 8'h3) * 16 + int'((wq[15:0] >> (4*j)) & 16'hf) - 32;
          s = (j < 2) ? int'($signed(sc[7:0])) : int'($signed(sc[15:8]));
          v = int'($signed(16'(q * s)));
        end else begin
          s = int'(sc[5:0]) - 32;
          s = (s < 0) ? -((-s + 1) / 2) : s / 2;
          q = int'((wq[7:0] >> (2*j)) & 8'h3) - (wq[8+j] ? 0 : 4);
          v = int'($signed(8'(q * s)));
        end
        dot += v * int'($signed(y[8*j +: 8]));
      end
      t = real'(dot) * f32(d); acc += t; mag += (t < 0 ? -t : t);
    end
    wcfg(0, CR_AG1, 64'(STREAM)); wcfg(1, CR_AG1, 64'(STREAM)); wcfg(2, CR_AG1, 64'(STREAM));
    wcfg(4, CR_AG1, 64'(STREAM)); wcfg(6, CR_AG2, 64'(FIXED));
    wcfg(0, CR_CONF, cw(A1_PASS, A2_PASS, A3_PASS, 0, SEL_ZERO, SEL_ZERO, SEL_ZERO, 0, 0, 1, 0, 0, 0, 0));
    wcfg(1, CR_CONF, cw(A1_PASS, A2_PASS, A3_PASS, 0, SEL_ZERO, SEL_ZERO, SEL_ZERO, 0, 0, 1, 1, 0, 0, 0));
    wcfg(2, CR_CONF, cw(q6 ? A1_CVT86 : A1_CVT53, A2_PASS, A3_PASS, 0, SEL_R0, SEL_R1, SEL_ZERO, 1, 2, 1, 3, 0, 0, 0));
    wcfg(3, CR_CONF, cw(q6 ? A1_SML16 : A1_SML8,  A2_PASS, A3_PASS, 0, SEL_R2, SEL_R3, SEL_ZERO, 1, 2, 0, 0, 0, 0, 0));
    wcfg(4, CR_CONF, cw(A1_SUM24, A2_PASS, A3_PASS, 0, SEL_R2, SEL_ZERO, SEL_ZERO, 1, 2, 1, 3, 0, 0, 0));
    wcfg(5, CR_CONF, cw(A1_I2F,   A2_PASS, A3_PASS, 0, SEL_R2, SEL_ZERO, SEL_ZERO, 1, 2, 0, 0, 0, 0, 0));
    wcfg(6, CR_CONF, cw(A1_FMA,   A2_PASS, A3_PASS, 0, SEL_R2, SEL_R3, SEL_ACC, 1, 2, 0, 0, 0, 0, 1));
    wcfg(7, CR_CONF, NOP);
    run_and_read(6, n, res);
    // the truncating FP32 accumulation loses up to about one ulp of the
    // running sum per iteration, so the tolerance grows with the row length
    chkf($sformatf("%s dot product, K=%0d", q6 ? "Q6_K" : "Q3_K", 4 * n), res, acc, mag * real'(n) / 32.0);
  endtask

  task automatic fp16();
    logic [15:0] x0, x1;
    logic [31:0] y0, y1, res;
    real acc, mag, t;
    acc = 0.0; mag = 0.0;
    // FP16->FP32 tables for the codes 0x3800..0x3bff, indexed by code & 0xfff
    for (int c = 16'h3800; c < 16'h3c00; c++) begin
      dwr(1 * 4096 + (c & 16'hfff), {32'd0, f16_to_f32_bits(16'(c))});
      dwr(2 * 4096 + (c & 16'hfff), {f16_to_f32_bits(16'(c)), 32'd0});
    end
    for (int i = 0; i < N; i++) begin
      x0 = 16'h3800 | 16'($urandom % 1024); x1 = 16'h3800 | 16'($urandom % 1024);
      y0 = {1'($urandom), 8'(120 + $urandom % 10), 23'($urandom)};
      y1 = {1'($urandom), 8'(120 + $urandom % 10), 23'($urandom)};
      dwr(0 * 4096 + i, {32'd0, x1, x0});
      dwr(3 * 4096 + i, {y1, y0});
      t = f16(x0) * f32(y0); acc += t; mag += (t < 0 ? -t : t);
      t = f16(x1) * f32(y1); acc += t; mag += (t < 0 ? -t : t);
    end
    wcfg(0, CR_AG1, 64'(STREAM)); wcfg(1, CR_AG1, 64'(TABLE)); wcfg(2, CR_AG1, 64'(TABLE));
    wcfg(3, CR_AG1, 64'(STREAM)); wcfg(6, CR_AG2, 64'(FIXED));
    wcfg(0, CR_CONF, cw(A1_PASS, A2_PASS, A3_PASS,  0, SEL_ZERO, SEL_ZERO, SEL_ZERO, 0, 0, 1, 0, 0, 0, 0));
    wcfg(1, CR_CONF, cw(A1_PASS, A2_PASS, A3_SRL64, 16, SEL_R0, SEL_ZERO, SEL_ZERO, 1, 0, 1, 1, 1, 0, 0));
    wcfg(2, CR_CONF, cw(A1_PASS, A2_PASS, A3_PASS,  0, SEL_ZERO, SEL_ZERO, SEL_ZERO, 0, 0, 1, 2, 1, 0, 0));
    wcfg(3, CR_CONF, cw(A1_PASS, A2_OR,   A3_PASS,  0, SEL_R1, SEL_ZERO, SEL_R2, 1, 1, 1, 3, 0, 0, 0));
    wcfg(4, CR_CONF, cw(A1_FMA,  A2_PASS, A3_PASS,  0, SEL_R1, SEL_R3, SEL_ACC, 1, 2, 0, 0, 0, 0, 0));
    wcfg(5, CR_CONF, cw(A1_PASS, A2_PASS, A3_SRL64, 32, SEL_R2, SEL_ZERO, SEL_ZERO, 1, 3, 0, 0, 0, 0, 0));
    wcfg(6, CR_CONF, cw(A1_FADD, A2_PASS, A3_PASS,  0, SEL_R2, SEL_R3, SEL_ZERO, 1, 2, 0, 0, 0, 0, 1));
    run_and_read(6, N, res);
    chkf("FP16 dot product", res, acc, mag);
  endtask

  // Q8_0, 8 elements per iteration, two SML8 partial sums joined by AD24
  task automatic q8_ad24();
    logic [63:0] x, w;
    logic [31:0] d, res;
    real acc, mag, t;
    int dot;
    acc = 0.0; mag = 0.0;
    for (int i = 0; i < N; i++) begin
      x = {$urandom, $urandom}; w = {$urandom, $urandom};
      if (i % 4 == 0) d = rnd_scale();
      dwr(0 * 4096 + i, x); dwr(1 * 4096 + i, w); dwr(5 * 4096 + i, 64'(d));
      dot = 0;
      for (int j = 0; j < 8; j++) dot += int'($signed(x[8*j +: 8])) * int'($signed(w[8*j +: 8]));
      t = real'(dot) * f32(d); acc += t; mag += (t < 0 ? -t : t);
    end
    wcfg(0, CR_AG1, 64'(STREAM)); wcfg(1, CR_AG1, 64'(STREAM)); wcfg(5, CR_AG1, 64'(STREAM));
    wcfg(9, CR_AG2, 64'(FIXED));
    wcfg(0, CR_CONF, cw(A1_PASS,  A2_PASS, A3_PASS,  0,  SEL_ZERO, SEL_ZERO, SEL_ZERO, 0, 0, 1, 0, 0, 0, 0));
    wcfg(1, CR_CONF, cw(A1_PASS,  A2_PASS, A3_PASS,  0,  SEL_ZERO, SEL_ZERO, SEL_ZERO, 0, 0, 1, 1, 0, 0, 0));
    wcfg(2, CR_CONF, cw(A1_SML8,  A2_PASS, A3_PASS,  0,  SEL_R0, SEL_R1, SEL_ZERO,   1, 2, 0, 0, 0, 0, 0));
    wcfg(3, CR_CONF, cw(A1_PASS,  A2_PASS, A3_SRL64, 32, SEL_R0, SEL_ZERO, SEL_ZERO, 1, 0, 0, 0, 0, 0, 0));
    wcfg(4, CR_CONF, cw(A1_PASS,  A2_PASS, A3_SRL64, 32, SEL_R1, SEL_ZERO, SEL_ZERO, 1, 1, 0, 0, 0, 0, 0));
    wcfg(5, CR_CONF, cw(A1_SML8,  A2_PASS, A3_PASS,  0,  SEL_R0, SEL_R1, SEL_ZERO,   1, 0, 1, 3, 0, 0, 0));
    wcfg(6, CR_CONF, cw(A1_AD24,  A2_PASS, A3_PASS,  0,  SEL_R0, SEL_R2, SEL_ZERO,   1, 2, 0, 0, 0, 0, 0));
    wcfg(7, CR_CONF, cw(A1_SUM24, A2_PASS, A3_PASS,  0,  SEL_R2, SEL_ZERO, SEL_ZERO, 1, 2, 0, 0, 0, 0, 0));
    wcfg(8, CR_CONF, cw(A1_I2F,   A2_PASS, A3_PASS,  0,  SEL_R2, SEL_ZERO, SEL_ZERO, 1, 2, 0, 0, 0, 0, 0));
    wcfg(9, CR_CONF, cw(A1_FMA,   A2_PASS, A3_PASS,  0,  SEL_R2, SEL_R3, SEL_ACC,    1, 2, 0, 0, 0, 0, 1));
    run_and_read(9, N, res);
    chkf("Q8_0 (AD24 tree) dot product", res, acc, mag);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    set_ranges();
    lowbit(1, N);
    lowbit(0, N);
    fp16();
    q8_ad24();
    // the longest row of the evaluated models (K = 12288, Qwen3-8B)
    lowbit(0, 3072);
    lowbit(1, 3072);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
