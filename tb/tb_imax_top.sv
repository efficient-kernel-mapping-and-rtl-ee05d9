// tb_imax_top: end-to-end test of the accelerator at its default size.
//
// Runs Q8_0-style matrix-vector products the way the host drives them:
// every lane is cut into groups of six PEs (load x, load w, SML8 + load
// scale, SUM24, I2F, FMA-accumulate + store), one group per matrix row, so a
// lane of 64 PEs computes 10 rows at once and two lanes 20 rows. All PEs are
// configured over PIO (CONF, AG1, AG2, RANGE). Two kernel calls are made:
//   LOAD call 1 (one coalesced burst, the shared activation vector broadcast
//   to every group's first PE), SWAP, EXEC call 1 while LOAD of call 2 fills
//   the other buffers (double-buffer overlap), then EXEC call 2 with the
//   buffer swap folded into the EXEC command while DRAIN of call 1 empties
//   the buffers just released, then SWAP and DRAIN of call 2.
// Every drained FP32 result is compared with a dot product computed here in
// real arithmetic. The input stream has random gaps (LOAD stalls) and the
// output stream random back-pressure (DRAIN stalls); the EXEC latency of
// N + NUM_PE busy cycles is checked through the PIO cycle counter. Each of
// these mechanisms is counted and a failure is counted for any that never
// happened.
`timescale 1ns/1ps
module tb_imax_top;
  import imax_pkg::*;
  localparam int NL  = 2;            // imax_top defaults
  localparam int NPE = 64;
  localparam int G   = NPE / 6;      // row groups per lane
  localparam int R   = NL * G;       // rows per call
  localparam int N   = 16;           // iterations (4 elements each) per row
  localparam int RES = 32'h10000;

  logic clk = 0, rst_n = 0;
  logic pio_we = 0; logic [23:0] pio_addr = 0; word_t pio_wdata = 0, pio_rdata;
  logic ld_valid = 0, ld_ready, dr_valid, dr_ready = 0;
  word_t ld_data = 0, dr_data;
  logic [NL-1:0] lane_done;
  int checks = 0, failures = 0;
  int n_load_stall = 0, n_drain_stall = 0, n_overlap = 0, n_swap = 0, n_exec = 0,
      n_load = 0, n_drain = 0, n_bcast = 0, n_cfg = 0, n_exec_swap = 0, n_drain_overlap = 0;

  imax_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (ld_ready && !ld_valid) n_load_stall++;
    if (dr_valid && !dr_ready) n_drain_stall++;
    if (ld_ready && |dut.lane_busy) n_overlap++;
    if (dut.drain_busy && |dut.lane_busy) n_drain_overlap++;
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
    n_cfg++;
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

  // data of the two calls
  logic [31:0] X [2][N];
  logic [31:0] W [2][R][N];
  logic [31:0] S [2][R][N];
  real ref_acc [2][R], ref_mag [2][R];

  function automatic word_t burst_word(int c, int a);
    // layout: x at [0,N), w of row r at N + r*N, scales of row r at N + R*N + r*N
    if (a < N)         return 64'(X[c][a]);
    if (a < N + R*N)   return 64'(W[c][(a - N) / N][(a - N) % N]);
    return 64'(S[c][(a - N - R*N) / N][(a - N - R*N) % N]);
  endfunction

  task automatic do_load(int c);
    int n;
    pio(24'd2, {32'(N + 2*R*N), 32'd0});
    n_load++; n_bcast += N;
    n = 0;
    while (n < N + 2*R*N) begin
      ld_valid = ($urandom % 4) != 0; ld_data = burst_word(c, n);
      @(posedge clk); if (ld_valid && ld_ready) n++;
      @(negedge clk);
    end
    ld_valid = 0;
  endtask

  task automatic do_exec(input bit with_swap, output int cyc);
    pio(24'd0, {8'(2**NL - 1), with_swap, 38'd0, 17'(N)});
    n_exec++;
    if (with_swap) begin n_swap++; n_exec_swap++; end
    cyc = 1;
    while (dut.lane_busy != 0) begin @(negedge clk); cyc++; end
  endtask

  task automatic do_drain(int c);
    int k; real d;
    pio(24'd3, {32'(R), 32'(RES)});
    n_drain++;
    k = 0;
    while (k < R) begin
      dr_ready = ($urandom % 3) != 0;
      @(posedge clk);
      if (dr_valid && dr_ready) begin
        checks++;
        d = f32(dr_data[31:0]) - ref_acc[c][k]; if (d < 0) d = -d;
        if (d > ref_mag[c][k] * 1.0e-5 + 1.0e-20) begin
          failures++; $display("FAIL call %0d row %0d: got %g exp %g", c, k, f32(dr_data[31:0]), ref_acc[c][k]);
        end
        k++;
      end
      @(negedge clk);
    end
    dr_ready = 0;
  endtask

  initial begin
    int dot, cyc0, cyc1, p;
    real t;
    word_t e0;
    for (int c = 0; c < 2; c++) begin
      for (int i = 0; i < N; i++) X[c][i] = $urandom;
      for (int r = 0; r < R; r++) begin
        ref_acc[c][r] = 0.0; ref_mag[c][r] = 0.0;
        for (int i = 0; i < N; i++) begin
          W[c][r][i] = $urandom;
          S[c][r][i] = {1'b0, 8'(118 + $urandom % 8), 23'($urandom)};
          dot = 0;
          for (int j = 0; j < 4; j++) dot += int'($signed(X[c][i][8*j +: 8])) * int'($signed(W[c][r][i][8*j +: 8]));
          t = real'(dot) * f32(S[c][r][i]);
          ref_acc[c][r] += t; ref_mag[c][r] += (t < 0 ? -t : t);
        end
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // configuration of every row group (CONF / AG / RANGE over PIO)
    for (int l = 0; l < NL; l++)
      for (int g = 0; g < G; g++) begin
        int r;
        r = l * G + g; p = 6 * g;
        pe_wr(l, p+0, CR_RANGE, {32'd0, 32'(N)});                 pe_wr(l, p+0, CR_AG1, 64'(STREAM));
        pe_wr(l, p+1, CR_RANGE, {32'(N + r*N), 32'(N)});          pe_wr(l, p+1, CR_AG1, 64'(STREAM));
        pe_wr(l, p+2, CR_RANGE, {32'(N + R*N + r*N), 32'(N)});    pe_wr(l, p+2, CR_AG1, 64'(STREAM));
        pe_wr(l, p+5, CR_RANGE, {32'(RES + r), 32'd1});           pe_wr(l, p+5, CR_AG2, 64'(FIXED));
        pe_wr(l, p+0, CR_CONF, cw(A1_PASS,  SEL_ZERO, SEL_ZERO, SEL_ZERO, 0, 0, 1, 0, 0));
        pe_wr(l, p+1, CR_CONF, cw(A1_PASS,  SEL_ZERO, SEL_ZERO, SEL_ZERO, 0, 0, 1, 1, 0));
        pe_wr(l, p+2, CR_CONF, cw(A1_SML8,  SEL_R0, SEL_R1, SEL_ZERO, 1, 2, 1, 3, 0));
        pe_wr(l, p+3, CR_CONF, cw(A1_SUM24, SEL_R2, SEL_ZERO, SEL_ZERO, 1, 2, 0, 0, 0));
        pe_wr(l, p+4, CR_CONF, cw(A1_I2F,   SEL_R2, SEL_ZERO, SEL_ZERO, 1, 2, 0, 0, 0));
        pe_wr(l, p+5, CR_CONF, cw(A1_FMA,   SEL_R2, SEL_R3, SEL_ACC, 1, 2, 0, 0, 1));
      end
    // call 1
    do_load(0);
    pio(24'd1, 64'(2**NL - 1)); n_swap++;
    // EXEC call 1 while LOAD of call 2 runs
    fork
      do_exec(0, cyc0);
      begin @(negedge clk); @(negedge clk); do_load(1); end
    join
    chk("exec call 1 busy cycles", 64'(cyc0), N + NPE + 1);
    // call 2: EXEC with the buffer swap folded in, DRAIN of call 1 alongside
    fork
      do_exec(1, cyc1);
      begin @(negedge clk); @(negedge clk); do_drain(0); end
    join
    chk("exec call 2 busy cycles", 64'(cyc1), N + NPE + 1);
    @(negedge clk); pio_addr = 24'd5; #1;
    e0 = pio_rdata;
    chk("EXEC cycle counter", e0, 2 * (N + NPE));
    pio(24'd1, 64'(2**NL - 1)); n_swap++;
    do_drain(1);
    @(negedge clk); pio_addr = 24'd4; #1;
    chk("idle status", pio_rdata, 0);
    // mechanisms
    $display("mechanisms: cfg=%0d load=%0d drain=%0d swap=%0d exec=%0d exec_with_swap=%0d broadcast_words=%0d load_stall=%0d drain_stall=%0d load_exec_overlap=%0d drain_exec_overlap=%0d",
             n_cfg, n_load, n_drain, n_swap, n_exec, n_exec_swap, n_bcast, n_load_stall, n_drain_stall, n_overlap, n_drain_overlap);
    if (n_load_stall == 0)  begin failures++; $display("FAIL no LOAD stall"); end
    if (n_drain_stall == 0) begin failures++; $display("FAIL no DRAIN stall"); end
    if (n_overlap == 0)     begin failures++; $display("FAIL no LOAD/EXEC overlap"); end
    if (n_drain_overlap == 0) begin failures++; $display("FAIL no DRAIN/EXEC overlap"); end
    if (n_exec_swap == 0)   begin failures++; $display("FAIL no EXEC with buffer swap"); end
    if (n_swap == 0 || n_exec == 0 || n_load == 0 || n_drain == 0 || n_bcast == 0 || n_cfg == 0)
      begin failures++; $display("FAIL a phase never ran"); end
    checks += 6;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
