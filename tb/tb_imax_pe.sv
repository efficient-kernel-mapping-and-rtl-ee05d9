// tb_imax_pe: self-checking test of one processing element with its LMM.
// Loads a table into the transfer-side bank over the DMA port (RANGE
// decode), swaps it to the compute side, then streams iterations through
// the PE and checks, one cycle after each input: the SML8 result, the
// streamed LMM load into the next stage's register, pass-through of the
// other registers and the iteration index, and the results stored by AG2
// (drained back over the DMA port after another swap). Also checks the
// accumulator loop (running 2-way sums), the table-lookup load mode and
// that bubbles neither produce output nor store.
`timescale 1ns/1ps
module tb_imax_pe;
  import imax_pkg::*;
  localparam int BYTES = 1024;   // 32 words per bank
  logic clk = 0, rst_n = 0;
  stage_t s_in, s_out;
  logic cfg_we = 0, acc_clr = 0, swap = 0;
  cfgreg_e cfg_reg = CR_CONF;
  word_t cfg_data = 0;
  logic dma_we = 0, dma_re = 0, dma_rhit;
  logic [GADDR_W-1:0] dma_waddr = 0, dma_raddr = 0;
  word_t dma_wdata = 0, dma_rdata;
  word_t T [32];
  word_t expr [16];
  int checks = 0, failures = 0;

  imax_pe #(.LMM_BYTES(BYTES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  task automatic wcfg(cfgreg_e r, word_t d);
    @(negedge clk); cfg_we = 1; cfg_reg = r; cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic word_t sml8_ref(word_t a, word_t b);
    int lo, hi;
    logic [31:0] l, h;
    lo = int'($signed(a[7:0])) * int'($signed(b[7:0])) + int'($signed(a[15:8])) * int'($signed(b[15:8]));
    hi = int'($signed(a[23:16])) * int'($signed(b[23:16])) + int'($signed(a[31:24])) * int'($signed(b[31:24]));
    l = 32'(lo); h = 32'(hi);
    return {h, l};
  endfunction

  function automatic word_t conf_word(alu1_op_e o1, sel_e sa, sel_e sb, logic res_en, logic [1:0] rd,
                                      logic ld_en, logic [1:0] ldd, logic lut, logic [1:0] ls, logic st);
    conf_t c;
    c = '0;
    c.op1 = o1; c.op2 = A2_PASS; c.op3 = A3_PASS; c.sel_a = sa; c.sel_b = sb; c.sel_c = SEL_ZERO;
    c.res_en = res_en; c.res_dst = rd; c.ld_en = ld_en; c.ld_dst = ldd; c.ld_lut = lut; c.lut_src = ls;
    c.st_en = st;
    return 64'(c);
  endfunction

  initial begin
    stage_t in_q;
    word_t acc_ref;
    s_in = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    wcfg(CR_RANGE, {32'h100, 32'd32});   // base, size
    // DMA fill of the transfer-side bank
    for (int i = 0; i < 32; i++) begin
      T[i] = {$urandom, $urandom};
      @(negedge clk); dma_we = 1; dma_waddr = 32'h100 + i; dma_wdata = T[i];
    end
    // a write outside the window must be ignored
    @(negedge clk); dma_waddr = 32'h120; dma_wdata = '1;
    @(negedge clk); dma_we = 0;
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    wcfg(CR_AG1, {16'd0, 16'd1, 16'hffff, 16'hffff});   // base, stride, mask0, mask1
    wcfg(CR_AG2, {16'd16, 16'd1, 16'hffff, 16'hffff});
    wcfg(CR_CONF, conf_word(A1_SML8, SEL_R0, SEL_R1, 1, 2'd2, 1, 2'd3, 0, 2'd0, 1));
    // stream 16 iterations, with a bubble after iteration 7
    for (int i = 0; i < 17; i++) begin
      @(negedge clk);
      if (i > 0 && in_q.valid) begin
        chk("valid", 64'(s_out.valid), 1);
        chk("idx", 64'(s_out.idx), 64'(in_q.idx));
        chk("r0", s_out.r[0], in_q.r[0]);
        chk("r1", s_out.r[1], in_q.r[1]);
        chk("r2 sml8", s_out.r[2], sml8_ref(in_q.r[0], in_q.r[1]));
        chk("r3 load", s_out.r[3], T[in_q.idx]);
        expr[in_q.idx] = sml8_ref(in_q.r[0], in_q.r[1]);
      end else if (i > 0) chk("bubble", 64'(s_out.valid), 0);
      if (i < 16 && i != 8) begin
        s_in.valid = 1; s_in.idx = (i > 8) ? 16'(i - 1) : 16'(i);
        for (int k = 0; k < 4; k++) s_in.r[k] = {$urandom, $urandom};
      end else s_in = '0;
      in_q = s_in;
    end
    s_in = '0;
    @(negedge clk);
    // swap back and drain the stored results
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    for (int i = 0; i < 15; i++) begin
      @(negedge clk); dma_re = 1; dma_raddr = 32'h100 + 16 + i;
      @(negedge clk); dma_re = 0;
      chk("rhit", 64'(dma_rhit), 1);
      chk("stored result", dma_rdata, expr[i]);
    end
    @(negedge clk); dma_re = 1; dma_raddr = 32'h80; @(negedge clk); dma_re = 0;
    chk("no hit outside window", 64'(dma_rhit), 0);
    // accumulator loop: ADD32 of r0 with ACC
    wcfg(CR_CONF, conf_word(A1_ADD32, SEL_R0, SEL_ACC, 1, 2'd2, 0, 2'd0, 0, 2'd0, 0));
    @(negedge clk); acc_clr = 1; @(negedge clk); acc_clr = 0;
    acc_ref = '0;
    for (int i = 0; i < 10; i++) begin
      s_in.valid = 1; s_in.idx = 16'(i); s_in.r[0] = {$urandom, $urandom};
      acc_ref = {acc_ref[63:32] + s_in.r[0][63:32], acc_ref[31:0] + s_in.r[0][31:0]};
      @(negedge clk);
      chk("accumulate", s_out.r[2], acc_ref);
    end
    s_in = '0;
    // table lookup: index from r1, masked to 16 entries
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    wcfg(CR_AG1, {16'd0, 16'd0, 16'hffff, 16'h000f});
    wcfg(CR_CONF, conf_word(A1_PASS, SEL_R0, SEL_R0, 0, 2'd0, 1, 2'd3, 1, 2'd1, 0));
    for (int i = 0; i < 20; i++) begin
      s_in.valid = 1; s_in.idx = 16'($urandom); s_in.r[1] = {$urandom, $urandom};
      @(negedge clk);
      chk("table lookup", s_out.r[3], T[s_in.r[1][3:0]]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
