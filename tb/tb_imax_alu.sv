// tb_imax_alu: self-checking test of the PE arithmetic chain.
//
// Drives random operands through every ALU1 instruction and the ALU2/ALU3
// logical and shift operations, and compares with reference values computed
// here element by element with plain integer arithmetic and, for FP32, with
// the simulator's real arithmetic within a relative tolerance (the RTL
// truncates).
`timescale 1ns/1ps
module tb_imax_alu;
  import imax_pkg::*;

  alu1_op_e op1; alu2_op_e op2; alu3_op_e op3;
  logic [5:0] shamt;
  word_t a, b, c, r1, res;
  int checks = 0, failures = 0;

  imax_alu dut (.op1, .op2, .op3, .shamt, .a, .b, .c, .alu1_res(r1), .res);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input word_t got, input word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h (a=%h b=%h c=%h)", what, got, exp, a, b, c);
    end
  endtask

  function automatic real f32(input logic [31:0] x);
    // decode IEEE-754 single precision by hand (normal numbers and zero)
    real m;
    int  e;
    if (x[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(x[22:0]) / 8388608.0;
    e = int'(x[30:23]) - 127;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return x[31] ? -m : m;
  endfunction

  task automatic chkf(input string what, input logic [31:0] got, input real exp);
    real g, tol;
    checks++;
    g = f32(got);
    tol = (exp < 0.0 ? -exp : exp) * 1.0e-6 + 1.0e-30;
    if ((g - exp) > tol || (exp - g) > tol) begin
      failures++;
      $display("FAIL %s: got %g exp %g", what, g, exp);
    end
  endtask

  function automatic int s8(input logic [7:0] v);  return int'($signed(v)); endfunction
  function automatic int s16(input logic [15:0] v); return int'($signed(v)); endfunction
  function automatic word_t two24(input int hi, input int lo);
    logic [31:0] h, l;
    h = 32'(hi); l = 32'(lo);
    return {{8{h[23]}}, h[23:0], {8{l[23]}}, l[23:0]};
  endfunction

  function automatic logic [31:0] rnd_f32();
    // random normal float in roughly [-1000, 1000]
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'(117 + ($urandom % 20));
    return v;
  endfunction

  initial begin
    int lo, hi, q, s, qs [4];
    word_t e;
    op2 = A2_PASS; op3 = A3_PASS; shamt = '0;
    for (int t = 0; t < 200; t++) begin
      a = {$urandom, $urandom}; b = {$urandom, $urandom}; c = {$urandom, $urandom};
      // integer SIMD
      op1 = A1_ADD32; #1; chk("ADD32", res, {a[63:32] + b[63:32], a[31:0] + b[31:0]});
      op1 = A1_SUB32; #1; chk("SUB32", res, {a[63:32] - b[63:32], a[31:0] - b[31:0]});
      // SML8
      op1 = A1_SML8; #1;
      lo = s8(a[7:0]) * s8(b[7:0]) + s8(a[15:8]) * s8(b[15:8]);
      hi = s8(a[23:16]) * s8(b[23:16]) + s8(a[31:24]) * s8(b[31:24]);
      chk("SML8", res, two24(hi, lo));
      // AD24
      op1 = A1_AD24; #1;
      chk("AD24", res, two24(int'(a[55:32]) + int'(b[55:32]), int'(a[23:0]) + int'(b[23:0])));
      op1 = A1_SUM24; #1;
      e = two24(0, int'(a[23:0]) + int'(a[55:32])); e[63:32] = '0;
      chk("SUM24", res, e);
      // SML16
      op1 = A1_SML16; #1;
      lo = s16(a[15:0]) * s8(b[7:0]) + s16(a[31:16]) * s8(b[15:8]);
      hi = s16(a[47:32]) * s8(b[23:16]) + s16(a[63:48]) * s8(b[31:24]);
      chk("SML16", res, two24(hi, lo));
      // CVT86
      op1 = A1_CVT86; #1;
      for (int i = 0; i < 4; i++) begin
        q = int'((a[23:16] >> (2*i)) & 8'h3) * 16 + int'((a[15:0] >> (4*i)) & 16'hf) - 32;
        s = (i < 2) ? s8(b[7:0]) : s8(b[15:8]);
        e[16*i +: 16] = 16'(q * s);
      end
      chk("CVT86", res, e);
      // CVT53
      op1 = A1_CVT53; #1;
      s = (int'(b[5:0]) - 32);
      s = (s < 0) ? -((-s + 1) / 2) : s / 2;   // arithmetic shift right by one
      e = '0;
      for (int i = 0; i < 4; i++) begin
        q = int'((a[7:0] >> (2*i)) & 8'h3) - (a[8+i] ? 0 : 4);
        e[8*i +: 8] = 8'(q * s);
      end
      chk("CVT53", res, e);
      // I2F
      op1 = A1_I2F; #1;
      chkf("I2F.lo", res[31:0], real'(int'($signed(a[23:0]))));
      chkf("I2F.hi", res[63:32], real'(int'($signed(a[55:32]))));
      // FP32
      a = {rnd_f32(), rnd_f32()}; b = {rnd_f32(), rnd_f32()}; c = {rnd_f32(), rnd_f32()};
      op1 = A1_FMUL; #1;
      chkf("FMUL.lo", res[31:0], f32(a[31:0]) * f32(b[31:0]));
      chkf("FMUL.hi", res[63:32], f32(a[63:32]) * f32(b[63:32]));
      op1 = A1_FADD; #1;
      if ((f32(a[31:0]) + f32(b[31:0])) > 1.0e-2 || (f32(a[31:0]) + f32(b[31:0])) < -1.0e-2)
        chkf("FADD.lo", res[31:0], f32(a[31:0]) + f32(b[31:0]));
      op1 = A1_FMA; #1;
      if ((f32(a[63:32]) * f32(b[63:32]) + f32(c[63:32])) > 1.0 ||
          (f32(a[63:32]) * f32(b[63:32]) + f32(c[63:32])) < -1.0)
        chkf("FMA.hi", res[63:32], f32(a[63:32]) * f32(b[63:32]) + f32(c[63:32]));
      // ALU2 / ALU3
      a = {$urandom, $urandom}; c = {$urandom, $urandom};
      op1 = A1_PASS; shamt = 6'($urandom);
      op2 = A2_AND; #1; chk("AND", res, a & c);
      op2 = A2_OR;  #1; chk("OR", res, a | c);
      op2 = A2_XOR; #1; chk("XOR", res, a ^ c);
      op2 = A2_PASS;
      op3 = A3_SRL64; #1; chk("SRL64", res, a >> shamt);
      op3 = A3_SLL32; #1; chk("SLL32", res, {a[63:32] << shamt[4:0], a[31:0] << shamt[4:0]});
      op3 = A3_SRA32; #1; chk("SRA32", res, {32'($signed(a[63:32]) >>> shamt[4:0]), 32'($signed(a[31:0]) >>> shamt[4:0])});
      op3 = A3_PASS;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
