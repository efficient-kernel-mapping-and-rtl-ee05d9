// imax_alu: the arithmetic chain of one IMAX processing element.
//
// Three units in series, as drawn in the paper's PE figure: ALU1 takes three
// operands (a, b, c) and holds the integer, floating-point and custom
// low-bit-quantisation instructions; ALU2 performs logical operations on
// ALU1's result and ALU1's pass-through of operand c; ALU3 shifts ALU2's
// result. The chain is purely combinational; the PE registers its output, so
// one PE stage adds one cycle of latency.
//
// Custom instructions (behaviour from the paper, operand layouts chosen here):
//   SML8  a[31:0], b[31:0] hold 4 signed int8 each. Products 0,1 and 2,3 are
//         summed pairwise; each sum is sign-extended from 24 bits into one
//         32-bit half of the result.
//   AD24  2-way 24-bit add, each half sign-extended from 24 bits.
//   SUM24 adds the two 24-bit halves of a into the low half (the final adder
//         of the dot-product tree).
//   SML16 a holds 4 signed int16 (CVT86 output), b[31:0] 4 signed int8;
//         pairwise-summed products as in SML8.
//   CVT86 Q6_K decode: a[15:0] = four 4-bit QL, a[23:16] = four 2-bit QH,
//         b[7:0] / b[15:8] = signed 8-bit scales for elements 0,1 / 2,3.
//         q = {QH,QL} - 32; result = four int16 q*scale.
//   CVT53 Q3_K decode: a[7:0] = four 2-bit QL, a[11:8] = four high-mask bits,
//         b[5:0] = 6-bit scale s. The scale is approximated to 5 bits as
//         (s-32)>>>1, the weight is q = QL - (mask ? 0 : 4) (3 bits); the
//         result is four int8 products q*scale5, ready for SML8. The dropped
//         scale bit is a factor of two to be folded into the FP32 scale.
//   I2F   2-way signed 24-bit integer to FP32.
//   FMA/FMUL/FADD  2-way FP32 on the two 32-bit halves.
// FP32 arithmetic truncates and flushes denormals (own choice).
module imax_alu
  import imax_pkg::*;
(
  input  alu1_op_e    op1,
  input  alu2_op_e    op2,
  input  alu3_op_e    op3,
  input  logic [5:0]  shamt,
  input  word_t       a,
  input  word_t       b,
  input  word_t       c,
  output word_t       alu1_res,   // ALU1 result (visible for tests)
  output word_t       res         // ALU3 result
);

  word_t r1, c_pass, r2;

  function automatic logic signed [15:0] mul8(input logic [7:0] x, input logic [7:0] y);
    return $signed(x) * $signed(y);
  endfunction

  function automatic logic signed [23:0] mul16x8(input logic [15:0] x, input logic [7:0] y);
    return 24'($signed(x) * $signed(y));
  endfunction

  always_comb begin
    logic signed [23:0] lo, hi;
    logic signed [6:0]  q6;
    logic signed [7:0]  sc;
    logic signed [5:0]  s5;
    logic signed [3:0]  q3;
    logic signed [6:0]  s6;
    r1 = '0;
    lo = '0; hi = '0; q6 = '0; sc = '0; s5 = '0; q3 = '0; s6 = '0;
    unique case (op1)
      A1_PASS:  r1 = a;
      A1_ADD32: r1 = {a[63:32] + b[63:32], a[31:0] + b[31:0]};
      A1_SUB32: r1 = {a[63:32] - b[63:32], a[31:0] - b[31:0]};
      A1_SML8: begin
        lo = 24'(mul8(a[7:0], b[7:0]))   + 24'(mul8(a[15:8], b[15:8]));
        hi = 24'(mul8(a[23:16], b[23:16])) + 24'(mul8(a[31:24], b[31:24]));
        r1 = {sext24(hi), sext24(lo)};
      end
      A1_AD24:  r1 = {sext24(a[55:32] + b[55:32]), sext24(a[23:0] + b[23:0])};
      A1_SUM24: r1 = {32'd0, sext24(a[23:0] + a[55:32])};
      A1_SML16: begin
        lo = mul16x8(a[15:0], b[7:0])   + mul16x8(a[31:16], b[15:8]);
        hi = mul16x8(a[47:32], b[23:16]) + mul16x8(a[63:48], b[31:24]);
        r1 = {sext24(hi), sext24(lo)};
      end
      A1_CVT86: begin
        for (int i = 0; i < 4; i++) begin
          q6 = $signed({1'b0, a[16+2*i +: 2], a[4*i +: 4]}) - 7'sd32;
          sc = (i < 2) ? $signed(b[7:0]) : $signed(b[15:8]);
          r1[16*i +: 16] = 16'(q6 * sc);
        end
      end
      A1_CVT53: begin
        s6 = $signed({1'b0, b[5:0]}) - 7'sd32;
        s5 = 6'(s6 >>> 1);
        for (int i = 0; i < 4; i++) begin
          q3 = $signed({2'b00, a[2*i +: 2]}) - (a[8+i] ? 4'sd0 : 4'sd4);
          r1[8*i +: 8] = 8'(s5 * q3);
        end
      end
      A1_I2F:   r1 = {i24_to_fp32(a[63:32]), i24_to_fp32(a[31:0])};
      A1_FMA:   r1 = {fp32_fma(a[63:32], b[63:32], c[63:32]), fp32_fma(a[31:0], b[31:0], c[31:0])};
      A1_FMUL:  r1 = {fp32_mul(a[63:32], b[63:32]), fp32_mul(a[31:0], b[31:0])};
      A1_FADD:  r1 = {fp32_add(a[63:32], b[63:32]), fp32_add(a[31:0], b[31:0])};
      default:  r1 = a;
    endcase
  end

  assign c_pass = c;

  always_comb begin
    unique case (op2)
      A2_PASS: r2 = r1;
      A2_AND:  r2 = r1 & c_pass;
      A2_OR:   r2 = r1 | c_pass;
      A2_XOR:  r2 = r1 ^ c_pass;
      default: r2 = r1;
    endcase
  end

  always_comb begin
    unique case (op3)
      A3_PASS:  res = r2;
      A3_SLL32: res = {r2[63:32] << shamt[4:0], r2[31:0] << shamt[4:0]};
      A3_SRL32: res = {r2[63:32] >> shamt[4:0], r2[31:0] >> shamt[4:0]};
      A3_SRA32: res = {32'($signed(r2[63:32]) >>> shamt[4:0]), 32'($signed(r2[31:0]) >>> shamt[4:0])};
      A3_SLL64: res = r2 << shamt;
      A3_SRL64: res = r2 >> shamt;
      default:  res = r2;
    endcase
  end

  assign alu1_res = r1;

endmodule
