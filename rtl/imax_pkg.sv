// imax_pkg: types, opcodes and arithmetic helpers shared by the IMAX lane.
//
// The processing element (PE) of the linear array works on a 64-bit datapath
// that can be split into two 32-bit SIMD halves. Four 64-bit pipeline
// registers travel from one PE to the next together with a valid bit and the
// iteration index. This package defines that bundle, the per-PE
// configuration word written by the host over programmed I/O, the opcodes of
// the three ALUs and the fixed-point/floating-point helper functions.
//
// Follows the paper: 64-bit datapath with 2-way 32-bit SIMD, ALU1/ALU2/ALU3
// for integer, logical and shift operations, the custom instructions SML8,
// AD24, SML16, CVT86, CVT53, the FP32 fused multiply-add and an int->FP32
// conversion step. Own choices: the operand layouts of the custom
// instructions, the number of pipeline registers (4), the encodings, and the
// FP32 arithmetic, which truncates (rounds toward zero) and flushes
// denormals to zero.
package imax_pkg;

  localparam int unsigned DATA_W   = 64;   // PE datapath width
  localparam int unsigned NREG     = 4;    // pipeline registers passed PE to PE
  localparam int unsigned IDX_W    = 16;   // iteration index width
  localparam int unsigned AG_W     = 16;   // address generator width (LMM word address)
  localparam int unsigned GADDR_W  = 32;   // DMA shared address space (64-bit word address)
  localparam int unsigned PE_SEL_W = 6;    // PE index inside a lane (64 PEs)
  localparam int unsigned LANE_W   = 3;    // lane index (up to 8 lanes)

  typedef logic [DATA_W-1:0] word_t;

  // Bundle passed from PE n to PE n+1 (Grp. registers of the paper's PE figure).
  typedef struct packed {
    logic                valid;
    logic [IDX_W-1:0]    idx;
    word_t [NREG-1:0]    r;
  } stage_t;

  // ALU1: integer / arithmetic unit (custom instructions live here).
  typedef enum logic [3:0] {
    A1_PASS  = 4'd0,   // r = a
    A1_ADD32 = 4'd1,   // 2-way 32-bit add
    A1_SUB32 = 4'd2,   // 2-way 32-bit subtract
    A1_SML8  = 4'd3,   // 4 x int8 products, pairwise summed into 2 sign-extended 24-bit halves
    A1_AD24  = 4'd4,   // 2-way 24-bit add, sign-extended
    A1_SUM24 = 4'd5,   // sum of the two 24-bit halves into the low half
    A1_SML16 = 4'd6,   // 4 x (int16 * int8) products, pairwise summed into 2 x 24-bit
    A1_CVT86 = 4'd7,   // Q6_K decode: 2-bit QH + 4-bit QL, times 8-bit scales -> 4 x int16
    A1_CVT53 = 4'd8,   // Q3_K decode: 6-bit scale -> 5-bit, 2-bit+1-bit -> 3-bit, product -> 4 x int8
    A1_I2F   = 4'd9,   // 2-way signed 24-bit integer -> FP32
    A1_FMA   = 4'd10,  // 2-way FP32 a*b+c
    A1_FMUL  = 4'd11,  // 2-way FP32 a*b
    A1_FADD  = 4'd12   // 2-way FP32 a+b
  } alu1_op_e;

  // ALU2: logical unit. Its second operand is ALU1's pass-through of operand c.
  typedef enum logic [1:0] {
    A2_PASS = 2'd0,
    A2_AND  = 2'd1,
    A2_OR   = 2'd2,
    A2_XOR  = 2'd3
  } alu2_op_e;

  // ALU3: shift unit, shift amount from the configuration.
  typedef enum logic [2:0] {
    A3_PASS  = 3'd0,
    A3_SLL32 = 3'd1,
    A3_SRL32 = 3'd2,
    A3_SRA32 = 3'd3,
    A3_SLL64 = 3'd4,
    A3_SRL64 = 3'd5
  } alu3_op_e;

  // Operand selectors: 0..3 pipeline register, 4 constant (REGV), 5 accumulator.
  typedef enum logic [2:0] {
    SEL_R0 = 3'd0, SEL_R1 = 3'd1, SEL_R2 = 3'd2, SEL_R3 = 3'd3,
    SEL_CONST = 3'd4, SEL_ACC = 3'd5, SEL_ZERO = 3'd6
  } sel_e;

  // Per-PE operation configuration (CONF register).
  typedef struct packed {
    alu1_op_e          op1;
    alu2_op_e          op2;
    alu3_op_e          op3;
    logic [5:0]        shamt;
    sel_e              sel_a, sel_b, sel_c;
    logic              res_en;     // ALU result replaces pipeline register res_dst
    logic [1:0]        res_dst;
    logic              ld_en;      // LMM load (AG1) replaces pipeline register ld_dst
    logic [1:0]        ld_dst;
    logic              ld_lut;     // AG1 second input is a data value (table lookup) not the index
    logic [1:0]        lut_src;    // pipeline register holding the table index (low 16 bits)
    logic              st_en;      // ALU result stored to LMM at AG2 address
  } conf_t;

  // Address generator configuration (one per AG).
  typedef struct packed {
    logic [AG_W-1:0] base;
    logic [AG_W-1:0] stride;
    logic [AG_W-1:0] mask0;        // mask on the base input
    logic [AG_W-1:0] mask1;        // mask on the offset input
  } agcfg_t;

  // LMM window in the DMA shared address space (RANGE register).
  typedef struct packed {
    logic [GADDR_W-1:0] base;
    logic [GADDR_W-1:0] size;      // in 64-bit words; 0 disables
  } range_t;

  // Configuration write bus from the PIO decoder to the PEs.
  typedef enum logic [2:0] {
    CR_CONF = 3'd0, CR_AG1 = 3'd1, CR_AG2 = 3'd2, CR_REGV = 3'd3, CR_RANGE = 3'd4
  } cfgreg_e;

  typedef struct packed {
    logic                we;
    logic [LANE_W-1:0]   lane;
    logic [PE_SEL_W-1:0] pe;
    cfgreg_e             reg_sel;
    word_t               data;
  } cfgwr_t;

  // ---------------------------------------------------------------------
  // FP32 helpers: truncating, denormals flushed to zero, overflow to inf.
  // ---------------------------------------------------------------------
  function automatic logic [31:0] fp32_mul(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [47:0] m;
    int          e;
    logic [22:0] f;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    m = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (m[47]) begin f = m[46:24]; e = e + 1; end
    else       f = m[45:23];
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hff, 23'd0};
    return {s, e[7:0], f};
  endfunction

  function automatic logic [31:0] fp32_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic [26:0] mx, my;   // 1 hidden + 23 fraction + 3 guard bits
    logic [27:0] sum;
    int          ex, d, sh;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'd0 : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    ex = int'(x[30:23]);
    d  = ex - int'(y[30:23]);
    mx = {1'b1, x[22:0], 3'b000};
    my = (d > 26) ? 27'd0 : ({1'b1, y[22:0], 3'b000} >> d);
    if (x[31] == y[31]) sum = {1'b0, mx} + {1'b0, my};
    else                sum = {1'b0, mx} - {1'b0, my};
    if (sum == 28'd0) return 32'd0;
    if (sum[27]) begin sum = sum >> 1; ex = ex + 1; end
    else begin
      sh = 0;
      for (int i = 26; i >= 0; i--) if (sum[i]) begin sh = 26 - i; break; end
      sum = sum << sh;
      ex  = ex - sh;
    end
    if (ex <= 0)   return {x[31], 31'd0};
    if (ex >= 255) return {x[31], 8'hff, 23'd0};
    return {x[31], ex[7:0], sum[25:3]};
  endfunction

  function automatic logic [31:0] fp32_fma(input logic [31:0] a, input logic [31:0] b,
                                           input logic [31:0] c);
    return fp32_add(fp32_mul(a, b), c);
  endfunction

  // Signed 24-bit integer (sign-extended in 32 bits) to FP32, truncating.
  function automatic logic [31:0] i24_to_fp32(input logic [31:0] v);
    logic        s;
    logic [23:0] mag;
    logic [23:0] norm;
    int          p;
    s   = v[23];
    mag = s ? (~v[23:0] + 24'd1) : v[23:0];
    if (mag == 24'd0) return 32'd0;
    p = 0;
    for (int i = 23; i >= 0; i--) if (mag[i]) begin p = i; break; end
    norm = mag << (23 - p);
    return {s, 8'(127 + p), norm[22:0]};
  endfunction

  function automatic logic [31:0] sext24(input logic [23:0] v);
    return {{8{v[23]}}, v};
  endfunction

endpackage
