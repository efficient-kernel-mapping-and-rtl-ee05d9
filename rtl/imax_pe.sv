// imax_pe: one processing element of the IMAX linear array with its LMM.
//
// Each cycle in which the incoming pipeline bundle is valid, the PE
//   * selects three ALU operands from the four incoming pipeline registers,
//     its constant register (REGV) or its own accumulator (the UPDATE loop
//     of the dot-product kernels), runs them through ALU1->ALU2->ALU3 and
//     writes the result into one of the outgoing pipeline registers and the
//     accumulator;
//   * uses AG1 to read one word from its local memory into one outgoing
//     pipeline register (an operand for the next PE), either streaming by
//     iteration index or as a table lookup indexed by a data value;
//   * uses AG2 to store the ALU result into its local memory.
// The outgoing bundle is registered: one cycle from PE n to PE n+1. The LMM
// read data is spliced in after the register, straight from the memory's
// output latch, so loads add no extra cycle.
//
// Configuration (CONF, AG1, AG2, REGV, RANGE) arrives on a write bus from the
// programmed-I/O decoder. The RANGE register places the LMM's transfer-side
// bank in the DMA's shared address space: the PE accepts DMA writes and
// answers DMA reads whose word address falls in [base, base+size).
// Follows the paper: PE/LMM pairing, ALU1-3 chain, AG1/AG2, double-buffered
// LMM, PIO configuration classes CONF/REGV/RANGE. Own choices: the operand
// selection, four pipeline registers, the accumulator feedback, the
// register encodings and the one-cycle stage timing.
module imax_pe
  import imax_pkg::*;
#(
  parameter int unsigned LMM_BYTES = 65536
)(
  input  logic            clk,
  input  logic            rst_n,
  input  stage_t          s_in,
  output stage_t          s_out,
  // configuration write
  input  logic            cfg_we,
  input  cfgreg_e         cfg_reg,
  input  word_t           cfg_data,
  input  logic            acc_clr,
  input  logic            swap,
  // DMA side (shared address space)
  input  logic               dma_we,
  input  logic [GADDR_W-1:0] dma_waddr,
  input  word_t              dma_wdata,
  input  logic               dma_re,
  input  logic [GADDR_W-1:0] dma_raddr,
  output word_t              dma_rdata,   // zero unless this PE answered
  output logic               dma_rhit
);
  localparam int unsigned BAW = $clog2(LMM_BYTES / 16);

  conf_t  conf;
  agcfg_t ag1, ag2;
  word_t  regv, acc;
  range_t range;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      conf <= '0; ag1 <= '0; ag2 <= '0; regv <= '0; range <= '0;
    end else if (cfg_we) begin
      unique case (cfg_reg)
        CR_CONF:  conf  <= conf_t'(cfg_data[$bits(conf_t)-1:0]);
        CR_AG1:   ag1   <= agcfg_t'(cfg_data);
        CR_AG2:   ag2   <= agcfg_t'(cfg_data);
        CR_REGV:  regv  <= cfg_data;
        CR_RANGE: range <= range_t'(cfg_data);
        default: ;
      endcase
    end
  end

  // operand selection
  function automatic word_t pick(input sel_e s, input stage_t st, input word_t k, input word_t ac);
    unique case (s)
      SEL_R0:    return st.r[0];
      SEL_R1:    return st.r[1];
      SEL_R2:    return st.r[2];
      SEL_R3:    return st.r[3];
      SEL_CONST: return k;
      SEL_ACC:   return ac;
      default:   return '0;
    endcase
  endfunction

  word_t opa, opb, opc, alu1_res, res;
  assign opa = pick(conf.sel_a, s_in, regv, acc);
  assign opb = pick(conf.sel_b, s_in, regv, acc);
  assign opc = pick(conf.sel_c, s_in, regv, acc);

  imax_alu u_alu (
    .op1(conf.op1), .op2(conf.op2), .op3(conf.op3), .shamt(conf.shamt),
    .a(opa), .b(opb), .c(opc), .alu1_res(alu1_res), .res(res)
  );

  // address generators
  logic [AG_W-1:0] ld_addr, st_addr;
  imax_agu u_ag1 (.cfg(ag1), .idx(s_in.idx), .table_mode(conf.ld_lut),
                  .table_index(s_in.r[conf.lut_src][15:0]), .addr(ld_addr));
  imax_agu u_ag2 (.cfg(ag2), .idx(s_in.idx), .table_mode(1'b0),
                  .table_index(16'd0), .addr(st_addr));

  // DMA address decode against RANGE
  logic [GADDR_W-1:0] w_off, r_off;
  logic w_hit, r_hit;
  always_comb begin
    w_off = dma_waddr - range.base;
    r_off = dma_raddr - range.base;
    w_hit = dma_we && (w_off < range.size);
    r_hit = dma_re && (r_off < range.size);
  end

  word_t pe_rdata, lmm_dma_rdata;
  imax_lmm #(.LMM_BYTES(LMM_BYTES)) u_lmm (
    .clk, .rst_n, .swap, .pe_bank(),
    .pe_re(s_in.valid && conf.ld_en), .pe_raddr(ld_addr[BAW-1:0]), .pe_rdata(pe_rdata),
    .pe_we(s_in.valid && conf.st_en), .pe_waddr(st_addr[BAW-1:0]), .pe_wdata(res),
    .dma_re(r_hit), .dma_raddr(r_off[BAW-1:0]), .dma_rdata(lmm_dma_rdata),
    .dma_we(w_hit), .dma_waddr(w_off[BAW-1:0]), .dma_wdata(dma_wdata)
  );

  // pipeline register to the next PE
  stage_t q;
  logic   ld_q;
  logic [1:0] ld_dst_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; ld_q <= 1'b0; ld_dst_q <= '0;
    end else begin
      q.valid  <= s_in.valid;
      q.idx    <= s_in.idx;
      ld_q     <= s_in.valid && conf.ld_en;
      ld_dst_q <= conf.ld_dst;
      if (s_in.valid) begin
        q.r <= s_in.r;
        if (conf.res_en) q.r[conf.res_dst] <= res;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                     acc <= '0;
    else if (acc_clr)               acc <= '0;
    else if (s_in.valid && conf.res_en) acc <= res;

  always_comb begin
    s_out = q;
    if (ld_q) s_out.r[ld_dst_q] = pe_rdata;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dma_rhit <= 1'b0;
    else        dma_rhit <= r_hit;
  assign dma_rdata = dma_rhit ? lmm_dma_rdata : '0;

  // unused bits of the table index source and the upper ALU1 view
  logic unused;
  assign unused = ^{alu1_res, ld_addr[AG_W-1:BAW], st_addr[AG_W-1:BAW], r_off[GADDR_W-1:BAW], w_off[GADDR_W-1:BAW]};
endmodule
