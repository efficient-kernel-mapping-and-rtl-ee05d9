// imax_ctrl: programmed-I/O (PIO) register decoder and sequencing control.
//
// The host configures and runs the accelerator entirely through register
// writes, in the phases the paper measures separately:
//   CONF  per-PE operation word       REGV  per-PE constant register
//   RANGE per-PE LMM address window   EXEC  start N iterations on lanes
//   LOAD / DRAIN  DMA burst commands  SWAP  exchange the LMM buffers
// Address map (word addresses of 24 bits):
//   addr[23]=1  PE register: addr[22:20] lane, addr[19:14] PE, addr[2:0]
//               register (0 CONF, 1 AG1, 2 AG2, 3 REGV, 4 RANGE).
//   addr[23]=0  control register addr[3:0]:
//               0 EXEC  wdata[16:0] iterations, wdata[63:56] lane mask,
//                       wdata[55] swap the lanes' LMM buffers as EXEC starts
//               1 SWAP  wdata[7:0] lane mask
//               2 LOAD  wdata[31:0] start word address, wdata[63:32] length
//               3 DRAIN as LOAD
//               4 STATUS (read) {drain busy, load busy, lane busy bits}
//               5/6/7 (read) cycles spent with a lane executing / loading /
//               draining since reset (the EXEC, LOAD, DRAIN breakdown)
// Writes take effect at the clock edge; reads are combinational.
// Follows the paper: configuration over PIO in CONF/REGV/RANGE classes,
// EXEC/LOAD/DRAIN phases. Own choices: the whole address map, the counters.
module imax_ctrl
  import imax_pkg::*;
#(
  parameter int unsigned NUM_LANES = 2
)(
  input  logic               clk,
  input  logic               rst_n,
  // PIO bus
  input  logic               pio_we,
  input  logic [23:0]        pio_addr,
  input  word_t              pio_wdata,
  output word_t              pio_rdata,
  // to lanes
  output logic [NUM_LANES-1:0] cfg_we,
  output logic [PE_SEL_W-1:0]  cfg_pe,
  output cfgreg_e              cfg_reg,
  output word_t                cfg_data,
  output logic [NUM_LANES-1:0] start,
  output logic [IDX_W:0]       iters,
  output logic [NUM_LANES-1:0] swap,
  input  logic [NUM_LANES-1:0] lane_busy,
  // to DMA
  output logic               load_cmd,
  output logic               drain_cmd,
  output logic [GADDR_W-1:0] cmd_addr,
  output logic [GADDR_W-1:0] cmd_len,
  input  logic               load_busy,
  input  logic               drain_busy
);
  logic is_pe, is_ctl;
  logic [3:0] creg;
  assign is_pe  = pio_we &&  pio_addr[23];
  assign is_ctl = pio_we && !pio_addr[23];
  assign creg   = pio_addr[3:0];

  always_comb begin
    for (int l = 0; l < NUM_LANES; l++) begin
      cfg_we[l] = is_pe && (pio_addr[22:20] == LANE_W'(l));
      start[l]  = is_ctl && creg == 4'd0 && pio_wdata[56+l];
      swap[l]   = is_ctl && ((creg == 4'd1 && pio_wdata[l]) ||
                             (creg == 4'd0 && pio_wdata[55] && pio_wdata[56+l]));
    end
    cfg_pe    = pio_addr[19:14];
    cfg_reg   = cfgreg_e'(pio_addr[2:0]);
    cfg_data  = pio_wdata;
    iters     = pio_wdata[IDX_W:0];
    load_cmd  = is_ctl && creg == 4'd2;
    drain_cmd = is_ctl && creg == 4'd3;
    cmd_addr  = pio_wdata[31:0];
    cmd_len   = pio_wdata[63:32];
  end

  logic [63:0] exec_cyc, load_cyc, drain_cyc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      exec_cyc <= '0; load_cyc <= '0; drain_cyc <= '0;
    end else begin
      if (|lane_busy) exec_cyc  <= exec_cyc + 1'b1;
      if (load_busy)  load_cyc  <= load_cyc + 1'b1;
      if (drain_busy) drain_cyc <= drain_cyc + 1'b1;
    end
  end

  always_comb begin
    unique case (pio_addr[3:0])
      4'd4:    pio_rdata = 64'({drain_busy, load_busy, lane_busy});
      4'd5:    pio_rdata = exec_cyc;
      4'd6:    pio_rdata = load_cyc;
      4'd7:    pio_rdata = drain_cyc;
      default: pio_rdata = '0;
    endcase
  end
endmodule
