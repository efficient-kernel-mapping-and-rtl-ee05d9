// imax_top: the IMAX accelerator core (programmable-logic side).
//
// NUM_LANES independent compute lanes of NUM_PE processing elements, each PE
// with its own double-buffered local memory, one DMA engine moving data
// between the host's DMA buffer and the LMMs over a shared address space, and
// a programmed-I/O decoder through which the host configures and starts
// everything. The host processor, the on-chip network and the DDR memory are
// outside: the PIO bus and the two DMA streams are brought out as ports.
//
// A kernel call runs as: PIO writes of CONF/AG1/AG2/REGV/RANGE to the PEs,
// LOAD (one burst into the transfer-side LMM banks), SWAP, EXEC, SWAP, DRAIN.
// Because LOAD and DRAIN use the banks the PEs are not using, the next
// call's LOAD and the previous call's DRAIN can overlap the current EXEC; the
// SWAP can be folded into the EXEC command (see imax_ctrl).
// Follows the paper: 64 PEs per lane, 64 KB LMMs, the lane count of the
// main evaluation (2 of the 8 the FPGA holds), DMA read/write paths, PIO
// configuration. Own choices: the port-level protocols (see imax_ctrl and
// imax_dma).
module imax_top
  import imax_pkg::*;
#(
  parameter int unsigned NUM_LANES = 2,
  parameter int unsigned NUM_PE    = 64,
  parameter int unsigned LMM_BYTES = 65536
)(
  input  logic        clk,
  input  logic        rst_n,
  // programmed I/O from the host
  input  logic        pio_we,
  input  logic [23:0] pio_addr,
  input  word_t       pio_wdata,
  output word_t       pio_rdata,
  // DMA read data (host memory -> LMMs)
  input  logic        ld_valid,
  output logic        ld_ready,
  input  word_t       ld_data,
  // DMA write data (LMMs -> host memory)
  output logic        dr_valid,
  input  logic        dr_ready,
  output word_t       dr_data,
  // per-lane completion pulses (interrupt sources)
  output logic [NUM_LANES-1:0] lane_done
);
  logic [NUM_LANES-1:0] cfg_we, start, swap, lane_busy;
  logic [PE_SEL_W-1:0]  cfg_pe;
  cfgreg_e              cfg_reg;
  word_t                cfg_data;
  logic [IDX_W:0]       iters;
  logic                 load_cmd, drain_cmd, load_busy, drain_busy;
  logic [GADDR_W-1:0]   cmd_addr, cmd_len;
  logic                 bus_we, bus_re;
  logic [GADDR_W-1:0]   bus_waddr, bus_raddr;
  word_t                bus_wdata, bus_rdata;
  word_t                lane_rdata [NUM_LANES];

  imax_ctrl #(.NUM_LANES(NUM_LANES)) u_ctrl (
    .clk, .rst_n, .pio_we, .pio_addr, .pio_wdata, .pio_rdata,
    .cfg_we, .cfg_pe, .cfg_reg, .cfg_data, .start, .iters, .swap, .lane_busy,
    .load_cmd, .drain_cmd, .cmd_addr, .cmd_len, .load_busy, .drain_busy
  );

  imax_dma u_dma (
    .clk, .rst_n, .load_cmd, .drain_cmd, .cmd_addr, .cmd_len, .load_busy, .drain_busy,
    .ld_valid, .ld_ready, .ld_data, .dr_valid, .dr_ready, .dr_data,
    .bus_we, .bus_waddr, .bus_wdata, .bus_re, .bus_raddr, .bus_rdata
  );

  for (genvar l = 0; l < NUM_LANES; l++) begin : g_lane
    stage_t last_out;
    logic   rhit;
    imax_lane #(.NUM_PE(NUM_PE), .LMM_BYTES(LMM_BYTES)) u_lane (
      .clk, .rst_n,
      .cfg_we(cfg_we[l]), .cfg_pe, .cfg_reg, .cfg_data,
      .start(start[l]), .iters, .swap(swap[l]),
      .busy(lane_busy[l]), .done(lane_done[l]), .last_out,
      .dma_we(bus_we), .dma_waddr(bus_waddr), .dma_wdata(bus_wdata),
      .dma_re(bus_re), .dma_raddr(bus_raddr), .dma_rdata(lane_rdata[l]), .dma_rhit(rhit)
    );
  end

  always_comb begin
    bus_rdata = '0;
    for (int l = 0; l < NUM_LANES; l++) bus_rdata = bus_rdata | lane_rdata[l];
  end
endmodule
