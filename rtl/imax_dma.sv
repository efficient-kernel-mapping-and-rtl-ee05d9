// imax_dma: DMA engine between the host-side DMA buffer and the LMMs.
//
// The host gathers every input tensor of a kernel call (activations,
// weights, scales) into one contiguous block, and the engine moves it into
// the LMMs with a single burst: LOAD takes a start word address and a length
// in the shared address space, accepts that many 64-bit words from the
// read-data stream (the AXI read side) and puts each on the LMM write bus
// with its address; every PE whose RANGE window holds the address stores it.
// DRAIN is the reverse: it reads `len` words starting at an address from the
// LMMs (one cycle read latency) and offers them on the write-data stream
// (towards the AXI write side). The two directions are independent and can
// run at the same time.
// Timing: LOAD moves one word per cycle while the input stream is valid.
// DRAIN issues one read, holds the word until the stream accepts it, then
// issues the next: at most one word every two cycles.
// Follows the paper: one DMA engine, coalesced single-burst transfers into a
// shared address space, separate read and write paths. Own choices: the
// valid/ready streams in place of the AXI protocol itself, the command
// format and the drain rate.
module imax_dma
  import imax_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // commands
  input  logic               load_cmd,
  input  logic               drain_cmd,
  input  logic [GADDR_W-1:0] cmd_addr,
  input  logic [GADDR_W-1:0] cmd_len,
  output logic               load_busy,
  output logic               drain_busy,
  // read-data stream from host memory
  input  logic               ld_valid,
  output logic               ld_ready,
  input  word_t              ld_data,
  // write-data stream to host memory
  output logic               dr_valid,
  input  logic               dr_ready,
  output word_t              dr_data,
  // LMM buses
  output logic               bus_we,
  output logic [GADDR_W-1:0] bus_waddr,
  output word_t              bus_wdata,
  output logic               bus_re,
  output logic [GADDR_W-1:0] bus_raddr,
  input  word_t              bus_rdata
);
  // LOAD
  logic [GADDR_W-1:0] l_addr, l_left;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_addr <= '0; l_left <= '0; load_busy <= 1'b0;
    end else if (load_cmd && !load_busy) begin
      l_addr <= cmd_addr; l_left <= cmd_len; load_busy <= (cmd_len != 0);
    end else if (load_busy && ld_valid) begin
      l_addr <= l_addr + 1'b1;
      l_left <= l_left - 1'b1;
      if (l_left == 1) load_busy <= 1'b0;
    end
  end
  assign ld_ready  = load_busy;
  assign bus_we    = load_busy && ld_valid;
  assign bus_waddr = l_addr;
  assign bus_wdata = ld_data;

  // DRAIN
  typedef enum logic [1:0] {D_IDLE, D_READ, D_WAIT, D_HOLD} dstate_e;
  dstate_e ds;
  logic [GADDR_W-1:0] d_addr, d_left;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ds <= D_IDLE; d_addr <= '0; d_left <= '0; dr_data <= '0;
    end else begin
      unique case (ds)
        D_IDLE: if (drain_cmd && cmd_len != 0) begin
                  d_addr <= cmd_addr; d_left <= cmd_len; ds <= D_READ;
                end
        D_READ: ds <= D_WAIT;
        D_WAIT: begin dr_data <= bus_rdata; ds <= D_HOLD; end
        D_HOLD: if (dr_ready) begin
                  d_addr <= d_addr + 1'b1;
                  d_left <= d_left - 1'b1;
                  ds     <= (d_left == 1) ? D_IDLE : D_READ;
                end
        default: ds <= D_IDLE;
      endcase
    end
  end
  assign bus_re     = (ds == D_READ);
  assign bus_raddr  = d_addr;
  assign dr_valid   = (ds == D_HOLD);
  assign drain_busy = (ds != D_IDLE);

  // stream rule: data held stable while offered and not taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   dr_valid && !dr_ready |=> dr_valid && $stable(dr_data))
    else $error("imax_dma: drain stream changed while stalled");
endmodule
