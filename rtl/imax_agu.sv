// imax_agu: one address generator (AG1 or AG2) of an IMAX processing element.
//
// The address generators run beside the ALUs so that memory addressing never
// occupies an arithmetic unit. Each has two inputs, each passed through its
// own mask register (as in the paper's PE figure), and adds them:
//   addr = (base & mask0) + (offset & mask1)
// In stream mode the offset is the iteration index times the stride, so
// successive iterations walk through the local memory. In table mode the
// offset is a data value from the pipeline (used for the FP16->FP32 lookup
// table held in the local memory), and the mask bounds the table.
// Combinational; the address is used in the same cycle by the LMM.
// Follows the paper: two independent AGs with masked inputs. Own choice:
// the base/stride/mask encoding and word (64-bit) addressing.
module imax_agu
  import imax_pkg::*;
(
  input  agcfg_t          cfg,
  input  logic [IDX_W-1:0] idx,
  input  logic            table_mode,
  input  logic [15:0]     table_index,
  output logic [AG_W-1:0] addr
);
  logic [AG_W-1:0] offset;
  always_comb begin
    offset = table_mode ? AG_W'(table_index) : AG_W'(idx * cfg.stride);
    addr   = (cfg.base & cfg.mask0) + (offset & cfg.mask1);
  end
endmodule
