// tb_imax_agu: self-checking test of the masked address generator.
// Random base/stride/mask settings and indices in stream mode and random
// table indices in table mode, compared with the address worked out here.
`timescale 1ns/1ps
module tb_imax_agu;
  import imax_pkg::*;
  agcfg_t cfg;
  logic [IDX_W-1:0] idx;
  logic tmode;
  logic [15:0] tidx;
  logic [AG_W-1:0] addr;
  int checks = 0, failures = 0;

  imax_agu dut (.cfg, .idx, .table_mode(tmode), .table_index(tidx), .addr);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int unsigned exp;
    for (int t = 0; t < 2000; t++) begin
      cfg.base = 16'($urandom); cfg.stride = 16'($urandom % 9);
      cfg.mask0 = (t % 3 == 0) ? 16'hffff : 16'($urandom);
      cfg.mask1 = (t % 4 == 0) ? 16'hffff : 16'((1 << ($urandom % 16)) - 1);
      idx = 16'($urandom); tidx = 16'($urandom); tmode = t[0];
      #1;
      if (tmode) exp = (int'(cfg.base & cfg.mask0) + int'(tidx & cfg.mask1)) % 65536;
      else       exp = (int'(cfg.base & cfg.mask0) + ((int'(idx) * int'(cfg.stride)) % 65536 & int'(cfg.mask1))) % 65536;
      checks++;
      if (addr != 16'(exp)) begin
        failures++; $display("FAIL t=%0d mode=%0d addr=%h exp=%h", t, tmode, addr, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
