// tb_mx100_top: end-to-end test of the SoC at reduced size.
// Crossbars of 32 x 32, layers 16 -> 24 -> 12 -> 8 -> 3, small RAMs and
// a 64 KB system SRAM; ten NPUs as in the full design. The test body is in
// tb_mx100_body.svh.
module tb_mx100_top;
  localparam int R = 32, C = 32, IN = 16, H1 = 24, H2 = 12, H3 = 8, NNPU = 10, NSAMP = 8;
  localparam int IAW = 8, DAW = 8;
  localparam int WATCHDOG = 3000000;
`include "tb_mx100_body.svh"

  mx100_top #(
    .ROWS(R), .COLS(C), .IN_DIM(IN), .H1(H1), .H2(H2), .H3(H3),
    .IRAM_BYTES(1024), .DRAM_BYTES(1024), .SYSMEM_BYTES(65536)
  ) dut (.*);
  assign xb_m_req = dut.m_req;
endmodule
