// tb_mx100_full: end-to-end test of the SoC at its default size.
// Ten 256 x 256 NPUs, the 128 -> 240 -> 128 -> 64 -> 3 classifier, 256 KB
// instruction and data RAMs and the 1 MB system SRAM. It classifies 514
// samples, the size of the test set the design was evaluated on, each staged
// by the DMA at its own place in system SRAM. Weights and samples are random
// (the trained model and the measured spectra are not available), so the
// classes themselves mean nothing; every score is checked against the
// bench's model. The test body is in tb_mx100_body.svh.
module tb_mx100_full;
  localparam int R = 256, C = 256, IN = 128, H1 = 240, H2 = 128, H3 = 64, NNPU = 10, NSAMP = 514;
  localparam int IAW = 16, DAW = 16;
  localparam int WATCHDOG = 80000000;
`include "tb_mx100_body.svh"

  mx100_top dut (.*);
  assign xb_m_req = dut.m_req;
endmodule
