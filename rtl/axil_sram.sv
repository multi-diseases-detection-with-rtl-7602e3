// axil_sram: the 1 MB system SRAM as an AXI4-Lite slave.
//
// The paper's SoC has a 1 MB system SRAM on the interconnect for NPU buffer
// data. This wraps one sram array of BYTES/4 words behind axil_slave_port.
// Byte address bits [1:0] are ignored (word accesses with byte strobes);
// higher bits beyond the array size wrap. Timing is that of axil_slave_port:
// a read returns 2 cycles after AR is accepted, a write answers on B the
// cycle after it is accepted.
module axil_sram
  import mx100_pkg::*;
#(
  parameter int unsigned BYTES = 1048576
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_req,
  output axil_rsp_t s_rsp
);

  localparam int unsigned WORDS = BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);

  logic        req, we;
  logic [31:0] addr, wdata, rdata;
  logic [3:0]  wstrb;

  axil_slave_port u_port (
    .clk, .rst_n, .s_req, .s_rsp,
    .req, .we, .addr, .wdata, .wstrb, .rdata
  );

  sram #(.WORDS(WORDS)) u_mem (
    .clk, .req, .we,
    .addr (addr[AW+1:2]),
    .wdata, .wstrb, .rdata
  );

  logic unused;
  assign unused = ^{addr[31:AW+2], addr[1:0]};

endmodule
