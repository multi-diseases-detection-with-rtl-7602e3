// sram: single-port on-chip SRAM, 32-bit words with byte write strobes.
//
// The SoC has a 512 KB SRAM for instructions and data and a 1 MB system
// SRAM; both are instances of this array. The real parts are foundry macros
// the paper does not describe; this is the plain register-array equivalent.
// Port: one access per cycle on req; a write stores the bytes selected by
// wstrb at the clock edge; a read returns rdata on the next cycle and rdata
// holds until the next read. The contents are not reset.
module sram #(
  parameter int unsigned WORDS = 262144,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          req,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   wdata,
  input  logic [3:0]    wstrb,
  output logic [31:0]   rdata
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (req) begin
      if (we) begin
        for (int b = 0; b < 4; b++)
          if (wstrb[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end

endmodule
