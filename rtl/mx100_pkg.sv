// mx100_pkg: constants and bus types shared by the memristive SoC.
//
// The SoC has ten crossbar NPUs of 256 x 256 cells, 8-bit DACs and ADCs,
// a 1 MB system SRAM and a DMA engine, all joined by one interconnect.
// Those sizes follow the paper. The interconnect is AXI4-Lite here (single
// beats, no IDs), a subset of the AXI4 the paper names. The address map
// below is this design's own choice:
//   0x0000_0000 .. 0x000F_FFFF  system SRAM (1 MB)
//   0x1000_0000 .. 0x1000_0FFF  DMA registers
//   0x2000_0000 + n*0x1000      NPU n registers (n = 0..9)
package mx100_pkg;

  localparam int unsigned N_NPU    = 10;
  localparam int unsigned XB_ROWS  = 256;
  localparam int unsigned XB_COLS  = 256;
  localparam int unsigned DAC_BITS = 8;
  localparam int unsigned ADC_BITS = 8;

  localparam logic [31:0] SYSMEM_BASE = 32'h0000_0000;
  localparam logic [31:0] DMA_BASE    = 32'h1000_0000;
  localparam logic [31:0] NPU_BASE    = 32'h2000_0000;
  localparam logic [31:0] NPU_STRIDE  = 32'h0000_1000;

  // Interconnect slave indices.
  localparam int unsigned S_SYSMEM = 0;
  localparam int unsigned S_DMA    = 1;
  localparam int unsigned S_NPU0   = 2;
  localparam int unsigned N_SLAVES = S_NPU0 + N_NPU;

  // NPU register map (byte offsets inside one 4 KB NPU window).
  localparam logic [11:0] NPU_IN_BUF   = 12'h000; // 64 words: wordline DAC codes, 4 per word
  localparam logic [11:0] NPU_OUT_BUF  = 12'h100; // 64 words: bitline ADC codes, read only
  localparam logic [11:0] NPU_CTRL     = 12'h200; // write bit0 = start VMM
  localparam logic [11:0] NPU_STATUS   = 12'h204; // bit0 VMM busy, bit1 prog busy, bit2 last prog ok
  localparam logic [11:0] NPU_ADCSH    = 12'h208; // ADC range: LSB = 2^ADCSH current units
  localparam logic [11:0] NPU_PADDR    = 12'h210; // {col[15:8], row[7:0]}
  localparam logic [11:0] NPU_PTGT     = 12'h214; // {max_pulses[31:16], tol[15:8], target[7:0]}
  localparam logic [11:0] NPU_PCMD     = 12'h218; // write bit0 = program cell, bit1 = read cell
  localparam logic [11:0] NPU_CELL     = 12'h21C; // last read code of the selected cell
  localparam logic [11:0] NPU_PCOUNT   = 12'h220; // pulses used by the last program command

  // DMA register map.
  localparam logic [11:0] DMA_SRC    = 12'h000;
  localparam logic [11:0] DMA_DST    = 12'h004;
  localparam logic [11:0] DMA_LEN    = 12'h008; // words
  localparam logic [11:0] DMA_CTRL   = 12'h00C; // write bit0 = start
  localparam logic [11:0] DMA_STATUS = 12'h010; // bit0 busy, [31:16] completed transfers

  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } axi_resp_e;

  // AXI4-Lite master-to-slave signals.
  typedef struct packed {
    logic [31:0] awaddr;
    logic        awvalid;
    logic [31:0] wdata;
    logic [3:0]  wstrb;
    logic        wvalid;
    logic        bready;
    logic [31:0] araddr;
    logic        arvalid;
    logic        rready;
  } axil_req_t;

  // AXI4-Lite slave-to-master signals.
  typedef struct packed {
    logic        awready;
    logic        wready;
    axi_resp_e   bresp;
    logic        bvalid;
    logic        arready;
    logic [31:0] rdata;
    axi_resp_e   rresp;
    logic        rvalid;
  } axil_rsp_t;

  localparam axil_req_t AXIL_REQ_IDLE = '0;

  // Slave windows of the interconnect: slave i answers when
  // (addr & SOC_S_MASK[i]) == SOC_S_BASE[i].
  typedef logic [N_SLAVES-1:0][31:0] slave_addr_t;

  function automatic slave_addr_t soc_s_base();
    slave_addr_t b;
    b[S_SYSMEM] = SYSMEM_BASE;
    b[S_DMA]    = DMA_BASE;
    for (int n = 0; n < N_NPU; n++) b[S_NPU0 + n] = NPU_BASE + NPU_STRIDE * n;
    return b;
  endfunction

  function automatic slave_addr_t soc_s_mask();
    slave_addr_t m;
    m[S_SYSMEM] = 32'hFFF0_0000;  // 1 MB
    m[S_DMA]    = 32'hFFFF_F000;  // 4 KB
    for (int n = 0; n < N_NPU; n++) m[S_NPU0 + n] = 32'hFFFF_F000;
    return m;
  endfunction

  localparam slave_addr_t SOC_S_BASE = soc_s_base();
  localparam slave_addr_t SOC_S_MASK = soc_s_mask();

endpackage
