// mx100_top: the memristive SoC that runs the multi-disease classifier.
//
// Ten crossbar NPUs (256 x 256 cells, 8-bit DACs and ADCs), a 1 MB system
// SRAM, a DMA engine and the MLP sequencer share one AXI4-Lite interconnect.
// Masters: 0 = host port (where the RISC-V core and the I/O peripheral of
// the chip attach; neither is built here), 1 = DMA, 2 = MLP sequencer.
// Slaves and addresses are listed in mx100_pkg. The instruction RAM and data
// RAM (256 KB each) hang off the CPU side, as drawn in the paper's block
// diagram, so their ports are brought out for the CPU.
//
// A classification goes like this: the host programs layer 1's weights into
// NPU 0 and layers 2-4 into NPU 1 (register writes that start the on-chip
// write-verify loop per cell), places the 128 int8 PCA values of a sample in
// system SRAM (directly or with the DMA), then pulses seq_start. The
// sequencer runs five VMMs and returns class_id and the three scores. The
// sequencer's controls stand in for the firmware the CPU would run.
//
// Block list, sizes and the layer mapping follow the paper; the bus subset,
// address map, RAM split and sequencer are this design's own choices.
// Reset is synchronous, active low; it does not change cell conductances.
// STUCK_PPM (default 0, no rate is given) turns on the crossbar model's
// stuck-on/stuck-off cells in every NPU.
module mx100_top
  import mx100_pkg::*;
#(
  parameter int unsigned N_NPU_P      = N_NPU,
  parameter int unsigned ROWS         = XB_ROWS,
  parameter int unsigned COLS         = XB_COLS,
  parameter int unsigned IRAM_BYTES   = 262144,
  parameter int unsigned DRAM_BYTES   = 262144,
  parameter int unsigned SYSMEM_BYTES = 1048576,
  parameter int unsigned IN_DIM       = 128,
  parameter int unsigned H1           = 240,
  parameter int unsigned H2           = 128,
  parameter int unsigned H3           = 64,
  parameter int unsigned PULSE_CYCLES = 5,
  parameter int unsigned SET_STEP_MAX = 8,
  parameter int unsigned VMM_LATENCY  = 4,
  parameter int unsigned STUCK_PPM    = 0,
  localparam int unsigned IAW = $clog2(IRAM_BYTES / 4),
  localparam int unsigned DAW = $clog2(DRAM_BYTES / 4)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host / CPU master port on the interconnect
  input  axil_req_t            host_req,
  output axil_rsp_t            host_rsp,
  // CPU-side instruction RAM
  input  logic                 iram_req,
  input  logic                 iram_we,
  input  logic [IAW-1:0]       iram_addr,
  input  logic [31:0]          iram_wdata,
  input  logic [3:0]           iram_wstrb,
  output logic [31:0]          iram_rdata,
  // CPU-side data RAM
  input  logic                 dram_req,
  input  logic                 dram_we,
  input  logic [DAW-1:0]       dram_addr,
  input  logic [31:0]          dram_wdata,
  input  logic [3:0]           dram_wstrb,
  output logic [31:0]          dram_rdata,
  // classifier control
  input  logic                 seq_start,
  input  logic [31:0]          seq_in_addr,
  input  logic [3:0][4:0]      seq_adc_shift,
  input  logic [2:0][4:0]      seq_rq_shift,
  output logic                 seq_busy,
  output logic                 seq_done,
  output logic [1:0]           seq_class,
  output logic signed [2:0][31:0] seq_score,
  output logic [31:0]          seq_n_relu_zero,
  output logic [31:0]          seq_n_rq_sat,
  output logic [31:0]          seq_n_adc_sat,
  output logic                 dma_irq
);

  localparam int unsigned NM = 3;
  localparam int unsigned NS = S_NPU0 + N_NPU_P;

  function automatic logic [NS-1:0][31:0] bases();
    for (int i = 0; i < NS; i++) bases[i] = (i < N_SLAVES) ? SOC_S_BASE[i] : 32'hFFFF_FFFF;
  endfunction
  function automatic logic [NS-1:0][31:0] masks();
    for (int i = 0; i < NS; i++) masks[i] = (i < N_SLAVES) ? SOC_S_MASK[i] : 32'hFFFF_FFFF;
  endfunction

  axil_req_t [NM-1:0] m_req;
  axil_rsp_t [NM-1:0] m_rsp;
  axil_req_t [NS-1:0] s_req;
  axil_rsp_t [NS-1:0] s_rsp;

  assign m_req[0] = host_req;
  assign host_rsp = m_rsp[0];

  axil_xbar #(.N_M(NM), .N_S(NS), .S_BASE(bases()), .S_MASK(masks())) u_xbar (
    .clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp
  );

  axil_sram #(.BYTES(SYSMEM_BYTES)) u_sysmem (
    .clk, .rst_n, .s_req(s_req[S_SYSMEM]), .s_rsp(s_rsp[S_SYSMEM])
  );

  dma u_dma (
    .clk, .rst_n,
    .s_req(s_req[S_DMA]), .s_rsp(s_rsp[S_DMA]),
    .m_req(m_req[1]), .m_rsp(m_rsp[1]),
    .irq_done(dma_irq)
  );

  mlp_sequencer #(
    .ROWS(ROWS), .COLS(COLS), .IN_DIM(IN_DIM), .H1(H1), .H2(H2), .H3(H3)
  ) u_seq (
    .clk, .rst_n,
    .start(seq_start), .in_addr(seq_in_addr),
    .adc_shift(seq_adc_shift), .rq_shift(seq_rq_shift),
    .busy(seq_busy), .done(seq_done), .class_id(seq_class), .score(seq_score),
    .n_relu_zero(seq_n_relu_zero), .n_rq_sat(seq_n_rq_sat), .n_adc_sat(seq_n_adc_sat),
    .m_req(m_req[2]), .m_rsp(m_rsp[2])
  );

  for (genvar n = 0; n < N_NPU_P; n++) begin : gen_npu
    logic        req, we;
    logic [31:0] addr, wdata, rdata;
    logic [3:0]  wstrb;
    axil_slave_port u_port (
      .clk, .rst_n, .s_req(s_req[S_NPU0 + n]), .s_rsp(s_rsp[S_NPU0 + n]),
      .req, .we, .addr, .wdata, .wstrb, .rdata
    );
    npu #(
      .ROWS(ROWS), .COLS(COLS), .PULSE_CYCLES(PULSE_CYCLES),
      .SET_STEP_MAX(SET_STEP_MAX), .VMM_LATENCY(VMM_LATENCY), .STUCK_PPM(STUCK_PPM)
    ) u_npu (
      .clk, .rst_n,
      .bus_req(req), .bus_we(we), .bus_addr(addr[11:0]),
      .bus_wdata(wdata), .bus_wstrb(wstrb), .bus_rdata(rdata)
    );
    logic unused;
    assign unused = ^addr[31:12];
  end

  sram #(.WORDS(IRAM_BYTES / 4)) u_iram (
    .clk, .req(iram_req), .we(iram_we), .addr(iram_addr),
    .wdata(iram_wdata), .wstrb(iram_wstrb), .rdata(iram_rdata)
  );

  sram #(.WORDS(DRAM_BYTES / 4)) u_dram (
    .clk, .req(dram_req), .we(dram_we), .addr(dram_addr),
    .wdata(dram_wdata), .wstrb(dram_wstrb), .rdata(dram_rdata)
  );

endmodule
