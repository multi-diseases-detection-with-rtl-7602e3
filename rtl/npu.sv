// npu: one neural processing unit of the SoC, behind a register port.
//
// An NPU is a memristor crossbar (npu_xbar) plus the digital logic that
// feeds it: a wordline input buffer, the ADC output buffer, and a write-verify
// controller (npu_prog_verify) for setting cell conductances. The crossbar,
// its 8-bit DACs and ADCs and its 256 x 256 size follow the paper. The
// register map and the port are this design's own choices (see mx100_pkg):
//   0x000-0x0FF  input buffer, one DAC code per byte, row 4k+i in byte i of word k
//   0x100-0x1FF  output buffer, one ADC code per byte, same packing (read only)
//   0x200 CTRL   write bit0 = start a VMM with the current input buffer
//   0x204 STATUS bit0 VMM busy, bit1 programming busy, bit2 last program ok
//   0x208 ADCSH  ADC range select, 5 bits
//   0x210 PADDR  {col[15:8], row[7:0]} of the cell to program or read
//   0x214 PTGT   {max_pulses[31:16], tol[15:8], target[7:0]}
//   0x218 PCMD   write bit0 = write-verify the cell to PTGT, bit1 = read the cell
//   0x21C CELL   code returned by the last cell read (also the final code of a program)
//   0x220 PCOUNT pulses used by the last program command
//
// Port: bus_req with bus_we/bus_addr/bus_wdata/bus_wstrb is one access;
// bus_rdata is valid the cycle after a read request. Writes take effect at
// the clock edge. Commands given while the unit they start is busy are
// ignored; software polls STATUS. Reset is synchronous, active low, and
// leaves the cell conductances unchanged. STUCK_PPM (default 0) is passed to
// the crossbar model's stuck-cell option. A program command on a stuck cell
// spends its pulse budget and ends with the ok bit clear, unless the target
// already lies within tolerance of the stuck code.
module npu
  import mx100_pkg::*;
#(
  parameter int unsigned ROWS         = 256,
  parameter int unsigned COLS         = 256,
  parameter int unsigned PULSE_CYCLES = 5,
  parameter int unsigned SET_STEP_MAX = 8,
  parameter int unsigned VMM_LATENCY  = 4,
  parameter int unsigned STUCK_PPM    = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bus_req,
  input  logic        bus_we,
  input  logic [11:0] bus_addr,
  input  logic [31:0] bus_wdata,
  input  logic [3:0]  bus_wstrb,
  output logic [31:0] bus_rdata
);

  localparam int unsigned IN_WORDS  = ROWS / 4;
  localparam int unsigned OUT_WORDS = COLS / 4;

  logic [ROWS-1:0][7:0] in_buf;
  logic [COLS-1:0][7:0] adc_code;
  logic [4:0]  adc_shift;
  logic [7:0]  p_row, p_col, p_tgt, p_tol;
  logic [15:0] p_max;
  logic [7:0]  cell_code;

  logic vmm_start, vmm_busy, vmm_done;
  logic pv_start, pv_busy, pv_done, pv_ok;
  logic [7:0]  pv_code;
  logic [15:0] pv_pulses;
  logic set_pulse, reset_pulse, pv_read_req, rd_req_direct, read_valid;
  logic [7:0] read_code;

  logic wr, is_in, is_out;
  assign wr     = bus_req && bus_we;
  assign is_in  = (bus_addr[11:8] == NPU_IN_BUF[11:8]);
  assign is_out = (bus_addr[11:8] == NPU_OUT_BUF[11:8]);

  assign vmm_start     = wr && (bus_addr == NPU_CTRL) && bus_wdata[0];
  assign pv_start      = wr && (bus_addr == NPU_PCMD) && bus_wdata[0] && !pv_busy;
  assign rd_req_direct = wr && (bus_addr == NPU_PCMD) && bus_wdata[1] && !bus_wdata[0] && !pv_busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_buf    <= '0;
      adc_shift <= '0;
      p_row     <= '0;
      p_col     <= '0;
      p_tgt     <= '0;
      p_tol     <= '0;
      p_max     <= '0;
      cell_code <= '0;
    end else begin
      if (wr && is_in && (int'(bus_addr[7:2]) < IN_WORDS)) begin
        for (int b = 0; b < 4; b++)
          if (bus_wstrb[b]) in_buf[4*bus_addr[7:2] + b] <= bus_wdata[8*b +: 8];
      end
      if (wr && bus_addr == NPU_ADCSH) adc_shift <= bus_wdata[4:0];
      if (wr && bus_addr == NPU_PADDR && !pv_busy) begin
        p_row <= bus_wdata[7:0];
        p_col <= bus_wdata[15:8];
      end
      if (wr && bus_addr == NPU_PTGT) begin
        p_tgt <= bus_wdata[7:0];
        p_tol <= bus_wdata[15:8];
        p_max <= bus_wdata[31:16];
      end
      if (read_valid) cell_code <= read_code;
    end
  end

  // Read data, one cycle after the request.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bus_rdata <= '0;
    end else if (bus_req && !bus_we) begin
      bus_rdata <= '0;
      if (is_in && int'(bus_addr[7:2]) < IN_WORDS)
        bus_rdata <= in_buf[4*bus_addr[7:2] +: 4];
      else if (is_out && int'(bus_addr[7:2]) < OUT_WORDS)
        bus_rdata <= adc_code[4*bus_addr[7:2] +: 4];
      else
        unique case (bus_addr)
          NPU_STATUS: bus_rdata <= {29'd0, pv_ok, pv_busy, vmm_busy};
          NPU_ADCSH:  bus_rdata <= {27'd0, adc_shift};
          NPU_PADDR:  bus_rdata <= {16'd0, p_col, p_row};
          NPU_PTGT:   bus_rdata <= {p_max, p_tol, p_tgt};
          NPU_CELL:   bus_rdata <= {24'd0, cell_code};
          NPU_PCOUNT: bus_rdata <= {16'd0, pv_pulses};
          default:    bus_rdata <= '0;
        endcase
    end
  end

  npu_prog_verify #(.PULSE_CYCLES(PULSE_CYCLES)) u_pv (
    .clk, .rst_n,
    .start      (pv_start),
    .target     (p_tgt),
    .tol        (p_tol),
    .max_pulses (p_max),
    .busy       (pv_busy),
    .done       (pv_done),
    .ok         (pv_ok),
    .final_code (pv_code),
    .pulses     (pv_pulses),
    .set_pulse, .reset_pulse,
    .read_req   (pv_read_req),
    .read_valid, .read_code
  );

  npu_xbar #(
    .ROWS(ROWS), .COLS(COLS), .SET_STEP_MAX(SET_STEP_MAX), .VMM_LATENCY(VMM_LATENCY),
    .STUCK_PPM(STUCK_PPM)
  ) u_xbar (
    .clk, .rst_n,
    .dac_code  (in_buf),
    .adc_shift (adc_shift),
    .vmm_start (vmm_start),
    .vmm_busy  (vmm_busy),
    .vmm_done  (vmm_done),
    .adc_code  (adc_code),
    .cell_row  (($clog2(ROWS))'(p_row)),
    .cell_col  (($clog2(COLS))'(p_col)),
    .set_pulse, .reset_pulse,
    .read_req  (pv_read_req | rd_req_direct),
    .read_valid, .read_code
  );

  // vmm_done and pv_done/pv_code are visible through STATUS and CELL only.
  logic unused;
  assign unused = ^{vmm_done, pv_done, pv_code, bus_addr[1:0]};

endmodule
