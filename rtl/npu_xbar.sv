// npu_xbar: behavioural model of one memristor crossbar with its DACs and ADCs.
// This is a model of an analog, process-specific macro, not synthesizable logic.
//
// The array holds ROWS x COLS 1T1R cells. Each cell's conductance is one of
// 256 levels, kept here as an 8-bit code. Every wordline has an 8-bit DAC
// (input dac_code[r]). Every bitline has an 8-bit ADC (output adc_code[c]).
// A VMM uses Ohm's law per cell and Kirchhoff's law per bitline, so the
// bitline current is modelled as I[c] = sum_r dac_code[r] * g[r][c], in units
// of one DAC LSB times one conductance LSB. The ADC turns that current into
// min(2^ADC_BITS-1, I[c] >> adc_shift). adc_shift stands for the ADC
// full-scale setting. The paper does not give the ADC range; this law is a
// choice of this model.
//
// Programming: for the cell at (cell_row, cell_col), a high level on
// set_pulse or reset_pulse is one pulse. When the pulse ends, the
// conductance code moves up (SET) or down (RESET) by a random 1..SET_STEP_MAX,
// saturating at 0 and 255. That random step stands in for device variation;
// the paper says only that identical 50 ns SET and RESET pulse trains are used
// in a closed loop. read_req returns the cell's code on read_code one cycle
// later, with read_valid. The paper says conductance levels are read back
// through the 8-bit ADC.
//
// Timing: vmm_start samples dac_code and adc_shift. adc_code is updated and
// vmm_done pulses VMM_LATENCY cycles later; vmm_busy is high in between.
// VMM_LATENCY is this model's own choice. Cells are non-volatile: reset does
// not change them, and they start at code 0 (fully RESET).
//
// Stuck cells: the paper names stuck-on and stuck-off cells as one of the main
// sources of programming error, but gives no rate. STUCK_PPM sets the share of
// stuck cells, in parts per million, and defaults to 0. At time 0 each cell is
// made stuck with that chance. A stuck cell is stuck on (code 255) or stuck
// off (code 0), with equal chance, and pulses do not move it. The rate, the
// two codes and the even split are this model's choices.
module npu_xbar #(
  parameter int unsigned ROWS         = 256,
  parameter int unsigned COLS         = 256,
  parameter int unsigned DAC_BITS     = 8,
  parameter int unsigned ADC_BITS     = 8,
  parameter int unsigned SET_STEP_MAX = 8,
  parameter int unsigned VMM_LATENCY  = 4,
  parameter int unsigned STUCK_PPM    = 0
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // vector-matrix multiply
  input  logic [ROWS-1:0][DAC_BITS-1:0] dac_code,
  input  logic [4:0]                  adc_shift,
  input  logic                        vmm_start,
  output logic                        vmm_busy,
  output logic                        vmm_done,
  output logic [COLS-1:0][ADC_BITS-1:0] adc_code,
  // single-cell programming and readout
  input  logic [$clog2(ROWS)-1:0]     cell_row,
  input  logic [$clog2(COLS)-1:0]     cell_col,
  input  logic                        set_pulse,
  input  logic                        reset_pulse,
  input  logic                        read_req,
  output logic                        read_valid,
  output logic [7:0]                  read_code
);

  localparam int unsigned ACC_W = DAC_BITS + 8 + $clog2(ROWS) + 1;
  localparam logic [ADC_BITS-1:0] ADC_MAX = '1;

  logic [7:0] g     [ROWS][COLS];
  logic       stuck [ROWS][COLS];

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        stuck[r][c] = 1'b0;
        g[r][c]     = 8'd0;
      end
    if (STUCK_PPM != 0)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          int unsigned u;
          u = $urandom;
          if ((u % 32'd1000000) + 32'd1 <= STUCK_PPM) begin
            stuck[r][c] = 1'b1;
            g[r][c]     = u[20] ? 8'd255 : 8'd0;
          end
        end
  end

  // Programming pulses act on the falling edge of the pulse level. Pulse
  // edges are ignored while reset is held.
  logic set_q, reset_q;
  always_ff @(posedge clk) begin
    int unsigned step;
    int          nv;
    set_q   <= set_pulse && rst_n;
    reset_q <= reset_pulse && rst_n;
    step = 1 + ($urandom % SET_STEP_MAX);
    if (!rst_n || stuck[cell_row][cell_col]) begin
      // a stuck cell ignores pulses
    end else if (set_q && !set_pulse) begin
      nv = int'(g[cell_row][cell_col]) + int'(step);
      g[cell_row][cell_col] <= (nv > 255) ? 8'd255 : 8'(nv);
    end else if (reset_q && !reset_pulse) begin
      nv = int'(g[cell_row][cell_col]) - int'(step);
      g[cell_row][cell_col] <= (nv < 0) ? 8'd0 : 8'(nv);
    end
  end

  always_ff @(posedge clk) begin
    read_valid <= read_req;
    if (read_req) read_code <= g[cell_row][cell_col];
  end

  // VMM: currents are formed when the inputs are sampled; the ADC result is
  // published after the latency.
  logic [COLS-1:0][ADC_BITS-1:0] adc_next;
  logic [$clog2(VMM_LATENCY+1)-1:0] lat_cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vmm_busy <= 1'b0;
      vmm_done <= 1'b0;
      lat_cnt  <= '0;
      adc_code <= '0;
      adc_next <= '0;
    end else begin
      vmm_done <= 1'b0;
      if (vmm_start && !vmm_busy) begin
        for (int c = 0; c < COLS; c++) begin
          logic [ACC_W-1:0] i_bl;
          i_bl = '0;
          for (int r = 0; r < ROWS; r++)
            i_bl += ACC_W'(dac_code[r]) * ACC_W'(g[r][c]);
          i_bl = i_bl >> adc_shift;
          adc_next[c] <= (i_bl > ACC_W'(ADC_MAX)) ? ADC_MAX : i_bl[ADC_BITS-1:0];
        end
        vmm_busy <= 1'b1;
        lat_cnt  <= ($bits(lat_cnt))'(VMM_LATENCY - 1);
      end else if (vmm_busy) begin
        if (lat_cnt == 0) begin
          vmm_busy <= 1'b0;
          vmm_done <= 1'b1;
          adc_code <= adc_next;
        end else begin
          lat_cnt <= lat_cnt - 1'b1;
        end
      end
    end
  end

endmodule
