// mlp_sequencer: runs the four-layer disease classifier on two NPUs.
//
// The classifier is an MLP, Linear-ReLU-Linear-ReLU-Linear-ReLU-Linear, that
// maps 128 signed 8-bit PCA values of a Raman spectrum to three class scores
// (healthy, heart attack, liver cancer). Layer 1 (128 -> 240) fills one
// crossbar (NPU L1_NPU); layers 2, 3 and 4 sit side by side on a second
// crossbar (NPU L2_NPU) in columns [0,H2), [H2,H2+H3) and [H2+H3,H2+H3+3),
// all starting at wordline 0. A layer's bias is one more weight row, driven
// by the constant input BIAS_CODE (y = [W b][x; 1]).
//
// The DACs take unsigned codes, so layer 1 is run twice: once with
// X+ = max(X,0) and once with X- = max(-X,0), and the two results are
// subtracted (Y = W X+ - W X-). This gives the input 9 bits of range (-128
// is applied as 128). The bias row is driven only in the X+ pass.
// Weights are stored as conductance codes g = W_ZERO + w, so a bitline
// holds sum(g*x) = sum(w*x) + W_ZERO*sum(x); the sequencer removes the
// second term digitally: y = (adc << adc_shift) - W_ZERO*sum(x).
// Between layers it applies ReLU and requantises to an unsigned 8-bit input
// code: a = min(255, max(y,0) >>> rq_shift). The last layer's y values are
// the scores and class_id is the index of the largest (lowest index on a tie).
//
// Following the paper: the layer structure, ReLU, 128 inputs, 240 first-layer
// outputs, 3 classes, the two-NPU mapping and its column order, the bias row
// and the X+/X- split. This design's own: H2 and H3 (not given), the
// zero-point weight encoding, the requantisation rule, the ADC range
// setting, and doing the flow in a hardware sequencer (on the chip it is the
// program run by the RISC-V core).
//
// Interface: start (while idle) samples in_addr, the byte address of 128
// int8 values, 4 per word, little endian. The sequencer then drives the bus
// master port: it reads the sample, and per VMM writes ADCSH, the 64 input
// words and CTRL, polls STATUS, and reads the 64 output words. done pulses
// with class_id and score valid (they hold until the next start).
// adc_shift[l] is the ADC range for layer l (index 0 for both layer-1
// passes); rq_shift[l] the requantisation shift after layer l+1.
// Timing: one vector is 5 VMMs; each costs about 2*ROWS + 2*ROWS/4*(bus
// round trip) cycles. Reset is synchronous, active low.
module mlp_sequencer
  import mx100_pkg::*;
#(
  parameter int unsigned ROWS      = 256,
  parameter int unsigned COLS      = 256,
  parameter int unsigned IN_DIM    = 128,
  parameter int unsigned H1        = 240,
  parameter int unsigned H2        = 128,
  parameter int unsigned H3        = 64,
  parameter int unsigned OUT_DIM   = 3,
  parameter int unsigned L1_NPU    = 0,
  parameter int unsigned L2_NPU    = 1,
  parameter int unsigned W_ZERO    = 125,
  parameter int unsigned BIAS_CODE = 255
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [31:0]                   in_addr,
  input  logic [3:0][4:0]               adc_shift,
  input  logic [2:0][4:0]               rq_shift,
  output logic                          busy,
  output logic                          done,
  output logic [1:0]                    class_id,
  output logic signed [OUT_DIM-1:0][31:0] score,
  // event counters since reset: ReLU zeroing, requantisation saturation,
  // ADC codes read at full scale
  output logic [31:0]                   n_relu_zero,
  output logic [31:0]                   n_rq_sat,
  output logic [31:0]                   n_adc_sat,
  output axil_req_t                     m_req,
  input  axil_rsp_t                     m_rsp
);

  localparam int unsigned C2 = 0;
  localparam int unsigned C3 = H2;
  localparam int unsigned C4 = H2 + H3;
  localparam int unsigned IW = ROWS / 4;
  localparam int unsigned OW = COLS / 4;
  localparam int unsigned XW = IN_DIM / 4;
  localparam int unsigned CW = $clog2(ROWS + 1);

  if (IN_DIM + 1 > ROWS || H1 + 1 > ROWS || H1 > COLS ||
      H2 + H3 + OUT_DIM > COLS || (IN_DIM % 4) != 0 || OUT_DIM > 4) begin : gen_size_check
    $error("mlp_sequencer: layer sizes do not fit the crossbars");
  end

  typedef enum logic [2:0] {L1P, L1N, LY2, LY3, LY4} layer_e;
  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_PREP, S_WSH, S_WIN, S_START, S_POLL, S_ROUT, S_POST, S_ARGMAX
  } state_e;

  state_e state;
  layer_e layer;

  logic signed [7:0] raw  [IN_DIM];
  logic [7:0]        vbuf [ROWS];
  logic [7:0]        adc  [COLS];
  logic [7:0]        act  [ROWS];
  logic signed [31:0] acc1 [H1];

  logic [CW-1:0] idx;
  logic [31:0]   addr_q;
  logic [31:0]   sumx;
  logic          issued;

  // Per-layer constants.
  logic [31:0] npu_base;
  logic [CW-1:0] n_in, n_out, c0;
  logic [4:0]  sh;
  logic        bias_on;
  always_comb begin
    unique case (layer)
      L1P:     begin n_in = CW'(IN_DIM); n_out = CW'(H1);      c0 = '0;       sh = adc_shift[0]; bias_on = 1'b1; end
      L1N:     begin n_in = CW'(IN_DIM); n_out = CW'(H1);      c0 = '0;       sh = adc_shift[0]; bias_on = 1'b0; end
      LY2:     begin n_in = CW'(H1);     n_out = CW'(H2);      c0 = CW'(C2);  sh = adc_shift[1]; bias_on = 1'b1; end
      LY3:     begin n_in = CW'(H2);     n_out = CW'(H3);      c0 = CW'(C3);  sh = adc_shift[2]; bias_on = 1'b1; end
      default: begin n_in = CW'(H3);     n_out = CW'(OUT_DIM); c0 = CW'(C4);  sh = adc_shift[3]; bias_on = 1'b1; end
    endcase
    npu_base = NPU_BASE + NPU_STRIDE * ((layer == L1P || layer == L1N) ? L1_NPU : L2_NPU);
  end

  // Wordline code for row idx in the PREP pass.
  logic [7:0] prep_val;
  always_comb begin
    logic signed [8:0] x;
    prep_val = 8'd0;
    x = (int'(idx) < IN_DIM) ? 9'(raw[idx[$clog2(IN_DIM)-1:0]]) : 9'sd0;
    if (idx < n_in) begin
      unique case (layer)
        L1P:     prep_val = (x > 0) ? x[7:0] : 8'd0;
        L1N:     prep_val = (x < 0) ? 8'(-x) : 8'd0;
        default: prep_val = act[idx[CW-2:0]];
      endcase
    end else if (idx == n_in && bias_on) begin
      prep_val = 8'(BIAS_CODE);
    end
  end

  // Signed VMM result for output j = idx (bitline c0 + idx).
  logic [CW-1:0]      col;
  logic signed [31:0] v_out, y1;
  assign col   = c0 + idx;
  assign v_out = signed'(32'(adc[col[CW-2:0]]) << sh) - signed'(W_ZERO * sumx);
  assign y1    = acc1[idx[CW-2:0]] - v_out;

  function automatic logic [7:0] requant(logic signed [31:0] y, logic [4:0] s);
    logic signed [31:0] t;
    t = y >>> s;
    if (y <= 0)       return 8'd0;
    else if (t > 255) return 8'd255;
    else              return t[7:0];
  endfunction

  function automatic logic rq_sat(logic signed [31:0] y, logic [4:0] s);
    return (y > 0) && ((y >>> s) > 255);
  endfunction

  // Bus commands.
  logic        cmd_valid, cmd_we, cmd_ready, c_done, c_err;
  logic [31:0] cmd_addr, cmd_wdata, c_rdata;

  always_comb begin
    cmd_valid = !issued;
    cmd_we    = 1'b1;
    cmd_addr  = '0;
    cmd_wdata = '0;
    unique case (state)
      S_LOAD:  begin cmd_we = 1'b0; cmd_addr = addr_q + 32'({idx, 2'b00}); end
      S_WSH:   begin cmd_addr = npu_base + 32'(NPU_ADCSH); cmd_wdata = 32'(sh); end
      S_WIN:   begin
        cmd_addr  = npu_base + 32'(NPU_IN_BUF) + 32'({idx, 2'b00});
        cmd_wdata = {vbuf[4*idx+3], vbuf[4*idx+2], vbuf[4*idx+1], vbuf[4*idx]};
      end
      S_START: begin cmd_addr = npu_base + 32'(NPU_CTRL); cmd_wdata = 32'd1; end
      S_POLL:  begin cmd_we = 1'b0; cmd_addr = npu_base + 32'(NPU_STATUS); end
      S_ROUT:  begin cmd_we = 1'b0; cmd_addr = npu_base + 32'(NPU_OUT_BUF) + 32'({idx, 2'b00}); end
      default: cmd_valid = 1'b0;
    endcase
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      layer       <= L1P;
      idx         <= '0;
      addr_q      <= '0;
      sumx        <= '0;
      issued      <= 1'b0;
      done        <= 1'b0;
      class_id    <= '0;
      score       <= '0;
      n_relu_zero <= '0;
      n_rq_sat    <= '0;
      n_adc_sat   <= '0;
    end else begin
      done <= 1'b0;
      if (cmd_valid && cmd_ready) issued <= 1'b1;
      if (c_done) issued <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          addr_q <= in_addr;
          layer  <= L1P;
          idx    <= '0;
          state  <= S_LOAD;
        end
        S_LOAD: if (c_done) begin
          for (int b = 0; b < 4; b++) raw[4*idx + b] <= c_rdata[8*b +: 8];
          if (int'(idx) == XW - 1) begin
            idx   <= '0;
            sumx  <= '0;
            state <= S_PREP;
          end else idx <= idx + 1'b1;
        end
        S_PREP: begin
          vbuf[idx[CW-2:0]] <= prep_val;
          sumx <= sumx + 32'(prep_val);
          if (int'(idx) == ROWS - 1) begin
            idx   <= '0;
            state <= S_WSH;
          end else idx <= idx + 1'b1;
        end
        S_WSH:   if (c_done) state <= S_WIN;
        S_WIN:   if (c_done) begin
          if (int'(idx) == IW - 1) begin
            idx   <= '0;
            state <= S_START;
          end else idx <= idx + 1'b1;
        end
        S_START: if (c_done) state <= S_POLL;
        S_POLL:  if (c_done && !c_rdata[0]) state <= S_ROUT;
        S_ROUT:  if (c_done) begin
          for (int b = 0; b < 4; b++) begin
            adc[4*idx + b] <= c_rdata[8*b +: 8];
            if (c_rdata[8*b +: 8] == 8'hFF) n_adc_sat <= n_adc_sat + 1'b1;
          end
          if (int'(idx) == OW - 1) begin
            idx   <= '0;
            state <= S_POST;
          end else idx <= idx + 1'b1;
        end
        S_POST: begin
          unique case (layer)
            L1P: acc1[idx[CW-2:0]] <= v_out;
            L1N: begin
              act[idx[CW-2:0]] <= requant(y1, rq_shift[0]);
              if (y1 <= 0) n_relu_zero <= n_relu_zero + 1'b1;
              if (rq_sat(y1, rq_shift[0])) n_rq_sat <= n_rq_sat + 1'b1;
            end
            LY2, LY3: begin
              act[idx[CW-2:0]] <= requant(v_out, (layer == LY2) ? rq_shift[1] : rq_shift[2]);
              if (v_out <= 0) n_relu_zero <= n_relu_zero + 1'b1;
              if (rq_sat(v_out, (layer == LY2) ? rq_shift[1] : rq_shift[2])) n_rq_sat <= n_rq_sat + 1'b1;
            end
            default: score[idx[1:0]] <= v_out;
          endcase
          if (idx == n_out - 1) begin
            idx <= '0;
            if (layer == LY4) state <= S_ARGMAX;
            else begin
              layer <= layer_e'(layer + 1'b1);
              sumx  <= '0;
              state <= S_PREP;
            end
          end else idx <= idx + 1'b1;
        end
        S_ARGMAX: begin
          logic [1:0] best;
          best = 2'd0;
          for (int k = 1; k < OUT_DIM; k++)
            if ($signed(score[k]) > $signed(score[best])) best = 2'(k);
          class_id <= best;
          done     <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  axil_master_port u_mport (
    .clk, .rst_n,
    .cmd_valid, .cmd_we, .cmd_addr, .cmd_wdata, .cmd_ready,
    .done(c_done), .rdata(c_rdata), .err(c_err),
    .m_req, .m_rsp
  );

  // Bus errors are not expected on the fixed NPU and memory windows.
  logic unused;
  assign unused = ^{c_err, col[CW-1]};

endmodule
