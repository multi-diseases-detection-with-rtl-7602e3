// npu_prog_verify: closed-loop write-verify controller for one memristor cell.
//
// The paper programs the 256 conductance levels with identical SET and RESET
// pulse trains of 50 ns width in a closed loop. This controller is the
// simplest loop that does that. It reads the cell. If the code is inside
// target +/- tol it stops with ok = 1. Otherwise, if the pulse budget
// max_pulses is spent, it stops with ok = 0. Otherwise it applies one SET
// pulse (code below the window) or one RESET pulse (code above it) and reads
// again. The read-compare-pulse order and the tolerance window are this
// design's choices.
//
// Interface: start (one cycle, ignored while busy) samples target, tol and
// max_pulses. done pulses for one cycle at the end, with ok, final_code (the
// last read code) and pulses (pulses applied). Towards the crossbar it drives
// read_req (one cycle), waits for read_valid/read_code, and holds set_pulse or
// reset_pulse high for PULSE_CYCLES cycles per pulse. PULSE_CYCLES = 5 gives
// the paper's 50 ns at an assumed 100 MHz clock.
//
// Reset is synchronous and active low.
// Timing per iteration: 1 cycle read request, 1 cycle read return, 1 cycle
// decision, PULSE_CYCLES pulse, 1 cycle gap after the pulse.
module npu_prog_verify #(
  parameter int unsigned PULSE_CYCLES = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [7:0]  target,
  input  logic [7:0]  tol,
  input  logic [15:0] max_pulses,
  output logic        busy,
  output logic        done,
  output logic        ok,
  output logic [7:0]  final_code,
  output logic [15:0] pulses,
  // crossbar side
  output logic        set_pulse,
  output logic        reset_pulse,
  output logic        read_req,
  input  logic        read_valid,
  input  logic [7:0]  read_code
);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_WAIT, S_DECIDE, S_PULSE, S_GAP} state_e;
  state_e state;

  logic [7:0]  tgt_q, tol_q;
  logic [15:0] max_q;
  logic        dir_set;
  logic [$clog2(PULSE_CYCLES+1)-1:0] pcnt;

  // Window test on 9-bit values so target +/- tol never wraps.
  logic [8:0] lo, hi;
  logic       below, above;
  assign lo    = (tgt_q >= tol_q) ? 9'(tgt_q - tol_q) : 9'd0;
  assign hi    = 9'(tgt_q) + 9'(tol_q);
  assign below = 9'(final_code) < lo;
  assign above = 9'(final_code) > hi;

  assign busy        = (state != S_IDLE);
  assign read_req    = (state == S_READ);
  assign set_pulse   = (state == S_PULSE) &&  dir_set;
  assign reset_pulse = (state == S_PULSE) && !dir_set;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      ok         <= 1'b0;
      final_code <= '0;
      pulses     <= '0;
      tgt_q      <= '0;
      tol_q      <= '0;
      max_q      <= '0;
      dir_set    <= 1'b0;
      pcnt       <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          tgt_q  <= target;
          tol_q  <= tol;
          max_q  <= max_pulses;
          pulses <= '0;
          ok     <= 1'b0;
          state  <= S_READ;
        end
        S_READ: state <= S_WAIT;
        S_WAIT: if (read_valid) begin
          final_code <= read_code;
          state      <= S_DECIDE;
        end
        S_DECIDE: begin
          if (!below && !above) begin
            ok    <= 1'b1;
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (pulses >= max_q) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            dir_set <= below;
            pcnt    <= ($bits(pcnt))'(PULSE_CYCLES - 1);
            pulses  <= pulses + 1'b1;
            state   <= S_PULSE;
          end
        end
        S_PULSE: begin
          if (pcnt == 0) state <= S_GAP;
          else           pcnt  <= pcnt - 1'b1;
        end
        S_GAP: state <= S_READ;
        default: state <= S_IDLE;
      endcase
    end
  end

  // A set and a reset pulse must never overlap.
  assert property (@(posedge clk) disable iff (!rst_n) !(set_pulse && reset_pulse));

endmodule
