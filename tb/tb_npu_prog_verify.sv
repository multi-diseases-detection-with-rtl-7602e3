// tb_npu_prog_verify: self-checking test of the write-verify controller.
//
// The controller drives a 4 x 4 crossbar model. For random targets and
// tolerances the test checks that the loop ends with the cell inside the
// window (read back separately), that the pulse count it reports equals the
// pulses seen on the wires, that every pulse is PULSE_CYCLES wide, that
// SET is used below the window and RESET above it, and that a too small pulse
// budget ends with ok = 0.
module tb_npu_prog_verify;
  localparam int PW = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, ok;
  logic [7:0] target, tol, final_code;
  logic [15:0] max_pulses, pulses;
  logic set_pulse, reset_pulse, pv_read, read_valid;
  logic [7:0] read_code;
  logic tb_read;
  logic [1:0] row, col;

  npu_prog_verify #(.PULSE_CYCLES(PW)) dut (
    .clk, .rst_n, .start, .target, .tol, .max_pulses, .busy, .done, .ok, .final_code, .pulses,
    .set_pulse, .reset_pulse, .read_req(pv_read), .read_valid, .read_code);

  npu_xbar #(.ROWS(4), .COLS(4), .SET_STEP_MAX(6), .VMM_LATENCY(1)) u_cell (
    .clk, .rst_n, .dac_code('0), .adc_shift('0), .vmm_start(1'b0), .vmm_busy(), .vmm_done(), .adc_code(),
    .cell_row(row), .cell_col(col), .set_pulse, .reset_pulse,
    .read_req(pv_read | tb_read), .read_valid, .read_code);

  int checks = 0, failures = 0;
  int n_set = 0, n_reset = 0, width = 0, bad_width = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // pulse monitor
  always @(posedge clk) begin
    if (set_pulse || reset_pulse) width++;
    else if (width != 0) begin
      if (width != PW) bad_width++;
      width = 0;
    end
  end
  always @(posedge set_pulse) n_set++;
  always @(posedge reset_pulse) n_reset++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic prog_cell(int tg, int tl, int mp, output bit okv, output int code, output int np);
    int s0, r0;
    s0 = n_set; r0 = n_reset;
    target = 8'(tg); tol = 8'(tl); max_pulses = 16'(mp);
    start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; end
    okv = ok; code = int'(final_code); np = int'(pulses);
    @(posedge clk); #1;
    check(np == (n_set - s0) + (n_reset - r0), "pulse count matches wires");
    // independent readback
    tb_read = 1; @(posedge clk); #1; tb_read = 0;
    check(int'(read_code) == code, "final_code equals cell");
  endtask

  initial begin
    bit okv; int code, np, tg, tl, prev;
    start = 0; target = 0; tol = 0; max_pulses = 0; tb_read = 0; row = 0; col = 0;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    prev = 0;
    for (int t = 0; t < 24; t++) begin
      int s0, r0;
      row = 2'(t % 4); col = 2'((t / 4) % 4);
      tb_read = 1; @(posedge clk); #1; tb_read = 0; prev = int'(read_code);
      tg = $urandom_range(50, 200); tl = $urandom_range(3, 5);
      s0 = n_set; r0 = n_reset;
      prog_cell(tg, tl, 200, okv, code, np);
      check(okv, $sformatf("converged t%0d", t));
      check(code >= tg - tl && code <= tg + tl, $sformatf("in window %0d vs %0d+-%0d", code, tg, tl));
      if (prev < tg - tl && np > 0) check(n_set - s0 > 0, "SET used below window");
      // now reprogram lower: must use RESET
      s0 = n_set; r0 = n_reset;
      prog_cell(tg - 30, 3, 200, okv, code, np);
      check(okv && code >= tg - 33 && code <= tg - 27, "lower target reached");
      check(n_reset - r0 > 0, "RESET used above window");
    end
    // budget exhausted
    row = 3; col = 3;
    prog_cell(0, 0, 200, okv, code, np);
    prog_cell(250, 0, 3, okv, code, np);
    check(!okv && np == 3, "budget of 3 pulses exhausted gives ok=0");
    check(bad_width == 0, "all pulses PULSE_CYCLES wide");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
