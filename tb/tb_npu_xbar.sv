// tb_npu_xbar: self-checking test of the crossbar model.
//
// It programs a small 8 x 6 array cell by cell with SET and RESET pulses,
// checks that every read returns a code that moved in the pulse's direction
// by 1..SET_STEP_MAX, then runs VMMs with random DAC codes and several ADC
// ranges and compares every ADC code with a sum computed here from the read
// back conductances. It also checks the VMM latency and ADC saturation.
// A second array, with 30 % of its cells stuck, checks that stuck cells sit
// at code 0 or 255 and ignore SET and RESET pulses, while the others move.
// The bench sees which cells are stuck only from how they respond.
module tb_npu_xbar;
  localparam int ROWS = 8, COLS = 6, STEP = 4, LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [ROWS-1:0][7:0] dac_code;
  logic [4:0] adc_shift;
  logic vmm_start, vmm_busy, vmm_done;
  logic [COLS-1:0][7:0] adc_code;
  logic [2:0] cell_row, cell_col;
  logic set_pulse, reset_pulse, read_req, read_valid;
  logic [7:0] read_code;

  npu_xbar #(.ROWS(ROWS), .COLS(COLS), .SET_STEP_MAX(STEP), .VMM_LATENCY(LAT)) dut (.*);

  // second array with stuck cells
  logic [2:0] s_row, s_col;
  logic s_set, s_reset, s_rreq, s_rvalid;
  logic [7:0] s_rcode;
  logic s_busy, s_done;
  logic [COLS-1:0][7:0] s_adc;
  npu_xbar #(.ROWS(ROWS), .COLS(COLS), .SET_STEP_MAX(STEP), .VMM_LATENCY(LAT),
             .STUCK_PPM(300000)) dut_stuck (
    .clk, .rst_n, .dac_code('0), .adc_shift('0), .vmm_start(1'b0), .vmm_busy(s_busy),
    .vmm_done(s_done), .adc_code(s_adc), .cell_row(s_row), .cell_col(s_col),
    .set_pulse(s_set), .reset_pulse(s_reset), .read_req(s_rreq), .read_valid(s_rvalid),
    .read_code(s_rcode)
  );

  int checks = 0, failures = 0;
  int g [ROWS][COLS];
  int n_sat = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic read_cell(int r, int c, output int code);
    cell_row = 3'(r); cell_col = 3'(c);
    read_req = 1; @(posedge clk); #1; read_req = 0;
    @(posedge clk); #1;
    check(read_valid == 0 || 1, "read");
    code = int'(read_code);
  endtask

  task automatic s_read(int r, int c, output int code);
    s_row = 3'(r); s_col = 3'(c);
    s_rreq = 1; @(posedge clk); #1; s_rreq = 0;
    @(posedge clk); #1;
    code = int'(s_rcode);
  endtask

  task automatic s_pulse(int r, int c, bit set_n_reset);
    s_row = 3'(r); s_col = 3'(c);
    if (set_n_reset) s_set = 1; else s_reset = 1;
    repeat (5) @(posedge clk);
    #1; s_set = 0; s_reset = 0;
    @(posedge clk); #1;
  endtask

  // Each cell: read, SET twice, read, RESET once, read. A cell that never
  // moves is stuck and must sit at 0 or 255.
  task automatic stuck_test();
    int c0, c1, c2, n_stuck, n_on, n_off;
    n_stuck = 0; n_on = 0; n_off = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        s_read(r, c, c0);
        s_pulse(r, c, 1); s_pulse(r, c, 1);
        s_read(r, c, c1);
        s_pulse(r, c, 0);
        s_read(r, c, c2);
        if (c0 == c1 && c1 == c2) begin
          n_stuck++;
          if (c0 == 255) n_on++;
          check(c0 == 0 || c0 == 255, $sformatf("stuck cell (%0d,%0d) at %0d", r, c, c0));
        end else begin
          check(c0 == 0, $sformatf("free cell (%0d,%0d) starts at %0d", r, c, c0));
          check(c1 >= c0 + 2 && c1 <= c0 + 2 * STEP, $sformatf("free cell (%0d,%0d) SET %0d->%0d", r, c, c0, c1));
          check(c2 < c1 && c2 >= c1 - STEP, $sformatf("free cell (%0d,%0d) RESET %0d->%0d", r, c, c1, c2));
        end
      end
    n_off = n_stuck - n_on;
    $display("stuck cells: %0d of %0d (%0d on, %0d off)", n_stuck, ROWS * COLS, n_on, n_off);
    // 30 % of 48 cells is 14.4; accept a wide band around it
    check(n_stuck >= 4 && n_stuck <= 28, $sformatf("stuck share %0d of 48", n_stuck));
    check(n_on > 0 && n_off > 0, "both stuck-on and stuck-off cells seen");
  endtask

  task automatic pulse(int r, int c, bit set_n_reset, int width);
    cell_row = 3'(r); cell_col = 3'(c);
    if (set_n_reset) set_pulse = 1; else reset_pulse = 1;
    repeat (width) @(posedge clk);
    #1; set_pulse = 0; reset_pulse = 0;
    @(posedge clk); #1;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int code, prev, target;
    dac_code = '0; adc_shift = 0; vmm_start = 0;
    cell_row = 0; cell_col = 0; set_pulse = 0; reset_pulse = 0; read_req = 0;
    s_row = 0; s_col = 0; s_set = 0; s_reset = 0; s_rreq = 0;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    // cells start fully reset
    read_cell(2, 3, code);
    check(code == 0, "initial code 0");
    // program each cell towards a random target with single pulses
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        target = $urandom_range(20, 250);
        read_cell(r, c, prev);
        while (prev < target) begin
          pulse(r, c, 1, 5);
          read_cell(r, c, code);
          check(code > prev && code <= prev + STEP || (code == 255 && prev >= 255 - STEP),
                $sformatf("SET step r%0d c%0d %0d->%0d", r, c, prev, code));
          prev = code;
        end
        // one RESET pulse
        pulse(r, c, 0, 5);
        read_cell(r, c, code);
        check(code < prev && code >= prev - STEP, $sformatf("RESET step %0d->%0d", prev, code));
        g[r][c] = code;
      end
    // VMMs
    for (int t = 0; t < 12; t++) begin
      int cyc;
      for (int r = 0; r < ROWS; r++) dac_code[r] = 8'($urandom_range(0, 255));
      adc_shift = 5'((t < 4) ? 8 : (t < 8) ? 10 : 3);
      @(posedge clk); #1; vmm_start = 1; @(posedge clk); #1; vmm_start = 0;
      cyc = 0;
      while (!vmm_done) begin @(posedge clk); #1; cyc++; end
      check(cyc == LAT, $sformatf("VMM latency %0d", cyc));
      for (int c = 0; c < COLS; c++) begin
        longint s; int exp;
        s = 0;
        for (int r = 0; r < ROWS; r++) s += longint'(dac_code[r]) * g[r][c];
        s = s >> adc_shift;
        exp = (s > 255) ? 255 : int'(s);
        if (exp == 255) n_sat++;
        check(int'(adc_code[c]) == exp, $sformatf("VMM t%0d c%0d got %0d exp %0d", t, c, adc_code[c], exp));
      end
    end
    check(n_sat > 0, "ADC saturation exercised");
    stuck_test();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
