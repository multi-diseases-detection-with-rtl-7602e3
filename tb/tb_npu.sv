// tb_npu: self-checking register-level test of one NPU (16 x 16 array).
//
// Through the register port it write-verifies every cell to a random
// target, keeps the final code the NPU reports, checks it with a separate
// cell-read command, then loads random wordline codes, starts VMMs at two
// ADC ranges and compares all ADC codes with sums computed here. It checks
// that STATUS shows the VMM busy for VMM_LATENCY cycles and that the input
// buffer reads back.
module tb_npu;
  import mx100_pkg::*;
  localparam int R = 16, C = 16, LAT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bus_req, bus_we;
  logic [11:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic [3:0] bus_wstrb;

  npu #(.ROWS(R), .COLS(C), .VMM_LATENCY(LAT)) dut (.*);

  int checks = 0, failures = 0;
  int g [R][C];
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic bw(logic [11:0] a, logic [31:0] d);
    bus_req = 1; bus_we = 1; bus_addr = a; bus_wdata = d; bus_wstrb = 4'hF;
    @(posedge clk); #1; bus_req = 0; bus_we = 0;
  endtask
  task automatic br(logic [11:0] a, output logic [31:0] d);
    bus_req = 1; bus_we = 0; bus_addr = a;
    @(posedge clk); #1; bus_req = 0; d = bus_rdata;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [R-1:0][7:0] x;
    bus_req = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0; bus_wstrb = 0;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        int tg;
        tg = $urandom_range(50, 200);
        bw(NPU_PADDR, {16'd0, 8'(c), 8'(r)});
        bw(NPU_PTGT, {16'd300, 8'd4, 8'(tg)});
        bw(NPU_PCMD, 32'd1);
        do br(NPU_STATUS, d); while (d[1]);
        check(d[2], "program ok");
        br(NPU_CELL, d);
        g[r][c] = int'(d[7:0]);
        check(g[r][c] >= tg - 4 && g[r][c] <= tg + 4, "cell within tolerance");
      end
    // separate read command on a few cells
    for (int k = 0; k < 8; k++) begin
      int r, c;
      r = $urandom_range(0, R-1); c = $urandom_range(0, C-1);
      bw(NPU_PADDR, {16'd0, 8'(c), 8'(r)});
      bw(NPU_PCMD, 32'd2);
      @(posedge clk); #1;
      br(NPU_CELL, d);
      check(int'(d[7:0]) == g[r][c], "cell read command");
    end
    for (int t = 0; t < 8; t++) begin
      int sh, busy_cycles;
      sh = (t < 4) ? 9 : 5;
      for (int r = 0; r < R; r++) x[r] = 8'($urandom_range(0, 255));
      for (int w = 0; w < R/4; w++) bw(12'(NPU_IN_BUF + 4*w), x[4*w +: 4]);
      br(12'(NPU_IN_BUF + 4), d);
      check(d == x[4 +: 4], "input buffer readback");
      bw(NPU_ADCSH, 32'(sh));
      bw(NPU_CTRL, 32'd1);
      busy_cycles = 0;
      do begin br(NPU_STATUS, d); if (d[0]) busy_cycles++; end while (d[0]);
      check(busy_cycles == LAT - 1 || busy_cycles == LAT, $sformatf("VMM busy %0d cycles", busy_cycles));
      for (int w = 0; w < C/4; w++) begin
        br(12'(NPU_OUT_BUF + 4*w), d);
        for (int b = 0; b < 4; b++) begin
          longint s; int e;
          s = 0;
          for (int r = 0; r < R; r++) s += longint'(x[r]) * g[r][4*w+b];
          s = s >> sh; e = (s > 255) ? 255 : int'(s);
          check(int'(d[8*b +: 8]) == e, $sformatf("ADC col %0d got %0d exp %0d", 4*w+b, d[8*b +: 8], e));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
