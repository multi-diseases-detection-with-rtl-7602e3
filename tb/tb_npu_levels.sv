// tb_npu_levels: programs all 65,536 cells of one full-size NPU to 256
// conductance levels (256 cells per level) and reads them back, the
// array-wide level test of a memristor NPU. Cell (r, c) gets level
// (r + c) mod 256, so every row and every column holds every level once.
// Each cell is write-verified with tolerance 4 and a 400-pulse budget
// through the register port; then every cell is read again with the
// single-read command. The test checks that every cell converged, that each
// read-back code is within tolerance of its level, that the RMS error over the
// whole array is below 5 codes, and that the per-level means rise strictly
// with the level above the tolerance (the states stay in order; levels 0..4
// are already inside their window in a fully RESET cell). The loop approaches each
// target from below (cells start fully RESET), so cells settle near the lower
// edge of the window; the mean offset is printed with the pulse statistics.
module tb_npu_levels;
  import mx100_pkg::*;
  localparam int R = 256, C = 256, TOL = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bus_req, bus_we;
  logic [11:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic [3:0] bus_wstrb;

  npu dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
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
    repeat (60000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    longint sq = 0, pulses = 0;
    int maxp = 0;
    longint lvl_sum [256];
    bus_req = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0; bus_wstrb = 0;
    foreach (lvl_sum[i]) lvl_sum[i] = 0;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    bw(NPU_PTGT, {16'd400, 8'(TOL), 8'd0});
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        int lv;
        lv = (r + c) % 256;
        bw(NPU_PADDR, {16'd0, 8'(c), 8'(r)});
        bw(NPU_PTGT, {16'd400, 8'(TOL), 8'(lv)});
        bw(NPU_PCMD, 32'd1);
        do br(NPU_STATUS, d); while (d[1]);
        check(d[2], $sformatf("cell %0d,%0d converged", r, c));
        br(NPU_PCOUNT, d);
        pulses += d[15:0];
        if (int'(d[15:0]) > maxp) maxp = int'(d[15:0]);
      end
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        int lv, e;
        lv = (r + c) % 256;
        bw(NPU_PADDR, {16'd0, 8'(c), 8'(r)});
        bw(NPU_PCMD, 32'd2);
        @(posedge clk); #1;
        br(NPU_CELL, d);
        e = int'(d[7:0]) - lv;
        sq += e * e;
        lvl_sum[lv] += d[7:0];
        check(e >= -TOL && e <= TOL, $sformatf("cell %0d,%0d level %0d read %0d", r, c, lv, d[7:0]));
      end
    begin
      real rmse;
      rmse = $sqrt(real'(sq) / (R * C));
      $display("65536 cells: RMS error %0.3f codes, mean %0.1f pulses, max %0d pulses",
               rmse, real'(pulses) / (R * C), maxp);
      check(rmse < 5.0, "array RMS error below 5 codes");
    end
    begin
      real m, prev, off;
      prev = -1.0; off = 0.0;
      for (int l = 0; l < 256; l++) begin
        m = real'(lvl_sum[l]) / 256.0;
        off += (m - l) / 256.0;
        if (l > TOL) check(m > prev, $sformatf("level %0d mean %0.2f above level %0d", l, m, l - 1));
        prev = m;
      end
      $display("mean offset from target: %0.2f codes", off);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
