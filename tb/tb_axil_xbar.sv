// tb_axil_xbar: self-checking test of the interconnect.
//
// Three masters (axil_master_port instances driven by this file) issue
// random reads and writes, all at once, to three 1 KB SRAM slaves and to an
// unmapped address. The test checks every read against a model, DECERR on
// the unmapped address, OKAY elsewhere, that contention happened, and that
// round-robin arbitration serves the three masters evenly under contention.
module tb_axil_xbar;
  import mx100_pkg::*;
  localparam int NM = 3, NS = 3, WB = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t [NM-1:0] m_req;
  axil_rsp_t [NM-1:0] m_rsp;
  axil_req_t [NS-1:0] s_req;
  axil_rsp_t [NS-1:0] s_rsp;

  localparam logic [NS-1:0][31:0] BASE = {32'h0000_2000, 32'h0000_1000, 32'h0000_0000};
  localparam logic [NS-1:0][31:0] MASK = {32'hFFFF_FC00, 32'hFFFF_FC00, 32'hFFFF_FC00};

  axil_xbar #(.N_M(NM), .N_S(NS), .S_BASE(BASE), .S_MASK(MASK)) dut (.*);

  for (genvar s = 0; s < NS; s++) begin : gen_s
    axil_sram #(.BYTES(1024)) u_mem (.clk, .rst_n, .s_req(s_req[s]), .s_rsp(s_rsp[s]));
  end

  logic [NM-1:0] c_valid, c_we, c_ready, c_done, c_err;
  logic [NM-1:0][31:0] c_addr, c_wdata, c_rdata;
  for (genvar m = 0; m < NM; m++) begin : gen_m
    axil_master_port u_mp (.clk, .rst_n, .cmd_valid(c_valid[m]), .cmd_we(c_we[m]), .cmd_addr(c_addr[m]),
      .cmd_wdata(c_wdata[m]), .cmd_ready(c_ready[m]), .done(c_done[m]), .rdata(c_rdata[m]), .err(c_err[m]),
      .m_req(m_req[m]), .m_rsp(m_rsp[m]));
  end

  int checks = 0, failures = 0, contention = 0;
  int served [NM];
  // each master owns a disjoint set of words, so the model needs no ordering
  logic [31:0] model [NS][WB];
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    int n;
    n = 0;
    for (int m = 0; m < NM; m++) if (m_req[m].awvalid || m_req[m].arvalid) n++;
    if (n > 1) contention++;
  end

  task automatic cmd(int m, bit we, logic [31:0] a, logic [31:0] d, output logic [31:0] r, output bit e);
    c_valid[m] = 1; c_we[m] = we; c_addr[m] = a; c_wdata[m] = d;
    do @(posedge clk); while (!c_ready[m]);
    #1; c_valid[m] = 0;
    while (!c_done[m]) begin @(posedge clk); #1; end
    r = c_rdata[m]; e = c_err[m];
  endtask

  task automatic worker(int m, int n);
    logic [31:0] r; bit e;
    for (int t = 0; t < n; t++) begin
      int s, w, k;
      s = $urandom_range(0, NS-1);
      w = NM * $urandom_range(0, WB/NM - 1) + m;
      k = $urandom_range(0, 9);
      if (k == 0) begin
        cmd(m, $urandom_range(0, 1), 32'h0000_8000, 32'h0, r, e);
        check(e, "unmapped address gives error");
      end else if (k < 5) begin
        logic [31:0] d;
        d = $urandom;
        cmd(m, 1, BASE[s] + 32'(4*w), d, r, e);
        check(!e, "write OKAY");
        model[s][w] = d;
      end else begin
        cmd(m, 0, BASE[s] + 32'(4*w), 0, r, e);
        check(!e && r == model[s][w], $sformatf("m%0d read s%0d w%0d", m, s, w));
      end
      served[m]++;
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r; bit e;
    c_valid = 0; c_we = 0; c_addr = 0; c_wdata = 0;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    for (int s = 0; s < NS; s++)
      for (int w = 0; w < WB; w++) begin
        model[s][w] = $urandom;
        cmd(w % NM, 1, BASE[s] + 32'(4*w), model[s][w], r, e);
      end
    for (int m = 0; m < NM; m++) served[m] = 0;
    fork
      worker(0, 600);
      worker(1, 600);
      worker(2, 600);
    join
    check(contention > 100, $sformatf("contention cycles %0d", contention));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fairness: under contention, while all three are busy, no master runs
  // more than one transaction ahead of the slowest by much
  always @(posedge clk) if (rst_n && served[0] > 0 && served[0] < 590 && served[1] < 590 && served[2] < 590) begin
    int mx, mn;
    mx = served[0]; mn = served[0];
    for (int m = 1; m < NM; m++) begin
      if (served[m] > mx) mx = served[m];
      if (served[m] < mn) mn = served[m];
    end
    if (mx - mn > 3) begin failures++; $display("FAIL: unfair %0d %0d", mx, mn); served[0] = 1000; end
  end
endmodule
