// tb_mlp_sequencer: self-checking test of the MLP sequencer on two small NPUs.
//
// The sequencer reaches a 4 KB SRAM and two 32 x 32 NPUs through the
// interconnect, at the package's NPU addresses. Layer sizes are reduced
// (16 -> 24 -> 12 -> 8 -> 3). The crossbar cells are preloaded with random
// weight codes in [50, 200]. For random signed samples the test computes,
// independently of the RTL, the five VMMs with the ADC law, the X+/X- split,
// the zero-point correction, ReLU and requantisation, and compares the three
// scores, the class and the event counters. It checks that negative inputs,
// ReLU zeroing, ADC saturation and requantisation saturation all occur.
module tb_mlp_sequencer;
  import mx100_pkg::*;
  localparam int R = 32, C = 32, IN = 16, H1 = 24, H2 = 12, H3 = 8, OUT = 3;
  localparam int Z = 125, BIAS = 255;
  localparam int NSAMP = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t [0:0] m_req;
  axil_rsp_t [0:0] m_rsp;
  axil_req_t [2:0] s_req;
  axil_rsp_t [2:0] s_rsp;

  logic start, busy, done;
  logic [31:0] in_addr;
  logic [3:0][4:0] adc_shift;
  logic [2:0][4:0] rq_shift;
  logic [1:0] class_id;
  logic signed [OUT-1:0][31:0] score;
  logic [31:0] n_relu_zero, n_rq_sat, n_adc_sat;

  mlp_sequencer #(.ROWS(R), .COLS(C), .IN_DIM(IN), .H1(H1), .H2(H2), .H3(H3), .OUT_DIM(OUT)) dut (
    .clk, .rst_n, .start, .in_addr, .adc_shift, .rq_shift, .busy, .done, .class_id, .score,
    .n_relu_zero, .n_rq_sat, .n_adc_sat, .m_req(m_req[0]), .m_rsp(m_rsp[0]));

  axil_xbar #(.N_M(1), .N_S(3),
    .S_BASE({NPU_BASE + NPU_STRIDE, NPU_BASE, 32'h0}),
    .S_MASK({32'hFFFF_F000, 32'hFFFF_F000, 32'hFFFF_F000})) u_xb (
    .clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);

  axil_sram #(.BYTES(4096)) u_mem (.clk, .rst_n, .s_req(s_req[0]), .s_rsp(s_rsp[0]));

  for (genvar n = 0; n < 2; n++) begin : gen_npu
    logic req, we;
    logic [31:0] addr, wdata, rdata;
    logic [3:0] wstrb;
    axil_slave_port u_port (.clk, .rst_n, .s_req(s_req[1+n]), .s_rsp(s_rsp[1+n]),
      .req, .we, .addr, .wdata, .wstrb, .rdata);
    npu #(.ROWS(R), .COLS(C)) u_npu (.clk, .rst_n, .bus_req(req), .bus_we(we), .bus_addr(addr[11:0]),
      .bus_wdata(wdata), .bus_wstrb(wstrb), .bus_rdata(rdata));
  end

  int checks = 0, failures = 0;
  int g0 [R][C], g1 [R][C];
  int e_relu = 0, e_rqsat = 0, e_adcsat = 0, e_neg = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int rq(longint y, int s);
    longint t;
    if (y <= 0) begin e_relu++; return 0; end
    t = y >>> s;
    if (t > 255) begin e_rqsat++; return 255; end
    return int'(t);
  endfunction

  // one VMM on array g (0 or 1) with the given wordline codes; returns y per column
  task automatic vmm(int which, int v[R], int sh, output longint y[C]);
    longint sx;
    sx = 0;
    for (int r = 0; r < R; r++) sx += v[r];
    for (int c = 0; c < C; c++) begin
      longint i; int a;
      i = 0;
      for (int r = 0; r < R; r++) i += longint'(v[r]) * ((which == 0) ? g0[r][c] : g1[r][c]);
      i = i >> sh;
      a = (i > 255) ? 255 : int'(i);
      if (a == 255) e_adcsat++;
      y[c] = (longint'(a) << sh) - Z * sx;
    end
  endtask

  task automatic model(int x[IN], int ash[4], int rsh[3], output longint sc[OUT], output int cls);
    int v[R]; longint ya[C], yb[C]; int a1[H1], a2[H2], a3[H3];
    foreach (v[r]) v[r] = 0;
    for (int r = 0; r < IN; r++) v[r] = (x[r] > 0) ? x[r] : 0;
    v[IN] = BIAS;
    vmm(0, v, ash[0], ya);
    foreach (v[r]) v[r] = 0;
    for (int r = 0; r < IN; r++) v[r] = (x[r] < 0) ? -x[r] : 0;
    vmm(0, v, ash[0], yb);
    for (int j = 0; j < H1; j++) a1[j] = rq(ya[j] - yb[j], rsh[0]);
    foreach (v[r]) v[r] = 0;
    for (int r = 0; r < H1; r++) v[r] = a1[r];
    v[H1] = BIAS;
    vmm(1, v, ash[1], ya);
    for (int j = 0; j < H2; j++) a2[j] = rq(ya[j], rsh[1]);
    foreach (v[r]) v[r] = 0;
    for (int r = 0; r < H2; r++) v[r] = a2[r];
    v[H2] = BIAS;
    vmm(1, v, ash[2], ya);
    for (int j = 0; j < H3; j++) a3[j] = rq(ya[H2 + j], rsh[2]);
    foreach (v[r]) v[r] = 0;
    for (int r = 0; r < H3; r++) v[r] = a3[r];
    v[H3] = BIAS;
    vmm(1, v, ash[3], ya);
    cls = 0;
    for (int j = 0; j < OUT; j++) begin
      sc[j] = ya[H2 + H3 + j];
      if (sc[j] > sc[cls]) cls = j;
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; in_addr = 0; adc_shift = '0; rq_shift = '0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        g0[r][c] = $urandom_range(50, 200);
        g1[r][c] = $urandom_range(50, 200);
        gen_npu[0].u_npu.u_xbar.g[r][c] = 8'(g0[r][c]);
        gen_npu[1].u_npu.u_xbar.g[r][c] = 8'(g1[r][c]);
      end
    repeat (3) @(posedge clk); #1; rst_n = 1;
    for (int s = 0; s < NSAMP; s++) begin
      int x[IN]; int ash[4]; int rsh[3]; longint sc[OUT]; int cls, cyc;
      for (int i = 0; i < IN; i++) begin
        x[i] = (s == 0 && i == 0) ? -128 : $urandom_range(0, 255) - 128;
        if (x[i] < 0) e_neg++;
      end
      for (int w = 0; w < IN/4; w++)
        u_mem.u_mem.mem[64 + w] = {8'(x[4*w+3]), 8'(x[4*w+2]), 8'(x[4*w+1]), 8'(x[4*w])};
      // ranges: mostly sensible, sometimes too narrow so that saturation shows
      ash[0] = (s % 4 == 3) ? 6 : 10; ash[1] = (s % 5 == 4) ? 8 : 11; ash[2] = 10; ash[3] = 9;
      rsh[0] = (s % 3 == 2) ? 4 : 9; rsh[1] = 9; rsh[2] = 8;
      for (int l = 0; l < 4; l++) adc_shift[l] = 5'(ash[l]);
      for (int l = 0; l < 3; l++) rq_shift[l] = 5'(rsh[l]);
      model(x, ash, rsh, sc, cls);
      in_addr = 32'd256;
      @(posedge clk); #1; start = 1; @(posedge clk); #1; start = 0;
      cyc = 0;
      while (!done) begin @(posedge clk); #1; cyc++; end
      for (int j = 0; j < OUT; j++)
        check(longint'($signed(score[j])) == sc[j], $sformatf("s%0d score %0d got %0d exp %0d", s, j, $signed(score[j]), sc[j]));
      check(int'(class_id) == cls, $sformatf("s%0d class %0d exp %0d", s, class_id, cls));
      check(!busy, "idle after done");
      if (s == 0) $display("one classification: %0d cycles", cyc);
    end
    check(int'(n_relu_zero) == e_relu, $sformatf("ReLU zero count %0d vs %0d", n_relu_zero, e_relu));
    check(int'(n_rq_sat) == e_rqsat, $sformatf("requant saturation count %0d vs %0d", n_rq_sat, e_rqsat));
    check(int'(n_adc_sat) >= 1 && e_adcsat >= 1, "ADC saturation occurred");
    check(e_neg > 0 && e_relu > 0 && e_rqsat > 0, "negative inputs, ReLU and saturation occurred");
    $display("events: negative inputs %0d, relu zero %0d, rq sat %0d, adc sat (all columns) %0d",
             e_neg, e_relu, e_rqsat, e_adcsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
