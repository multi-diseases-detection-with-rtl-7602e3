// Shared body of the end-to-end SoC testbenches (tb_mx100_top at reduced
// size, tb_mx100_full at the design's default size). The including module
// defines R, C (crossbar size), IN, H1, H2, H3 (layer widths), NSAMP
// (samples to classify), IAW and DAW (RAM address widths) and then
// instantiates mx100_top as dut on the signals declared here.
//
// Flow, all through the host port except the CPU-side RAM test:
//  1. write-verify every weight cell of layer 1 into NPU 0 and of layers
//     2-4 into NPU 1 (random codes in [50, 200], tolerance 4), keeping the
//     final code each cell reports, and check that the RMS programming error
//     is below 5 codes; one cell first gets a 1-pulse budget and
//     must fail, and some cells are reprogrammed lower so RESET is used;
//  2. touch the input buffer of every NPU, an unmapped address (DECERR) and
//     the CPU-side instruction and data RAMs;
//  3. per sample: write 128 int8 values to system SRAM, copy them with the
//     DMA, start the sequencer while the host keeps polling memory (bus
//     contention), and compare the scores and class with a model computed
//     here from the read-back conductances.
// Each mechanism is counted; one that never happened is a failure.

  import mx100_pkg::*;
  localparam int OUT = 3, Z = 125, BIAS = 255;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t host_req;
  axil_rsp_t host_rsp;
  logic iram_req, iram_we, dram_req, dram_we;
  logic [IAW-1:0] iram_addr;
  logic [DAW-1:0] dram_addr;
  logic [31:0] iram_wdata, iram_rdata, dram_wdata, dram_rdata;
  logic [3:0] iram_wstrb, dram_wstrb;
  logic seq_start, seq_busy, seq_done, dma_irq;
  logic [31:0] seq_in_addr, seq_n_relu_zero, seq_n_rq_sat, seq_n_adc_sat;
  logic [3:0][4:0] seq_adc_shift;
  logic [2:0][4:0] seq_rq_shift;
  logic [1:0] seq_class;
  logic signed [2:0][31:0] seq_score;
  axil_req_t [2:0] xb_m_req;

  // host bus driver
  logic c_valid, c_we, c_ready, c_done, c_err;
  logic [31:0] c_addr, c_wdata, c_rdata;
  axil_master_port u_host (.clk, .rst_n, .cmd_valid(c_valid), .cmd_we(c_we), .cmd_addr(c_addr),
    .cmd_wdata(c_wdata), .cmd_ready(c_ready), .done(c_done), .rdata(c_rdata), .err(c_err),
    .m_req(host_req), .m_rsp(host_rsp));

  int checks = 0, failures = 0;
  int g0 [R][C], g1 [R][C];
  // mechanism counters
  int ev_set = 0, ev_reset = 0, ev_prog_fail = 0, ev_dma = 0, ev_irq = 0, ev_contend = 0;
  longint sq_err = 0, n_cells = 0;
  int n_class [4] = '{0, 0, 0, 0};
  int ev_decerr = 0, ev_neg = 0, ev_relu = 0, ev_rqsat = 0, ev_adcsat = 0, ev_npus = 0, ev_ram = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    int n;
    n = 0;
    for (int m = 0; m < 3; m++) if (xb_m_req[m].awvalid || xb_m_req[m].arvalid) n++;
    if (n > 1) ev_contend++;
    if (dma_irq && rst_n) ev_irq++;
  end

  task automatic bus(bit we, logic [31:0] a, logic [31:0] d, output logic [31:0] r, output bit e);
    c_valid = 1; c_we = we; c_addr = a; c_wdata = d;
    do @(posedge clk); while (!c_ready);
    #1; c_valid = 0;
    while (!c_done) begin @(posedge clk); #1; end
    r = c_rdata; e = c_err;
  endtask
  task automatic wr(logic [31:0] a, logic [31:0] d);
    logic [31:0] r; bit e;
    bus(1, a, d, r, e);
    check(!e, $sformatf("write %h OKAY", a));
  endtask
  task automatic rd(logic [31:0] a, output logic [31:0] r);
    bit e;
    bus(0, a, 0, r, e);
    check(!e, $sformatf("read %h OKAY", a));
  endtask

  function automatic logic [31:0] npu_a(int n, logic [11:0] off);
    return NPU_BASE + NPU_STRIDE * n + 32'(off);
  endfunction

  // write-verify one cell, return its final code
  task automatic prog(int n, int r, int c, int tg, int maxp, output int code, output bit ok);
    logic [31:0] d;
    wr(npu_a(n, NPU_PADDR), {16'd0, 8'(c), 8'(r)});
    wr(npu_a(n, NPU_PTGT), {16'(maxp), 8'd4, 8'(tg)});
    wr(npu_a(n, NPU_PCMD), 32'd1);
    do rd(npu_a(n, NPU_STATUS), d); while (d[1]);
    ok = d[2];
    rd(npu_a(n, NPU_CELL), d);
    code = int'(d[7:0]);
    if (ok) check(code >= tg - 4 && code <= tg + 4, "cell in tolerance");
  endtask

  task automatic prog_block(int n, int r0, int nr, int c0, int nc);
    int code; bit ok;
    for (int r = r0; r < r0 + nr; r++)
      for (int c = c0; c < c0 + nc; c++) begin
        int tg;
        tg = $urandom_range(50, 200);
        prog(n, r, c, tg, 400, code, ok);
        check(ok, $sformatf("NPU%0d cell %0d,%0d programmed", n, r, c));
        ev_set++;
        if ((r + c) % 97 == 0 && tg > 80) begin
          tg = tg - 30;
          prog(n, r, c, tg, 400, code, ok);
          check(ok, "reprogrammed lower");
          ev_reset++;
        end
        sq_err += (code - tg) * (code - tg);
        n_cells++;
        if (n == 0) g0[r][c] = code; else g1[r][c] = code;
      end
  endtask

  function automatic int rq(longint y, int s);
    longint t;
    if (y <= 0) begin ev_relu++; return 0; end
    t = y >>> s;
    if (t > 255) begin ev_rqsat++; return 255; end
    return int'(t);
  endfunction

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
      if (a == 255) ev_adcsat++;
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

  // ADC range that keeps a full-scale-ish current of n inputs of average
  // code 'avg' against weights of about 125 inside 8 bits, minus 'narrow'
  function automatic int range_for(int n, int avg, int narrow);
    longint full; int s;
    full = longint'(n) * avg * 140;
    s = 0;
    while ((full >> s) > 255) s++;
    return s - narrow;
  endfunction

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d; bit e; int code; bit ok;
    host_req = AXIL_REQ_IDLE;
    c_valid = 0; c_we = 0; c_addr = 0; c_wdata = 0;
    iram_req = 0; iram_we = 0; iram_addr = 0; iram_wdata = 0; iram_wstrb = 0;
    dram_req = 0; dram_we = 0; dram_addr = 0; dram_wdata = 0; dram_wstrb = 0;
    seq_start = 0; seq_in_addr = 0; seq_adc_shift = '0; seq_rq_shift = '0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin g0[r][c] = 0; g1[r][c] = 0; end
    repeat (3) @(posedge clk); #1; rst_n = 1;

    // 1. weights
    prog(0, 0, 0, 200, 1, code, ok);
    check(!ok, "one-pulse budget fails");
    if (!ok) ev_prog_fail++;
    prog_block(0, 0, IN + 1, 0, H1);          // layer 1 (+ bias row)
    prog_block(1, 0, H1 + 1, 0, H2);          // layer 2
    prog_block(1, 0, H2 + 1, H2, H3);         // layer 3
    prog_block(1, 0, H3 + 1, H2 + H3, OUT);   // layer 4
    $display("weights programmed at %0t, RMS error %0.3f codes over %0d cells",
             $time, $sqrt(real'(sq_err) / real'(n_cells)), n_cells);
    check($sqrt(real'(sq_err) / real'(n_cells)) < 5.0, "weight matrix RMS error below 5 codes");

    // 2. every NPU's input buffer, unmapped address, CPU-side RAMs
    for (int n = 0; n < NNPU; n++) begin
      wr(npu_a(n, NPU_IN_BUF + 12'h8), 32'hA5000000 | 32'(n));
      rd(npu_a(n, NPU_IN_BUF + 12'h8), d);
      check(d == (32'hA5000000 | 32'(n)), $sformatf("NPU%0d reachable", n));
      if (d == (32'hA5000000 | 32'(n))) ev_npus++;
      wr(npu_a(n, NPU_IN_BUF + 12'h8), 32'h0);
    end
    bus(0, 32'h3000_0000, 0, d, e);
    check(e, "unmapped address answers with an error");
    if (e) ev_decerr++;
    for (int k = 0; k < 8; k++) begin
      logic [31:0] wv;
      wv = $urandom;
      @(posedge clk); #1;
      iram_req = 1; iram_we = 1; iram_addr = IAW'(k * 37); iram_wdata = wv; iram_wstrb = 4'hF;
      dram_req = 1; dram_we = 1; dram_addr = DAW'(k * 53); dram_wdata = ~wv; dram_wstrb = 4'hF;
      @(posedge clk); #1; iram_we = 0; dram_we = 0;
      @(posedge clk); #1; iram_req = 0; dram_req = 0;
      check(iram_rdata == wv && dram_rdata == ~wv, "instruction/data RAM");
      if (iram_rdata == wv) ev_ram++;
    end

    // 3. classify
    for (int s = 0; s < NSAMP; s++) begin
      int x[IN]; int ash[4]; int rsh[3]; longint sc[OUT]; int cls, cyc, irq0;
      for (int i = 0; i < IN; i++) begin
        x[i] = $urandom_range(0, 255) - 128;
        if (x[i] < 0) ev_neg++;
      end
      for (int w = 0; w < IN/4; w++)
        wr(32'h0000_4000 + 32'(4*w), {8'(x[4*w+3]), 8'(x[4*w+2]), 8'(x[4*w+1]), 8'(x[4*w])});
      irq0 = ev_irq;
      wr(DMA_BASE + 32'(DMA_SRC), 32'h0000_4000);
      wr(DMA_BASE + 32'(DMA_DST), 32'h0000_8000 + 32'(s * 512));
      wr(DMA_BASE + 32'(DMA_LEN), 32'(IN / 4));
      wr(DMA_BASE + 32'(DMA_CTRL), 32'd1);
      do rd(DMA_BASE + 32'(DMA_STATUS), d); while (d[0]);
      check(!d[1] && ev_irq == irq0 + 1, "DMA copy done");
      ev_dma++;
      ash[0] = range_for(IN / 2 + 1, 64, (s % 3 == 2) ? 3 : 0);
      ash[1] = range_for(H1 + 1, 100, (s % 4 == 3) ? 3 : 0);
      ash[2] = range_for(H2 + 1, 100, 0);
      ash[3] = range_for(H3 + 1, 100, 0);
      rsh[0] = ash[0] - ((s % 4 == 1) ? 6 : 2); rsh[1] = ash[1] - 2; rsh[2] = ash[2] - 2;
      for (int l = 0; l < 4; l++) seq_adc_shift[l] = 5'(ash[l]);
      for (int l = 0; l < 3; l++) seq_rq_shift[l] = 5'(rsh[l]);
      model(x, ash, rsh, sc, cls);
      seq_in_addr = 32'h0000_8000 + 32'(s * 512);
      @(posedge clk); #1; seq_start = 1; @(posedge clk); #1; seq_start = 0;
      cyc = 0;
      fork
        while (!seq_done) begin @(posedge clk); #1; cyc++; end
        // host traffic during the run
        for (int k = 0; k < 20; k++) begin
          rd(32'h0000_4000 + 32'(4 * (k % (IN / 4))), d);
          check(d == {8'(x[4*(k%(IN/4))+3]), 8'(x[4*(k%(IN/4))+2]), 8'(x[4*(k%(IN/4))+1]), 8'(x[4*(k%(IN/4))])},
                "host read during classification");
        end
      join
      for (int j = 0; j < OUT; j++)
        check(longint'($signed(seq_score[j])) == sc[j],
              $sformatf("sample %0d score %0d: %0d vs %0d", s, j, $signed(seq_score[j]), sc[j]));
      check(int'(seq_class) == cls, $sformatf("sample %0d class %0d vs %0d", s, seq_class, cls));
      n_class[seq_class]++;
      if (s < 4 || s % 64 == 0) $display("sample %0d: class %0d, %0d cycles", s, seq_class, cyc);
    end
    $display("%0d samples classified: healthy %0d, heart attack %0d, liver cancer %0d",
             NSAMP, n_class[0], n_class[1], n_class[2]);
    check(int'(seq_n_relu_zero) == ev_relu, $sformatf("ReLU count %0d vs %0d", seq_n_relu_zero, ev_relu));
    check(int'(seq_n_rq_sat) == ev_rqsat, $sformatf("requant saturation count %0d vs %0d", seq_n_rq_sat, ev_rqsat));

    $display("mechanisms: write-verify %0d, reprogram-lower (RESET) %0d, program fail %0d, DMA %0d, DMA irq %0d,",
             ev_set, ev_reset, ev_prog_fail, ev_dma, ev_irq);
    $display("  bus contention cycles %0d, DECERR %0d, NPUs reached %0d, RAM words %0d,", ev_contend, ev_decerr, ev_npus, ev_ram);
    $display("  negative inputs (X- pass) %0d, ReLU zero %0d, requant saturation %0d, ADC full scale %0d",
             ev_neg, ev_relu, ev_rqsat, ev_adcsat);
    check(ev_set > 0, "write-verify happened");
    check(ev_reset > 0, "RESET reprogramming happened");
    check(ev_prog_fail > 0, "program failure happened");
    check(ev_dma > 0 && ev_irq > 0, "DMA happened");
    check(ev_contend > 0, "bus contention happened");
    check(ev_decerr > 0, "decode error happened");
    check(ev_npus == NNPU, "all NPUs reached");
    check(ev_ram > 0, "CPU-side RAMs used");
    check(ev_neg > 0, "negative inputs happened");
    check(ev_relu > 0, "ReLU zeroing happened");
    check(ev_rqsat > 0, "requantisation saturation happened");
    check(ev_adcsat > 0, "ADC saturation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
