// tb_dma: self-checking test of the DMA engine.
//
// The DMA's master port reaches a 4 KB SRAM through a one-master,
// one-slave interconnect, so that an address outside the SRAM gets a DECERR.
// The test fills the SRAM, programs random copies through the register port
// and checks the copied words and the untouched words around them, the busy
// bit, the transfer counter, the irq pulse, that a copy of N words takes
// about N read-write pairs, and that a copy from an unmapped source stops
// with the error bit set.
module tb_dma;
  import mx100_pkg::*;
  localparam int BYTES = 4096, W = BYTES / 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t cfg_req, dm_req, mem_req;
  axil_rsp_t cfg_rsp, dm_rsp, mem_rsp;
  logic irq;

  dma dut (.clk, .rst_n, .s_req(cfg_req), .s_rsp(cfg_rsp), .m_req(dm_req), .m_rsp(dm_rsp), .irq_done(irq));

  axil_xbar #(.N_M(1), .N_S(1), .S_BASE(32'h0), .S_MASK(32'hFFFF_F000)) u_xb (
    .clk, .rst_n, .m_req(dm_req), .m_rsp(dm_rsp), .s_req(mem_req), .s_rsp(mem_rsp));
  axil_sram #(.BYTES(BYTES)) u_mem (.clk, .rst_n, .s_req(mem_req), .s_rsp(mem_rsp));

  // register access through a master port
  logic c_valid, c_we, c_ready, c_done, c_err;
  logic [31:0] c_addr, c_wdata, c_rdata;
  axil_master_port u_cfg (.clk, .rst_n, .cmd_valid(c_valid), .cmd_we(c_we), .cmd_addr(c_addr),
    .cmd_wdata(c_wdata), .cmd_ready(c_ready), .done(c_done), .rdata(c_rdata), .err(c_err),
    .m_req(cfg_req), .m_rsp(cfg_rsp));

  int checks = 0, failures = 0, irqs = 0;
  logic [31:0] model [W];
  always @(posedge clk) if (irq) irqs++;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cmd(bit we, logic [31:0] a, logic [31:0] d, output logic [31:0] r);
    c_valid = 1; c_we = we; c_addr = a; c_wdata = d;
    do @(posedge clk); while (!c_ready);
    #1; c_valid = 0;
    while (!c_done) begin @(posedge clk); #1; end
    r = c_rdata;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    c_valid = 0; c_we = 0; c_addr = 0; c_wdata = 0;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    // preload the SRAM array with known words
    for (int i = 0; i < W; i++) begin model[i] = $urandom; u_mem.u_mem.mem[i] = model[i]; end
    for (int t = 0; t < 10; t++) begin
      int src, dst, len, cyc, irq0;
      len = $urandom_range(1, 40);
      src = $urandom_range(0, W/2 - 41);
      dst = $urandom_range(W/2, W - 41);
      irq0 = irqs;
      cmd(1, 32'(DMA_SRC), 32'(4*src), r);
      cmd(1, 32'(DMA_DST), 32'(4*dst), r);
      cmd(1, 32'(DMA_LEN), 32'(len), r);
      cmd(1, 32'(DMA_CTRL), 32'd1, r);
      cyc = 0;
      do begin cmd(0, 32'(DMA_STATUS), 0, r); cyc++; end while (r[0]);
      check(r[31:16] == 16'(t + 1), "transfer counter");
      check(!r[1], "no bus error");
      check(irqs == irq0 + 1, "one irq per transfer");
      for (int i = 0; i < len; i++) model[dst + i] = model[src + i];
      for (int i = 0; i < W; i++)
        check(u_mem.u_mem.mem[i] == model[i], $sformatf("word %0d after copy %0d", i, t));
      // each status poll is 4+ cycles; a word pair is about 10 cycles
      check(cyc * 4 >= len * 6 && cyc * 4 <= len * 14 + 40, $sformatf("duration %0d polls for %0d words", cyc, len));
    end
    // unmapped source
    cmd(1, 32'(DMA_SRC), 32'h0010_0000, r);
    cmd(1, 32'(DMA_LEN), 32'd4, r);
    cmd(1, 32'(DMA_CTRL), 32'd1, r);
    do cmd(0, 32'(DMA_STATUS), 0, r); while (r[0]);
    check(r[1], "bus error flagged");
    cmd(0, 32'(DMA_LEN), 0, r);
    check(r == 4, "LEN readback");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
