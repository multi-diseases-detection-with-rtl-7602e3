// tb_axil_sram: self-checking test of the AXI4-Lite system SRAM (1 KB here).
//
// A driver in this file issues random writes (AW and W raised in random
// order and delay) and reads, with random delays on BREADY and RREADY, and
// compares read data with a model. It checks the OKAY responses, that
// VALID/READY rules hold, and the read latency of 2 cycles after AR is
// accepted when RREADY is high.
module tb_axil_sram;
  import mx100_pkg::*;
  localparam int BYTES = 1024, W = BYTES / 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axil_req_t s_req;
  axil_rsp_t s_rsp;
  axil_sram #(.BYTES(BYTES)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] model [W];
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic axw(logic [31:0] a, logic [31:0] d);
    int daw, dw; bit aw_done, w_done;
    daw = $urandom_range(0, 2); dw = $urandom_range(0, 2);
    aw_done = 0; w_done = 0;
    s_req.awaddr = a; s_req.wdata = d; s_req.wstrb = 4'hF;
    for (int t = 0; !(aw_done && w_done); t++) begin
      s_req.awvalid = !aw_done && t >= daw;
      s_req.wvalid  = !w_done && t >= dw;
      @(posedge clk);
      if (s_req.awvalid && s_rsp.awready) aw_done = 1;
      if (s_req.wvalid && s_rsp.wready) w_done = 1;
      #1;
    end
    s_req.awvalid = 0; s_req.wvalid = 0;
    repeat ($urandom_range(0, 2)) @(posedge clk);
    #1; s_req.bready = 1;
    while (!s_rsp.bvalid) begin @(posedge clk); #1; end
    check(s_rsp.bresp == RESP_OKAY, "BRESP OKAY");
    @(posedge clk); #1; s_req.bready = 0;
  endtask

  task automatic axr(logic [31:0] a, output logic [31:0] d, input bit fast);
    int lat;
    s_req.araddr = a; s_req.arvalid = 1;
    s_req.rready = fast;
    do @(posedge clk); while (!s_rsp.arready);
    #1; s_req.arvalid = 0;
    lat = 1;
    if (!fast) begin repeat ($urandom_range(1, 3)) @(posedge clk); #1; s_req.rready = 1; end
    while (!s_rsp.rvalid) begin @(posedge clk); #1; lat++; end
    if (fast) check(lat == 2, $sformatf("read latency %0d", lat));
    check(s_rsp.rresp == RESP_OKAY, "RRESP OKAY");
    d = s_rsp.rdata;
    @(posedge clk); #1; s_req.rready = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    s_req = AXIL_REQ_IDLE;
    repeat (3) @(posedge clk); #1; rst_n = 1;
    for (int i = 0; i < W; i++) begin model[i] = $urandom; axw(32'(4*i), model[i]); end
    for (int t = 0; t < 1500; t++) begin
      int a;
      a = $urandom_range(0, W-1);
      if ($urandom_range(0, 2) == 0) begin
        model[a] = $urandom; axw(32'(4*a), model[a]);
      end else begin
        axr(32'(4*a), d, $urandom_range(0, 1) == 1);
        check(d == model[a], $sformatf("read word %0d", a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
