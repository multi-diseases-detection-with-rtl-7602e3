// tb_sram: self-checking test of the SRAM array (64 words).
// Random reads and byte-masked writes are compared with a model kept here;
// read data must appear one cycle after the request and hold afterwards.
module tb_sram;
  localparam int W = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic req, we;
  logic [5:0] addr;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  sram #(.WORDS(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] model [W];
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; wstrb = 0;
    for (int i = 0; i < W; i++) begin
      model[i] = $urandom;
      @(posedge clk); #1; req = 1; we = 1; addr = 6'(i); wdata = model[i]; wstrb = 4'hF;
    end
    @(posedge clk); #1; req = 0;
    for (int t = 0; t < 2000; t++) begin
      int a;
      a = $urandom_range(0, W-1);
      if ($urandom_range(0, 1) == 1) begin
        logic [31:0] d; logic [3:0] s;
        d = $urandom; s = 4'($urandom);
        req = 1; we = 1; addr = 6'(a); wdata = d; wstrb = s;
        @(posedge clk); #1; req = 0;
        for (int b = 0; b < 4; b++) if (s[b]) model[a][8*b +: 8] = d[8*b +: 8];
      end else begin
        req = 1; we = 0; addr = 6'(a);
        @(posedge clk); #1; req = 0;
        check(rdata == model[a], $sformatf("read %0d", a));
        @(posedge clk); #1;
        check(rdata == model[a], "read data holds");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
