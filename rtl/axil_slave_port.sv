// axil_slave_port: AXI4-Lite slave front end for a simple memory-style port.
//
// It turns AXI4-Lite transactions into single accesses on req/we/addr/wdata/
// wstrb of a target whose read data (rdata) arrives one cycle after the
// request, which is how sram and npu behave. One transaction is handled at a
// time. A write is accepted in the cycle when both AW and W are valid; the
// access is issued in that cycle and the B response (OKAY) follows. A read
// is accepted when AR is valid, the access is issued in that cycle, the data
// is captured one cycle later and returned on R. Addresses pass through
// unchanged; the target uses the low bits it needs.
//
// Timing: write, 1 cycle to accept plus B until bready; read, 1 cycle to
// accept, 1 cycle of target latency, then R until rready.
// Reset is synchronous, active low.
module axil_slave_port
  import mx100_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   s_req,
  output axil_rsp_t   s_rsp,
  output logic        req,
  output logic        we,
  output logic [31:0] addr,
  output logic [31:0] wdata,
  output logic [3:0]  wstrb,
  input  logic [31:0] rdata
);

  typedef enum logic [1:0] {S_IDLE, S_RLAT, S_R, S_B} state_e;
  state_e state;
  logic [31:0] rdata_q;

  logic do_wr, do_rd;
  assign do_wr = (state == S_IDLE) && s_req.awvalid && s_req.wvalid;
  assign do_rd = (state == S_IDLE) && !do_wr && s_req.arvalid;

  assign req   = do_wr || do_rd;
  assign we    = do_wr;
  assign addr  = do_wr ? s_req.awaddr : s_req.araddr;
  assign wdata = s_req.wdata;
  assign wstrb = s_req.wstrb;

  always_comb begin
    s_rsp         = '0;
    s_rsp.awready = do_wr;
    s_rsp.wready  = do_wr;
    s_rsp.arready = do_rd;
    s_rsp.bvalid  = (state == S_B);
    s_rsp.bresp   = RESP_OKAY;
    s_rsp.rvalid  = (state == S_R);
    s_rsp.rdata   = rdata_q;
    s_rsp.rresp   = RESP_OKAY;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      rdata_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (do_wr) state <= S_B;
                else if (do_rd) state <= S_RLAT;
        S_RLAT: begin
          rdata_q <= rdata;
          state   <= S_R;
        end
        S_R: if (s_req.rready) state <= S_IDLE;
        S_B: if (s_req.bready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI rule: a valid, once raised, stays until its handshake.
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_req.awvalid && !s_rsp.awready |=> s_req.awvalid);
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_req.arvalid && !s_rsp.arready |=> s_req.arvalid);
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_rsp.rvalid && !s_req.rready |=> s_rsp.rvalid);

endmodule
