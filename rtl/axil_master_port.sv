// axil_master_port: issues one AXI4-Lite read or write per command.
//
// Logic that needs bus access (the DMA engine, the MLP sequencer) gives a
// command on cmd_valid/cmd_we/cmd_addr/cmd_wdata; cmd_ready is high while the
// port is idle and the command is taken when both are high. The port raises
// AW and W together (or AR), holds each until its handshake, then waits for
// B (or R) with bready (rready) high. done pulses for one cycle at the end,
// with rdata for reads and err set when the response was not OKAY. All four
// byte strobes are set.
//
// Timing: at least 3 cycles per command (request, response, idle) plus
// whatever the interconnect and slave add. Reset is synchronous, active low.
module axil_master_port
  import mx100_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  logic        cmd_we,
  input  logic [31:0] cmd_addr,
  input  logic [31:0] cmd_wdata,
  output logic        cmd_ready,
  output logic        done,
  output logic [31:0] rdata,
  output logic        err,
  output axil_req_t   m_req,
  input  axil_rsp_t   m_rsp
);

  typedef enum logic [1:0] {S_IDLE, S_WRITE, S_READ} state_e;
  state_e state;
  logic [31:0] addr_q, wdata_q;
  logic aw_pend, w_pend, ar_pend;

  assign cmd_ready = (state == S_IDLE);

  always_comb begin
    m_req         = AXIL_REQ_IDLE;
    m_req.awaddr  = addr_q;
    m_req.awvalid = (state == S_WRITE) && aw_pend;
    m_req.wdata   = wdata_q;
    m_req.wstrb   = 4'hF;
    m_req.wvalid  = (state == S_WRITE) && w_pend;
    m_req.bready  = (state == S_WRITE) && !aw_pend && !w_pend;
    m_req.araddr  = addr_q;
    m_req.arvalid = (state == S_READ) && ar_pend;
    m_req.rready  = (state == S_READ) && !ar_pend;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      addr_q  <= '0;
      wdata_q <= '0;
      aw_pend <= 1'b0;
      w_pend  <= 1'b0;
      ar_pend <= 1'b0;
      done    <= 1'b0;
      rdata   <= '0;
      err     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          addr_q  <= cmd_addr;
          wdata_q <= cmd_wdata;
          if (cmd_we) begin
            aw_pend <= 1'b1;
            w_pend  <= 1'b1;
            state   <= S_WRITE;
          end else begin
            ar_pend <= 1'b1;
            state   <= S_READ;
          end
        end
        S_WRITE: begin
          if (m_req.awvalid && m_rsp.awready) aw_pend <= 1'b0;
          if (m_req.wvalid  && m_rsp.wready)  w_pend  <= 1'b0;
          if (m_req.bready && m_rsp.bvalid) begin
            err   <= (m_rsp.bresp != RESP_OKAY);
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        S_READ: begin
          if (m_req.arvalid && m_rsp.arready) ar_pend <= 1'b0;
          if (m_req.rready && m_rsp.rvalid) begin
            rdata <= m_rsp.rdata;
            err   <= (m_rsp.rresp != RESP_OKAY);
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
