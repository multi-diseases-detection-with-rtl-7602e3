// dma: direct memory access engine of the SoC.
//
// The paper gives the SoC a DMA engine for fast on-chip data transfer and
// says nothing of its insides. This is the simplest engine that does that:
// it copies LEN 32-bit words from byte address SRC to byte address DST over
// the interconnect, one word in flight (read, then write). Registers, on its
// AXI4-Lite slave port (offsets are this design's own, see mx100_pkg):
//   0x00 SRC, 0x04 DST, 0x08 LEN (words), 0x0C CTRL (write bit0 = start),
//   0x10 STATUS: bit0 busy, bit1 last transfer had a bus error,
//                bits [31:16] number of transfers completed.
// A start while busy, or with LEN = 0, is ignored. irq_done pulses for one
// cycle when a transfer ends. A bus error stops the transfer.
// Timing: each word costs one read and one write on the master port.
// Reset is synchronous, active low.
module dma
  import mx100_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_req,
  output axil_rsp_t s_rsp,
  output axil_req_t m_req,
  input  axil_rsp_t m_rsp,
  output logic      irq_done
);

  // register port
  logic        r_req, r_we;
  logic [31:0] r_addr, r_wdata;
  logic [3:0]  r_wstrb;
  logic [31:0] r_rdata;

  axil_slave_port u_sport (
    .clk, .rst_n, .s_req, .s_rsp,
    .req(r_req), .we(r_we), .addr(r_addr), .wdata(r_wdata), .wstrb(r_wstrb), .rdata(r_rdata)
  );

  logic [31:0] src_q, dst_q, len_q;
  logic [31:0] cur_src, cur_dst, remain, data_q;
  logic [15:0] n_done;
  logic        bus_err;

  typedef enum logic [1:0] {D_IDLE, D_READ, D_WRITE} dstate_e;
  dstate_e dstate;
  logic    issued;

  logic        cmd_valid, cmd_we, cmd_ready, c_done, c_err;
  logic [31:0] cmd_addr, cmd_wdata, c_rdata;

  logic start;
  assign start = r_req && r_we && (r_addr[11:0] == DMA_CTRL) && r_wdata[0]
                 && (dstate == D_IDLE) && (len_q != 0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      src_q   <= '0;
      dst_q   <= '0;
      len_q   <= '0;
      r_rdata <= '0;
    end else if (r_req) begin
      if (r_we) begin
        unique case (r_addr[11:0])
          DMA_SRC: src_q <= r_wdata;
          DMA_DST: dst_q <= r_wdata;
          DMA_LEN: len_q <= r_wdata;
          default: ;
        endcase
      end else begin
        unique case (r_addr[11:0])
          DMA_SRC:    r_rdata <= src_q;
          DMA_DST:    r_rdata <= dst_q;
          DMA_LEN:    r_rdata <= len_q;
          DMA_STATUS: r_rdata <= {n_done, 14'd0, bus_err, dstate != D_IDLE};
          default:    r_rdata <= '0;
        endcase
      end
    end
  end

  assign cmd_valid = (dstate != D_IDLE) && !issued;
  assign cmd_we    = (dstate == D_WRITE);
  assign cmd_addr  = (dstate == D_WRITE) ? cur_dst : cur_src;
  assign cmd_wdata = data_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dstate   <= D_IDLE;
      issued   <= 1'b0;
      cur_src  <= '0;
      cur_dst  <= '0;
      remain   <= '0;
      data_q   <= '0;
      n_done   <= '0;
      bus_err  <= 1'b0;
      irq_done <= 1'b0;
    end else begin
      irq_done <= 1'b0;
      if (cmd_valid && cmd_ready) issued <= 1'b1;
      unique case (dstate)
        D_IDLE: if (start) begin
          cur_src <= src_q;
          cur_dst <= dst_q;
          remain  <= len_q;
          bus_err <= 1'b0;
          dstate  <= D_READ;
        end
        D_READ: if (c_done) begin
          issued <= 1'b0;
          data_q <= c_rdata;
          if (c_err) begin
            bus_err  <= 1'b1;
            n_done   <= n_done + 1'b1;
            irq_done <= 1'b1;
            dstate   <= D_IDLE;
          end else begin
            dstate <= D_WRITE;
          end
        end
        D_WRITE: if (c_done) begin
          issued  <= 1'b0;
          cur_src <= cur_src + 32'd4;
          cur_dst <= cur_dst + 32'd4;
          remain  <= remain - 1'b1;
          if (c_err || remain == 1) begin
            bus_err  <= c_err;
            n_done   <= n_done + 1'b1;
            irq_done <= 1'b1;
            dstate   <= D_IDLE;
          end else begin
            dstate <= D_READ;
          end
        end
        default: dstate <= D_IDLE;
      endcase
    end
  end

  axil_master_port u_mport (
    .clk, .rst_n,
    .cmd_valid, .cmd_we, .cmd_addr, .cmd_wdata, .cmd_ready,
    .done(c_done), .rdata(c_rdata), .err(c_err),
    .m_req, .m_rsp
  );

  logic unused;
  assign unused = ^{r_wstrb, r_addr[31:12]};

endmodule
