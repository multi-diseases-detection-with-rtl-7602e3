// axil_xbar: the SoC interconnect, a shared AXI4-Lite bus.
//
// The paper joins CPU, memory, DMA, I/O and the ten NPUs with an AXI4
// interconnect and gives nothing of its insides. This is the simplest
// interconnect that does the job: one transaction at a time, round-robin
// arbitration among N_M masters, address decode to N_S slaves, and a DECERR
// response for an address no slave claims. Slave i claims an address when
// (addr & S_MASK[i]) == S_BASE[i]; the first match wins.
//
// A master requests with AWVALID (a write; W must follow) or ARVALID (a
// read). In an idle cycle the arbiter picks the next requesting master after
// the last one served and latches it, its direction and its target. From the
// next cycle the master's channels of that direction are wired straight to
// the slave; the other masters see no ready. The grant ends with the B or R
// handshake. Cost: one arbitration cycle per transaction.
// Reset is synchronous, active low.
module axil_xbar
  import mx100_pkg::*;
#(
  parameter int unsigned N_M = 3,
  parameter int unsigned N_S = N_SLAVES,
  parameter logic [N_S-1:0][31:0] S_BASE = SOC_S_BASE,
  parameter logic [N_S-1:0][31:0] S_MASK = SOC_S_MASK
) (
  input  logic                clk,
  input  logic                rst_n,
  input  axil_req_t [N_M-1:0] m_req,
  output axil_rsp_t [N_M-1:0] m_rsp,
  output axil_req_t [N_S-1:0] s_req,
  input  axil_rsp_t [N_S-1:0] s_rsp
);

  localparam int unsigned MW = (N_M > 1) ? $clog2(N_M) : 1;
  localparam int unsigned SW = (N_S > 1) ? $clog2(N_S) : 1;

  logic          busy, is_wr, dec_err;
  logic [MW-1:0] gm, last_m;
  logic [SW-1:0] gs;
  // DECERR responder progress
  logic e_aw, e_w, e_ar;

  // Arbitration (combinational, used in idle cycles).
  logic          pick_ok;
  logic [MW-1:0] pick_m;
  always_comb begin
    pick_ok = 1'b0;
    pick_m  = '0;
    for (int k = 1; k <= N_M; k++) begin
      int unsigned m;
      m = (int'(last_m) + k) % N_M;
      if (!pick_ok && (m_req[m].awvalid || m_req[m].arvalid)) begin
        pick_ok = 1'b1;
        pick_m  = MW'(m);
      end
    end
  end

  logic [31:0]   pick_addr;
  logic          pick_hit;
  logic [SW-1:0] pick_s;
  always_comb begin
    pick_addr = m_req[pick_m].awvalid ? m_req[pick_m].awaddr : m_req[pick_m].araddr;
    pick_hit  = 1'b0;
    pick_s    = '0;
    for (int s = 0; s < N_S; s++)
      if (!pick_hit && ((pick_addr & S_MASK[s]) == S_BASE[s])) begin
        pick_hit = 1'b1;
        pick_s   = SW'(s);
      end
  end

  // Routing of the granted master.
  always_comb begin
    for (int s = 0; s < N_S; s++) s_req[s] = AXIL_REQ_IDLE;
    for (int m = 0; m < N_M; m++) m_rsp[m] = '0;
    if (busy && !dec_err) begin
      if (is_wr) begin
        s_req[gs].awaddr  = m_req[gm].awaddr;
        s_req[gs].awvalid = m_req[gm].awvalid;
        s_req[gs].wdata   = m_req[gm].wdata;
        s_req[gs].wstrb   = m_req[gm].wstrb;
        s_req[gs].wvalid  = m_req[gm].wvalid;
        s_req[gs].bready  = m_req[gm].bready;
        m_rsp[gm].awready = s_rsp[gs].awready;
        m_rsp[gm].wready  = s_rsp[gs].wready;
        m_rsp[gm].bvalid  = s_rsp[gs].bvalid;
        m_rsp[gm].bresp   = s_rsp[gs].bresp;
      end else begin
        s_req[gs].araddr  = m_req[gm].araddr;
        s_req[gs].arvalid = m_req[gm].arvalid;
        s_req[gs].rready  = m_req[gm].rready;
        m_rsp[gm].arready = s_rsp[gs].arready;
        m_rsp[gm].rvalid  = s_rsp[gs].rvalid;
        m_rsp[gm].rdata   = s_rsp[gs].rdata;
        m_rsp[gm].rresp   = s_rsp[gs].rresp;
      end
    end else if (busy && dec_err) begin
      if (is_wr) begin
        m_rsp[gm].awready = !e_aw;
        m_rsp[gm].wready  = !e_w;
        m_rsp[gm].bvalid  = e_aw && e_w;
        m_rsp[gm].bresp   = RESP_DECERR;
      end else begin
        m_rsp[gm].arready = !e_ar;
        m_rsp[gm].rvalid  = e_ar;
        m_rsp[gm].rresp   = RESP_DECERR;
      end
    end
  end

  logic fin;
  always_comb begin
    if (is_wr) fin = m_rsp[gm].bvalid && m_req[gm].bready;
    else       fin = m_rsp[gm].rvalid && m_req[gm].rready;
    fin = fin && busy;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      is_wr   <= 1'b0;
      dec_err <= 1'b0;
      gm      <= '0;
      gs      <= '0;
      last_m  <= MW'(N_M - 1);
      e_aw    <= 1'b0;
      e_w     <= 1'b0;
      e_ar    <= 1'b0;
    end else if (!busy) begin
      if (pick_ok) begin
        busy    <= 1'b1;
        gm      <= pick_m;
        is_wr   <= m_req[pick_m].awvalid;
        gs      <= pick_s;
        dec_err <= !pick_hit;
        e_aw    <= 1'b0;
        e_w     <= 1'b0;
        e_ar    <= 1'b0;
      end
    end else begin
      if (dec_err) begin
        if (m_req[gm].awvalid && m_rsp[gm].awready) e_aw <= 1'b1;
        if (m_req[gm].wvalid  && m_rsp[gm].wready)  e_w  <= 1'b1;
        if (m_req[gm].arvalid && m_rsp[gm].arready) e_ar <= 1'b1;
      end
      if (fin) begin
        busy   <= 1'b0;
        last_m <= gm;
      end
    end
  end

endmodule
