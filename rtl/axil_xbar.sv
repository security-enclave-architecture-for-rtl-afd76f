// axil_xbar: AXI4-Lite interconnect from one master to N_SLV slaves (the
// enclave's interconnect fabric; also used as the host-side bus in the top).
//
// Slave i is selected when (addr & MASK[i]) == BASE[i]; the lowest matching
// index wins. Write and read paths are independent, each with one transaction
// in flight: in the cycle a valid address arrives it is decoded and the
// selection is latched, and from the next cycle the channel is connected to
// that slave until its response has been accepted. An address that matches no
// slave is answered by the interconnect itself with DECERR (reads return 0).
// The paper names an AXI interconnect fabric; the single-master topology, the
// decoding and the one-cycle routing latency are this design's choices.
// The request fields go to every slave unchanged (only the valid bits are
// steered), so most outputs are driven straight from inputs. The default
// BASE/MASK of all zeros maps everything to slave 0; instances set the map.
module axil_xbar
  import citadel_pkg::*;
#(
  parameter int unsigned N_SLV = 8,
  parameter logic [N_SLV-1:0][31:0] BASE = '0,
  parameter logic [N_SLV-1:0][31:0] MASK = '0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t m_req,
  output axil_rsp_t m_rsp,
  output axil_req_t s_req [N_SLV],
  input  axil_rsp_t s_rsp [N_SLV]
);
  localparam int unsigned SW = (N_SLV > 1) ? $clog2(N_SLV) : 1;

  typedef enum logic [1:0] {P_IDLE, P_FWD, P_ERR_ACC, P_ERR_RESP} path_e;

  function automatic logic [SW:0] decode(input logic [31:0] a);
    logic [SW:0] r;
    r = {1'b1, SW'(0)};  // MSB set: no match
    for (int i = N_SLV - 1; i >= 0; i--)
      if ((a & MASK[i]) == BASE[i]) r = {1'b0, SW'(i)};
    return r;
  endfunction

  path_e         wst, rst;
  logic [SW-1:0] wsel, rsel;
  logic [SW:0]   wdec, rdec;

  assign wdec = decode(m_req.awaddr);
  assign rdec = decode(m_req.araddr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst <= P_IDLE; rst <= P_IDLE; wsel <= '0; rsel <= '0;
    end else begin
      unique case (wst)
        P_IDLE: if (m_req.awvalid) begin
          wsel <= wdec[SW-1:0];
          wst  <= wdec[SW] ? P_ERR_ACC : P_FWD;
        end
        P_FWD:      if (s_rsp[wsel].bvalid && m_req.bready) wst <= P_IDLE;
        P_ERR_ACC:  if (m_req.awvalid && m_req.wvalid) wst <= P_ERR_RESP;
        P_ERR_RESP: if (m_req.bready) wst <= P_IDLE;
        default:    wst <= P_IDLE;
      endcase
      unique case (rst)
        P_IDLE: if (m_req.arvalid) begin
          rsel <= rdec[SW-1:0];
          rst  <= rdec[SW] ? P_ERR_ACC : P_FWD;
        end
        P_FWD:      if (s_rsp[rsel].rvalid && m_req.rready) rst <= P_IDLE;
        P_ERR_ACC:  rst <= P_ERR_RESP;
        P_ERR_RESP: if (m_req.rready) rst <= P_IDLE;
        default:    rst <= P_IDLE;
      endcase
    end
  end

  always_comb begin
    for (int i = 0; i < N_SLV; i++) begin
      s_req[i] = '0;
      if (wst == P_FWD && wsel == SW'(i)) begin
        s_req[i].awaddr  = m_req.awaddr;
        s_req[i].awvalid = m_req.awvalid;
        s_req[i].wdata   = m_req.wdata;
        s_req[i].wstrb   = m_req.wstrb;
        s_req[i].wvalid  = m_req.wvalid;
        s_req[i].bready  = m_req.bready;
      end
      if (rst == P_FWD && rsel == SW'(i)) begin
        s_req[i].araddr  = m_req.araddr;
        s_req[i].arvalid = m_req.arvalid;
        s_req[i].rready  = m_req.rready;
      end
    end
    m_rsp = '0;
    unique case (wst)
      P_FWD: begin
        m_rsp.awready = s_rsp[wsel].awready;
        m_rsp.wready  = s_rsp[wsel].wready;
        m_rsp.bvalid  = s_rsp[wsel].bvalid;
        m_rsp.bresp   = s_rsp[wsel].bresp;
      end
      P_ERR_ACC: begin
        m_rsp.awready = m_req.awvalid && m_req.wvalid;
        m_rsp.wready  = m_req.awvalid && m_req.wvalid;
      end
      P_ERR_RESP: begin
        m_rsp.bvalid = 1'b1;
        m_rsp.bresp  = RESP_DECERR;
      end
      default: ;
    endcase
    unique case (rst)
      P_FWD: begin
        m_rsp.arready = s_rsp[rsel].arready;
        m_rsp.rvalid  = s_rsp[rsel].rvalid;
        m_rsp.rdata   = s_rsp[rsel].rdata;
        m_rsp.rresp   = s_rsp[rsel].rresp;
      end
      P_ERR_ACC: m_rsp.arready = 1'b1;
      P_ERR_RESP: begin
        m_rsp.rvalid = 1'b1;
        m_rsp.rresp  = RESP_DECERR;
      end
      default: ;
    endcase
  end
endmodule
