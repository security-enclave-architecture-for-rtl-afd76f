// bus_interface: bridge from the enclave's interconnect to the host system
// bus (the paper's "Bus Interface").
//
// The enclave reaches the security wrappers of the host IPs through this
// bridge. It is an AXI4-Lite slave on the enclave side and an AXI4-Lite
// master on the host side. A transaction is captured, the host-side address
// is the enclave address minus HOST_BASE, and the host response is returned
// unchanged. The paper notes that the enclave can use the system bus only
// while it is awake (the host wakes it up in boot stage 2); when host_bus_awake
// is low the bridge answers SLVERR without touching the host bus. One write
// and one read may be in flight, independently. Costs two cycles more than a
// direct connection each way. The capture/forward structure and the error
// policy are this design's choices.
module bus_interface
  import citadel_pkg::*;
#(
  parameter logic [31:0] HOST_BASE = 32'h8000_0000
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      host_bus_awake,
  input  axil_req_t s_req,
  output axil_rsp_t s_rsp,
  output axil_req_t h_req,
  input  axil_rsp_t h_rsp
);
  typedef enum logic [1:0] {B_IDLE, B_ISSUE, B_WAIT, B_RESP} br_e;

  br_e         wst, rst;
  logic [31:0] awaddr_q, wdata_q, araddr_q, rdata_q;
  logic [3:0]  wstrb_q;
  logic [1:0]  bresp_q, rresp_q;
  logic        aw_done, w_done;

  wire w_accept = (wst == B_IDLE) && s_req.awvalid && s_req.wvalid;
  wire r_accept = (rst == B_IDLE) && s_req.arvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst <= B_IDLE; rst <= B_IDLE;
      awaddr_q <= '0; wdata_q <= '0; wstrb_q <= '0; araddr_q <= '0; rdata_q <= '0;
      bresp_q <= RESP_OKAY; rresp_q <= RESP_OKAY; aw_done <= 1'b0; w_done <= 1'b0;
    end else begin
      // write path
      unique case (wst)
        B_IDLE: if (w_accept) begin
          awaddr_q <= s_req.awaddr - HOST_BASE;
          wdata_q  <= s_req.wdata;
          wstrb_q  <= s_req.wstrb;
          aw_done  <= 1'b0;
          w_done   <= 1'b0;
          if (host_bus_awake) wst <= B_ISSUE;
          else begin
            bresp_q <= RESP_SLVERR;
            wst     <= B_RESP;
          end
        end
        B_ISSUE: begin
          if (h_rsp.awready) aw_done <= 1'b1;
          if (h_rsp.wready)  w_done  <= 1'b1;
          if ((aw_done || h_rsp.awready) && (w_done || h_rsp.wready)) wst <= B_WAIT;
        end
        B_WAIT: if (h_rsp.bvalid) begin
          bresp_q <= h_rsp.bresp;
          wst     <= B_RESP;
        end
        B_RESP: if (s_req.bready) wst <= B_IDLE;
        default: wst <= B_IDLE;
      endcase
      // read path
      unique case (rst)
        B_IDLE: if (r_accept) begin
          araddr_q <= s_req.araddr - HOST_BASE;
          if (host_bus_awake) rst <= B_ISSUE;
          else begin
            rresp_q <= RESP_SLVERR;
            rdata_q <= '0;
            rst     <= B_RESP;
          end
        end
        B_ISSUE: if (h_rsp.arready) rst <= B_WAIT;
        B_WAIT: if (h_rsp.rvalid) begin
          rdata_q <= h_rsp.rdata;
          rresp_q <= h_rsp.rresp;
          rst     <= B_RESP;
        end
        B_RESP: if (s_req.rready) rst <= B_IDLE;
        default: rst <= B_IDLE;
      endcase
    end
  end

  always_comb begin
    h_req         = '0;
    h_req.awaddr  = awaddr_q;
    h_req.awvalid = (wst == B_ISSUE) && !aw_done;
    h_req.wdata   = wdata_q;
    h_req.wstrb   = wstrb_q;
    h_req.wvalid  = (wst == B_ISSUE) && !w_done;
    h_req.bready  = (wst == B_WAIT);
    h_req.araddr  = araddr_q;
    h_req.arvalid = (rst == B_ISSUE);
    h_req.rready  = (rst == B_WAIT);

    s_rsp         = '0;
    s_rsp.awready = w_accept;
    s_rsp.wready  = w_accept;
    s_rsp.bvalid  = (wst == B_RESP);
    s_rsp.bresp   = bresp_q;
    s_rsp.arready = r_accept;
    s_rsp.rvalid  = (rst == B_RESP);
    s_rsp.rdata   = rdata_q;
    s_rsp.rresp   = rresp_q;
  end
endmodule
