// axil_port_map: AXI4-Lite slave front end ("port map registers" with their
// write and read FSMs).
//
// Every bus slave of the design uses this block to turn AXI4-Lite transactions
// into a simple register port. A write is accepted when address and data are
// both valid: awready/wready rise together for one cycle, wr_en pulses in the
// same cycle with the word address and data, and the write response follows
// the next cycle and is held until bready. A read is accepted on arvalid: rd_en
// pulses with rd_addr in the acceptance cycle, the slave must return rd_data
// (and rd_err) combinationally in that cycle, and rvalid is held from the next
// cycle until rready. One transaction per direction is outstanding at a time.
// wr_err from the slave during wr_en turns the write response into SLVERR.
// The paper names port-map read and write FSMs; the protocol details here are
// this design's choice.
// The register-port outputs (address, data, strobes) are the bus fields
// handed straight to the slave, so a netlist check sees them driven from
// inputs. Two assertions check that bvalid and rvalid stay high until taken;
// they are disabled during reset, which is why rst_n is also seen as a
// synchronous signal by lint.
module axil_port_map
  import citadel_pkg::*;
#(
  parameter int unsigned AW = 12  // byte-address bits decoded by the slave
) (
  input  logic          clk,
  input  logic          rst_n,
  input  axil_req_t     req,
  output axil_rsp_t     rsp,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output logic [31:0]   wr_data,
  output logic [3:0]    wr_strb,
  input  logic          wr_err,
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  logic [31:0]   rd_data,
  input  logic          rd_err
);
  logic        bvalid_q, rvalid_q;
  logic [1:0]  bresp_q, rresp_q;
  logic [31:0] rdata_q;

  assign wr_en   = req.awvalid && req.wvalid && !bvalid_q;
  assign wr_addr = req.awaddr[AW-1:0];
  assign wr_data = req.wdata;
  assign wr_strb = req.wstrb;
  assign rd_en   = req.arvalid && !rvalid_q;
  assign rd_addr = req.araddr[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid_q <= 1'b0;
      rvalid_q <= 1'b0;
      bresp_q  <= RESP_OKAY;
      rresp_q  <= RESP_OKAY;
      rdata_q  <= '0;
    end else begin
      if (wr_en) begin
        bvalid_q <= 1'b1;
        bresp_q  <= wr_err ? RESP_SLVERR : RESP_OKAY;
      end else if (bvalid_q && req.bready) begin
        bvalid_q <= 1'b0;
      end
      if (rd_en) begin
        rvalid_q <= 1'b1;
        rdata_q  <= rd_data;
        rresp_q  <= rd_err ? RESP_SLVERR : RESP_OKAY;
      end else if (rvalid_q && req.rready) begin
        rvalid_q <= 1'b0;
      end
    end
  end

  always_comb begin
    rsp         = '0;
    rsp.awready = wr_en;
    rsp.wready  = wr_en;
    rsp.bvalid  = bvalid_q;
    rsp.bresp   = bresp_q;
    rsp.arready = rd_en;
    rsp.rvalid  = rvalid_q;
    rsp.rdata   = rdata_q;
    rsp.rresp   = rresp_q;
  end

  // A response must stay valid until it is taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    bvalid_q && !req.bready |=> bvalid_q);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rvalid_q && !req.rready |=> rvalid_q && $stable(rdata_q));
endmodule
