// axil_bfm: AXI4-Lite master bus-functional model for the testbenches.
//
// write() and read() run one transaction each. Requests change at the falling
// clock edge and ready/valid are sampled shortly after it, so a handshake
// happens on the following rising edge. Each call returns the response code;
// read() also returns the data and the number of cycles from request to
// response (used to check latencies).
module axil_bfm
  import citadel_pkg::*;
(
  input  logic      clk,
  output axil_req_t req,
  input  axil_rsp_t rsp
);
  initial req = '0;

  task automatic write(input logic [31:0] a, input logic [31:0] d, output logic [1:0] resp);
    write_strb(a, d, 4'hF, resp);
  endtask

  task automatic write_strb(input logic [31:0] a, input logic [31:0] d, input logic [3:0] strb,
                            output logic [1:0] resp);
    @(negedge clk);
    req.awaddr = a; req.awvalid = 1'b1; req.wdata = d; req.wstrb = strb; req.wvalid = 1'b1;
    #1;
    while (!(rsp.awready && rsp.wready)) begin @(negedge clk); #1; end
    @(negedge clk);
    req.awvalid = 1'b0; req.wvalid = 1'b0; req.bready = 1'b1;
    #1;
    while (!rsp.bvalid) begin @(negedge clk); #1; end
    resp = rsp.bresp;
    @(negedge clk);
    req.bready = 1'b0;
  endtask

  task automatic read(input logic [31:0] a, output logic [31:0] d, output logic [1:0] resp,
                      output int cycles);
    cycles = 0;
    @(negedge clk);
    req.araddr = a; req.arvalid = 1'b1;
    #1;
    while (!rsp.arready) begin @(negedge clk); cycles++; #1; end
    @(negedge clk);
    cycles++;
    req.arvalid = 1'b0; req.rready = 1'b1;
    #1;
    while (!rsp.rvalid) begin @(negedge clk); cycles++; #1; end
    d = rsp.rdata;
    resp = rsp.rresp;
    @(negedge clk);
    req.rready = 1'b0;
  endtask
endmodule
