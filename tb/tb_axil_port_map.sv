// tb_axil_port_map: drives the port map through the AXI4-Lite master model
// against a small register file and checks write/read data, strobes,
// response codes from wr_err/rd_err, the read latency, and that responses are
// held while the master is not ready.
module tb_axil_port_map
  import citadel_pkg::*;
;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t req;
  axil_rsp_t rsp;
  logic wr_en, rd_en, wr_err, rd_err;
  logic [11:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [3:0] wr_strb;
  logic [31:0] regs [16];

  axil_port_map #(.AW(12)) u_dut (.clk, .rst_n, .req, .rsp, .wr_en, .wr_addr, .wr_data, .wr_strb,
    .wr_err, .rd_en, .rd_addr, .rd_data, .rd_err);
  axil_bfm u_bfm (.clk, .req, .rsp);

  // register file: 16 words at 0x000..0x03C, everything else errors
  assign wr_err = wr_addr >= 12'h040;
  assign rd_err = rd_addr >= 12'h040;
  assign rd_data = rd_err ? 32'hDEAD_BEEF : regs[rd_addr[5:2]];
  always_ff @(posedge clk)
    if (wr_en && !wr_err)
      for (int b = 0; b < 4; b++) if (wr_strb[b]) regs[wr_addr[5:2]][b*8 +: 8] <= wr_data[b*8 +: 8];

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] model [16];
  initial begin
    logic [1:0] r; logic [31:0] d; int cyc; int nwr;
    for (int i = 0; i < 16; i++) begin regs[i] = 0; model[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int a; a = $urandom_range(0, 15);
      d = $urandom();
      u_bfm.write(32'(a * 4), d, r);
      model[a] = d;
      chk(r == RESP_OKAY, "write OKAY");
    end
    for (int a = 0; a < 16; a++) begin
      u_bfm.read(32'(a * 4), d, r, cyc);
      chk(d == model[a] && r == RESP_OKAY, $sformatf("read word %0d", a));
      chk(cyc == 1, $sformatf("read response one cycle after acceptance (got %0d)", cyc));
    end
    u_bfm.write(32'h100, 32'h1, r);
    chk(r == RESP_SLVERR, "write error response");
    u_bfm.read(32'h100, d, r, cyc);
    chk(r == RESP_SLVERR, "read error response");
    // hold a read response while rready is low
    @(negedge clk); u_bfm.req.araddr = 32'h8; u_bfm.req.arvalid = 1;
    @(negedge clk); u_bfm.req.arvalid = 0;
    repeat (3) @(negedge clk);
    chk(rsp.rvalid && rsp.rdata == model[2], "read response held");
    u_bfm.req.rready = 1; @(negedge clk); u_bfm.req.rready = 0;
    chk(!rsp.rvalid, "read response taken");
    // a write while the previous write response is pending is not accepted
    @(negedge clk); u_bfm.req.awaddr = 32'h0; u_bfm.req.awvalid = 1; u_bfm.req.wdata = 32'h11; u_bfm.req.wvalid = 1; u_bfm.req.wstrb = 4'h1;
    @(negedge clk);
    u_bfm.req.wdata = 32'h22;
    #1 chk(!rsp.awready && rsp.bvalid, "second write waits for the response");
    @(negedge clk); u_bfm.req.awvalid = 0; u_bfm.req.wvalid = 0; u_bfm.req.bready = 1; @(negedge clk); u_bfm.req.bready = 0;
    u_bfm.read(32'h0, d, r, cyc);
    chk(d == {model[0][31:8], 8'h11}, "byte strobe write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
