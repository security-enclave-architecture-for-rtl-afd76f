// tb_axil_xbar: one master, three register-file slaves. Checks that each
// address reaches exactly the slave its window decodes to (access counters
// and data), that unmapped addresses get DECERR with read data 0 and reach no
// slave, and interleaved write/read traffic.
module tb_axil_xbar
  import citadel_pkg::*;
;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [2:0][31:0] BASE = {32'h0000_2000, 32'h1000_0000, 32'h0000_0000};
  localparam logic [2:0][31:0] MASK = {32'hFFFF_F000, 32'hF000_0000, 32'hFFFF_F000};

  axil_req_t m_req; axil_rsp_t m_rsp;
  axil_req_t s_req [3]; axil_rsp_t s_rsp [3];

  axil_xbar #(.N_SLV(3), .BASE(BASE), .MASK(MASK)) u_dut (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);
  axil_bfm u_bfm (.clk, .req(m_req), .rsp(m_rsp));
  axil_ram_model s0 (.clk, .rst_n, .req(s_req[0]), .rsp(s_rsp[0]));
  axil_ram_model s1 (.clk, .rst_n, .req(s_req[1]), .rsp(s_rsp[1]));
  axil_ram_model s2 (.clk, .rst_n, .req(s_req[2]), .rsp(s_rsp[2]));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int target(input logic [31:0] a);
    for (int i = 0; i < 3; i++) if ((a & MASK[i]) == BASE[i]) return i;
    return -1;
  endfunction

  initial begin
    logic [1:0] r; logic [31:0] d, a; int cyc, t, w0, w1, w2;
    static logic [31:0] addrs [6] = '{32'h0000_0004, 32'h1234_5678 & ~32'h3, 32'h0000_2008, 32'h0000_1000,
                                32'h3000_0000, 32'h1FFF_FFFC};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 30; k++) begin
      a = addrs[k % 6];
      t = target(a);
      w0 = s0.writes; w1 = s1.writes; w2 = s2.writes;
      d = $urandom();
      u_bfm.write(a, d, r);
      chk(r == ((t < 0) ? RESP_DECERR : RESP_OKAY), $sformatf("write resp 0x%0h", a));
      chk((s0.writes - w0) == int'(t == 0) && (s1.writes - w1) == int'(t == 1) && (s2.writes - w2) == int'(t == 2),
          $sformatf("write to 0x%0h reached only slave %0d", a, t));
      u_bfm.read(addrs[k % 6], a, r, cyc);
      if (t < 0) chk(r == RESP_DECERR && a == 0, "read DECERR");
      else chk(r == RESP_OKAY && a == d, $sformatf("read back through slave %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
