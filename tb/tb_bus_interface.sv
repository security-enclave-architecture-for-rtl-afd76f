// tb_bus_interface: while the host bus is asleep every access gets SLVERR and
// nothing reaches the host side; once awake, writes and reads reach the host
// register file at (address - 0x8000_0000) with data intact.
module tb_bus_interface
  import citadel_pkg::*;
;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t s_req, h_req; axil_rsp_t s_rsp, h_rsp;
  logic host_bus_awake;

  bus_interface u_dut (.clk, .rst_n, .host_bus_awake, .s_req, .s_rsp, .h_req, .h_rsp);
  axil_bfm u_bfm (.clk, .req(s_req), .rsp(s_rsp));
  axil_ram_model #(.WORDS(64)) u_host (.clk, .rst_n, .req(h_req), .rsp(h_rsp));

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

  initial begin
    logic [1:0] r; logic [31:0] d, v; int cyc;
    host_bus_awake = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    u_bfm.write(32'h8000_0010, 32'h1234, r);
    chk(r == RESP_SLVERR && u_host.writes == 0, "asleep: write refused");
    u_bfm.read(32'h8000_0010, d, r, cyc);
    chk(r == RESP_SLVERR && u_host.reads == 0, "asleep: read refused");
    host_bus_awake = 1;
    for (int i = 0; i < 20; i++) begin
      int w; w = $urandom_range(0, 63);
      v = $urandom();
      u_bfm.write(32'h8000_0000 + 32'(w * 4), v, r);
      chk(r == RESP_OKAY && u_host.regs[w] == v, $sformatf("write reached host word %0d", w));
      u_bfm.read(32'h8000_0000 + 32'(w * 4), d, r, cyc);
      chk(r == RESP_OKAY && d == v, "read back through the bridge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
