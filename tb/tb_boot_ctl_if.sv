// tb_boot_ctl_if: reset values (all IPs gated), output pins from register
// writes, synchronised host inputs setting pending bits, the interrupt with
// enable and write-1-to-clear, host_bus_awake after HOST_initDONE, and the
// lockdown, set by firmware and by the end-of-life request.
module tb_boot_ctl_if
  import citadel_pkg::*;
;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t req; axil_rsp_t rsp;
  logic init_handoff, host_init_done, data_request, data_ack, sys_access, host_bus_awake, irq;
  logic lock_req = 0;
  logic [3:0] rst_gate;

  boot_ctl_if u_dut (.clk, .rst_n, .req, .rsp, .init_handoff, .host_init_done, .rst_gate,
    .data_request, .data_ack, .sys_access, .host_bus_awake, .irq, .lock_req);
  axil_bfm u_bfm (.clk, .req, .rsp);

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

  initial begin
    logic [1:0] r; logic [31:0] d; int cyc, n;
    host_init_done = 0; data_ack = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(rst_gate == 4'hF && !init_handoff && !sys_access && !host_bus_awake && !irq, "reset values");
    u_bfm.write(32'h0C, 32'h3, r);
    u_bfm.write(32'h00, 32'h1, r);
    chk(init_handoff && !sys_access, "INIT_handoff raised");
    u_bfm.write(32'h04, 32'hA, r);
    chk(rst_gate == 4'hA, "reset gating per IP");
    // host answers: pending after synchroniser, irq raised
    @(negedge clk); host_init_done = 1;
    n = 0;
    while (!irq && n < 10) begin @(negedge clk); n++; end
    chk(irq && n == 3, $sformatf("irq three edges after HOST_initDONE (got %0d)", n));
    chk(host_bus_awake, "host bus awake");
    u_bfm.read(32'h08, d, r, cyc);
    chk(d[1:0] == 2'b01, "pending: host_init_done");
    u_bfm.write(32'h08, 32'h1, r);
    chk(!irq, "write 1 clears");
    // data request / ack, irq disabled for ack
    u_bfm.write(32'h0C, 32'h1, r);
    u_bfm.write(32'h00, 32'h5, r);
    chk(data_request && init_handoff, "data request raised");
    @(negedge clk); data_ack = 1;
    repeat (4) @(negedge clk);
    chk(!irq, "disabled interrupt stays low");
    u_bfm.read(32'h08, d, r, cyc);
    chk(d[1:0] == 2'b10, "pending: data_ack");
    u_bfm.read(32'h10, d, r, cyc);
    chk(d[2:0] == 3'b111, "pin status");
    u_bfm.write(32'h00, 32'h3, r);
    chk(sys_access, "SYS_ACCESS raised");
    u_bfm.write(32'h40, 32'h3, r);
    chk(r == RESP_SLVERR, "unmapped write");
    // firmware abort and lockdown
    u_bfm.write(32'h04, 32'h0, r);
    chk(rst_gate == 4'h0, "all IPs released");
    u_bfm.write(32'h00, 32'h8, r);
    chk(r == RESP_OKAY && rst_gate == 4'hF && !sys_access && !init_handoff && !data_request,
        "lockdown gates every IP and drops the boot pins");
    u_bfm.write(32'h04, 32'h0, r);
    chk(r == RESP_SLVERR && rst_gate == 4'hF, "RSTGATE write refused while locked");
    u_bfm.write(32'h00, 32'h3, r);
    chk(r == RESP_SLVERR && !sys_access, "CTRL write refused while locked");
    u_bfm.read(32'h00, d, r, cyc);
    chk(d[3], "lock state readable");
    // a reset clears it; the end-of-life request sets it again
    @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
    u_bfm.write(32'h04, 32'h0, r);
    u_bfm.write(32'h00, 32'h3, r);
    chk(r == RESP_OKAY && sys_access && rst_gate == 4'h0, "unlocked after reset");
    @(negedge clk); lock_req = 1; @(negedge clk); lock_req = 0;
    chk(rst_gate == 4'hF && !sys_access, "end of life locks down in one cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
