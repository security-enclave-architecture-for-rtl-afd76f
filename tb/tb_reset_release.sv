// tb_reset_release: the IP stays in reset while any of host reset, software
// reset or SENTRY RST CTL holds it, is released two clock edges after the
// last hold clears, and re-enters reset immediately (asynchronously). A
// random phase toggles the three sources and compares with a reference count.
module tb_reset_release;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic host_rst_n, sw_rst, sentry_rst_ctl, ip_rst_n;

  reset_release u_dut (.clk, .host_rst_n, .sw_rst, .sentry_rst_ctl, .ip_rst_n);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: rising edges seen since every reset source was released
  int free_edges = 0;
  wire free_now = host_rst_n && !sw_rst && !sentry_rst_ctl;
  always @(posedge clk or negedge free_now)
    if (!free_now) free_edges <= 0;
    else if (free_edges < 2) free_edges <= free_edges + 1;

  task automatic release_after(input int expect_edges);
    int n;
    n = 0;
    while (!ip_rst_n && n < 10) begin @(posedge clk); #1; n++; end
    chk(n == expect_edges, $sformatf("released after %0d edges (want %0d)", n, expect_edges));
  endtask

  initial begin
    host_rst_n = 0; sw_rst = 0; sentry_rst_ctl = 1;
    repeat (3) @(negedge clk);
    chk(!ip_rst_n, "held in host reset");
    host_rst_n = 1;
    repeat (4) @(negedge clk);
    chk(!ip_rst_n, "held by SENTRY RST CTL after host release");
    sentry_rst_ctl = 0;
    release_after(2);
    @(negedge clk); sw_rst = 1; #1;
    chk(!ip_rst_n, "software reset asserts immediately");
    @(negedge clk); sw_rst = 0;
    release_after(2);
    @(negedge clk); sentry_rst_ctl = 1; #1;
    chk(!ip_rst_n, "SENTRY RST CTL asserts immediately");
    @(negedge clk); sentry_rst_ctl = 0; host_rst_n = 0;
    repeat (3) @(negedge clk);
    chk(!ip_rst_n, "host reset holds");
    // random sequences: the IP leaves reset two clock edges after every
    // source has released it, and enters it at once when any source asserts
    host_rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) host_rst_n     = $urandom_range(0, 5) != 0;
      if ($urandom_range(0, 3) == 0) sw_rst         = $urandom_range(0, 4) == 0;
      if ($urandom_range(0, 3) == 0) sentry_rst_ctl = $urandom_range(0, 3) == 0;
      #1 chk(ip_rst_n == (free_edges >= 2 && free_now), $sformatf("random step %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
