// tb_test_wrapper: checks functional pass-through, SCM access priority,
// capture of inputs and IP outputs, serial shift from tdi to tdo over all
// 64 cells, and update/test_mode driving the IP inputs and functional outputs,
// over 20 rounds of random data.
module tb_test_wrapper;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] func_in, func_out, ip_in, ip_out, scm_in;
  logic scm_sel, test_mode, capture, shift, update, tdi, tdo;

  test_wrapper u_dut (.clk, .rst_n, .func_in, .func_out, .ip_in, .ip_out, .scm_sel, .scm_in,
                      .test_mode, .capture, .shift, .update, .tdi, .tdo);

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

  logic [63:0] got, pat;

  // one full scan round with random data
  task automatic scan_round();
    logic [31:0] fi, io, si;
    fi = $urandom; io = $urandom; si = $urandom;
    func_in = fi; ip_out = io; scm_in = si;
    {scm_sel, test_mode, capture, shift, update} = '0;
    #1 chk(ip_in == fi && func_out == io, "functional pass-through");
    scm_sel = 1; test_mode = 1'($urandom_range(0, 1));
    #1 chk(ip_in == si, "SCM access has priority");
    scm_sel = 0; test_mode = 0;
    @(negedge clk);
    capture = 1; @(negedge clk); capture = 0;
    chk(tdo == fi[0], "tdo shows first input cell after capture");
    // the chain holds without capture or shift
    repeat ($urandom_range(0, 3)) @(negedge clk);
    chk(tdo == fi[0], "chain holds when idle");
    func_in = ~fi;                       // must not disturb the captured chain
    shift = 1;
    pat = {$urandom(), $urandom()};
    for (int i = 0; i < 64; i++) begin
      got[i] = tdo;
      tdi = pat[i];
      @(negedge clk);
    end
    shift = 0;
    chk(got == {io, fi}, "captured chain shifted out in order");
    update = 1; @(negedge clk); update = 0;
    #1 chk(ip_in == ~fi, "update alone does not change the IP inputs");
    test_mode = 1;
    #1 chk(ip_in == pat[31:0], "test_mode drives the IP inputs from the update register");
    chk(func_out == pat[63:32], "test_mode drives the functional outputs");
    scm_sel = 1;
    #1 chk(ip_in == si, "SCM access overrides test mode");
    scm_sel = 0; test_mode = 0;
  endtask

  initial begin
    {scm_sel, test_mode, capture, shift, update, tdi} = '0;
    func_in = '0; ip_out = '0; scm_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(tdo == 1'b0, "chain reset");
    repeat (20) scan_round();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
