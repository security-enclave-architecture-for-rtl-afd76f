// tb_scm_control: runs the three commands and checks the control sequences
// cycle by cycle: PUF (control low for two cycles, capture in the second),
// UNLOCK (key_start for one cycle, SCM access until key_done), RELOCK (one
// relock pulse), busy/done flags, and that a command while busy is ignored.
module tb_scm_control
  import citadel_pkg::*;
;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, busy, done, puf_control, puf_capture, key_start, key_done, scm_sel, relock;
  scm_cmd_e cmd;

  scm_control u_dut (.clk, .rst_n, .cmd_valid, .cmd, .busy, .done, .puf_control, .puf_capture,
                     .key_start, .key_done, .scm_sel, .relock);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input scm_cmd_e c);
    @(negedge clk); cmd_valid = 1; cmd = c;
    @(negedge clk); cmd_valid = 0; cmd = SCM_NONE;
  endtask

  initial begin
    cmd_valid = 0; cmd = SCM_NONE; key_done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && puf_control && !scm_sel && !relock && !key_start, "idle outputs");
    // PUF
    issue(SCM_PUF);
    chk(busy && !puf_control && !puf_capture, "PUF cycle 1: cells selected");
    @(negedge clk);
    chk(!puf_control && puf_capture, "PUF cycle 2: capture");
    @(negedge clk);
    chk(puf_control && !puf_capture && busy && !done, "PUF finishing");
    @(negedge clk);
    chk(!busy && done, "PUF done");
    // UNLOCK with 16 fragment cycles
    issue(SCM_UNLOCK);
    chk(key_start && scm_sel && !done, "UNLOCK: key_start with SCM access");
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      key_done = (i == 15);
      chk(!key_start && scm_sel, $sformatf("UNLOCK: SCM access during fragment %0d", i));
      if (i == 3) begin
        cmd_valid = 1; cmd = SCM_RELOCK;
      end else begin
        cmd_valid = 0;
      end
    end
    @(negedge clk); key_done = 0; cmd_valid = 0;
    chk(!scm_sel && busy, "UNLOCK: access released after key_done");
    @(negedge clk);
    chk(!busy && done && !relock, "UNLOCK done; relock issued while busy ignored");
    // RELOCK
    issue(SCM_RELOCK);
    chk(relock && busy, "RELOCK pulse");
    @(negedge clk);
    chk(!relock, "RELOCK pulse lasts one cycle");
    @(negedge clk);
    chk(!busy && done, "RELOCK done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
