// tb_obf_ip: checks the locked IP: locked at power-on with a corrupted
// output; the full correct key sequence unlocks it after exactly P fragments;
// a wrong fragment traps it (the correct key afterwards does not help) until
// relock; relock locks an unlocked IP again; unlocked it accumulates inputs.
module tb_obf_ip
  import citadel_pkg::*;
;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [511:0] K = demo_obf_key();
  logic [31:0] din, dout;
  logic din_valid, key_valid, relock, unlocked;

  obf_ip u_dut (.clk, .rst_n, .din, .din_valid, .key_valid, .relock, .dout, .unlocked);

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

  // Apply fragments 0..n-1 of k, with fragment bad_at (if >= 0) corrupted.
  task automatic apply(input logic [511:0] k, input int n, input int bad_at);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      key_valid = 1;
      din = k[i*32 +: 32] ^ ((i == bad_at) ? 32'h0000_0100 : 32'h0);
      @(negedge clk);
      key_valid = 0;
      if (i < n - 1 || bad_at >= 0) chk(!unlocked, $sformatf("still locked after fragment %0d", i));
    end
  endtask

  initial begin
    din = 0; din_valid = 0; key_valid = 0; relock = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    din = 32'h1234_5678;
    #1 chk(!unlocked && dout == ~din, "locked at power-on, output corrupted");
    // functional input is ignored while locked
    din_valid = 1; @(negedge clk); din_valid = 0;
    // wrong fragment at step 3
    apply(K, 16, 3);
    apply(K, 16, -1);
    chk(!unlocked, "trap: correct key after a wrong one does not unlock");
    @(negedge clk); relock = 1; @(negedge clk); relock = 0;
    apply(K, 15, -1);
    chk(!unlocked, "15 of 16 fragments do not unlock");
    apply(K, 1, 0);
    chk(!unlocked, "restarting the sequence mid-way fails");
    @(negedge clk); relock = 1; @(negedge clk); relock = 0;
    apply(K, 16, -1);
    chk(unlocked, "unlocked after exactly 16 fragments");
    // function: accumulator
    din = 32'd5; din_valid = 1; @(negedge clk);
    din = 32'd7; @(negedge clk); din_valid = 0;
    #1 chk(dout == 32'd12, "accumulates when unlocked");
    @(negedge clk); relock = 1; @(negedge clk); relock = 0;
    din = 32'hA5A5_0000;
    #1 chk(!unlocked && dout == ~din, "relock returns to the locked state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
