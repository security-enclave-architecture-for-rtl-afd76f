// tb_key_apply_scm: applies a random 512-bit key through 32-bit and 64-bit
// instances and checks every fragment, the fragment order, that frag_valid
// lasts exactly P = 512/W cycles, and that done marks the last fragment.
module tb_key_apply_scm;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [511:0] key;
  logic start32, start64;
  logic [31:0] f32; logic [63:0] f64;
  logic v32, v64, b32, b64, d32, d64;

  key_apply_scm #(.KEY_BITS(512), .IN_W(32)) u32 (.clk, .rst_n, .start(start32), .key,
    .frag(f32), .frag_valid(v32), .busy(b32), .done(d32));
  key_apply_scm #(.KEY_BITS(512), .IN_W(64)) u64 (.clk, .rst_n, .start(start64), .key,
    .frag(f64), .frag_valid(v64), .busy(b64), .done(d64));

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

  task automatic run(input int w);
    int n;
    logic [511:0] k;
    k = key;
    @(negedge clk);
    if (w == 32) start32 = 1; else start64 = 1;
    @(negedge clk);
    start32 = 0; start64 = 0;
    key = ~key;  // key changes after start: the latched copy must be used
    n = 0;
    while ((w == 32) ? v32 : v64) begin
      if (w == 32) begin
        chk(f32 == k[n*32 +: 32], $sformatf("w32 fragment %0d", n));
        chk(d32 == (n == 15), "w32 done on last fragment");
      end else begin
        chk(f64 == k[n*64 +: 64], $sformatf("w64 fragment %0d", n));
        chk(d64 == (n == 7), "w64 done on last fragment");
      end
      n++;
      @(negedge clk);
    end
    chk(n == 512 / w, $sformatf("P cycles for w=%0d: got %0d", w, n));
    chk(!b32 && !b64, "idle afterwards");
  endtask

  initial begin
    start32 = 0; start64 = 0;
    key = {$urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(),
           $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom()};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!v32 && f32 == 0, "no fragment before start");
    run(32);
    run(64);
    run(32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
