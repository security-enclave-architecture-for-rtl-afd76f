// tb_melpuf_scm: checks that the 256-cell bank is transparent with control=1,
// presents the seed-dependent signature with control=0 (expected bits from
// the hash formula, recomputed here), that noise flips single bits, and that
// two seeds give signatures about half a word apart.
module tb_melpuf_scm;
  localparam int N = 256;
  int checks = 0, failures = 0;
  logic [N-1:0] din, noise, qa, qb, expa;
  logic control;

  melpuf_scm #(.PUF_BITS(N), .SEED(32'h1000)) ua (.din, .control, .noise, .q(qa));
  melpuf_scm #(.PUF_BITS(N), .SEED(32'h1001)) ub (.din, .control, .noise, .q(qb));

  function automatic bit ref_bit(input logic [31:0] seed, input int i);
    logic [31:0] h;
    h = (seed ^ (32'(i) * 32'h9E37_79B9)) * 32'h85EB_CA6B;
    h = (h ^ (h >> 13)) * 32'hC2B2_AE35;
    return h[31];
  endfunction

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) expa[i] = ref_bit(32'h1000, i);
    noise = '0;
    control = 1'b1;
    for (int t = 0; t < 4; t++) begin
      din = {8{$urandom()}};
      #1 chk(qa == din && qb == din, "transparent with control=1");
    end
    control = 1'b0;
    #1 chk(qa == expa, "signature of seed 0x1000");
    chk($countones(qa ^ qb) > 64 && $countones(qa ^ qb) < 192, "two seeds differ");
    chk($countones(qa) > 64 && $countones(qa) < 192, "signature is balanced");
    noise[5] = 1'b1; noise[200] = 1'b1;
    #1 chk((qa ^ expa) == noise, "noise flips exactly the marked cells");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
