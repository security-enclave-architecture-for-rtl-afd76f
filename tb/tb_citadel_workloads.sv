// tb_citadel_workloads: replays the ChipID-size and key-size sweeps of the
// architecture's delay study on the whole chip. Each run enrols, authenticates
// (with one aged PUF cell) and unlocks one host IP, checking the PCM
// comparison time (PUF_BITS/16 cycles) and the key application time
// (ceil(KEY_BITS/32) cycles). Sizes, as {ChipID bits, key bits}: {128, 128},
// {256, 192}, {512, 2048}, {512, 1024}, {1024, 256}, {2048, 512}.
module tb_citadel_workloads;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int NR = 6;
  logic [NR-1:0] done;
  int c [NR], f [NR], cc [NR], kc [NR];

  citadel_workload_run #(.PUF_BITS(128), .KEY_BITS(128))  u_r0 (.clk, .done(done[0]), .checks(c[0]), .failures(f[0]), .compare_cycles(cc[0]), .key_cycles(kc[0]));
  citadel_workload_run #(.PUF_BITS(256), .KEY_BITS(192))  u_r1 (.clk, .done(done[1]), .checks(c[1]), .failures(f[1]), .compare_cycles(cc[1]), .key_cycles(kc[1]));
  citadel_workload_run #(.PUF_BITS(512), .KEY_BITS(2048)) u_r2 (.clk, .done(done[2]), .checks(c[2]), .failures(f[2]), .compare_cycles(cc[2]), .key_cycles(kc[2]));
  citadel_workload_run #(.PUF_BITS(512), .KEY_BITS(1024)) u_r3 (.clk, .done(done[3]), .checks(c[3]), .failures(f[3]), .compare_cycles(cc[3]), .key_cycles(kc[3]));
  citadel_workload_run #(.PUF_BITS(1024), .KEY_BITS(256)) u_r4 (.clk, .done(done[4]), .checks(c[4]), .failures(f[4]), .compare_cycles(cc[4]), .key_cycles(kc[4]));
  citadel_workload_run #(.PUF_BITS(2048), .KEY_BITS(512)) u_r5 (.clk, .done(done[5]), .checks(c[5]), .failures(f[5]), .compare_cycles(cc[5]), .key_cycles(kc[5]));

  int checks, failures;

  initial begin
    repeat (100000) @(posedge clk);
    checks = 0; failures = 1;
    for (int i = 0; i < NR; i++) begin checks += c[i]; failures += f[i]; end
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (&done);
    checks = 0; failures = 0;
    for (int i = 0; i < NR; i++) begin
      checks += c[i]; failures += f[i];
      $display("run %0d: compare %0d cycles, key %0d cycles, %0d checks, %0d failures", i, cc[i], kc[i], c[i], f[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
