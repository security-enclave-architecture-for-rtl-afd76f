// tb_security_wrapper: one wrapped IP at the paper's sizes (256-bit MeLPUF,
// 512-bit key, 32-bit IP input). Checks reset gating, PUF capture into the
// buffer (signature recomputed from the cell hash, with one noisy cell and
// then random noise patterns),
// unlocking with the right key in 16 fragment cycles, the IP's function once
// unlocked (a random input stream), relock, a wrong key, a command while
// busy, and a serial scan of the boundary cells.
module tb_security_wrapper
  import citadel_pkg::*;
;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [31:0]  SEED = 32'h1000;
  localparam logic [511:0] KEY  = ip_obf_key(0);

  axil_req_t req; axil_rsp_t rsp;
  logic sentry_rst_ctl, test_mode, test_capture, test_shift, test_update, test_tdi, test_tdo;
  logic ip_unlocked, ip_rst_n;
  logic [255:0] puf_noise;

  security_wrapper #(.SEED(SEED), .IP_KEY(KEY)) u_dut (.clk, .rst_n, .req, .rsp, .sentry_rst_ctl,
    .puf_noise, .test_mode, .test_capture, .test_shift, .test_update, .test_tdi, .test_tdo,
    .ip_unlocked, .ip_rst_n);
  axil_bfm u_bfm (.clk, .req, .rsp);

  int frag_cycles = 0;
  always @(posedge clk) if (rst_n && u_dut.frag_valid) frag_cycles++;

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
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [1:0] r; logic [31:0] d; int cyc;

  task automatic command(input scm_cmd_e c);
    u_bfm.write(32'h000, 32'(c), r);
    do u_bfm.read(32'h004, d, r, cyc); while (d[0]);
  endtask

  task automatic load_key(input logic [511:0] k);
    for (int i = 0; i < 16; i++) u_bfm.write(32'h100 + 32'(4 * (8 + i)), k[i*32 +: 32], r);
  endtask

  initial begin
    logic [255:0] expsig, sig;
    logic [63:0] got;
    {test_mode, test_capture, test_shift, test_update, test_tdi} = '0;
    sentry_rst_ctl = 1;
    puf_noise = '0;
    puf_noise[77] = 1'b1;
    for (int i = 0; i < 256; i++) expsig[i] = ref_bit(SEED, i);
    repeat (2) @(posedge clk);
    rst_n = 1;
    u_bfm.read(32'h004, d, r, cyc);
    chk(d[3:0] == 4'b0000, "IP held in reset by SENTRY RST CTL, locked, idle");
    // PUF capture works with the IP held in reset
    command(SCM_PUF);
    for (int w = 0; w < 8; w++) begin u_bfm.read(32'h100 + 32'(4 * w), d, r, cyc); sig[w*32 +: 32] = d; end
    chk(sig == (expsig ^ puf_noise), "PUF signature captured (one noisy cell)");
    u_bfm.read(32'h004, d, r, cyc);
    chk(d[1], "done flag");
    // random noise patterns: the captured signature is the power-up pattern
    // with exactly the noisy cells flipped
    for (int k = 0; k < 5; k++) begin
      for (int w = 0; w < 8; w++) puf_noise[w*32 +: 32] = $urandom & $urandom & $urandom;
      command(SCM_PUF);
      for (int w = 0; w < 8; w++) begin u_bfm.read(32'h100 + 32'(4 * w), d, r, cyc); sig[w*32 +: 32] = d; end
      chk(sig == (expsig ^ puf_noise), "PUF signature with random noise");
    end
    puf_noise = '0;
    // release
    sentry_rst_ctl = 0;
    repeat (3) @(negedge clk);
    u_bfm.read(32'h004, d, r, cyc);
    chk(d[3], "IP out of reset");
    // wrong key
    load_key(KEY ^ (512'h1 << 300));
    frag_cycles = 0;
    command(SCM_UNLOCK);
    chk(!ip_unlocked && frag_cycles == 16, "wrong key: stays locked");
    command(SCM_RELOCK);
    // right key
    load_key(KEY);
    frag_cycles = 0;
    u_bfm.write(32'h000, 32'(SCM_UNLOCK), r);
    u_bfm.write(32'h000, 32'(SCM_RELOCK), r);
    chk(r == RESP_SLVERR, "command while busy refused");
    do u_bfm.read(32'h004, d, r, cyc); while (d[0]);
    chk(ip_unlocked && d[2], "unlocked with the right key");
    chk(frag_cycles == 16, $sformatf("key applied over 16 cycles (got %0d)", frag_cycles));
    // function
    u_bfm.write(32'h008, 32'd40, r);
    u_bfm.write(32'h008, 32'd2, r);
    u_bfm.read(32'h00C, d, r, cyc);
    chk(d == 32'd42, "unlocked IP computes");
    // random stream through the unlocked IP
    begin
      logic [31:0] sum, v;
      sum = 32'd42;
      for (int k = 0; k < 20; k++) begin
        v = $urandom;
        u_bfm.write(32'h008, v, r);
        sum += v;
        u_bfm.read(32'h00C, d, r, cyc);
        chk(d == sum, "running sum");
      end
      u_bfm.write(32'h008, 32'd0 - sum + 32'd42, r);   // back to 42 for the scan below
      u_bfm.write(32'h008, 32'd2, r);
      u_bfm.read(32'h00C, d, r, cyc);
      chk(d == 32'd44, "running sum restored");
      u_bfm.write(32'h008, 32'hFFFF_FFFC, r);
      u_bfm.write(32'h008, 32'd2, r);
    end
    // serial scan: capture inputs and outputs, shift out
    @(negedge clk); test_capture = 1; @(negedge clk); test_capture = 0; test_shift = 1;
    for (int i = 0; i < 64; i++) begin got[i] = test_tdo; @(negedge clk); end
    test_shift = 0;
    chk(got == {32'd42, 32'd2}, "boundary scan sees the IP output and input");
    // software reset through the port map
    u_bfm.write(32'h000, 32'h100, r);
    u_bfm.read(32'h004, d, r, cyc);
    chk(!d[3] && !ip_unlocked, "software reset relocks the IP");
    u_bfm.write(32'h000, 32'h0, r);
    repeat (3) @(negedge clk);
    u_bfm.write(32'h008, 32'h0F0F_0000, r);
    u_bfm.read(32'h00C, d, r, cyc);
    chk(d == ~32'h0F0F_0000, "locked output is corrupted");
    // buffer clear
    u_bfm.write(32'h000, 32'h200, r);
    u_bfm.read(32'h100 + 4 * 8, d, r, cyc);
    chk(d == 0, "buffer cleared");
    u_bfm.read(32'h800, d, r, cyc);
    chk(r == RESP_SLVERR, "unmapped read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
