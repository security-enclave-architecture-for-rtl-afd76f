// tb_pcm: provisions four IPs (ID, expected 256-bit response, control word)
// through the bus and checks GET_CTL, COMPARE with an exact signature, with
// one error in each of several 16-bit segments (corrected, match), with two
// errors in one segment (no match), an unknown IP ID (error), the COMPARE
// latency of 16 segment cycles, and purge.
module tb_pcm
  import citadel_pkg::*;
;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t req;
  axil_rsp_t rsp;
  logic purge;

  pcm u_dut (.clk, .rst_n, .req, .rsp, .purge);
  axil_bfm u_bfm (.clk, .req, .rsp);

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

  logic [1:0] r;
  logic [31:0] d;
  int cyc;

  task automatic wr(input logic [31:0] a, input logic [31:0] v);
    u_bfm.write(a, v, r);
    chk(r == RESP_OKAY, $sformatf("write 0x%0h", a));
  endtask
  task automatic rd(input logic [31:0] a, output logic [31:0] v);
    u_bfm.read(a, v, r, cyc);
  endtask
  // run an instruction and wait until it is done; returns cycles polled
  task automatic run(input pcm_instr_e i, output int polls);
    wr(32'h04, 32'(i));
    polls = 0;
    do begin rd(32'h0C, d); polls++; end while (d[0]);
  endtask

  int busy_cycles = 0;
  always @(posedge clk) if (u_dut.busy) busy_cycles++;

  logic [255:0] expv [4];
  logic [31:0]  ids  [4];
  logic [31:0]  ctls [4];

  task automatic load_sig(input logic [255:0] s);
    for (int w = 0; w < 8; w++) wr(32'h200 + 4 * w, s[w*32 +: 32]);
  endtask

  initial begin
    int p;
    logic [255:0] s;
    purge = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      ids[i]  = 32'hA000 + 32'(i * 7);
      ctls[i] = $urandom();
      for (int w = 0; w < 8; w++) expv[i][w*32 +: 32] = $urandom();
      wr(32'h00, ids[i]);
      wr(32'h08, 32'(3 - i));
      run(PCM_PROV_IP_ID, p);
      for (int w = 0; w < 8; w++) wr(32'h100 + 4 * w, expv[i][w*32 +: 32]);
      run(PCM_PROV_EXP, p);
      wr(32'h100, ctls[i]);
      run(PCM_PROV_CTL, p);
      rd(32'h0C, d);
      chk(d[1] && !d[2], "provisioning ok");
    end
    for (int i = 3; i >= 0; i--) begin
      wr(32'h00, ids[i]);
      run(PCM_GET_CTL, p);
      rd(32'h10, d);
      chk(d == ctls[i], $sformatf("GET_CTL of IP %0d", i));
    end
    // exact signature
    wr(32'h00, ids[2]);
    load_sig(expv[2]);
    wr(32'h04, 32'(PCM_COMPARE));
    // COMPARE: busy for 16 segment cycles; poll status until done
    p = 0;
    do begin rd(32'h0C, d); p++; end while (d[0]);
    rd(32'h14, d);
    chk(d[0] == 1, "exact signature matches");
    // one error in each of 8 segments
    s = expv[2];
    for (int g = 0; g < 16; g += 2) s[g*16 + (g % 16)] ^= 1'b1;
    load_sig(s);
    run(PCM_COMPARE, p);
    rd(32'h14, d);
    chk(d[0] == 1, "single-bit errors corrected, match");
    rd(32'h0C, d);
    chk(d[3] && !d[4], "correction reported");
    // two errors in the last segment
    s = expv[2];
    s[240] ^= 1'b1; s[251] ^= 1'b1;
    load_sig(s);
    run(PCM_COMPARE, p);
    rd(32'h14, d);
    chk(d[0] == 0, "double error in one segment: no match");
    // other IP's response does not match this IP
    load_sig(expv[1]);
    run(PCM_COMPARE, p);
    rd(32'h14, d);
    chk(d[0] == 0, "another IP's response does not match");
    // unknown IP
    wr(32'h00, 32'h5555);
    run(PCM_GET_CTL, p);
    rd(32'h0C, d);
    chk(d[2], "unknown IP ID flagged");
    // latency of COMPARE: busy is seen for 16 cycles after the instruction write
    wr(32'h00, ids[0]);
    load_sig(expv[0]);
    busy_cycles = 0;
    run(PCM_COMPARE, p);
    chk(busy_cycles == 16, $sformatf("COMPARE takes 16 segment cycles (got %0d)", busy_cycles));
    rd(32'h14, d);
    chk(d[0] == 1, "IP 0 matches");
    // purge
    @(negedge clk); purge = 1; @(negedge clk); purge = 0;
    wr(32'h00, ids[0]);
    run(PCM_GET_CTL, p);
    rd(32'h0C, d);
    chk(d[2], "purge erased the storage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
