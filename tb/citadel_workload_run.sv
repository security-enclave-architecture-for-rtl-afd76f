// citadel_workload_run: one authentication-and-unlock run of the whole chip at
// a given ChipID (PUF_BITS) and unlock-key (KEY_BITS) size, used to replay the
// size sweeps of the architecture's delay study. As enclave firmware it wakes
// the host bus, enrols IP 0's PUF signature in the PCM, re-captures it with
// one aged cell, authenticates it and unlocks the IP. It checks that the PCM
// comparison takes PUF_BITS/16 cycles and that the key goes in over
// ceil(KEY_BITS/32) cycles. It reports through its outputs; `done` rises at
// the end.
module citadel_workload_run
  import citadel_pkg::*;
#(
  parameter int unsigned PUF_BITS = 256,
  parameter int unsigned KEY_BITS = 512
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   compare_cycles,
  output int   key_cycles
);
  localparam int N = 4;
  localparam int PW = PUF_BITS / 32;
  localparam int KW = (KEY_BITS + 31) / 32;

  logic rst_n = 0;
  axil_req_t ce_req, aes_req, sha_req, eth_req;
  axil_rsp_t ce_rsp, aes_rsp, sha_rsp, eth_rsp;
  logic ce_irq, init_handoff, host_init_done, data_request, data_ack, sys_access;
  lc_state_e lc_state;
  logic lc_eol, mem_purging;
  logic [N-1:0][PUF_BITS-1:0] puf_noise;
  logic [N-1:0] test_tdo, ip_unlocked, ip_rst_n;

  citadel_top #(.PUF_BITS(PUF_BITS), .KEY_BITS(KEY_BITS)) u_top (
    .clk, .rst_n, .host_rst_n(rst_n), .ce_req, .ce_rsp, .ce_irq,
    .aes_req, .aes_rsp, .sha_req, .sha_rsp, .eth_req, .eth_rsp,
    .init_handoff, .host_init_done, .data_request, .data_ack, .sys_access,
    .lc_state, .lc_eol, .mem_purging, .puf_noise,
    .test_mode('0), .test_capture('0), .test_shift('0), .test_update('0), .test_tdi('0),
    .test_tdo, .ip_unlocked, .ip_rst_n
  );
  axil_bfm u_bfm (.clk, .req(ce_req), .rsp(ce_rsp));
  axil_ram_model #(.WORDS(4)) u_aes (.clk, .rst_n, .req(aes_req), .rsp(aes_rsp));
  axil_ram_model #(.WORDS(4)) u_sha (.clk, .rst_n, .req(sha_req), .rsp(sha_rsp));
  axil_ram_model #(.WORDS(4)) u_eth (.clk, .rst_n, .req(eth_req), .rsp(eth_rsp));

  assign host_init_done = init_handoff;   // host wakes its bus at once
  assign data_ack       = data_request;

  // cycle counters on the PCM busy flag and IP 0's key strobe
  always @(posedge clk) if (rst_n && u_top.u_pcm.busy) compare_cycles++;
  always @(posedge clk)
    if (rst_n && u_top.g_wrap[0].u_wrap.frag_valid && u_top.g_wrap[0].u_wrap.scm_sel) key_cycles++;

  localparam logic [31:0] PCM = 32'h4000_0000, BOOT = 32'h4000_1000, HOST = 32'h8000_0000;
  logic [1:0] r; logic [31:0] d; int cyc;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL (PUF %0d, key %0d): %s", PUF_BITS, KEY_BITS, msg); end
  endtask
  task automatic wr(input logic [31:0] a, input logic [31:0] v);
    u_bfm.write(a, v, r);
    chk(r == RESP_OKAY, $sformatf("write %h", a));
  endtask
  task automatic rd(input logic [31:0] a, output logic [31:0] v);
    u_bfm.read(a, v, r, cyc);
    chk(r == RESP_OKAY, $sformatf("read %h", a));
  endtask
  task automatic scm(input scm_cmd_e c);
    wr(HOST, 32'(c));
    do rd(HOST + 4, d); while (d[0]);
  endtask

  initial begin
    logic [PUF_BITS-1:0] sig;
    logic [KEY_BITS-1:0] key;
    done = 0; checks = 0; failures = 0; compare_cycles = 0; key_cycles = 0;
    puf_noise = '0;
    key = KEY_BITS'(ip_obf_key(0));
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    wr(BOOT, 32'h1);                     // hand off; host answers at once
    repeat (6) @(posedge clk);
    wr(BOOT + 4, 32'hE);                 // release IP 0 only
    // enrolment
    scm(SCM_PUF);
    for (int w = 0; w < PW; w++) begin rd(HOST + 32'h100 + 32'(4 * w), d); sig[w*32 +: 32] = d; end
    wr(PCM + 0, 32'd7);
    wr(PCM + 8, 32'd0);
    wr(PCM + 4, 32'(PCM_PROV_IP_ID));
    for (int w = 0; w < PW; w++) wr(PCM + 32'h100 + 32'(4 * w), sig[w*32 +: 32]);
    wr(PCM + 4, 32'(PCM_PROV_EXP));
    // authentication with one aged cell
    puf_noise[0][PUF_BITS - 3] = 1'b1;
    scm(SCM_PUF);
    for (int w = 0; w < PW; w++) begin rd(HOST + 32'h100 + 32'(4 * w), d); sig[w*32 +: 32] = d; end
    for (int w = 0; w < PW; w++) wr(PCM + 32'h200 + 32'(4 * w), sig[w*32 +: 32]);
    compare_cycles = 0;
    wr(PCM + 4, 32'(PCM_COMPARE));
    do rd(PCM + 32'h0C, d); while (d[0]);
    chk(d[3] && !d[4], "aged bit corrected");
    rd(PCM + 32'h14, d);
    chk(d[0], "IP authenticated");
    chk(compare_cycles == PUF_BITS / 16,
        $sformatf("comparison in %0d cycles (got %0d)", PUF_BITS / 16, compare_cycles));
    // unlock
    for (int w = 0; w < KW; w++) wr(HOST + 32'h100 + 32'(4 * (PW + w)), 32'(key >> (32 * w)));
    key_cycles = 0;
    scm(SCM_UNLOCK);
    chk(ip_unlocked[0], "IP unlocked");
    chk(key_cycles == KW, $sformatf("key applied in %0d cycles (got %0d)", KW, key_cycles));
    wr(HOST + 8, 32'd5);
    wr(HOST + 8, 32'd6);
    rd(HOST + 32'hC, d);
    chk(d == 32'd11, "unlocked IP computes");
    done = 1;
  end
endmodule
