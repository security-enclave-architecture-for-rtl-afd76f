// tb_citadel_top: end-to-end run of the whole SoC at its default (paper)
// sizes: four wrapped host IPs with 256-bit PUFs and 512-bit keys, 64 KB
// enclave memory, 256-bit lifecycle keys. The testbench plays three parts:
//   * enclave firmware, issuing AXI4-Lite transactions on the enclave port;
//   * the host processor, answering init_handoff with host_init_done and
//     data_request with data_ack;
//   * the off-chip AES, SHA and Ethernet cores, as small register files.
// Sequence: chip birth in the TEST lifecycle (lifecycle keys provisioned,
// bus wake-up, each IP released one at a time, PUF signatures captured,
// ChipID formed and stored, PCM provisioned, ChipID sent out on the
// Ethernet port, unlock keys stored), then a deployment boot (PUF
// re-capture with noise, PCM comparison with error correction, a counterfeit
// IP detected and kept locked, a wrong key trapping an IP, keys applied in
// 16 cycles, data handshake, system access, IP use over the host bus, scan
// test, one IP locked back after a policy violation), then recall and end
// of life with purge of memory and PCM and lockdown of the host.
// Every mechanism is counted; a mechanism that never happened is a failure.
module tb_citadel_top
  import citadel_pkg::*;
;
  localparam int N = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, host_rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t ce_req, aes_req, sha_req, eth_req;
  axil_rsp_t ce_rsp, aes_rsp, sha_rsp, eth_rsp;
  logic ce_irq, init_handoff, host_init_done, data_request, data_ack, sys_access;
  lc_state_e lc_state;
  logic lc_eol, mem_purging;
  logic [N-1:0][255:0] puf_noise;
  logic [N-1:0] test_mode, test_capture, test_shift, test_update, test_tdi, test_tdo;
  logic [N-1:0] ip_unlocked, ip_rst_n;

  citadel_top u_top (.*);
  axil_bfm u_bfm (.clk, .req(ce_req), .rsp(ce_rsp));
  axil_ram_model #(.WORDS(16)) u_aes (.clk, .rst_n, .req(aes_req), .rsp(aes_rsp));
  axil_ram_model #(.WORDS(16)) u_sha (.clk, .rst_n, .req(sha_req), .rsp(sha_rsp));
  axil_ram_model #(.WORDS(16)) u_eth (.clk, .rst_n, .req(eth_req), .rsp(eth_rsp));

  localparam logic [31:0] PCM = 32'h4000_0000, BOOT = 32'h4000_1000, LC = 32'h4000_2000,
                          AES = 32'h4000_3000, SHA = 32'h4000_4000, ETH = 32'h4000_5000,
                          HOST = 32'h8000_0000, CHIPID_ADDR = 32'h0000_0100,
                          KEY_ADDR = 32'h0000_1000;

  // mechanism counters
  typedef enum int {
    M_BUS_ASLEEP, M_HANDOFF, M_RST_GATING, M_PUF, M_CHIPID, M_PCM_PROV, M_AMI_SEND,
    M_LC_STEP, M_LC_REJECT, M_ECC_FIX, M_COUNTERFEIT, M_TRAP, M_UNLOCK, M_DATA_HS,
    M_SYS_ACCESS, M_IP_FUNC, M_SCAN, M_DECERR, M_OFFCHIP, M_EOL_PURGE, M_LOCKDOWN, M_RELOCK, M_NUM
  } mech_e;
  int mech [M_NUM];
  string mech_name [M_NUM] = '{"bus_asleep", "handoff", "rst_gating", "puf_capture", "chipid",
    "pcm_prov", "ami_send", "lc_step", "lc_reject", "ecc_fix", "counterfeit", "trap", "unlock",
    "data_hs", "sys_access", "ip_func", "scan", "decerr", "offchip", "eol_purge", "lockdown", "relock"};

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // key fragment cycles seen by each wrapped IP
  int frag_cnt [N];
  for (genvar g = 0; g < N; g++) begin : g_mon
    always @(posedge clk)
      if (rst_n && host_rst_n && u_top.g_wrap[g].u_wrap.frag_valid && u_top.g_wrap[g].u_wrap.scm_sel)
        frag_cnt[g]++;
  end
  int purge_cycles = 0;
  always @(posedge clk) if (rst_n && mem_purging) purge_cycles++;

  // host processor model
  initial begin
    host_init_done = 0; data_ack = 0;
    forever begin
      @(posedge clk);
      if (init_handoff && !host_init_done) begin
        repeat (20) @(posedge clk);
        host_init_done = 1;
      end
      if (data_request && !data_ack) begin
        repeat (5) @(posedge clk);
        data_ack = 1;
      end else if (!data_request && data_ack) data_ack = 0;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------- firmware helpers ----------
  logic [1:0] r; logic [31:0] d; int cyc;

  task automatic wr(input logic [31:0] a, input logic [31:0] v);
    u_bfm.write(a, v, r);
    chk(r == RESP_OKAY, $sformatf("write %h okay", a));
  endtask
  task automatic rd(input logic [31:0] a, output logic [31:0] v);
    u_bfm.read(a, v, r, cyc);
    chk(r == RESP_OKAY, $sformatf("read %h okay", a));
  endtask
  function automatic logic [31:0] wrap(input int i, input logic [31:0] off);
    return HOST + 32'(i) * 32'h1000 + off;
  endfunction
  task automatic wait_irq(input int bitn);
    int n = 0;
    while (!ce_irq && n < 1000) begin @(posedge clk); n++; end
    chk(ce_irq, "interrupt raised");
    rd(BOOT + 8, d);
    chk(d[bitn], "expected event pending");
    wr(BOOT + 8, d);
  endtask
  task automatic scm(input int i, input scm_cmd_e c);
    wr(wrap(i, 0), 32'(c));
    do rd(wrap(i, 4), d); while (d[0]);
  endtask
  task automatic capture_sig(input int i, output logic [255:0] s);
    logic [31:0] w;
    scm(i, SCM_PUF);
    for (int k = 0; k < 8; k++) begin rd(wrap(i, 32'h100 + 32'(4 * k)), w); s[k*32 +: 32] = w; end
  endtask
  task automatic pcm_instr(input pcm_instr_e op);
    wr(PCM + 4, 32'(op));
    do rd(PCM + 32'h0C, d); while (d[0]);
  endtask
  task automatic lc_request(input lc_state_e t, input logic [255:0] k);
    for (int w = 0; w < 8; w++) wr(LC + 32'h40 + 32'(4 * w), k[w*32 +: 32]);
    wr(LC + 4, 32'(t));
    rd(LC + 8, d);
  endtask

  logic [255:0] lc_key [5];
  logic [255:0] sig [N], chipid;

  initial begin
    logic [255:0] s;
    logic [511:0] key;
    logic [63:0] got;
    logic [31:0] kaddr;
    logic fixed;
    logic [3:0] gate;
    foreach (mech[m]) mech[m] = 0;
    foreach (frag_cnt[g]) frag_cnt[g] = 0;
    puf_noise = '0;
    {test_mode, test_capture, test_shift, test_update, test_tdi} = '0;
    for (int t = 1; t < 5; t++) for (int w = 0; w < 8; w++) lc_key[t][w*32 +: 32] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1; host_rst_n = 1;
    repeat (2) @(posedge clk);

    // ===== chip birth (TEST lifecycle) =====
    rd(LC, d);
    chk(d[2:0] == 3'(LC_TEST) && !lc_eol, "device starts in the TEST lifecycle");
    for (int t = 1; t < 5; t++)
      for (int w = 0; w < 8; w++) wr(LC + 32'h100 + 32'(32 * t + 4 * w), lc_key[t][w*32 +: 32]);
    chk(ip_rst_n == '0, "all host IPs held in reset at power-on");
    // stage 1: host bus asleep, host IPs not reachable
    u_bfm.read(wrap(0, 4), d, r, cyc);
    chk(r == RESP_SLVERR, "host bus refused before wake-up");
    if (r == RESP_SLVERR) mech[M_BUS_ASLEEP]++;
    // stage 1 -> 2: hand off, host wakes the bus
    wr(BOOT + 32'h0C, 32'h3);
    wr(BOOT, 32'h1);
    chk(init_handoff, "INIT_handoff asserted");
    wait_irq(0);
    rd(BOOT + 32'h10, d);
    chk(d[2], "host bus awake");
    if (d[2]) mech[M_HANDOFF]++;
    // stage 3: each IP released alone, PUF captured, PCM provisioned
    chipid = '0;
    for (int i = 0; i < N; i++) begin
      wr(BOOT + 4, 32'(~(1 << i)) & 32'hF);
      repeat (4) @(posedge clk);
      chk(ip_rst_n == 4'(1 << i), $sformatf("only IP %0d out of reset", i));
      if (ip_rst_n == 4'(1 << i)) mech[M_RST_GATING]++;
      capture_sig(i, sig[i]);
      mech[M_PUF]++;
      chipid ^= sig[i];
      wr(PCM + 0, 32'(i + 1));
      wr(PCM + 8, 32'(i));
      pcm_instr(PCM_PROV_IP_ID);
      for (int w = 0; w < 8; w++) wr(PCM + 32'h100 + 32'(4 * w), sig[i][w*32 +: 32]);
      pcm_instr(PCM_PROV_EXP);
      wr(PCM + 32'h100, KEY_ADDR + 32'(64 * i));   // control word: where the IP's key lives
      pcm_instr(PCM_PROV_CTL);
      rd(PCM + 32'h0C, d);
      chk(!d[2], "PCM provisioning without error");
      if (!d[2]) mech[M_PCM_PROV]++;
      wr(BOOT + 4, 32'hF);
    end
    for (int i = 1; i < N; i++) chk(sig[i] != sig[0], "IP signatures differ");
    // ChipID to enclave memory and out to the manufacturer over Ethernet
    for (int w = 0; w < 8; w++) begin
      wr(CHIPID_ADDR + 32'(4 * w), chipid[w*32 +: 32]);
      wr(ETH + 32'(4 * w), chipid[w*32 +: 32]);
    end
    for (int w = 0; w < 8; w++) begin rd(CHIPID_ADDR + 32'(4 * w), d); s[w*32 +: 32] = d; end
    chk(s == chipid, "ChipID stored");
    if (s == chipid) mech[M_CHIPID]++;
    chk(u_eth.writes == 8 && u_eth.regs[3] == chipid[127:96], "ChipID sent on Ethernet");
    if (u_eth.writes == 8) mech[M_AMI_SEND]++;
    // unlock keys delivered by the manufacturer, kept in enclave memory
    for (int i = 0; i < N; i++) begin
      key = 512'(ip_obf_key(i));
      for (int w = 0; w < 16; w++) wr(KEY_ADDR + 32'(64 * i + 4 * w), key[w*32 +: 32]);
    end
    // TEST -> OEM -> DEPLOY
    lc_request(LC_OEM, lc_key[LC_OEM]);
    chk(d[0] && lc_state == LC_OEM, "TEST -> OEM");
    if (lc_state == LC_OEM) mech[M_LC_STEP]++;
    u_bfm.write(LC + 32'h140, 32'h0, r);
    chk(r == RESP_SLVERR, "lifecycle keys cannot be rewritten after TEST");
    lc_request(LC_DEPLOY, lc_key[LC_DEPLOY]);
    chk(d[0] && lc_state == LC_DEPLOY, "OEM -> DEPLOY (keys locked after TEST)");
    if (lc_state == LC_DEPLOY) mech[M_LC_STEP]++;

    // ===== deployment boot: authenticate and unlock =====
    puf_noise[1][5] = 1'b1; puf_noise[1][100] = 1'b1; puf_noise[1][250] = 1'b1;  // ageing
    puf_noise[3] = {8{32'hDEAD_BEEF}};                                               // counterfeit
    gate = 4'hF;
    for (int i = 0; i < N; i++) begin
      gate[i] = 1'b0;                      // release this IP; unlocked ones stay released
      wr(BOOT + 4, 32'(gate));
      capture_sig(i, s);
      for (int w = 0; w < 8; w++) wr(PCM + 32'h200 + 32'(4 * w), s[w*32 +: 32]);
      wr(PCM + 0, 32'(i + 1));
      pcm_instr(PCM_COMPARE);
      rd(PCM + 32'h0C, d);
      fixed = d[3];
      rd(PCM + 32'h14, d);
      if (fixed && d[0]) mech[M_ECC_FIX]++;
      if (i == 3) begin
        chk(!d[0], "counterfeit IP fails authentication");
        if (!d[0]) mech[M_COUNTERFEIT]++;
        gate[i] = 1'b1;                    // stays in reset and locked
        wr(BOOT + 4, 32'(gate));
        continue;
      end
      chk(d[0], $sformatf("IP %0d authenticated", i));
      pcm_instr(PCM_GET_CTL);
      rd(PCM + 32'h10, d);
      chk(d == KEY_ADDR + 32'(64 * i), "control word gives the key location");
      kaddr = d;
      if (i == 0) begin
        // a wrong key sends the IP into its trap state
        for (int w = 0; w < 16; w++) wr(wrap(i, 32'h100 + 32'(4 * (8 + w))), $urandom);
        scm(i, SCM_UNLOCK);
        chk(!ip_unlocked[i], "wrong key does not unlock");
        if (!ip_unlocked[i] && u_top.g_wrap[0].u_wrap.u_ip.state == 2'd1)
          mech[M_TRAP]++;
        scm(i, SCM_RELOCK);
      end
      for (int w = 0; w < 16; w++) begin
        rd(kaddr + 32'(4 * w), d);
        wr(wrap(i, 32'h100 + 32'(4 * (8 + w))), d);
      end
      frag_cnt[i] = 0;
      scm(i, SCM_UNLOCK);
      chk(ip_unlocked[i], $sformatf("IP %0d unlocked", i));
      chk(frag_cnt[i] == 16, $sformatf("512-bit key applied in 16 cycles (got %0d)", frag_cnt[i]));
      if (ip_unlocked[i]) mech[M_UNLOCK]++;
      wr(wrap(i, 32'h0), 32'h200);         // clear the key from the buffer
      // data request handshake with the host
      wr(BOOT, 32'h5);
      wait_irq(1);
      wr(BOOT, 32'h1);
      mech[M_DATA_HS]++;
    end
    chk(ip_unlocked == 4'b0111, "genuine IPs unlocked, counterfeit locked");
    // stage 3 -> 4: hand system access to the host, genuine IPs out of reset
    wr(BOOT, 32'h3);
    repeat (4) @(posedge clk);
    chk(sys_access && ip_rst_n == 4'b0111, "system access granted");
    if (sys_access) mech[M_SYS_ACCESS]++;
    // use the IPs
    wr(wrap(2, 8), 32'd1000);
    wr(wrap(2, 8), 32'd234);
    rd(wrap(2, 32'hC), d);
    chk(d == 32'd1234, $sformatf("unlocked IP 2 computes (%0d)", d));
    if (d == 32'd1234) mech[M_IP_FUNC]++;
    // scan test of IP 2's boundary
    @(negedge clk); test_capture[2] = 1; @(negedge clk); test_capture[2] = 0; test_shift[2] = 1;
    for (int b = 0; b < 64; b++) begin got[b] = test_tdo[2]; @(negedge clk); end
    test_shift[2] = 0;
    chk(got[63:32] == 32'd1234 && got[31:0] == 32'd234, "scan chain captures IP 2 ports");
    if (got[63:32] == 32'd1234) mech[M_SCAN]++;
    // off-chip cores and unmapped space
    wr(AES + 4, 32'hA5);
    wr(SHA + 8, 32'h5A);
    rd(AES + 4, d);
    chk(d == 32'hA5 && u_sha.writes == 1, "AES and SHA ports reached");
    if (d == 32'hA5) mech[M_OFFCHIP]++;
    u_bfm.read(32'h4000_8000, d, r, cyc);
    chk(r == RESP_DECERR, "unmapped address -> DECERR");
    if (r == RESP_DECERR) mech[M_DECERR]++;
    // a policy violation: the firmware locks IP 1 back into its obfuscated space
    scm(1, SCM_RELOCK);
    chk(ip_unlocked == 4'b0101, "IP 1 locked back, IPs 0 and 2 still unlocked");
    if (ip_unlocked == 4'b0101) mech[M_RELOCK]++;

    // ===== recall and end of life =====
    lc_request(LC_EOL, lc_key[LC_EOL]);
    chk(d[1] && lc_state == LC_DEPLOY, "DEPLOY -> EOL refused");
    if (d[1]) mech[M_LC_REJECT]++;
    lc_request(LC_RECALL, lc_key[LC_OEM]);
    chk(d[1] && lc_state == LC_DEPLOY, "wrong key refused");
    if (d[1]) mech[M_LC_REJECT]++;
    lc_request(LC_RECALL, lc_key[LC_RECALL]);
    chk(lc_state == LC_RECALL, "DEPLOY -> RECALL");
    if (lc_state == LC_RECALL) mech[M_LC_STEP]++;
    purge_cycles = 0;
    lc_request(LC_EOL, lc_key[LC_EOL]);
    chk(lc_state == LC_EOL && lc_eol, "RECALL -> EOL");
    if (lc_eol) mech[M_LC_STEP]++;
    // truncated boot: the host is locked out
    repeat (4) @(posedge clk);
    chk(!sys_access && ip_rst_n == '0 && ip_unlocked == '0, "end of life: every host IP held and locked");
    u_bfm.write(BOOT, 32'h3, r);
    chk(r == RESP_SLVERR && !sys_access, "boot control locked down");
    if (r == RESP_SLVERR && ip_rst_n == '0) mech[M_LOCKDOWN]++;
    while (mem_purging) @(posedge clk);
    chk(purge_cycles == 16384, $sformatf("memory swept one word per cycle (%0d)", purge_cycles));
    rd(CHIPID_ADDR, d);
    chk(d == 0, "ChipID erased");
    rd(KEY_ADDR, s[31:0]);
    chk(s[31:0] == 0, "IP keys erased");
    wr(PCM + 0, 32'd1);
    pcm_instr(PCM_GET_CTL);
    rd(PCM + 32'h0C, d);
    chk(d[2], "PCM storage erased");
    if (d[2] && purge_cycles == 16384) mech[M_EOL_PURGE]++;
    lc_request(LC_OEM, lc_key[LC_OEM]);
    chk(lc_state == LC_EOL, "no way out of EOL");

    for (int m = 0; m < M_NUM; m++) begin
      checks++;
      if (mech[m] == 0) begin failures++; $display("FAIL: mechanism %s never happened", mech_name[m]); end
      else $display("mechanism %-12s x%0d", mech_name[m], mech[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
