// tb_lifecycle_ctrl: provisions four 256-bit validation keys in TEST, then
// walks TEST->OEM->DEPLOY->RECALL->OEM->DEPLOY->RECALL->EOL and checks that a
// wrong key, an illegal step and key writes after TEST are all refused (state
// unchanged), and that EOL purges once and erases the keys.
module tb_lifecycle_ctrl
  import citadel_pkg::*;
;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t req; axil_rsp_t rsp;
  lc_state_e state;
  logic eol, purge;
  int purges = 0;
  always @(posedge clk) if (rst_n && purge) purges++;

  lifecycle_ctrl u_dut (.clk, .rst_n, .req, .rsp, .state, .eol, .purge);
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

  logic [255:0] keys [1:4];
  logic [1:0] r;

  task automatic request(input lc_state_e t, input logic [255:0] k);
    for (int i = 0; i < 8; i++) u_bfm.write(32'h40 + 32'(4 * i), k[i*32 +: 32], r);
    u_bfm.write(32'h04, 32'(t), r);
  endtask

  task automatic step(input lc_state_e t, input bit ok);
    lc_state_e prev;
    prev = state;
    request(t, keys[int'(t)]);
    if (ok) chk(state == t, $sformatf("%s -> %s accepted", prev.name(), t.name()));
    else    chk(state == prev, $sformatf("%s -> %s refused", prev.name(), t.name()));
  endtask

  initial begin
    logic [31:0] d; int cyc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(state == LC_TEST && !eol, "born in TEST");
    for (int t = 1; t <= 4; t++) begin
      for (int i = 0; i < 8; i++) keys[t][i*32 +: 32] = $urandom();
      for (int i = 0; i < 8; i++) begin
        u_bfm.write(32'h100 + 32'(32 * t + 4 * i), keys[t][i*32 +: 32], r);
        chk(r == RESP_OKAY, "key provisioning in TEST");
      end
    end
    step(LC_DEPLOY, 0);            // illegal skip
    request(LC_OEM, keys[1] ^ (256'h1 << 200));
    chk(state == LC_TEST, "wrong key refused");
    u_bfm.read(32'h08, d, r, cyc);
    chk(d[1:0] == 2'b10, "rejected flag");
    request(LC_OEM, keys[2]);
    chk(state == LC_TEST, "another lifecycle's key refused");
    step(LC_OEM, 1);
    u_bfm.write(32'h120, 32'h0, r);
    chk(r == RESP_SLVERR, "keys locked after TEST");
    step(LC_TEST, 0);
    step(LC_DEPLOY, 1);
    step(LC_EOL, 0);
    step(LC_RECALL, 1);
    step(LC_OEM, 1);               // re-enrolment
    step(LC_DEPLOY, 1);
    step(LC_RECALL, 1);
    chk(purges == 0, "no purge ahead of EOL");
    step(LC_EOL, 1);
    @(negedge clk);
    chk(eol && purges == 1, "EOL: one purge pulse");
    u_bfm.read(32'h00, d, r, cyc);
    chk(d == 32'h104, "STATE reads EOL with eol bit");
    step(LC_OEM, 0);
    chk(u_dut.lc_key[1] == '0 && u_dut.lc_key[4] == '0, "keys erased at EOL");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
