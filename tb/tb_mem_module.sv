// tb_mem_module: 64 KB memory: random word writes and read-back over the
// whole address range, byte strobes, and the end-of-life purge, which must
// take BYTES/4 cycles, answer SLVERR meanwhile, and leave every word zero.
module tb_mem_module
  import citadel_pkg::*;
;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t req; axil_rsp_t rsp;
  logic purge, purging;

  mem_module u_dut (.clk, .rst_n, .req, .rsp, .purge, .purging);
  axil_bfm u_bfm (.clk, .req, .rsp);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] r; logic [31:0] d; int cyc, n;
    logic [31:0] addr [64]; logic [31:0] val [64];
    purge = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      addr[i] = (i == 0) ? 32'h0 : (i == 1) ? 32'hFFFC : {16'd0, 16'($urandom() & 32'hFFFC)};
      addr[i] = addr[i] | 32'(i * 4) << 8 & 32'hFFFC;
      val[i] = $urandom();
    end
    for (int i = 0; i < 64; i++) begin
      u_bfm.write(addr[i], val[i], r);
      chk(r == RESP_OKAY, "write OKAY");
    end
    for (int i = 63; i >= 0; i--) begin
      // a later write to the same address wins
      int last; last = i;
      for (int j = i + 1; j < 64; j++) if (addr[j] == addr[i]) last = j;
      u_bfm.read(addr[i], d, r, cyc);
      chk(d == val[last] && r == RESP_OKAY, $sformatf("read 0x%0h", addr[i]));
    end
    // byte strobes: write a word, then lanes 0 and 2 only
    u_bfm.write(32'h20, 32'h1122_3344, r);
    u_bfm.write_strb(32'h20, 32'hAABB_CCDD, 4'b0101, r);
    u_bfm.read(32'h20, d, r, cyc);
    chk(d == 32'h11BB_33DD, "byte strobes");
    // purge
    @(negedge clk); purge = 1; @(negedge clk); purge = 0;
    n = 0;
    u_bfm.read(32'h0, d, r, cyc);
    chk(r == RESP_SLVERR && d == 0, "SLVERR while purging");
    while (purging) begin @(negedge clk); n++; end
    chk(n > 16000 && n <= 16384, $sformatf("purge takes 16384 cycles (%0d after the read)", n));
    for (int i = 0; i < 64; i++) begin
      u_bfm.read(addr[i], d, r, cyc);
      chk(d == 0 && r == RESP_OKAY, "purged");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
