// tb_storage_buffer: bus writes with byte strobes, bus reads, SCM masked
// whole-vector writes (SCM wins on a collision), the SCM read vector, an
// out-of-range bus access, and clear.
module tb_storage_buffer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int D = 24;

  logic clear, bus_we;
  logic [4:0] bus_addr, bus_raddr;
  logic [31:0] bus_wdata, bus_rdata;
  logic [3:0] bus_strb;
  logic [D-1:0] scm_we;
  logic [D*32-1:0] scm_wdata, scm_rdata;
  logic [31:0] model [D];

  storage_buffer #(.DEPTH(D)) u_dut (.clk, .rst_n, .clear, .bus_we, .bus_addr, .bus_wdata,
    .bus_strb, .bus_raddr, .bus_rdata, .scm_we, .scm_wdata, .scm_rdata);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; bus_we = 0; scm_we = 0; bus_addr = 0; bus_raddr = 0; bus_wdata = 0; bus_strb = 0;
    scm_wdata = 0;
    for (int i = 0; i < D; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      bus_we = 1'($urandom_range(0, 1));
      bus_addr = 5'($urandom_range(0, D - 1));
      bus_wdata = $urandom();
      bus_strb = 4'($urandom());
      scm_we = '0;
      if ($urandom_range(0, 3) == 0) scm_we = D'({$urandom(), $urandom()});
      for (int i = 0; i < D; i++) scm_wdata[i*32 +: 32] = $urandom();
      @(posedge clk);
      if (bus_we) for (int b = 0; b < 4; b++) if (bus_strb[b]) model[bus_addr][b*8 +: 8] = bus_wdata[b*8 +: 8];
      for (int i = 0; i < D; i++) if (scm_we[i]) model[i] = scm_wdata[i*32 +: 32];
      #1;
      bus_we = 0; scm_we = 0;
      bus_raddr = 5'($urandom_range(0, D - 1));
      #1 chk(bus_rdata == model[bus_raddr], $sformatf("bus read word %0d", bus_raddr));
      for (int i = 0; i < D; i++)
        if (scm_rdata[i*32 +: 32] != model[i]) chk(0, $sformatf("scm view word %0d", i));
      checks++;
    end
    bus_raddr = 5'd30;
    #1 chk(bus_rdata == 0, "out-of-range read returns 0");
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    chk(scm_rdata == '0, "clear empties the buffer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
