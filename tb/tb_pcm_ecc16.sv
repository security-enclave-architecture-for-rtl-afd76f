// tb_pcm_ecc16: for random expected segments, an error-free signature passes
// unchanged, every single-bit error is corrected back to the expected value,
// and a double-bit error is never turned into the expected value.
module tb_pcm_ecc16;
  int checks = 0, failures = 0;
  logic [15:0] sig, exp_data, corrected;
  logic fixed, uncorrectable;

  pcm_ecc16 u_dut (.sig, .exp_data, .corrected, .fixed, .uncorrectable);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20; t++) begin
      exp_data = 16'($urandom());
      sig = exp_data;
      #1 chk(corrected == exp_data && !fixed && !uncorrectable, "no error");
      for (int i = 0; i < 16; i++) begin
        sig = exp_data ^ (16'h1 << i);
        #1 chk(corrected == exp_data && fixed && !uncorrectable, $sformatf("single error bit %0d", i));
      end
      for (int i = 0; i < 16; i++)
        for (int j = i + 1; j < 16; j += 5) begin
          sig = exp_data ^ (16'h1 << i) ^ (16'h1 << j);
          #1 chk(corrected != exp_data && (fixed || uncorrectable), $sformatf("double error %0d,%0d", i, j));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
