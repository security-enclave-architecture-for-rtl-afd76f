// tb_melpuf_cell: checks the MeLPUF cell mux: control=1 passes din (input b),
// control=0 shows the power-up value (input a), flipped by noise, for both
// power-up values.
module tb_melpuf_cell;
  int checks = 0, failures = 0;
  logic din, control, noise;
  logic q0, q1;

  melpuf_cell #(.POWERUP(1'b0)) u0 (.din, .control, .noise, .q(q0));
  melpuf_cell #(.POWERUP(1'b1)) u1 (.din, .control, .noise, .q(q1));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {din, control, noise} = 3'(v);
      #1;
      chk(q0 == (control ? din : (1'b0 ^ noise)), $sformatf("q0 v=%0d", v));
      chk(q1 == (control ? din : (1'b1 ^ noise)), $sformatf("q1 v=%0d", v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
