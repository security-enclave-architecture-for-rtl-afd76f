// key_apply_scm: the key application SCM (SCM2) of a security wrapper.
//
// It unlocks an obfuscated IP by applying the key vector to the IP's inputs
// one fragment per clock cycle. The key is cut into P = ceil(KEY_BITS/IN_W)
// fragments of the IP input width, fragment 0 being key[IN_W-1:0], as the
// paper describes ("fragmented based on the width of the input signal ...
// applied over P clock cycles"). Fragment order and the upper padding with
// zeros are this design's choice.
// Timing: start is sampled when not busy; the key is latched then; frag_valid
// is high for exactly P cycles starting the next cycle; done pulses with the
// last fragment.
module key_apply_scm #(
  parameter int unsigned KEY_BITS = 512,
  parameter int unsigned IN_W     = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [KEY_BITS-1:0] key,
  output logic [IN_W-1:0]     frag,
  output logic                frag_valid,
  output logic                busy,
  output logic                done
);
  localparam int unsigned P  = (KEY_BITS + IN_W - 1) / IN_W;
  localparam int unsigned CW = (P > 1) ? $clog2(P) : 1;

  logic [P*IN_W-1:0] key_q;
  logic [CW-1:0]     cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_q <= '0;
      cnt   <= '0;
      busy  <= 1'b0;
    end else if (!busy) begin
      if (start) begin
        key_q <= (P*IN_W)'(key);
        cnt   <= '0;
        busy  <= 1'b1;
      end
    end else begin
      cnt <= cnt + 1'b1;
      if (cnt == CW'(P - 1)) begin
        busy  <= 1'b0;
        key_q <= '0;  // the key does not linger in the SCM
      end
    end
  end

  assign frag_valid = busy;
  assign frag       = busy ? key_q[cnt*IN_W +: IN_W] : '0;
  assign done       = busy && (cnt == CW'(P - 1));
endmodule
