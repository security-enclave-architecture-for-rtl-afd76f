// reset_release: the reset release switch of a security wrapper.
//
// The wrapped IP leaves reset only when the host has released its reset, the
// wrapper's own software reset bit is clear, and CITADEL does not hold the IP
// through its SENTRY RST CTL line (the paper's reset gating, which lets
// CITADEL keep IPs in reset after the host releases them and trigger one IP
// at a time). The hold is asserted asynchronously and released through a
// two-flop synchroniser, so ip_rst_n rises two clock edges after the last
// holding condition clears; the synchroniser is this design's choice.
module reset_release (
  input  logic clk,
  input  logic host_rst_n,
  input  logic sw_rst,
  input  logic sentry_rst_ctl,
  output logic ip_rst_n
);
  logic hold_n, sync_q;

  assign hold_n = host_rst_n && !sw_rst && !sentry_rst_ctl;

  always_ff @(posedge clk or negedge hold_n) begin
    if (!hold_n) begin
      sync_q   <= 1'b0;
      ip_rst_n <= 1'b0;
    end else begin
      sync_q   <= 1'b1;
      ip_rst_n <= sync_q;
    end
  end
endmodule
