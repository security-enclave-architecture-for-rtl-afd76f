// test_wrapper: IEEE-1500-style boundary-cell ring around a wrapped IP.
//
// Each IP input and output passes through a boundary cell. The cells form one
// scan chain: bits 0..IN_W-1 are the input cells, the bits above them the
// output cells; tdi enters at the top bit and tdo is bit 0. Controls, sampled on the clock: capture loads
// the chain with the functional inputs and the IP outputs, shift moves it one
// place from tdi towards tdo, update copies it to the update register. In
// test_mode the IP inputs and the functional outputs come from the update
// register instead of the functional side. scm_sel, which has priority, gives
// the security wrapper's SCMs parallel access: the IP inputs are driven from
// scm_in (key application), while IP outputs still flow to func_out.
// The paper builds its wrappers as an extension of the IEEE 1500 wrapper; the
// chain order and control encoding are this design's choice.
module test_wrapper #(
  parameter int unsigned IN_W  = 32,
  parameter int unsigned OUT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  // functional side
  input  logic [IN_W-1:0]  func_in,
  output logic [OUT_W-1:0] func_out,
  // IP side
  output logic [IN_W-1:0]  ip_in,
  input  logic [OUT_W-1:0] ip_out,
  // SCM parallel access
  input  logic             scm_sel,
  input  logic [IN_W-1:0]  scm_in,
  // serial test access
  input  logic             test_mode,
  input  logic             capture,
  input  logic             shift,
  input  logic             update,
  input  logic             tdi,
  output logic             tdo
);
  localparam int unsigned L = IN_W + OUT_W;
  logic [L-1:0] chain, upd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chain <= '0;
      upd   <= '0;
    end else begin
      if (capture)     chain <= {ip_out, func_in};
      else if (shift)  chain <= {tdi, chain[L-1:1]};
      if (update)      upd   <= chain;
    end
  end

  assign tdo = chain[0];

  always_comb begin
    if (scm_sel)        ip_in = scm_in;
    else if (test_mode) ip_in = upd[IN_W-1:0];
    else                ip_in = func_in;
    func_out = test_mode ? upd[L-1:IN_W] : ip_out;
  end
endmodule
