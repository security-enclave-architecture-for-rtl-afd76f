// melpuf_cell: behavioural model of one MeLPUF bit. Not synthesizable logic:
// the real cell is an uninitialised bistable (an inverter loop) whose
// power-up value is set by die-specific doping variation.
//
// Structure (from the paper's schematic): the bistable output feeds input a
// (select 0) of a 2:1 mux, the circuit's own data DIN feeds input b
// (select 1), and the mux select is the control signal. With control = 1 the
// cell is transparent to the circuit; with control = 0 it shows its power-up
// value, which is the PUF response bit. The power-up value is the parameter
// POWERUP here; the noise input flips the read-out to model an unstable cell
// (this hook is this model's addition). Purely combinational.
module melpuf_cell #(
  parameter bit POWERUP = 1'b0
) (
  input  logic din,
  input  logic control,
  input  logic noise,
  output logic q
);
  // Settled state of the inverter loop after power-up.
  logic bistable = POWERUP;

  assign q = control ? din : (bistable ^ noise);
endmodule
