// melpuf_scm: the MeLPUF security countermeasure (SCM1) of a security wrapper,
// a bank of PUF_BITS MeLPUF cells that sit on the wrapped IP's data path.
//
// With control = 1 every cell passes its din bit to q; with control = 0 the
// bank presents its PUF_BITS-bit signature on q, combinationally. The paper
// uses 256-bit MeLPUF instances. The power-up value of cell i stands in for
// die variation and is the bit puf_bit(SEED, i) of a fixed integer hash (a
// per-instance SEED gives each IP its own signature); this hash is the
// model's own device.
module melpuf_scm #(
  parameter int unsigned PUF_BITS = 256,
  parameter logic [31:0] SEED     = 32'h1
) (
  input  logic [PUF_BITS-1:0] din,
  input  logic                control,
  input  logic [PUF_BITS-1:0] noise,
  output logic [PUF_BITS-1:0] q
);
  // Power-up value of cell i: top bit of a multiplicative hash of SEED and i.
  function automatic bit puf_bit(input logic [31:0] seed, input int unsigned i);
    logic [31:0] h;
    h = (seed ^ (i * 32'h9E37_79B9)) * 32'h85EB_CA6B;
    h = (h ^ (h >> 13)) * 32'hC2B2_AE35;
    return h[31];
  endfunction

  for (genvar i = 0; i < PUF_BITS; i++) begin : g_cell
    melpuf_cell #(.POWERUP(puf_bit(SEED, i))) u_cell (
      .din(din[i]), .control(control), .noise(noise[i]), .q(q[i])
    );
  end
endmodule
