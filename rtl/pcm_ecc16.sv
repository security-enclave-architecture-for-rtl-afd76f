// pcm_ecc16: error correction of one 16-bit PUF signature segment.
//
// The PUF Control Module corrects incoming PUF signatures 16 bits at a time,
// with parity bits computed from the expected signature (both from the
// paper). The code is this design's choice: a Hamming(21,16) single-error-
// correcting code. Data bit j sits at the j-th non-power-of-two position
// 3,5,6,7,9,...,21 of the codeword, parity bit k covers the positions whose
// index has bit k set. The syndrome is parity(sig) XOR parity(exp); a
// syndrome that names a data position flips that bit of sig, any other
// non-zero syndrome flags the segment as uncorrectable and leaves it as is.
// Purely combinational.
module pcm_ecc16 (
  input  logic [15:0] sig,
  input  logic [15:0] exp_data,
  output logic [15:0] corrected,
  output logic        fixed,
  output logic        uncorrectable
);
  // Codeword position of data bit j.
  function automatic logic [4:0] pos(input int unsigned j);
    int unsigned p, n;
    p = 0;
    n = 0;
    for (int unsigned c = 1; c <= 21; c++) begin
      if ((c & (c - 1)) != 0) begin
        if (n == j) p = c;
        n++;
      end
    end
    return 5'(p);
  endfunction

  function automatic logic [4:0] parity(input logic [15:0] d);
    logic [4:0] r;
    r = '0;
    for (int unsigned j = 0; j < 16; j++)
      if (d[j]) r ^= pos(j);
    return r;
  endfunction

  logic [4:0] syn;

  always_comb begin
    syn           = parity(sig) ^ parity(exp_data);
    corrected     = sig;
    fixed         = 1'b0;
    uncorrectable = 1'b0;
    if (syn != '0) begin
      uncorrectable = 1'b1;
      for (int unsigned j = 0; j < 16; j++) begin
        if (pos(j) == syn) begin
          corrected[j]  = ~sig[j];
          fixed         = 1'b1;
          uncorrectable = 1'b0;
        end
      end
    end
  end
endmodule
