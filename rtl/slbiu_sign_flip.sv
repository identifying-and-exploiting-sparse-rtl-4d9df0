// slbiu_sign_flip: Sign-Flip(nnz, q).
//
// History outcomes are read as +1 (taken, stored as 1) and -1 (not-taken,
// stored as 0), so the product of a weight with its history bit is the weight
// itself or its negation. Each Q-bit two's-complement weight is sign-extended
// to Q+1 bits first, so that negating the most negative weight (-2^(Q-1))
// cannot overflow. Combinational; second SLBIU pipeline stage.
//
// Flipping on not-taken bits follows the description of the unit; the extra
// output bit is this design's choice.
module slbiu_sign_flip #(
  parameter int unsigned NNZ = slbiu_pkg::SLBIU_NNZ,
  parameter int unsigned Q   = slbiu_pkg::SLBIU_Q
) (
  input  logic [NNZ-1:0][Q-1:0]   w_i,    // signed weights
  input  logic [NNZ-1:0]          sel_i,  // selected history bits, 1 = taken
  output logic [NNZ-1:0][Q:0]     w_o     // signed, +w or -w
);

  for (genvar k = 0; k < NNZ; k++) begin : g_flip
    logic signed [Q:0] w_ext;
    assign w_ext  = (Q+1)'(signed'(w_i[k]));
    assign w_o[k] = sel_i[k] ? w_ext : -w_ext;
  end

endmodule
