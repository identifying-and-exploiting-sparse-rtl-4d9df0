// slbiu_lookup: fully associative PC lookup of the SLBIU CAM.
//
// The branch PC is compared with the PC field of every entry at once; an
// entry matches when it is valid and its PC is equal. hit_o is the OR of the
// matches, match_o the match vector and idx_o the number of the matching
// entry (the lowest one, should the loader ever have placed a PC twice; an
// assertion flags that case). Purely combinational: the enclosing pipeline
// registers the result at the end of its first stage.
//
// The comparison on the full PC (no partial tag) follows the description of
// a fully associative, PC-based CAM; the priority rule for duplicate PCs is
// this design's choice.
module slbiu_lookup #(
  parameter int unsigned N = slbiu_pkg::SLBIU_N,
  parameter int unsigned P = slbiu_pkg::SLBIU_P,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [P-1:0]          pc_i,
  input  logic [N-1:0][P-1:0]   entry_pc_i,
  input  logic [N-1:0]          entry_valid_i,
  output logic                  hit_o,
  output logic [N-1:0]          match_o,
  output logic [NW-1:0]         idx_o
);

  always_comb begin
    for (int unsigned e = 0; e < N; e++)
      match_o[e] = entry_valid_i[e] && (entry_pc_i[e] == pc_i);
  end

  assign hit_o = |match_o;

  // Priority encoder: lowest matching entry.
  always_comb begin
    idx_o = '0;
    for (int e = N - 1; e >= 0; e--)
      if (match_o[e]) idx_o = NW'(e);
  end

  // A PC is loaded into at most one entry.
  always_comb assert ($onehot0(match_o) || $isunknown(match_o))
    else $error("slbiu_lookup: PC matches more than one CAM entry");

endmodule
