// slbiu_history_select: History-Select(nnz, l).
//
// An array of NNZ independent L:1 multiplexers. Multiplexer k returns bit
// idx_i[k] of the history vector hist_i, which is the concatenation of the
// global and the local history of the predicted branch. An index at or above
// L (only possible when L is not a power of two) selects 0. Combinational;
// it sits in the second SLBIU pipeline stage.
//
// The multiplexer array is as described for the SLBIU; the out-of-range rule
// is this design's choice.
module slbiu_history_select #(
  parameter int unsigned NNZ = slbiu_pkg::SLBIU_NNZ,
  parameter int unsigned L   = slbiu_pkg::SLBIU_LH + slbiu_pkg::SLBIU_GH,
  localparam int unsigned IW = $clog2(L)
) (
  input  logic [L-1:0]            hist_i,
  input  logic [NNZ-1:0][IW-1:0]  idx_i,
  output logic [NNZ-1:0]          sel_o
);

  for (genvar k = 0; k < NNZ; k++) begin : g_mux
    always_comb begin
      if (32'(idx_i[k]) < L) sel_o[k] = hist_i[idx_i[k]];
      else                   sel_o[k] = 1'b0;
    end
  end

endmodule
