// slbiu_lhr_update: finds the LHR to update when an offloaded branch resolves.
//
// At branch resolution the BPU presents the branch PC and its outcome. The
// unit runs a second fully associative match over the CAM PC fields (its own
// slbiu_lookup instance, so that an update never competes with a prediction
// lookup) and raises the shift enable of the matching entry; the CAM then
// shifts the outcome bit into that entry's LHR, newest bit at position 0.
// hit_o tells the BPU that the branch belongs to the SLBIU, so the primary
// predictor must not update its state for it. Combinational.
//
// Updating only LHRs during execution, from resolved outcomes, follows the
// source; the second match port and the shift organisation are this design's
// choices (the source omits this unit from its block diagram).
module slbiu_lhr_update #(
  parameter int unsigned N = slbiu_pkg::SLBIU_N,
  parameter int unsigned P = slbiu_pkg::SLBIU_P
) (
  input  logic                  resolve_valid_i,
  input  logic [P-1:0]          resolve_pc_i,
  input  logic                  resolve_taken_i,
  input  logic [N-1:0][P-1:0]   entry_pc_i,
  input  logic [N-1:0]          entry_valid_i,
  output logic [N-1:0]          shift_en_o,   // one-hot or zero
  output logic                  shift_bit_o,  // 1 = taken
  output logic                  hit_o
);

  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1;

  logic          hit;
  logic [N-1:0]  match;
  logic [NW-1:0] idx;

  slbiu_lookup #(.N(N), .P(P)) u_match (
    .pc_i          (resolve_pc_i),
    .entry_pc_i    (entry_pc_i),
    .entry_valid_i (entry_valid_i),
    .hit_o         (hit),
    .match_o       (match),
    .idx_o         (idx)
  );

  // Only the priority-selected entry is written, so a duplicated PC can
  // never shift two LHRs.
  always_comb begin
    shift_en_o = '0;
    if (resolve_valid_i && hit) shift_en_o[idx] = 1'b1;
  end

  assign shift_bit_o = resolve_taken_i;
  assign hit_o       = resolve_valid_i && hit;

endmodule
