// bpu_slbiu: branch prediction unit with an SLBIU beside the primary predictor.
//
// Every conditional branch is looked up in the SLBIU in parallel with the
// primary predictor, which sits outside this module. Three cycles after the
// request the SLBIU reports hit or miss; on a hit its prediction is the final
// taken/not-taken (T/NT) answer, otherwise the primary predictor's. A branch
// that hits is offloaded: when it resolves, primary_update_en_o stays low so
// the primary predictor neither allocates nor trains for it, while the shared
// GHR and the branch's LHR in the SLBIU are still updated.
//
// Interface and timing:
//  * predict_i/pc_i in cycle t; the SLBIU samples the GHR of that cycle.
//  * primary_taken_i must carry the primary prediction of that same branch in
//    cycle t+3; final_valid_o, final_taken_o and final_from_slbiu_o are valid
//    then (final_from_slbiu_o = SLBIU hit).
//  * slbiu_hit_early_o in cycle t+1: the SLBIU holds a hint for the branch
//    requested in cycle t (the lookup result, ahead of the prediction).
//  * resolve_* in any cycle: the GHR and the matching LHR shift at the next
//    edge; primary_update_en_o is combinational.
//  * ghr_o is the shared GHR (GHR_LEN bits, newest at bit 0); the SLBIU reads
//    its lowest GH bits.
//  * load_*: hint load port of the SLBIU CAM (see slbiu_cam).
//
// The arrangement (PC to both predictors, a mux picking the SLBIU on a hit,
// the hit halting the primary update, one GHR for both) follows the source's
// overview. The primary predictor is not part of this design; the fixed
// three-cycle alignment with it and the GHR being updated at resolution are
// this design's choices.
module bpu_slbiu
  import slbiu_pkg::*;
#(
  parameter int unsigned N       = SLBIU_N,
  parameter int unsigned NNZ     = SLBIU_NNZ,
  parameter int unsigned Q       = SLBIU_Q,
  parameter int unsigned P       = SLBIU_P,
  parameter int unsigned LH      = SLBIU_LH,
  parameter int unsigned GH      = SLBIU_GH,
  parameter int unsigned GHR_LEN = 1000,
  localparam int unsigned IW  = $clog2(LH + GH),
  localparam int unsigned NW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SLW = (NNZ > 1) ? $clog2(NNZ) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // prediction
  input  logic                predict_i,
  input  logic [P-1:0]        pc_i,
  input  logic                primary_taken_i,
  output logic                final_valid_o,
  output logic                final_taken_o,
  output logic                final_from_slbiu_o,
  output logic                slbiu_hit_early_o,
  // resolution
  input  logic                resolve_valid_i,
  input  logic [P-1:0]        resolve_pc_i,
  input  logic                resolve_taken_i,
  output logic                primary_update_en_o,
  // shared global history
  output logic [GHR_LEN-1:0]  ghr_o,
  // hint load port
  input  load_op_e            load_op_i,
  input  logic [NW-1:0]       load_entry_i,
  input  logic [SLW-1:0]      load_slot_i,
  input  logic [P-1:0]        load_pc_i,
  input  logic [Q-1:0]        load_weight_i,
  input  logic [IW-1:0]       load_index_i
);

  if (GHR_LEN < GH) begin : g_len_check
    $error("bpu_slbiu: GHR_LEN must be at least GH");
  end

  bpu_ghr #(.LEN(GHR_LEN)) u_ghr (
    .clk      (clk),
    .rst_n    (rst_n),
    .update_i (resolve_valid_i),
    .taken_i  (resolve_taken_i),
    .ghr_o    (ghr_o)
  );

  logic s_valid, s_hit, s_taken, s_resolve_hit;

  slbiu #(.N(N), .NNZ(NNZ), .Q(Q), .P(P), .LH(LH), .GH(GH)) u_slbiu (
    .clk             (clk),
    .rst_n           (rst_n),
    .predict_i       (predict_i),
    .pc_i            (pc_i),
    .ghr_i           (ghr_o[GH-1:0]),
    .lookup_hit_o    (slbiu_hit_early_o),
    .pred_valid_o    (s_valid),
    .pred_hit_o      (s_hit),
    .pred_taken_o    (s_taken),
    .resolve_valid_i (resolve_valid_i),
    .resolve_pc_i    (resolve_pc_i),
    .resolve_taken_i (resolve_taken_i),
    .resolve_hit_o   (s_resolve_hit),
    .load_op_i       (load_op_i),
    .load_entry_i    (load_entry_i),
    .load_slot_i     (load_slot_i),
    .load_pc_i       (load_pc_i),
    .load_weight_i   (load_weight_i),
    .load_index_i    (load_index_i)
  );

  // Final T/NT multiplexer, steered by the SLBIU hit.
  assign final_valid_o      = s_valid;
  assign final_from_slbiu_o = s_hit;
  assign final_taken_o      = s_hit ? s_taken : primary_taken_i;

  // Offloaded branches do not train the primary predictor.
  assign primary_update_en_o = resolve_valid_i && !s_resolve_hit;

endmodule
