// slbiu: Sparse Linear Branch Inference Unit.
//
// Predicts the direction of up to N offloaded branches, each from an offline
// trained sparse linear model ("sparsity hint"): taken when
//     intercept + sum_k w[k] * x[ind[k]]  >= 0,
// where x is the concatenated history {LHR, GHR} read as +1 (taken) and
// -1 (not-taken). History index i < GH names GHR bit i, index GH + j names
// LHR bit j; bit 0 of either history is the newest outcome.
//
// Three pipeline stages, one request accepted per cycle:
//   1. fully associative lookup of pc_i in the CAM; the hit, the entry number
//      and the GHR presented with the request are registered;
//   2. entry-wide CAM read, {LHR, GHR} concatenation, History-Select and
//      Sign-Flip; the NNZ signed products and the intercept are registered;
//   3. adder tree and sign test; the prediction is registered.
// A request presented with predict_i in cycle t is answered in cycle t+3 with
// pred_valid_o = 1, pred_hit_o and (on a hit) pred_taken_o. The lookup result
// alone is available earlier, as lookup_hit_o in cycle t+1, for a primary
// predictor that wants to know early that a branch is offloaded. The data
// registers of stages 1 and 2 load only for a hit, standing in for the
// hit-based clock gating of the select and compute logic; on a miss only the
// valid/hit bits move.
//
// When a branch resolves (resolve_valid_i), a second matcher finds its entry
// and the outcome is shifted into its LHR at the next edge; resolve_hit_o
// (combinational) tells the BPU to keep the primary predictor from updating
// for it. A prediction whose stage 2 falls in the same cycle as an LHR update
// of its entry reads the LHR from before that update. The hint load port is
// that of slbiu_cam; loads are meant for initialisation and are not
// interlocked with predictions in flight.
//
// The three-stage split, the select/flip/add datapath, the sign test, the
// hit output and the LHR-only runtime update follow the source. The history
// index mapping, the bit encoding of the history, snapshotting the GHR in
// stage 1 and the register enables in place of clock gating are this
// design's choices.
module slbiu
  import slbiu_pkg::*;
#(
  parameter int unsigned N   = SLBIU_N,
  parameter int unsigned NNZ = SLBIU_NNZ,
  parameter int unsigned Q   = SLBIU_Q,
  parameter int unsigned P   = SLBIU_P,
  parameter int unsigned LH  = SLBIU_LH,
  parameter int unsigned GH  = SLBIU_GH,
  localparam int unsigned L   = LH + GH,
  localparam int unsigned IW  = $clog2(L),
  localparam int unsigned NW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SLW = (NNZ > 1) ? $clog2(NNZ) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // prediction request
  input  logic             predict_i,
  input  logic [P-1:0]     pc_i,
  input  logic [GH-1:0]    ghr_i,
  // early hit, one cycle after the request
  output logic             lookup_hit_o,
  // prediction result, three cycles later
  output logic             pred_valid_o,
  output logic             pred_hit_o,
  output logic             pred_taken_o,
  // branch resolution
  input  logic             resolve_valid_i,
  input  logic [P-1:0]     resolve_pc_i,
  input  logic             resolve_taken_i,
  output logic             resolve_hit_o,
  // hint load port
  input  load_op_e         load_op_i,
  input  logic [NW-1:0]    load_entry_i,
  input  logic [SLW-1:0]   load_slot_i,
  input  logic [P-1:0]     load_pc_i,
  input  logic [Q-1:0]     load_weight_i,
  input  logic [IW-1:0]    load_index_i
);

  // ---------------- CAM ----------------
  logic [N-1:0][P-1:0]    entry_pc;
  logic [N-1:0]           entry_valid;
  logic [N-1:0]           lhr_shift_en;
  logic                   lhr_bit;
  logic [NW-1:0]          s1_idx;
  logic [Q-1:0]           rd_intercept;
  logic [NNZ-1:0][Q-1:0]  rd_w;
  logic [NNZ-1:0][IW-1:0] rd_ind;
  logic [LH-1:0]          rd_lhr;

  slbiu_cam #(.N(N), .NNZ(NNZ), .Q(Q), .P(P), .LH(LH), .GH(GH)) u_cam (
    .clk            (clk),
    .rst_n          (rst_n),
    .load_op_i      (load_op_i),
    .load_entry_i   (load_entry_i),
    .load_slot_i    (load_slot_i),
    .load_pc_i      (load_pc_i),
    .load_weight_i  (load_weight_i),
    .load_index_i   (load_index_i),
    .lhr_shift_en_i (lhr_shift_en),
    .lhr_bit_i      (lhr_bit),
    .entry_pc_o     (entry_pc),
    .entry_valid_o  (entry_valid),
    .rd_sel_i       (s1_idx),
    .rd_intercept_o (rd_intercept),
    .rd_w_o         (rd_w),
    .rd_ind_o       (rd_ind),
    .rd_lhr_o       (rd_lhr)
  );

  // ---------------- LHR update ----------------
  slbiu_lhr_update #(.N(N), .P(P)) u_lhr_update (
    .resolve_valid_i (resolve_valid_i),
    .resolve_pc_i    (resolve_pc_i),
    .resolve_taken_i (resolve_taken_i),
    .entry_pc_i      (entry_pc),
    .entry_valid_i   (entry_valid),
    .shift_en_o      (lhr_shift_en),
    .shift_bit_o     (lhr_bit),
    .hit_o           (resolve_hit_o)
  );

  // ---------------- stage 1: associative lookup ----------------
  logic          lk_hit;
  logic [N-1:0]  lk_match;
  logic [NW-1:0] lk_idx;

  slbiu_lookup #(.N(N), .P(P)) u_lookup (
    .pc_i          (pc_i),
    .entry_pc_i    (entry_pc),
    .entry_valid_i (entry_valid),
    .hit_o         (lk_hit),
    .match_o       (lk_match),
    .idx_o         (lk_idx)
  );

  logic          s1_valid, s1_hit;
  logic [GH-1:0] s1_ghr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_hit   <= 1'b0;
    end else begin
      s1_valid <= predict_i;
      s1_hit   <= predict_i && lk_hit;
    end
  end

  always_ff @(posedge clk) begin
    if (predict_i && lk_hit) begin
      s1_idx <= lk_idx;
      s1_ghr <= ghr_i;
    end
  end

  assign lookup_hit_o = s1_hit;

  // ---------------- stage 2: read, select, flip ----------------
  logic [L-1:0]          hist;
  logic [NNZ-1:0]        sel;
  logic [NNZ-1:0][Q:0]   flipped;

  assign hist = {rd_lhr, s1_ghr};

  slbiu_history_select #(.NNZ(NNZ), .L(L)) u_hsel (
    .hist_i (hist),
    .idx_i  (rd_ind),
    .sel_o  (sel)
  );

  slbiu_sign_flip #(.NNZ(NNZ), .Q(Q)) u_flip (
    .w_i   (rd_w),
    .sel_i (sel),
    .w_o   (flipped)
  );

  logic                 s2_valid, s2_hit;
  logic [NNZ-1:0][Q:0]  s2_w;
  logic [Q-1:0]         s2_intercept;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_hit   <= 1'b0;
    end else begin
      s2_valid <= s1_valid;
      s2_hit   <= s1_hit;
    end
  end

  always_ff @(posedge clk) begin
    if (s1_hit) begin
      s2_w         <= flipped;
      s2_intercept <= rd_intercept;
    end
  end

  // ---------------- stage 3: adder tree ----------------
  localparam int unsigned SW = Q + 1 + $clog2(NNZ + 1);
  logic [SW-1:0] sum;
  logic          tree_taken;

  slbiu_adder_tree #(.NNZ(NNZ), .Q(Q)) u_tree (
    .w_i         (s2_w),
    .intercept_i (s2_intercept),
    .sum_o       (sum),
    .taken_o     (tree_taken)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pred_valid_o <= 1'b0;
      pred_hit_o   <= 1'b0;
      pred_taken_o <= 1'b0;
    end else begin
      pred_valid_o <= s2_valid;
      pred_hit_o   <= s2_hit;
      pred_taken_o <= s2_hit && tree_taken;
    end
  end

endmodule
