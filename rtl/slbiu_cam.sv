// slbiu_cam: Sparse-Model Storage of the SLBIU.
//
// A register file of N entries, each holding one sparsity hint in coordinate
// (COO) form plus the local history of its branch:
//   valid | PC (P) | intercept (Q) | w[NNZ-1..0] (Q each)
//         | ind[NNZ-1..0] (ceil(log2(LH+GH)) each) | LHR (LH)
// Unused weight slots are zero, so they add nothing to the dot product.
//
// Ports:
//  * Search outputs: every entry's PC and valid bit, for the associative
//    matchers (slbiu_lookup) outside.
//  * Read port: entry-wide and combinational, addressed by rd_sel_i; used in
//    the second pipeline stage.
//  * LHR write port: one bit per update. When lhr_shift_en_i[e] is high, entry
//    e's LHR shifts up by one and lhr_bit_i enters at bit 0 (newest).
//  * Load port: one command per cycle (slbiu_pkg::load_op_e). LD_HEADER
//    writes PC and intercept, sets valid and zeroes the LHR and all weight /
//    index pairs; LD_PAIR writes one pair; LD_INVAL_ALL clears every valid bit.
//    A load to an entry wins over an LHR shift of the same entry in that cycle.
// All writes take effect at the rising clock edge. Reset clears the valid
// bits only; the rest of an entry is written by LD_HEADER before it is valid.
//
// The entry layout, the per-entry LHR, the zero padding, the single-bit write
// and entry-wide read ports, and clearing the LHR at initialisation follow the
// source. The load command set and the shift organisation of the LHR are
// this design's choices.
module slbiu_cam
  import slbiu_pkg::*;
#(
  parameter int unsigned N   = SLBIU_N,
  parameter int unsigned NNZ = SLBIU_NNZ,
  parameter int unsigned Q   = SLBIU_Q,
  parameter int unsigned P   = SLBIU_P,
  parameter int unsigned LH  = SLBIU_LH,
  parameter int unsigned GH  = SLBIU_GH,
  localparam int unsigned IW  = $clog2(LH + GH),
  localparam int unsigned NW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SLW = (NNZ > 1) ? $clog2(NNZ) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // hint load port
  input  load_op_e                 load_op_i,
  input  logic [NW-1:0]            load_entry_i,
  input  logic [SLW-1:0]           load_slot_i,
  input  logic [P-1:0]             load_pc_i,
  input  logic [Q-1:0]             load_weight_i,  // intercept for LD_HEADER
  input  logic [IW-1:0]            load_index_i,
  // LHR single-bit write port
  input  logic [N-1:0]             lhr_shift_en_i,
  input  logic                     lhr_bit_i,
  // search outputs
  output logic [N-1:0][P-1:0]      entry_pc_o,
  output logic [N-1:0]             entry_valid_o,
  // entry-wide read port
  input  logic [NW-1:0]            rd_sel_i,
  output logic [Q-1:0]             rd_intercept_o,
  output logic [NNZ-1:0][Q-1:0]    rd_w_o,
  output logic [NNZ-1:0][IW-1:0]   rd_ind_o,
  output logic [LH-1:0]            rd_lhr_o
);

  typedef struct packed {
    logic [P-1:0]             pc;
    logic [Q-1:0]             intercept;
    logic [NNZ-1:0][Q-1:0]    w;
    logic [NNZ-1:0][IW-1:0]   ind;
    logic [LH-1:0]            lhr;
  } entry_t;

  entry_t       mem   [N];
  logic [N-1:0] valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
    end else if (load_op_i == LD_INVAL_ALL) begin
      valid <= '0;
    end else if (load_op_i == LD_HEADER && 32'(load_entry_i) < N) begin
      valid[load_entry_i] <= 1'b1;
    end
  end

  for (genvar e = 0; e < N; e++) begin : g_entry
    logic load_hit;
    assign load_hit = (32'(load_entry_i) == e);
    always_ff @(posedge clk) begin
      if (load_op_i == LD_HEADER && load_hit) begin
        mem[e].pc        <= load_pc_i;
        mem[e].intercept <= load_weight_i;
        mem[e].w         <= '0;
        mem[e].ind       <= '0;
        mem[e].lhr       <= '0;
      end else if (load_op_i == LD_PAIR && load_hit) begin
        if (32'(load_slot_i) < NNZ) begin
          mem[e].w[load_slot_i]   <= load_weight_i;
          mem[e].ind[load_slot_i] <= load_index_i;
        end
      end else if (lhr_shift_en_i[e]) begin
        mem[e].lhr <= {mem[e].lhr[LH-2:0], lhr_bit_i};
      end
    end
    assign entry_pc_o[e] = mem[e].pc;
  end

  assign entry_valid_o = valid;

  entry_t rd;
  assign rd = (32'(rd_sel_i) < N) ? mem[rd_sel_i] : '0;
  assign rd_intercept_o = rd.intercept;
  assign rd_w_o         = rd.w;
  assign rd_ind_o       = rd.ind;
  assign rd_lhr_o       = rd.lhr;

endmodule
