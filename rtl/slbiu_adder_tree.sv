// slbiu_adder_tree: Adder-Tree(nnz+1, q) and the sign test that ends it.
//
// Adds the NNZ sign-flipped weights (Q+1 bits each) and the Q-bit intercept
// as a balanced binary tree: the NNZ+1 operands are padded with zeros to a
// power of two and each level adds neighbouring pairs. Every node is
// SW = Q+1+ceil(log2(NNZ+1)) bits wide, enough that no sum can overflow.
// The prediction is the inverted sign bit of the root: taken when the dot
// product plus intercept is zero or positive, not-taken when negative.
// Combinational; it is the third SLBIU pipeline stage.
//
// Operand count, sign test and inversion follow the unit's description;
// the node width and the zero padding are this design's choices.
module slbiu_adder_tree #(
  parameter int unsigned NNZ = slbiu_pkg::SLBIU_NNZ,
  parameter int unsigned Q   = slbiu_pkg::SLBIU_Q,
  localparam int unsigned K  = NNZ + 1,
  localparam int unsigned D  = $clog2(K),
  localparam int unsigned P2 = 1 << D,
  localparam int unsigned SW = Q + 1 + D
) (
  input  logic [NNZ-1:0][Q:0]  w_i,          // signed, already sign-flipped
  input  logic [Q-1:0]         intercept_i,  // signed
  output logic [SW-1:0]        sum_o,        // signed
  output logic                 taken_o
);

  for (genvar lv = 0; lv <= D; lv++) begin : g_lvl
    localparam int unsigned CNT = P2 >> lv;
    logic signed [SW-1:0] s [CNT];
    if (lv == 0) begin : g_leaf
      for (genvar i = 0; i < CNT; i++) begin : g_op
        if (i < NNZ) begin : g_w
          assign s[i] = SW'(signed'(w_i[i]));
        end else if (i == NNZ) begin : g_b
          assign s[i] = SW'(signed'(intercept_i));
        end else begin : g_pad
          assign s[i] = '0;
        end
      end
    end else begin : g_add
      for (genvar i = 0; i < CNT; i++) begin : g_node
        assign s[i] = g_lvl[lv-1].s[2*i] + g_lvl[lv-1].s[2*i+1];
      end
    end
  end

  assign sum_o   = g_lvl[D].s[0];
  assign taken_o = ~sum_o[SW-1];

endmodule
