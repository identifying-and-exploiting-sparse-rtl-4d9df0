// bpu_ghr: global history register of the branch prediction unit.
//
// One shift register of LEN outcome bits (default 1000, the longest global
// history slice of the 8 KB TAGE-SC-L primary predictor), shared by the
// primary predictor and the SLBIU (each uses whatever prefix it needs). When update_i is high the
// register shifts up by one at the rising edge and taken_i enters at bit 0,
// so bit 0 is always the newest outcome (1 = taken). Reset clears it.
//
// A single GHR common to both predictors follows the source. Updating it
// with resolved outcomes, rather than speculatively at prediction with
// repair on a misprediction, keeps this model simple and is this design's
// choice, as is the bit order.
module bpu_ghr #(
  parameter int unsigned LEN = 1000
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           update_i,
  input  logic           taken_i,
  output logic [LEN-1:0] ghr_o
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        ghr_o <= '0;
    else if (update_i) ghr_o <= {ghr_o[LEN-2:0], taken_i};
  end

endmodule
