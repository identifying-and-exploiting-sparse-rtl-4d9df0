// tb_slbiu_history_select: self-checking test of History-Select(nnz, l).
//
// At the default size (36 multiplexers over a 1024-bit history) drives random
// histories and random indices, plus the corner indices 0 and 1023, and
// compares every selected bit with hist[idx] computed by the testbench.
module tb_slbiu_history_select;
  localparam int unsigned NNZ = 36, L = 1024, IW = 10;

  logic [L-1:0]           hist;
  logic [NNZ-1:0][IW-1:0] idx;
  logic [NNZ-1:0]         sel;
  int checks = 0, failures = 0;

  slbiu_history_select dut (.hist_i(hist), .idx_i(idx), .sel_o(sel));

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int w = 0; w < L / 32; w++) hist[w*32 +: 32] = $urandom();
      for (int k = 0; k < NNZ; k++) begin
        case (t % 5)
          0:       idx[k] = IW'(k == 0 ? 0 : L - 1);
          1:       idx[k] = IW'(k * 28);
          default: idx[k] = IW'($urandom_range(L - 1));
        endcase
      end
      #1;
      for (int k = 0; k < NNZ; k++) begin
        checks++;
        if (sel[k] !== hist[idx[k]]) begin
          failures++;
          $display("FAIL t=%0d k=%0d idx=%0d sel=%0b exp=%0b", t, k, idx[k], sel[k], hist[idx[k]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
