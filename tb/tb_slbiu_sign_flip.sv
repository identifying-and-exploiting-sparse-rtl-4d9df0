// tb_slbiu_sign_flip: self-checking test of Sign-Flip(nnz, q).
//
// Random 8-bit signed weights (the extremes -128, -1, 0 and 127 included)
// with random selected history bits; each output must equal +w for a taken
// bit and -w for a not-taken bit, computed as integers by the testbench.
module tb_slbiu_sign_flip;
  localparam int unsigned NNZ = 36, Q = 8;

  logic [NNZ-1:0][Q-1:0] w;
  logic [NNZ-1:0]        s;
  logic [NNZ-1:0][Q:0]   wo;
  int checks = 0, failures = 0;

  slbiu_sign_flip dut (.w_i(w), .sel_i(s), .w_o(wo));

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int k = 0; k < NNZ; k++) begin
        case ((t + k) % 7)
          0:       w[k] = 8'h80;
          1:       w[k] = 8'hFF;
          2:       w[k] = 8'h00;
          3:       w[k] = 8'h7F;
          default: w[k] = 8'($urandom());
        endcase
        s[k] = 1'($urandom());
      end
      #1;
      for (int k = 0; k < NNZ; k++) begin
        int wi, exp, got;
        wi  = int'($signed(w[k]));
        exp = s[k] ? wi : -wi;
        got = int'($signed(wo[k]));
        checks++;
        if (got != exp) begin
          failures++;
          $display("FAIL w=%0d sel=%0b got=%0d exp=%0d", wi, s[k], got, exp);
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
