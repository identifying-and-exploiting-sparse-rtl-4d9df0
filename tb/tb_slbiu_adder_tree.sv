// tb_slbiu_adder_tree: self-checking test of the adder tree and sign test.
//
// Drives 36 signed 9-bit operands and an 8-bit intercept: random values, all
// operands at their extremes (+128 / -128) to exercise the full sum range,
// and cases built so the total is exactly 0 (must predict taken) or -1 (must
// predict not-taken). Sum and prediction are compared with integer sums.
module tb_slbiu_adder_tree;
  localparam int unsigned NNZ = 36, Q = 8, SW = Q + 1 + 6;

  logic [NNZ-1:0][Q:0] w;
  logic [Q-1:0]        b;
  logic [SW-1:0]       sum;
  logic                taken;
  int checks = 0, failures = 0;
  int n_zero = 0, n_neg = 0, n_pos = 0;

  slbiu_adder_tree dut (.w_i(w), .intercept_i(b), .sum_o(sum), .taken_o(taken));

  task automatic check();
    int exp = int'($signed(b));
    for (int k = 0; k < NNZ; k++) exp += int'($signed(w[k]));
    #1;
    checks++;
    if (int'($signed(sum)) != exp || taken !== (exp >= 0)) begin
      failures++;
      $display("FAIL sum=%0d exp=%0d taken=%0b", $signed(sum), exp, taken);
    end
    if (exp == 0) n_zero++; else if (exp < 0) n_neg++; else n_pos++;
  endtask

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int part;
      for (int k = 0; k < NNZ; k++) begin
        case (t % 4)
          0: w[k] = 9'($urandom_range(256) - 128);
          1: w[k] = 9'(128);
          2: w[k] = 9'(-128);
          default: w[k] = 9'($urandom_range(8) - 4);
        endcase
      end
      b = 8'($urandom());
      if (t % 4 == 3) begin
        // Make the total land on 0 or -1 when the intercept can reach it.
        part = 0;
        for (int k = 0; k < NNZ; k++) part += int'($signed(w[k]));
        if (part >= -127 && part <= 127) b = 8'(-part - (t % 8 == 3 ? 1 : 0));
      end
      check();
    end
    checks++;
    if (n_zero == 0 || n_neg == 0 || n_pos == 0) begin
      failures++;
      $display("FAIL coverage zero=%0d neg=%0d pos=%0d", n_zero, n_neg, n_pos);
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
