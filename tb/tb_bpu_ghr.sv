// tb_bpu_ghr: self-checking test of the global history register.
//
// Reset, then random outcomes with random update strobes at the full
// 1000-bit length; after every edge the register must equal a reference
// shift register kept by the testbench (newest outcome at bit 0).
module tb_bpu_ghr;
  localparam int unsigned LEN = 1000;

  logic           clk = 1'b0, rst_n = 1'b0, upd = 1'b0, tk = 1'b0;
  logic [LEN-1:0] ghr, ref_ghr;
  int checks = 0, failures = 0, cycles = 0;

  bpu_ghr dut (.clk(clk), .rst_n(rst_n), .update_i(upd), .taken_i(tk), .ghr_o(ghr));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    ref_ghr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    checks++;
    if (ghr !== '0) begin failures++; $display("FAIL reset"); end
    for (int t = 0; t < 3000; t++) begin
      upd = ($urandom_range(3) != 0);
      tk  = 1'($urandom());
      @(negedge clk);
      if (upd) ref_ghr = {ref_ghr[LEN-2:0], tk};
      checks++;
      if (ghr !== ref_ghr) begin failures++; $display("FAIL t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 10000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
