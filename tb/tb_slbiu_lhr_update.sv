// tb_slbiu_lhr_update: self-checking test of the LHR update selection.
//
// Random CAM contents; resolutions of offloaded PCs (valid and invalid
// entries), of unrelated PCs and with resolve_valid low. Checks the one-hot
// shift enable, the outcome bit and the offload hit against a reference.
module tb_slbiu_lhr_update;
  localparam int unsigned N = 13, P = 64;

  logic                rv, rt;
  logic [P-1:0]        rpc;
  logic [N-1:0][P-1:0] epc;
  logic [N-1:0]        ev;
  logic [N-1:0]        sh;
  logic                sb, hit;
  int checks = 0, failures = 0;

  slbiu_lhr_update dut (
    .resolve_valid_i(rv), .resolve_pc_i(rpc), .resolve_taken_i(rt),
    .entry_pc_i(epc), .entry_valid_i(ev),
    .shift_en_o(sh), .shift_bit_o(sb), .hit_o(hit));

  initial begin
    for (int round = 0; round < 100; round++) begin
      for (int e = 0; e < N; e++) epc[e] = {$urandom(), 28'(e), 4'h3};
      ev = (round % 3 == 0) ? '1 : N'($urandom());
      for (int t = 0; t < 30; t++) begin
        logic [N-1:0] r_sh;
        r_sh = '0;
        rv  = (t % 5 != 4);
        rt  = 1'($urandom());
        rpc = (t < 26) ? epc[t % N] : {$urandom(), $urandom()};
        for (int e = 0; e < N; e++)
          if (rv && ev[e] && epc[e] == rpc) r_sh[e] = 1'b1;
        #1;
        checks++;
        if (sh !== r_sh || hit !== (|r_sh) || sb !== rt) begin
          failures++;
          $display("FAIL sh=%h/%h hit=%0b sb=%0b/%0b", sh, r_sh, hit, sb, rt);
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
