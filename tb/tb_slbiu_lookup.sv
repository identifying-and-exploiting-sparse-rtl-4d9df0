// tb_slbiu_lookup: self-checking test of the fully associative PC lookup.
//
// Fills the 13 entries with distinct random PCs and random valid bits, then
// probes with PCs of valid entries, of invalid entries and with unrelated
// PCs. hit, match vector and entry number are compared with a reference
// loop. Also probes an all-valid and an all-invalid CAM.
module tb_slbiu_lookup;
  localparam int unsigned N = 13, P = 64, NW = $clog2(N);

  logic [P-1:0]        pc;
  logic [N-1:0][P-1:0] epc;
  logic [N-1:0]        ev;
  logic                hit;
  logic [N-1:0]        match;
  logic [NW-1:0]       idx;
  int checks = 0, failures = 0;

  slbiu_lookup dut (
    .pc_i(pc), .entry_pc_i(epc), .entry_valid_i(ev),
    .hit_o(hit), .match_o(match), .idx_o(idx));

  task automatic check_probe();
    logic          r_hit = 1'b0;
    logic [N-1:0]  r_match = '0;
    int            r_idx = 0;
    for (int e = 0; e < N; e++)
      if (ev[e] && epc[e] == pc) begin
        r_match[e] = 1'b1;
        if (!r_hit) r_idx = e;
        r_hit = 1'b1;
      end
    #1;
    checks++;
    if (hit !== r_hit || match !== r_match || (r_hit && int'(idx) != r_idx)) begin
      failures++;
      $display("FAIL pc=%h hit=%0b/%0b match=%h/%h idx=%0d/%0d",
               pc, hit, r_hit, match, r_match, idx, r_idx);
    end
  endtask

  initial begin
    for (int round = 0; round < 200; round++) begin
      for (int e = 0; e < N; e++) epc[e] = {$urandom(), 28'(e), 4'hA};
      case (round % 10)
        0:       ev = '1;
        1:       ev = '0;
        default: ev = N'($urandom());
      endcase
      for (int t = 0; t < 20; t++) begin
        if (t < 13) pc = epc[t];
        else        pc = {$urandom(), $urandom()};
        check_probe();
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
