// tb_slbiu: self-checking test of the three-stage SLBIU at its default size.
//
// 13 hints (1 to 36 non-zero weights each, random Q3.4 weights, intercepts
// and history indices over the 1024-bit {LHR, GHR} vector) are loaded
// through the load port. Then, every cycle, a prediction request (an
// offloaded PC, an unknown PC, or none) and a branch resolution are driven at
// random. A reference model keeps the hints, the LHRs and computes
//   taken = (intercept + sum_k (+-w[k])) >= 0
// for each request; the response must appear exactly three cycles later
// (pred_valid_o, pred_hit_o, pred_taken_o), so the latency is checked on
// every request; the early hit (lookup_hit_o) must follow one cycle after
// it. resolve_hit_o is checked in the cycle of each resolution.
// Midway all entries are invalidated and a second hint set is loaded
// (a program-phase change). Each mechanism (hit, miss, taken, not-taken,
// back-to-back hits, LHR update, update of the entry being read, phase
// change) is counted and must occur.
module tb_slbiu;
  import slbiu_pkg::*;
  localparam int unsigned N = 13, NNZ = 36, Q = 8, P = 64, LH = 512, GH = 512;
  localparam int unsigned L = LH + GH, IW = 10, NW = 4, SLW = 6;
  localparam int unsigned NPC = 24;  // static branches in the synthetic program

  logic clk = 1'b0, rst_n = 1'b0;
  logic predict, lk, pv, ph, pt, rv, rt, rh;
  logic [P-1:0] pc, rpc;
  logic [GH-1:0] ghr;
  load_op_e op;
  logic [NW-1:0] le;
  logic [SLW-1:0] ls;
  logic [P-1:0] lpc;
  logic [Q-1:0] lw;
  logic [IW-1:0] li;

  slbiu dut (
    .clk(clk), .rst_n(rst_n),
    .predict_i(predict), .pc_i(pc), .ghr_i(ghr),
    .lookup_hit_o(lk), .pred_valid_o(pv), .pred_hit_o(ph), .pred_taken_o(pt),
    .resolve_valid_i(rv), .resolve_pc_i(rpc), .resolve_taken_i(rt), .resolve_hit_o(rh),
    .load_op_i(op), .load_entry_i(le), .load_slot_i(ls), .load_pc_i(lpc),
    .load_weight_i(lw), .load_index_i(li));

  // reference state
  logic [P-1:0]  prog_pc [NPC];
  int            m_ent   [NPC];     // entry of a static branch, -1 if none
  int            m_b     [N];
  int            m_w     [N][NNZ];
  int            m_i     [N][NNZ];
  logic [LH-1:0] m_l     [N];
  logic [N-1:0]  m_v;

  // expected responses, indexed by request cycle
  localparam int unsigned T = 6000;
  logic e_v [T + 4];
  logic e_h [T + 4];
  logic e_t [T + 4];

  int checks = 0, failures = 0, cycles = 0;
  int n_hit = 0, n_miss = 0, n_tk = 0, n_nt = 0, n_b2b = 0, n_upd = 0, n_coll = 0, n_phase = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  function automatic int dot(int e, logic [GH-1:0] g, logic [LH-1:0] lh);
    int s = m_b[e];
    for (int k = 0; k < NNZ; k++) begin
      logic bit_v;
      bit_v = (m_i[e][k] < GH) ? g[m_i[e][k]] : lh[m_i[e][k] - GH];
      s += bit_v ? m_w[e][k] : -m_w[e][k];
    end
    return s;
  endfunction

  task automatic load_phase(int seed);
    // clear, then give the first 13 static branches of a shifted window a hint
    op = LD_INVAL_ALL;
    @(negedge clk);
    m_v = '0;
    for (int s = 0; s < NPC; s++) m_ent[s] = -1;
    for (int e = 0; e < N; e++) begin
      int s = (e + seed) % NPC;
      int nz = 1 + $urandom_range(NNZ - 1);
      m_ent[s] = e;
      m_b[e] = $urandom_range(255) - 128;
      m_l[e] = '0;
      op = LD_HEADER; le = NW'(e); lpc = prog_pc[s]; lw = Q'(m_b[e]);
      @(negedge clk);
      for (int k = 0; k < NNZ; k++) begin
        m_w[e][k] = 0; m_i[e][k] = 0;
        if (k < nz) begin
          m_w[e][k] = $urandom_range(255) - 128;
          m_i[e][k] = $urandom_range(L - 1);
          op = LD_PAIR; le = NW'(e); ls = SLW'(k); lw = Q'(m_w[e][k]); li = IW'(m_i[e][k]);
          @(negedge clk);
        end
      end
      m_v[e] = 1'b1;
    end
    op = LD_NOP;
  endtask

  initial begin
    predict = 0; pc = '0; rv = 0; rpc = '0; rt = 0; op = LD_NOP;
    le = '0; ls = '0; lpc = '0; lw = '0; li = '0;
    for (int w = 0; w < GH / 32; w++) ghr[w*32 +: 32] = $urandom();
    for (int s = 0; s < NPC; s++) prog_pc[s] = {32'h0040_0000, 20'(s * 4), 12'h000} + 64'(s * 16);
    repeat (2) @(negedge clk);
    rst_n = 1;
    load_phase(0);
    for (int t = 0; t < T; t++) begin
      int s, rs;
      if (t == T / 2) begin
        load_phase(7);
        n_phase++;
        // requests still in flight drained while loading, unchecked
        for (int d = 1; d <= 3; d++) begin e_v[t-d] = 1'b0; e_h[t-d] = 1'b0; end
      end
      // responses to the request of three cycles ago
      if (t >= 3) begin
        checks++;
        if (pv !== e_v[t-3] || (e_v[t-3] && (ph !== e_h[t-3] || (e_h[t-3] && pt !== e_t[t-3])))) begin
          failures++;
          $display("FAIL t=%0d got v%0b h%0b t%0b exp v%0b h%0b t%0b", t, pv, ph, pt,
                   e_v[t-3], e_h[t-3], e_t[t-3]);
        end
      end
      // early hit of the request of the previous cycle
      if (t >= 1) begin
        checks++;
        if (lk !== e_h[t-1]) begin failures++; $display("FAIL t=%0d early hit", t); end
      end
      // new request
      predict = ($urandom_range(9) != 0);
      s = $urandom_range(NPC - 1);
      pc = ($urandom_range(9) == 0) ? {$urandom(), $urandom()} : prog_pc[s];
      // new resolution, sometimes of the branch just requested
      rv = ($urandom_range(3) != 0);
      rs = ($urandom_range(3) == 0) ? s : $urandom_range(NPC - 1);
      rpc = prog_pc[rs];
      rt = 1'($urandom());
      #1;
      checks++;
      if (rh !== (rv && m_ent[rs] >= 0 && m_v[m_ent[rs]])) begin
        failures++;
        $display("FAIL t=%0d resolve hit %0b", t, rh);
      end
      // model: LHR update at the coming edge, before stage 2 reads
      if (rv && m_ent[rs] >= 0) begin
        m_l[m_ent[rs]] = {m_l[m_ent[rs]][LH-2:0], rt};
        n_upd++;
      end
      e_v[t] = predict;
      e_h[t] = 1'b0;
      e_t[t] = 1'b0;
      if (predict && pc == prog_pc[s] && m_ent[s] >= 0) begin
        int sum;
        sum = dot(m_ent[s], ghr, m_l[m_ent[s]]);
        e_h[t] = 1'b1;
        e_t[t] = (sum >= 0);
        n_hit++;
        if (sum >= 0) n_tk++; else n_nt++;
        if (t > 0 && e_h[t-1]) n_b2b++;
        if (rv && rs == s) n_coll++;
      end else if (predict) n_miss++;
      @(negedge clk);
      // GHR moves on independently of the unit
      predict = 0; rv = 0;
      if ($urandom_range(1)) ghr = {ghr[GH-2:0], 1'($urandom())};
    end
    // storage of the default configuration: 13*(64+8+36*8+36*10+512) bits, within 2 KB
    checks++;
    if (storage_bits(N, P, Q, NNZ, LH, GH) != 16016 || storage_bits(N, P, Q, NNZ, LH, GH) > 2048 * 8) begin
      failures++;
      $display("FAIL storage %0d bits", storage_bits(N, P, Q, NNZ, LH, GH));
    end
    checks++;
    if (n_hit == 0 || n_miss == 0 || n_tk == 0 || n_nt == 0 || n_b2b == 0 ||
        n_upd == 0 || n_coll == 0 || n_phase == 0) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("hits=%0d misses=%0d taken=%0d not_taken=%0d back_to_back=%0d lhr_updates=%0d same_entry_updates=%0d phases=%0d",
             n_hit, n_miss, n_tk, n_nt, n_b2b, n_upd, n_coll, n_phase + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 50000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
