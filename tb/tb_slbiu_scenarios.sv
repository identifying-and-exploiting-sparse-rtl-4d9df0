// tb_slbiu_scenarios: the synthetic branch scenarios, at the default size.
//
// Sweeps "branch frequency" (dynamic branches per fetched instruction:
// 10%, 50%, 100%) against "offloaded branch ratio" (hinted static branches
// per static branch in the trace: 0%, 25%, 50%, 100%). Each of the 12
// scenarios fills the whole CAM with 13 random hints (uniform weights and
// indices), then runs a 10,000-instruction random trace with one instruction
// fetched per cycle. Every branch requests a prediction (PC, GHR, predict)
// and resolves four cycles later, updating the GHR and, if it is offloaded,
// its LHR. Each prediction is compared with a reference model of the sparse
// linear function, three cycles after its request.
//
// Per scenario it reports the hits and the cycles in which the hit-gated
// datapath registers load (the activity that clock gating would save). With
// a 0% offloaded ratio no request may hit; with 100% every request must hit.
module tb_slbiu_scenarios;
  import slbiu_pkg::*;
  localparam int unsigned N = 13, NNZ = 36, Q = 8, P = 64, LH = 512, GH = 512;
  localparam int unsigned L = LH + GH, IW = 10, NW = 4, SLW = 6;
  localparam int unsigned TRACE = 10000, DELAY = 4, MAXS = 52;

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

  logic [P-1:0]  sp_pc  [MAXS];
  int            m_ent  [MAXS];
  int            m_b    [N];
  int            m_w    [N][NNZ];
  int            m_i    [N][NNZ];
  logic [LH-1:0] m_l    [N];

  localparam int unsigned T = TRACE + 8;
  logic e_v [T];  logic e_h [T];  logic e_t [T];
  int   r_br [T]; logic r_out [T];

  int checks = 0, failures = 0, cycles = 0;

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

  // Fill all N entries; the first n_hinted static branches get entries 0..,
  // the remaining entries get PCs that never occur in the trace.
  task automatic fill_cam(int n_static, int n_hinted, int sc);
    op = LD_INVAL_ALL;
    @(negedge clk);
    for (int s = 0; s < MAXS; s++) begin
      sp_pc[s] = 64'h0000_5555_0000_0000 + 64'(sc * 4096 + s * 8);
      m_ent[s] = -1;
    end
    for (int e = 0; e < N; e++) begin
      if (e < n_hinted) m_ent[e] = e;
      m_b[e] = $urandom_range(255) - 128;
      m_l[e] = '0;
      op = LD_HEADER; le = NW'(e); lw = Q'(m_b[e]);
      lpc = (e < n_hinted) ? sp_pc[e] : 64'hdead_0000_0000_0000 + 64'(sc * 64 + e);
      @(negedge clk);
      for (int k = 0; k < NNZ; k++) begin
        m_w[e][k] = $urandom_range(255) - 128;
        m_i[e][k] = $urandom_range(L - 1);
        op = LD_PAIR; le = NW'(e); ls = SLW'(k); lw = Q'(m_w[e][k]); li = IW'(m_i[e][k]);
        @(negedge clk);
      end
    end
    op = LD_NOP;
  endtask

  task automatic run_scenario(int freq_pct, int ratio_pct, int sc);
    int n_static, n_hinted, n_req = 0, n_hit = 0, n_active = 0;
    if (ratio_pct == 0) begin n_static = 26; n_hinted = 0; end
    else begin n_hinted = N; n_static = (N * 100) / ratio_pct; end
    fill_cam(n_static, n_hinted, sc);
    for (int i = 0; i < T; i++) begin r_br[i] = -1; e_v[i] = 0; e_h[i] = 0; end
    for (int t = 0; t < T; t++) begin
      int s;
      if (t >= 3) begin
        checks++;
        if (pv !== e_v[t-3] || (e_v[t-3] && (ph !== e_h[t-3] || (e_h[t-3] && pt !== e_t[t-3])))) begin
          failures++;
          $display("FAIL scenario %0d t=%0d", sc, t);
        end
      end
      if (lk) n_active++;
      predict = (t < TRACE) && ($urandom_range(99) < freq_pct);
      s = $urandom_range(n_static - 1);
      pc = sp_pc[s];
      rv = (r_br[t] >= 0);
      rpc = rv ? sp_pc[r_br[t]] : '0;
      rt = rv ? r_out[t] : 1'b0;
      if (rv && m_ent[r_br[t]] >= 0)
        m_l[m_ent[r_br[t]]] = {m_l[m_ent[r_br[t]]][LH-2:0], rt};
      e_v[t] = predict;
      e_h[t] = predict && (m_ent[s] >= 0);
      e_t[t] = e_h[t] && (dot(m_ent[s], ghr, m_l[m_ent[s]]) >= 0);
      if (predict) begin
        n_req++;
        if (e_h[t]) n_hit++;
        r_br[t + DELAY] = s;
        r_out[t + DELAY] = 1'($urandom());
      end
      @(negedge clk);
      if (rv) ghr = {ghr[GH-2:0], rt};
      predict = 0; rv = 0;
    end
    checks++;
    if ((ratio_pct == 0 && n_hit != 0) || (ratio_pct == 100 && n_hit != n_req) ||
        (ratio_pct != 0 && n_hit == 0) || n_active != n_hit) begin
      failures++;
      $display("FAIL scenario %0d hit accounting", sc);
    end
    $display("scenario branch_freq=%0d%% offloaded=%0d%%: static=%0d requests=%0d hits=%0d datapath_active_cycles=%0d of %0d",
             freq_pct, ratio_pct, n_static, n_req, n_hit, n_active, T);
  endtask

  initial begin
    int sc = 0;
    predict = 0; pc = '0; rv = 0; rpc = '0; rt = 0; op = LD_NOP;
    le = '0; ls = '0; lpc = '0; lw = '0; li = '0; ghr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++)
      for (int r = 0; r < 4; r++) begin
        int freqs [3] = '{10, 50, 100};
        int ratios [4] = '{0, 25, 50, 100};
        run_scenario(freqs[f], ratios[r], sc);
        sc++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
