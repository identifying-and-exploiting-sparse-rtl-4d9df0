// tb_bpu_slbiu: end-to-end test of the branch prediction unit with SLBIU,
// at the default sizes (13 hints x 36 weights, 512 + 512 history bits,
// 1000-bit GHR), with no parameter overridden.
//
// A synthetic program of 40 static branches, 13 of them offloaded to the
// SLBIU, is run for two program phases, each with its own randomly drawn
// hint set loaded through the load port after an invalidate-all. One
// instruction is fetched per cycle; a fetched instruction is a branch with
// probability 3/4 and each branch resolves six cycles after its prediction.
// The outcome of an offloaded branch follows its sparse model with 5% noise;
// other branches are random. The primary predictor is modelled by a random
// guess delivered three cycles after the request.
//
// Checked against a reference model: the final prediction and its source
// (SLBIU on a hit, primary otherwise) exactly three cycles after every
// request, the early hit one cycle after it, primary_update_en_o at every
// resolution and the 1000-bit GHR every cycle. Mechanisms counted, each of which must occur: hint header and pair
// loads, invalidate-all phase change, SLBIU hit and miss, SLBIU taken and
// not-taken, final answer from the primary, halted and allowed primary
// updates, LHR updates, back-to-back hits and an LHR update of an entry in
// the same cycle as it is read.
module tb_bpu_slbiu;
  import slbiu_pkg::*;
  localparam int unsigned N = 13, NNZ = 36, Q = 8, P = 64, LH = 512, GH = 512, GL = 1000;
  localparam int unsigned L = LH + GH, IW = 10, NW = 4, SLW = 6;
  localparam int unsigned NPC = 40, DELAY = 6, TPH = 4000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic predict, ptk, fv, ft, fs, fe, rv, rt, upd;
  logic [P-1:0] pc, rpc;
  logic [GL-1:0] ghr;
  load_op_e op;
  logic [NW-1:0] le;
  logic [SLW-1:0] ls;
  logic [P-1:0] lpc;
  logic [Q-1:0] lw;
  logic [IW-1:0] li;

  bpu_slbiu dut (
    .clk(clk), .rst_n(rst_n),
    .predict_i(predict), .pc_i(pc), .primary_taken_i(ptk),
    .final_valid_o(fv), .final_taken_o(ft), .final_from_slbiu_o(fs), .slbiu_hit_early_o(fe),
    .resolve_valid_i(rv), .resolve_pc_i(rpc), .resolve_taken_i(rt),
    .primary_update_en_o(upd), .ghr_o(ghr),
    .load_op_i(op), .load_entry_i(le), .load_slot_i(ls), .load_pc_i(lpc),
    .load_weight_i(lw), .load_index_i(li));

  logic [P-1:0]  prog_pc [NPC];
  int            m_ent   [NPC];
  int            m_b     [N];
  int            m_w     [N][NNZ];
  int            m_i     [N][NNZ];
  logic [LH-1:0] m_l     [N];
  logic [GL-1:0] m_g;

  localparam int unsigned T = 2 * (TPH + 10) + DELAY + 4;
  logic e_v [T];  logic e_s [T];  logic e_t [T];  logic e_p [T];
  int   r_br [T];  logic r_out [T];   // branch to resolve in cycle t (-1: none)

  int checks = 0, failures = 0, cycles = 0, t = 0;
  int n_hdr = 0, n_pair = 0, n_phase = 0, n_hit = 0, n_miss = 0, n_tk = 0, n_nt = 0;
  int n_prim = 0, n_halt = 0, n_pupd = 0, n_lhr = 0, n_b2b = 0, n_coll = 0, n_slbiu_wrong = 0;

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

  task automatic load_phase(int first);
    op = LD_INVAL_ALL;
    @(negedge clk);
    for (int s = 0; s < NPC; s++) m_ent[s] = -1;
    for (int e = 0; e < N; e++) begin
      int s = (first + 3 * e) % NPC;
      int nz = 1 + $urandom_range(NNZ - 1);
      m_ent[s] = e;
      m_b[e] = $urandom_range(63) - 32;
      m_l[e] = '0;
      op = LD_HEADER; le = NW'(e); lpc = prog_pc[s]; lw = Q'(m_b[e]);
      n_hdr++;
      @(negedge clk);
      for (int k = 0; k < NNZ; k++) begin
        m_w[e][k] = 0; m_i[e][k] = 0;
        if (k < nz) begin
          m_w[e][k] = $urandom_range(255) - 128;
          m_i[e][k] = $urandom_range(L - 1);
          op = LD_PAIR; le = NW'(e); ls = SLW'(k); lw = Q'(m_w[e][k]); li = IW'(m_i[e][k]);
          n_pair++;
          @(negedge clk);
        end
      end
    end
    op = LD_NOP;
  endtask

  initial begin
    predict = 0; pc = '0; rv = 0; rpc = '0; rt = 0; ptk = 0; op = LD_NOP;
    le = '0; ls = '0; lpc = '0; lw = '0; li = '0;
    m_g = '0;
    for (int s = 0; s < NPC; s++) prog_pc[s] = 64'h0000_7f00_0010_0000 + 64'(s * 52);
    for (int i = 0; i < T; i++) begin r_br[i] = -1; e_v[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 2; ph++) begin
      load_phase(ph * 11);
      if (ph == 1) n_phase++;
      for (int c = 0; c < TPH + 10; c++, t++) begin
        int s;
        logic hit;
        // --- the GHR as the unit sees it in this cycle
        checks++;
        if (ghr !== m_g) begin failures++; $display("FAIL t=%0d ghr", t); end
        // --- primary predictor guess for the request of three cycles ago
        ptk = (t >= 3) ? e_p[t-3] : 1'b0;
        #1;
        // --- final prediction of that request
        if (t >= 3) begin
          checks++;
          if (fv !== e_v[t-3] || (e_v[t-3] && (fs !== e_s[t-3] || ft !== e_t[t-3]))) begin
            failures++;
            $display("FAIL t=%0d final v%0b s%0b t%0b exp v%0b s%0b t%0b", t, fv, fs, ft,
                     e_v[t-3], e_s[t-3], e_t[t-3]);
          end
          if (e_v[t-3] && !e_s[t-3]) n_prim++;
        end
        // --- early hit of the previous cycle's request
        if (t >= 1) begin
          checks++;
          if (fe !== (e_v[t-1] && e_s[t-1])) begin failures++; $display("FAIL t=%0d early hit", t); end
        end
        // --- fetch: a branch or another instruction (none in the drain cycles)
        predict = (c < TPH) && ($urandom_range(3) != 0);
        s = $urandom_range(NPC - 1);
        pc = prog_pc[s];
        // --- resolution of the branch predicted DELAY cycles ago
        rv = (r_br[t] >= 0);
        rpc = rv ? prog_pc[r_br[t]] : '0;
        rt = rv ? r_out[t] : 1'b0;
        #1;
        if (rv) begin
          logic exp_upd;
          exp_upd = (m_ent[r_br[t]] < 0);
          checks++;
          if (upd !== exp_upd) begin failures++; $display("FAIL t=%0d update enable", t); end
          if (exp_upd) n_pupd++; else n_halt++;
        end else begin
          checks++;
          if (upd !== 1'b0) begin failures++; $display("FAIL t=%0d spurious update", t); end
        end
        // --- expected response for this cycle's request
        hit = predict && (m_ent[s] >= 0);
        e_v[t] = predict;
        e_s[t] = hit;
        e_p[t] = 1'($urandom());
        if (predict) begin
          logic outcome;
          if (hit) begin
            int e, sum;
            e = m_ent[s];
            // LHR as stage 2 reads it: after this cycle's resolution
            if (rv && r_br[t] == s) begin
              sum = dot(e, m_g[GH-1:0], {m_l[e][LH-2:0], rt});
              n_coll++;
            end else begin
              sum = dot(e, m_g[GH-1:0], m_l[e]);
            end
            e_t[t] = (sum >= 0);
            n_hit++;
            if (sum >= 0) n_tk++; else n_nt++;
            if (t > 0 && e_v[t-1] && e_s[t-1]) n_b2b++;
            outcome = ($urandom_range(19) == 0) ? !e_t[t] : e_t[t];
            if (outcome != e_t[t]) n_slbiu_wrong++;
          end else begin
            e_t[t] = e_p[t];
            outcome = 1'($urandom());
            n_miss++;
          end
          r_br[t + DELAY] = s;
          r_out[t + DELAY] = outcome;
        end
        // --- model state after the coming edge
        if (rv) begin
          m_g = {m_g[GL-2:0], rt};
          if (m_ent[r_br[t]] >= 0) begin
            m_l[m_ent[r_br[t]]] = {m_l[m_ent[r_br[t]]][LH-2:0], rt};
            n_lhr++;
          end
        end
        @(negedge clk);
        predict = 0; rv = 0;
      end
    end
    checks++;
    if (n_hdr == 0 || n_pair == 0 || n_phase == 0 || n_hit == 0 || n_miss == 0 ||
        n_tk == 0 || n_nt == 0 || n_prim == 0 || n_halt == 0 || n_pupd == 0 ||
        n_lhr == 0 || n_b2b == 0 || n_coll == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("loads: headers=%0d pairs=%0d phase_changes=%0d", n_hdr, n_pair, n_phase);
    $display("predictions: slbiu_hits=%0d misses=%0d slbiu_taken=%0d slbiu_not_taken=%0d from_primary=%0d back_to_back_hits=%0d",
             n_hit, n_miss, n_tk, n_nt, n_prim, n_b2b);
    $display("resolutions: primary_update_halted=%0d primary_updates=%0d lhr_updates=%0d update_while_read=%0d slbiu_mispredictions=%0d",
             n_halt, n_pupd, n_lhr, n_coll, n_slbiu_wrong);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 40000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
