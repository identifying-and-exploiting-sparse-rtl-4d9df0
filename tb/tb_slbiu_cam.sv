// tb_slbiu_cam: self-checking test of the Sparse-Model Storage (CAM).
//
// Default size (13 entries x 36 weight/index pairs, 512-bit LHRs). Random
// streams of load commands (header, pair, invalidate-all, nop) and LHR
// shifts, including a load and a shift hitting the same entry in one cycle.
// After every edge the valid bits and PCs of all entries, and one full entry
// read through the entry-wide port, are compared with a reference model.
module tb_slbiu_cam;
  import slbiu_pkg::*;
  localparam int unsigned N = 13, NNZ = 36, Q = 8, P = 64, LH = 512, GH = 512;
  localparam int unsigned IW = 10, NW = 4, SLW = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  load_op_e               op;
  logic [NW-1:0]          le;
  logic [SLW-1:0]         ls;
  logic [P-1:0]           lpc;
  logic [Q-1:0]           lw;
  logic [IW-1:0]          li;
  logic [N-1:0]           sh;
  logic                   sb;
  logic [N-1:0][P-1:0]    epc;
  logic [N-1:0]           ev;
  logic [NW-1:0]          rs;
  logic [Q-1:0]           rb;
  logic [NNZ-1:0][Q-1:0]  rw;
  logic [NNZ-1:0][IW-1:0] ri;
  logic [LH-1:0]          rl;

  slbiu_cam dut (
    .clk(clk), .rst_n(rst_n),
    .load_op_i(op), .load_entry_i(le), .load_slot_i(ls), .load_pc_i(lpc),
    .load_weight_i(lw), .load_index_i(li),
    .lhr_shift_en_i(sh), .lhr_bit_i(sb),
    .entry_pc_o(epc), .entry_valid_o(ev),
    .rd_sel_i(rs), .rd_intercept_o(rb), .rd_w_o(rw), .rd_ind_o(ri), .rd_lhr_o(rl));

  // reference model
  logic [N-1:0]  m_v;
  logic [P-1:0]  m_pc  [N];
  logic [Q-1:0]  m_b   [N];
  logic [Q-1:0]  m_w   [N][NNZ];
  logic [IW-1:0] m_i   [N][NNZ];
  logic [LH-1:0] m_l   [N];

  int checks = 0, failures = 0, cycles = 0;
  int n_hdr = 0, n_pair = 0, n_inv = 0, n_shift = 0, n_collide = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic model_step();
    if (op == LD_INVAL_ALL) m_v = '0;
    for (int e = 0; e < N; e++) begin
      if (op == LD_HEADER && int'(le) == e) begin
        m_v[e] = 1'b1; m_pc[e] = lpc; m_b[e] = lw; m_l[e] = '0;
        for (int k = 0; k < NNZ; k++) begin m_w[e][k] = '0; m_i[e][k] = '0; end
      end else if (op == LD_PAIR && int'(le) == e) begin
        m_w[e][ls] = lw; m_i[e][ls] = li;
      end else if (sh[e]) begin
        m_l[e] = {m_l[e][LH-2:0], sb};
      end
    end
  endtask

  task automatic compare();
    for (int e = 0; e < N; e++) begin
      checks++;
      if (ev[e] !== m_v[e] || (m_v[e] && epc[e] !== m_pc[e])) begin
        failures++; $display("FAIL entry %0d valid/pc", e);
      end
    end
    for (int e = 0; e < N; e++) begin
      if (!m_v[e]) continue;
      rs = NW'(e);
      #0.1;
      checks++;
      if (rb !== m_b[e] || rl !== m_l[e]) begin
        failures++; $display("FAIL entry %0d intercept/lhr", e);
      end
      for (int k = 0; k < NNZ; k++) begin
        checks++;
        if (rw[k] !== m_w[e][k] || ri[k] !== m_i[e][k]) begin
          failures++; $display("FAIL entry %0d slot %0d", e, k);
        end
      end
    end
  endtask

  initial begin
    op = LD_NOP; le = '0; ls = '0; lpc = '0; lw = '0; li = '0; sh = '0; sb = 1'b0; rs = '0;
    m_v = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    checks++;
    if (ev !== '0) begin failures++; $display("FAIL reset"); end
    for (int t = 0; t < 1500; t++) begin
      int r;
      r = $urandom_range(99);
      le  = NW'($urandom_range(N - 1));
      ls  = SLW'($urandom_range(NNZ - 1));
      lpc = {$urandom(), $urandom()};
      lw  = Q'($urandom());
      li  = IW'($urandom());
      sb  = 1'($urandom());
      sh  = '0;
      if (t < 13) begin op = LD_HEADER; le = NW'(t); end
      else if (r < 8)  op = LD_HEADER;
      else if (r < 45) op = LD_PAIR;
      else if (r < 46) op = LD_INVAL_ALL;
      else             op = LD_NOP;
      if (t >= 13 && $urandom_range(1)) sh[$urandom_range(N - 1)] = 1'b1;
      if (op == LD_HEADER) n_hdr++;
      if (op == LD_PAIR) n_pair++;
      if (op == LD_INVAL_ALL) n_inv++;
      if (|sh) n_shift++;
      if ((op == LD_HEADER || op == LD_PAIR) && sh[le]) n_collide++;
      @(negedge clk);
      model_step();
      op = LD_NOP; sh = '0;
      compare();
    end
    checks++;
    if (n_hdr == 0 || n_pair == 0 || n_inv == 0 || n_shift == 0 || n_collide == 0) begin
      failures++;
      $display("FAIL coverage hdr=%0d pair=%0d inv=%0d shift=%0d collide=%0d",
               n_hdr, n_pair, n_inv, n_shift, n_collide);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
