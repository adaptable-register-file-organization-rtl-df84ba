// tb_issue_logic: checks the scoreboard rules on directed scenarios.
//  - a reader cannot issue until its register's current owner is written;
//  - a swap-store (a reader of the old owner) holds back the new owner's
//    write until it has executed (rule 1);
//  - a swap-load into a register waits until every consumer of the previous
//    content has read it (rule 2), while readers of the new owner that are
//    already queued do not block it;
//  - written_o follows allocation and completion; unit-busy blocks issue.
// A random phase then drives every input at once on 8 registers (within
// the pipeline's rules: only written registers are re-owned, only queued
// readers are released) and compares issue decisions, generations and
// written flags every cycle with an integer reference scoreboard.
module tb_issue_logic;
  import ava_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc = 0; preg_t alloc_p = '0;
  logic add_en [3]; preg_t add_p [3]; logic add_g [3];
  logic [MAX_PREG-1:0] agen, written;
  logic ar_v = 0, ar_rdy = 1, ar_iss, m_v = 0, m_rdy = 1, m_iss;
  arith_op_t ar_h = '0; mem_op_t m_h = '0;
  done_t ar_d = '0, m_d = '0;
  logic ar_rel [3]; preg_t ar_rel_p [3]; logic ar_rel_g [3];
  logic m_rel = 0; preg_t m_rel_p = '0; logic m_rel_g = 0;
  int checks = 0, failures = 0;

  issue_logic dut (.clk, .rst_n, .alloc_i(alloc), .alloc_preg_i(alloc_p), .rd_add_en_i(add_en), .rd_add_preg_i(add_p),
    .rd_add_gen_i(add_g), .alloc_gen_o(agen), .written_o(written),
    .ar_head_valid_i(ar_v), .ar_head_i(ar_h), .ar_unit_ready_i(ar_rdy), .ar_issue_o(ar_iss),
    .mem_head_valid_i(m_v), .mem_head_i(m_h), .mem_unit_ready_i(m_rdy), .mem_issue_o(m_iss),
    .ar_done_i(ar_d), .ar_rel_en_i(ar_rel), .ar_rel_preg_i(ar_rel_p), .ar_rel_gen_i(ar_rel_g),
    .mem_done_i(m_d), .mem_rel_en_i(m_rel), .mem_rel_preg_i(m_rel_p), .mem_rel_gen_i(m_rel_g));

  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic expect_(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic tick();
    @(posedge clk); #1;
    alloc = 0; ar_d = '0; m_d = '0; m_rel = 0;
    for (int k = 0; k < 3; k++) begin add_en[k] = 0; ar_rel[k] = 0; end
  endtask

  task automatic add_reader(preg_t p, logic g);
    add_en[0] = 1; add_p[0] = p; add_g[0] = g;
  endtask

  // Random phase: a reference scoreboard kept with integers. Operations use
  // 8 registers so that owners, readers and writers collide often.
  int r_agen [MAX_PREG], r_dgen [MAX_PREG], r_cnt [MAX_PREG][2];
  int pend_p [$], pend_g [$];

  function automatic bit r_read(int p, int g); return r_dgen[p] == g; endfunction
  function automatic bit r_write(int p, int g); return r_cnt[p][1 - g] == 0; endfunction

  task automatic random_phase();
    for (int p = 0; p < MAX_PREG; p++) begin
      r_agen[p] = agen[p]; r_dgen[p] = written[p] ? r_agen[p] : 1 - r_agen[p];
      r_cnt[p][0] = int'(dut.rd_cnt_q[p][0]); r_cnt[p][1] = int'(dut.rd_cnt_q[p][1]);
    end
    for (int t = 0; t < 20000; t++) begin
      int ap, dp1, dp2, nrel;
      bit exp_ar, exp_m;
      // allocation of a written register
      ap = $urandom % 8;
      alloc = ($urandom % 4 == 0) && r_agen[ap] == r_dgen[ap]; alloc_p = preg_t'(ap);
      // new readers of current owners
      for (int k = 0; k < 3; k++) begin
        add_en[k] = $urandom % 3 == 0; add_p[k] = preg_t'($urandom % 8); add_g[k] = 1'(r_agen[add_p[k]]);
      end
      // releases of earlier readers (up to 3 arithmetic + 1 memory)
      for (int k = 0; k < 3; k++) ar_rel[k] = 0;
      m_rel = 0;
      nrel = pend_p.size() < 4 ? pend_p.size() : 4;
      for (int k = 0; k < nrel; k++) if ($urandom % 2) begin
        if (k < 3) begin ar_rel[k] = 1; ar_rel_p[k] = preg_t'(pend_p[k]); ar_rel_g[k] = 1'(pend_g[k]); end
        else begin m_rel = 1; m_rel_p = preg_t'(pend_p[k]); m_rel_g = 1'(pend_g[k]); end
      end
      // completions of unwritten owners (two different registers)
      dp1 = $urandom % 8; dp2 = (dp1 + 1 + $urandom % 7) % 8;
      ar_d = '0; m_d = '0;
      if (r_agen[dp1] != r_dgen[dp1] && $urandom % 2) begin ar_d.valid = 1; ar_d.has_dst = 1; ar_d.preg = preg_t'(dp1); ar_d.gen = 1'(r_agen[dp1]); end
      if (r_agen[dp2] != r_dgen[dp2] && $urandom % 2) begin m_d.valid = 1; m_d.has_dst = 1; m_d.preg = preg_t'(dp2); m_d.gen = 1'(r_agen[dp2]); end
      // queue heads
      ar_v = $urandom % 2; ar_rdy = $urandom % 4 != 0; ar_h = '0; ar_h.op = OP_VADD;
      ar_h.src_en = 3'($urandom); ar_h.pdst = preg_t'($urandom % 8); ar_h.dgen = 1'($urandom);
      for (int k = 0; k < 3; k++) begin ar_h.psrc[k] = preg_t'($urandom % 8); ar_h.sgen[k] = 1'($urandom); end
      m_v = $urandom % 2; m_rdy = $urandom % 4 != 0; m_h = '0; m_h.kind = mkind_e'($urandom % 4);
      m_h.preg = preg_t'($urandom % 8); m_h.gen = 1'($urandom);
      #1;
      exp_ar = ar_v && ar_rdy && r_write(ar_h.pdst, ar_h.dgen);
      for (int k = 0; k < 3; k++) if (ar_h.src_en[k] && !r_read(ar_h.psrc[k], ar_h.sgen[k])) exp_ar = 0;
      exp_m = m_v && m_rdy && ((m_h.kind == M_LOAD || m_h.kind == M_SWLOAD) ? r_write(m_h.preg, m_h.gen) : r_read(m_h.preg, m_h.gen));
      expect_("random: arithmetic issue", ar_iss, exp_ar);
      expect_("random: memory issue", m_iss, exp_m);
      for (int p = 0; p < 8; p++) begin
        expect_("random: generation", agen[p], 1'(r_agen[p]));
        expect_("random: written", written[p], r_agen[p] == r_dgen[p]);
      end
      @(posedge clk);
      // reference update
      for (int k = nrel - 1; k >= 0; k--)
        if ((k < 3 && ar_rel[k]) || (k == 3 && m_rel)) begin
          r_cnt[pend_p[k]][pend_g[k]]--; pend_p.delete(k); pend_g.delete(k);
        end
      for (int k = 0; k < 3; k++) if (add_en[k]) begin
        r_cnt[add_p[k]][add_g[k]]++; pend_p.push_back(int'(add_p[k])); pend_g.push_back(int'(add_g[k]));
      end
      if (ar_d.valid) r_dgen[ar_d.preg] = int'(ar_d.gen);
      if (m_d.valid) r_dgen[m_d.preg] = int'(m_d.gen);
      if (alloc) r_agen[ap] = 1 - r_agen[ap];
      #1;
    end
    ar_v = 0; m_v = 0; alloc = 0; ar_d = '0; m_d = '0; m_rel = 0;
    for (int k = 0; k < 3; k++) begin add_en[k] = 0; ar_rel[k] = 0; end
  endtask

  initial begin
    for (int k = 0; k < 3; k++) begin add_en[k] = 0; add_p[k] = '0; add_g[k] = 0; ar_rel[k] = 0; ar_rel_p[k] = '0; ar_rel_g[k] = 0; end
    #12 rst_n = 1; #1;
    expect_("all written after reset", &written, 1'b1);
    // load into p5 (new owner, gen 1): allocate, then an add reading p5
    alloc = 1; alloc_p = 5; tick();
    expect_("p5 gen flipped", agen[5], 1'b1);
    expect_("p5 not written", written[5], 1'b0);
    add_reader(5, 1); tick();                       // the add is queued
    ar_v = 1; ar_h = '0; ar_h.src_en = 3'b001; ar_h.psrc[0] = 5; ar_h.sgen[0] = 1; ar_h.pdst = 6; ar_h.dgen = 0;
    #1 expect_("reader waits for the load", ar_iss, 1'b0);
    m_d.valid = 1; m_d.has_dst = 1; m_d.preg = 5; m_d.gen = 1; tick();  // load done
    expect_("reader issues once written", ar_iss, 1'b1);
    ar_rdy = 0; #1 expect_("busy unit blocks issue", ar_iss, 1'b0); ar_rdy = 1;
    // swap-store of p5 (reader of gen 1), then p5 handed to a new owner (gen 0)
    add_reader(5, 1); tick();
    alloc = 1; alloc_p = 5; tick();
    m_v = 1; m_h = '0; m_h.kind = M_SWLOAD; m_h.preg = 5; m_h.gen = 0;
    #1 expect_("rule 2: swap-load waits for old readers", m_iss, 1'b0);
    // a younger reader of the new owner does not block the write
    add_reader(5, 0); tick();
    // the add (old reader) finishes reading
    ar_rel[0] = 1; ar_rel_p[0] = 5; ar_rel_g[0] = 1; tick();
    expect_("still the swap-store pending", m_iss, 1'b0);
    // the swap-store executes: notify the new owner (rule 1)
    m_rel = 1; m_rel_p = 5; m_rel_g = 1; tick();
    expect_("rule 1: new owner may write", m_iss, 1'b1);
    // arithmetic write into a register whose old value a store still reads
    m_v = 0;
    add_reader(9, 0); tick();            // store reading p9 (gen 0)
    alloc = 1; alloc_p = 9; tick();      // p9 re-owned by an add (gen 1)
    ar_h = '0; ar_h.src_en = 3'b000; ar_h.pdst = 9; ar_h.dgen = 1;
    #1 expect_("write waits for old reader", ar_iss, 1'b0);
    m_rel = 1; m_rel_p = 9; m_rel_g = 0; tick();
    expect_("write allowed after the store read", ar_iss, 1'b1);
    ar_d.valid = 1; ar_d.has_dst = 1; ar_d.preg = 9; ar_d.gen = 1; tick();
    expect_("p9 written", written[9], 1'b1);
    random_phase();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
