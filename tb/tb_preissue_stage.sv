// tb_preissue_stage: checks the second renaming level (VRF-Mapping + Swap
// Logic + pre-issue control) at MVL=128, where only 8 physical registers
// exist. The testbench acts as the pre-issue queue, the access counters and
// the issue logic, and keeps its own VVR -> physical register map built only
// from what the stage reports. Every cycle it checks that:
//  - a fresh register comes from the free pool and is not mapped elsewhere;
//  - a reclaim names the lowest mapped, valid, written VVR whose counter is
//    zero, and only happens when the memory pipeline is empty;
//  - a swap-store names the victim with the lowest counter >= 1 that is not
//    a source of the head instruction, at the VVR's M-VRF slot, with VL=MVL;
//  - a swap-load brings a missing source into a free register;
//  - a dispatched operation carries the mapped registers and generations;
//  - nothing is dispatched into a full queue.
// A directed sequence forces each of these situations, followed by random
// instructions; each mechanism must have been seen at least once. Random
// counter values keep the invariant of the real pipeline: the VVRs of the
// instruction at the head were counted at rename and are not yet committed,
// so their counters are at least 1.
module tb_preissue_stage;
  import ava_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mvl_sel_t sel = mvl_sel_t'(7);
  logic [ADDR_W-1:0] base = 32'h0010_0000;
  logic reload = 0, hv = 0, pop;
  ren_inst_t head = '0;
  rac_t rac [NUM_VVR];
  logic [NUM_VVR-1:0] vvalid = '1;
  logic [MAX_PREG-1:0] agen = '0, written = '1;
  logic alloc; preg_t alloc_p;
  logic rda_en [3]; preg_t rda_p [3]; logic rda_g [3];
  logic mpe = 1, mq_full = 0, mq_push, aq_full = 0, aq_push;
  mem_op_t mq; arith_op_t aq;
  logic ev_rc, ev_ss, ev_sl, ev_st;
  int checks = 0, failures = 0;
  int n_rc = 0, n_ss = 0, n_sl = 0, n_st = 0, n_fresh = 0, n_reuse = 0, n_ar = 0, n_mem = 0;

  preissue_stage dut (.clk, .rst_n, .mvl_sel_i(sel), .mvrf_base_i(base), .reload_i(reload),
    .head_valid_i(hv), .head_i(head), .head_pop_o(pop), .rac_i(rac), .vvr_valid_i(vvalid),
    .alloc_gen_i(agen), .written_i(written), .alloc_o(alloc), .alloc_preg_o(alloc_p),
    .rd_add_en_o(rda_en), .rd_add_preg_o(rda_p), .rd_add_gen_o(rda_g), .mem_pipe_empty_i(mpe),
    .memq_full_i(mq_full), .memq_push_o(mq_push), .memq_data_o(mq), .arq_full_i(aq_full),
    .arq_push_o(aq_push), .arq_data_o(aq), .ev_reclaim_o(ev_rc), .ev_swap_store_o(ev_ss),
    .ev_swap_load_o(ev_sl), .ev_stall_o(ev_st));

  int m_map [NUM_VVR];           // -1: not in the P-VRF
  bit m_free [MAX_PREG];
  int npregs;
  bit dbg = 0;
  bit popped;   // the head was taken in the cycle just simulated

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("%0t: %s", $time, msg); end
  endtask

  function automatic bit is_excl(int v);
    for (int k = 0; k < 3; k++) if (hv && head.src_en[k] && int'(head.src[k]) == v) return 1;
    return 0;
  endfunction

  initial begin repeat (2000000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // one cycle: inputs are set by the caller; check outputs and update the model
  task automatic cycle();
    #1;
    if (dbg) $display("%0t hv=%b op=%s dst=%0d alloc=%b p=%0d pop=%b rc=%b ss=%b sl=%b st=%b map=%0d", $time, hv, head.op.name(), head.dst, alloc, alloc_p, pop, ev_rc, ev_ss, ev_sl, ev_st, m_map[head.dst]);
    check(!(mq_push && mq_full) && !(aq_push && aq_full), "push into a full queue");
    if (ev_rc) begin
      int exp;
      n_rc++;
      exp = -1;
      for (int v = 0; v < NUM_VVR; v++)
        if (exp < 0 && m_map[v] >= 0 && vvalid[v] && written[m_map[v]] && rac[v] == 0) exp = v;
      check(mpe, "reclaim while memory operations are in flight");
      check(exp >= 0 && int'(dut.rc_vvr) == exp && int'(dut.rc_preg) == m_map[exp], "reclaim candidate wrong");
      if (exp >= 0) begin m_free[m_map[exp]] = 1; m_map[exp] = -1; end
    end else if (ev_ss) begin
      int exp, best;
      n_ss++;
      exp = -1; best = 99;
      for (int v = 0; v < NUM_VVR; v++)
        if (m_map[v] >= 0 && rac[v] >= 1 && !is_excl(v) && int'(rac[v]) < best) begin best = int'(rac[v]); exp = v; end
      check(exp >= 0 && int'(mq.vvr) == exp && int'(mq.preg) == m_map[exp], "swap-store victim wrong");
      check(mq_push && mq.kind == M_SWSTORE && mq.addr == base + (ADDR_W'(mq.vvr) << 10) && mq.vl == 128 &&
            mq.gen == agen[mq.preg], "swap-store request wrong");
      check(rda_en[0] && rda_p[0] == mq.preg && rda_g[0] == agen[mq.preg], "swap-store does not register a reader");
      if (exp >= 0) begin m_free[m_map[exp]] = 1; m_map[exp] = -1; end
    end else if (ev_sl) begin
      n_sl++;
      check(alloc && m_free[alloc_p] && mq_push && mq.kind == M_SWLOAD && mq.preg == alloc_p &&
            mq.gen == !agen[alloc_p] && mq.addr == base + (ADDR_W'(mq.vvr) << 10) && mq.vl == 128, "swap-load request wrong");
      check(m_map[mq.vvr] < 0 && is_excl(int'(mq.vvr)), "swap-load of a VVR that is not a missing source");
      m_free[alloc_p] = 0; m_map[mq.vvr] = int'(alloc_p);
    end else if (alloc) begin
      if (m_map[head.dst] >= 0) begin
        n_reuse++;
        check(int'(alloc_p) == m_map[head.dst] && written[alloc_p], "reused destination register wrong");
      end else begin
        n_fresh++;
        check(m_free[alloc_p], "fresh register is not free");
        m_free[alloc_p] = 0; m_map[head.dst] = int'(alloc_p);
      end
    end
    if (ev_st) n_st++;
    if (pop) begin
      for (int k = 0; k < 3; k++) if (head.src_en[k]) check(m_map[head.src[k]] >= 0, "dispatch with an unmapped source");
      if (head.has_dst) check(m_map[head.dst] >= 0, "dispatch with an unmapped destination");
      if (aq_push) begin
        n_ar++;
        check(aq.op == head.op && aq.src_en == head.src_en && aq.vl == head.vl && aq.rob == head.rob &&
              int'(aq.pdst) == m_map[head.dst] && aq.dgen == agen[aq.pdst], "arithmetic dispatch wrong");
        for (int k = 0; k < 3; k++) if (head.src_en[k])
          check(int'(aq.psrc[k]) == m_map[head.src[k]] && aq.sgen[k] == agen[aq.psrc[k]] &&
                rda_en[k] && rda_p[k] == aq.psrc[k], "arithmetic source wrong");
      end else begin
        n_mem++;
        check(mq_push && mq.addr == head.addr && mq.vl == head.vl && mq.rob == head.rob, "memory dispatch wrong");
        if (head.op == OP_VLE) check(mq.kind == M_LOAD && int'(mq.preg) == m_map[head.dst], "load dispatch wrong");
        else check(mq.kind == M_STORE && int'(mq.preg) == m_map[head.src[0]] && rda_en[0], "store dispatch wrong");
      end
    end else check(!aq_push && !(mq_push && (mq.kind == M_LOAD || mq.kind == M_STORE)), "dispatch without pop");
    @(posedge clk);
    popped = pop;
    if (alloc) agen[alloc_p] = !agen[alloc_p];
    @(negedge clk);
  endtask

  task automatic send(vop_e op, int d, int s0, int s1, int s2);
    head = '0; head.op = op; head.dst = vvr_t'(d);
    head.src[0] = vvr_t'(s0); head.src[1] = vvr_t'(s1); head.src[2] = vvr_t'(s2);
    head.has_dst = (op != OP_VSE);
    head.src_en = (op == OP_VLE) ? 3'b000 : (op == OP_VSE) ? 3'b001 : (op == OP_VMACC) ? 3'b111 : 3'b011;
    head.vl = vl_t'(1 + $urandom % 128); head.addr = ($urandom % 1024) << 6; head.rob = rob_idx_t'($urandom);
    hv = 1;
    do cycle(); while (!popped);
    hv = 0;
  endtask

  initial begin
    for (int v = 0; v < NUM_VVR; v++) begin m_map[v] = -1; rac[v] = rac_t'(2); end
    for (int p = 0; p < MAX_PREG; p++) m_free[p] = 0;
    #12 rst_n = 1;
    @(negedge clk);
    reload = 1; @(posedge clk); @(negedge clk); reload = 0;
    npregs = int'(num_pregs(sel));
    for (int p = 0; p < npregs; p++) m_free[p] = 1;
    check(npregs == 8, "MVL=128 does not give 8 registers");
    // fill all 8 registers with loads
    for (int v = 32; v < 40; v++) send(OP_VLE, v, 0, 0, 0);
    check(n_fresh == 8 && n_ss == 0, "first 8 destinations did not use fresh registers");
    // ninth register: swap-store of the lowest-count victim (VVR 34)
    rac[34] = 1;
    send(OP_VLE, 40, 0, 0, 0);
    check(n_ss == 1 && m_map[34] < 0, "VVR 34 was not swapped out");
    // source 34 is missing: swap-store a victim (not 34, not 32), then swap-load 34
    rac[34] = 2; rac[33] = 1; rac[32] = 1;
    send(OP_VADD, 41, 34, 32, 0);
    check(n_sl == 1 && m_map[34] >= 0 && m_map[32] >= 0 && m_map[33] < 0, "swap-load sequence wrong");
    // reclaim waits for the memory pipeline
    rac[38] = 0; mpe = 0;
    for (int i = 0; i < 5; i++) cycle();
    check(n_rc == 0, "reclaim while memory busy");
    mpe = 1; cycle();
    check(n_rc == 1 && m_map[38] < 0, "reclaim of VVR 38 missing");
    rac[38] = 2;
    // destination still mapped from an earlier life: waits for the write
    send(OP_VLE, 38, 0, 0, 0);
    written[m_map[36]] = 0;
    hv = 1; head.dst = 36; head.op = OP_VLE; head.src_en = 0; head.has_dst = 1;
    for (int i = 0; i < 4; i++) cycle();
    check(n_reuse == 0 && !popped, "stale destination used before it was written");
    written = '1;
    send(OP_VLE, 36, 0, 0, 0);
    check(n_reuse == 1, "stale destination not reused");
    // full queues stall dispatch
    aq_full = 1;
    hv = 1; head.op = OP_VSUB; head.dst = 37; head.src = '{38, 39, 0}; head.src_en = 3'b011;
    for (int i = 0; i < 6; i++) cycle();
    check(!popped, "dispatch into a full queue");
    aq_full = 0;
    send(OP_VSUB, 37, 38, 39, 0);
    // random traffic
    for (int t = 0; t < 3000; t++) begin
      int d, a, b, c;
      d = $urandom % 64; a = $urandom % 64; b = $urandom % 64; c = $urandom % 64;
      for (int v = 0; v < NUM_VVR; v++) rac[v] = rac_t'(($urandom % 8 == 0) ? 0 : 1 + $urandom % 4);
      mq_full = $urandom % 5 == 0; aq_full = $urandom % 5 == 0; mpe = $urandom % 2;
      if (b == a) b = (a + 1) % 64;
      if (c == a || c == b) c = (b + 1) % 64;
      if (c == a) c = (a + 2) % 64;
      hv = 1;
      head = '0; head.op = vop_e'($urandom % 6); head.dst = vvr_t'(d);
      head.src[0] = vvr_t'(a); head.src[1] = vvr_t'(b); head.src[2] = vvr_t'(c);
      head.has_dst = (head.op != OP_VSE);
      head.src_en = (head.op == OP_VLE) ? 3'b000 : (head.op == OP_VSE) ? 3'b001 : (head.op == OP_VMACC) ? 3'b111 : 3'b011;
      if (head.src_en[2]) head.src[2] = vvr_t'(d);
      if (head.src_en[2] && (d == a || d == b)) head.src_en = 3'b011;
      head.vl = vl_t'(1 + $urandom % 128); head.addr = ($urandom % 1024) << 6;
      // the head's own VVRs were counted at rename and are not committed yet
      for (int k = 0; k < 3; k++) if (head.src_en[k] && rac[head.src[k]] == 0) rac[head.src[k]] = 1;
      if (head.has_dst && rac[head.dst] == 0) rac[head.dst] = 1;
      popped = 0;
      for (int i = 0; i < 40 && !popped; i++) begin
        if (i > 10) begin mq_full = 0; aq_full = 0; mpe = 1; end
        cycle();
      end
      if (!popped) begin
        mq_full = 0; aq_full = 0; mpe = 1;
        do cycle(); while (!popped);
      end
      hv = 0;
    end
    check(n_rc > 0 && n_ss > 0 && n_sl > 0 && n_st > 0 && n_fresh > 0 && n_reuse > 0 && n_ar > 0 && n_mem > 0,
          "a mechanism was never exercised");
    $display("reclaim=%0d swap_store=%0d swap_load=%0d stall=%0d fresh=%0d reuse=%0d", n_rc, n_ss, n_sl, n_st, n_fresh, n_reuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
