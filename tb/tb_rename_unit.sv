// tb_rename_unit: checks the first renaming level (RAT + FRL + valid bits)
// against a reference model. Random instructions are offered with random
// back-pressure (pre-issue queue full, ROB full, block) and random access
// counter values, and committed instructions free their old destination in
// program order. For every accepted instruction the renamed sources must be
// the model's RAT contents, the destination the head of the model's free
// list, the ROB old-destination the previous mapping of vd, and the counter
// update ports must name the right VVRs. Stall and grant must follow the
// model's conditions, and the valid bits must match cycle by cycle.
// After reset the RAT maps register i to VVR i and VVRs 32..63 are free
// (the initial state of the paper's first figure), so the first
// destinations handed out are 32, 33, ...
module tb_rename_unit;
  import ava_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req = 0, gnt, stall, block = 0, pq_full = 0, rob_full = 0, pq_push, rob_alloc;
  vinst_t inst = '0;
  ren_inst_t pq;
  rob_idx_t rob_idx = '0;
  vvr_t old_dst;
  rac_t rac [NUM_VVR];
  logic inc_en [4]; vvr_t inc_vvr [4]; logic dec_en; vvr_t dec_vvr;
  logic free = 0; vvr_t free_vvr = '0;
  logic sv_en [2]; vvr_t sv_vvr [2];
  logic [NUM_VVR-1:0] valid;
  int checks = 0, failures = 0;

  rename_unit dut (.clk, .rst_n, .core_req_i(req), .core_inst_i(inst), .core_gnt_o(gnt), .core_stall_o(stall),
    .block_i(block), .pq_full_i(pq_full), .pq_push_o(pq_push), .pq_data_o(pq), .rob_full_i(rob_full),
    .rob_idx_i(rob_idx), .rob_alloc_o(rob_alloc), .rob_old_dst_o(old_dst), .rac_i(rac),
    .rac_inc_en_o(inc_en), .rac_inc_vvr_o(inc_vvr), .rac_dec_en_o(dec_en), .rac_dec_vvr_o(dec_vvr),
    .free_i(free), .free_vvr_i(free_vvr), .set_valid_i(sv_en), .set_valid_vvr_i(sv_vvr), .vvr_valid_o(valid));

  vvr_t m_rat [NUM_LREG];
  vvr_t m_frl [$];
  vvr_t m_pending [$];   // old destinations waiting for commit
  logic [NUM_VVR-1:0] m_valid;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("%0t: %s", $time, msg); end
  endtask

  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int first_dst = -1;
    for (int i = 0; i < NUM_LREG; i++) m_rat[i] = vvr_t'(i);
    for (int i = NUM_LREG; i < NUM_VVR; i++) m_frl.push_back(vvr_t'(i));
    m_valid = '1;
    for (int i = 0; i < NUM_VVR; i++) rac[i] = '0;
    sv_en = '{default: 1'b0}; sv_vvr = '{default: '0};
    #12 rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      logic [2:0] se; logic hd, rac_ok, exp_ok;
      @(negedge clk);
      req = ($urandom % 4) != 0;
      inst.op = vop_e'($urandom % 6); inst.vd = lreg_t'($urandom); inst.vs1 = lreg_t'($urandom);
      inst.vs2 = lreg_t'($urandom); inst.vl = vl_t'($urandom); inst.addr = $urandom;
      block = ($urandom % 10) == 0; pq_full = ($urandom % 10) == 0; rob_full = ($urandom % 10) == 0;
      rob_idx = rob_idx_t'($urandom);
      for (int i = 0; i < NUM_VVR; i++) rac[i] = rac_t'(($urandom % 20 == 0) ? 5 + $urandom % 3 : $urandom % 5);
      free = (m_pending.size() > 0) && ($urandom % 2);
      free_vvr = free ? m_pending[0] : '0;
      for (int k = 0; k < 2; k++) begin sv_en[k] = $urandom % 3 == 0; sv_vvr[k] = vvr_t'($urandom); end
      #1;
      unique case (inst.op)
        OP_VLE: begin hd = 1; se = 3'b000; end
        OP_VSE: begin hd = 0; se = 3'b001; end
        OP_VMACC: begin hd = 1; se = 3'b111; end
        default: begin hd = 1; se = 3'b011; end
      endcase
      rac_ok = !((se[0] && rac[m_rat[inst.vs1]] >= 5) || (se[1] && rac[m_rat[inst.vs2]] >= 5) ||
                 (se[2] && rac[m_rat[inst.vd]] >= 5));
      exp_ok = !block && !pq_full && !rob_full && rac_ok && !(hd && m_frl.size() == 0);
      check(stall == !exp_ok, "stall wrong");
      check(gnt == (req && exp_ok), "grant wrong");
      check(pq_push == gnt && rob_alloc == gnt, "push/alloc differ from grant");
      check(valid == m_valid, "valid bits differ");
      if (gnt) begin
        check(pq.op == inst.op && pq.has_dst == hd && pq.src_en == se, "decoded fields wrong");
        check(pq.src[0] == m_rat[inst.vs1] && pq.src[1] == m_rat[inst.vs2] && pq.src[2] == m_rat[inst.vd], "renamed sources wrong");
        check(old_dst == m_rat[inst.vd], "old destination wrong");
        check(pq.vl == inst.vl && pq.addr == inst.addr && pq.rob == rob_idx, "pass-through fields wrong");
        if (hd) begin
          check(pq.dst == m_frl[0], "new destination not the free-list head");
          if (first_dst < 0) begin first_dst = int'(pq.dst); check(pq.dst == 32, "first destination is not VVR 32"); end
        end
        check(inc_en[0] == hd && (!hd || inc_vvr[0] == pq.dst), "destination increment wrong");
        for (int k = 0; k < 3; k++) check(inc_en[k+1] == se[k] && (!se[k] || inc_vvr[k+1] == pq.src[k]), "source increment wrong");
        check(dec_en == hd && (!hd || dec_vvr == m_rat[inst.vd]), "old-destination decrement wrong");
      end else begin
        check(!inc_en[0] && !inc_en[1] && !inc_en[2] && !inc_en[3] && !dec_en, "counter update without grant");
      end
      @(posedge clk);
      // model update, same ordering as the hardware: set first, rename clears
      for (int k = 0; k < 2; k++) if (sv_en[k]) m_valid[sv_vvr[k]] = 1'b1;
      if (free) begin void'(m_pending.pop_front()); m_frl.push_back(free_vvr); end
      if (gnt && hd) begin
        vvr_t nd;
        nd = m_frl.pop_front();
        m_pending.push_back(m_rat[inst.vd]);
        m_rat[inst.vd] = nd;
        m_valid[nd] = 1'b0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
