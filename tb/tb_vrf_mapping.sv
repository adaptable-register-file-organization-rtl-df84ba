// tb_vrf_mapping: checks the PRMT/VRLT tables and the PFRL: after reset all
// VVRs are in memory and registers 0..63 are free; random map/unmap and
// free-list traffic against a model; a reload for MVL=128 leaves 8 free
// registers and every VVR in memory.
module tb_vrf_mapping;
  import ava_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  vvr_t rd_vvr [4]; preg_t rd_preg [4]; logic rd_loc [4];
  logic map = 0, unmap = 0, pop = 0, push = 0, reload = 0, empty;
  vvr_t map_vvr = '0, unmap_vvr = '0;
  preg_t map_preg = '0, push_val = '0, head;
  logic [6:0] rcount = '0;
  preg_t prmt [NUM_VVR];
  logic [NUM_VVR-1:0] vrlt;
  preg_t m_prmt [NUM_VVR];
  logic [NUM_VVR-1:0] m_vrlt;
  int fq [$];
  int checks = 0, failures = 0;

  vrf_mapping dut (.clk, .rst_n, .rd_vvr_i(rd_vvr), .rd_preg_o(rd_preg), .rd_loc_o(rd_loc),
                   .map_i(map), .map_vvr_i(map_vvr), .map_preg_i(map_preg), .unmap_i(unmap), .unmap_vvr_i(unmap_vvr),
                   .pfrl_pop_i(pop), .pfrl_head_o(head), .pfrl_empty_o(empty), .pfrl_push_i(push), .pfrl_push_val_i(push_val),
                   .reload_i(reload), .reload_count_i(rcount), .prmt_o(prmt), .vrlt_o(vrlt));

  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic compare();
    checks++;
    if (vrlt !== m_vrlt || empty != (fq.size() == 0) || (fq.size() && head != preg_t'(fq[0]))) begin
      failures++; $display("vrlt/pfrl mismatch, head %0d exp %0d", head, fq.size() ? fq[0] : -1);
    end
    for (int p = 0; p < 4; p++) begin
      rd_vvr[p] = vvr_t'($urandom);
      #1 checks++;
      if (rd_loc[p] !== m_vrlt[rd_vvr[p]] || (m_vrlt[rd_vvr[p]] && rd_preg[p] !== m_prmt[rd_vvr[p]])) begin
        failures++; $display("read port %0d vvr %0d", p, rd_vvr[p]);
      end
    end
  endtask

  initial begin
    for (int p = 0; p < 4; p++) rd_vvr[p] = '0;
    m_vrlt = '0;
    for (int i = 0; i < MAX_PREG; i++) fq.push_back(i);
    #12 rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      compare();
      if (t == 1000) begin
        reload = 1; rcount = 7'(num_pregs(3'd7));
        @(posedge clk); #1 reload = 0;
        m_vrlt = '0; fq.delete(); for (int i = 0; i < 8; i++) fq.push_back(i);
        checks++; if (rcount != 8) begin failures++; $display("num_pregs(7)=%0d", rcount); end
        continue;
      end
      pop = !empty && $urandom % 2;
      map = $urandom % 2; map_vvr = vvr_t'($urandom); map_preg = pop ? head : preg_t'($urandom);
      unmap = $urandom % 2; unmap_vvr = vvr_t'($urandom);
      if (unmap_vvr == map_vvr) unmap_vvr = map_vvr + 1'b1;
      push = fq.size() < MAX_PREG && $urandom % 2; push_val = preg_t'($urandom);
      @(posedge clk);
      if (unmap) m_vrlt[unmap_vvr] = 0;
      if (map) begin m_vrlt[map_vvr] = 1; m_prmt[map_vvr] = map_preg; end
      if (pop) void'(fq.pop_front());
      if (push) fq.push_back(int'(push_val));
      #1 map = 0; unmap = 0; pop = 0; push = 0;
    end
    // Table I: 64 32 21 16 12 10 9 8 physical registers
    begin
      int exp_n [8] = '{64, 32, 21, 16, 12, 10, 9, 8};
      for (int s = 0; s < 8; s++) begin
        checks++;
        if (int'(num_pregs(mvl_sel_t'(s))) != exp_n[s]) begin failures++; $display("num_pregs(%0d)", s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
