// tb_vmu: checks the vector memory unit with 8 lanes and the memory model
// (12-cycle latency, random grant stalls) at MVL=16, 48 and 128. Random
// loads, stores, swap-stores and swap-loads with random vector lengths run
// one after another; a model of the registers and of memory predicts every
// memory word and register element. Stores must only write elements below
// VL, loads must leave elements at or past VL untouched, and the completion
// report must carry the operation's register, generation and ROB index.
// A load of R rows must issue its R requests in R cycles plus the cycles
// the memory refused a request (one 512-bit row per cycle).
module tb_vmu;
  import ava_pkg::*;
  localparam int LINES = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mvl_sel_t sel = '0;
  logic [4:0] rpr;
  logic start = 0, ready;
  mem_op_t op = '0;
  logic lrd_en; entry_t lrd_addr; elem_t lrd_data [LANES];
  logic [LANES-1:0] lwr_en; entry_t lwr_addr; elem_t lwr_data [LANES];
  logic mreq, mwe, mgnt, mrv; logic [LINE_AW-1:0] maddr; logic [MEM_W-1:0] mwd, mrd; logic [LANES-1:0] mbe;
  done_t done; logic rel_en; preg_t rel_p; logic rel_g;
  logic [ELEM_W-1:0] ref_mem [LINES*LANES];
  elem_t ref_reg [LANES][LANE_ENTRIES];
  int checks = 0, failures = 0;
  bit dbg = 0;

  assign rpr = rows_per_reg(sel);

  vmu dut (.clk, .rst_n, .rows_per_reg_i(rpr), .start_i(start), .op_i(op), .ready_o(ready),
    .mem_rd_en_o(lrd_en), .mem_rd_addr_o(lrd_addr), .mem_rd_data_i(lrd_data),
    .mem_wr_en_o(lwr_en), .mem_wr_addr_o(lwr_addr), .mem_wr_data_o(lwr_data),
    .mem_req_o(mreq), .mem_we_o(mwe), .mem_addr_o(maddr), .mem_wdata_o(mwd), .mem_be_o(mbe),
    .mem_gnt_i(mgnt), .mem_rvalid_i(mrv), .mem_rdata_i(mrd),
    .done_o(done), .rel_en_o(rel_en), .rel_preg_o(rel_p), .rel_gen_o(rel_g));

  logic [ELEM_W-1:0] zero_e; assign zero_e = '0;
  entry_t zero_a [3]; assign zero_a = '{default: '0};
  for (genvar l = 0; l < LANES; l++) begin : g_l
    vector_lane u_lane (.clk, .rst_n, .ar_rd_en_i(1'b0), .ar_rd_addr_i(zero_a), .fu_valid_i(1'b0), .fu_op_i(OP_VADD),
      .ar_wr_en_i(1'b0), .ar_wr_addr_i('0), .mem_rd_en_i(lrd_en), .mem_rd_addr_i(lrd_addr), .mem_rd_data_o(lrd_data[l]),
      .mem_wr_en_i(lwr_en[l]), .mem_wr_addr_i(lwr_addr), .mem_wr_data_i(lwr_data[l]));
  end

  logic mgnt_raw;
  tb_mem_model #(.LINES(LINES), .LAT(12), .STALL_PCT(25)) u_mem (.clk, .rst_n, .req_i(mreq), .we_i(mwe), .addr_i(maddr),
    .wdata_i(mwd), .be_i(mbe), .gnt_o(mgnt_raw), .rvalid_o(mrv), .rdata_o(mrd));
  assign mgnt = mgnt_raw;

  initial begin repeat (500000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(mkind_e k, int p, int vl, int unsigned addr, output int req_span);
    int rows, first, last, cyc, stalls;
    rows = int'(rpr);
    op = '0; op.kind = k; op.preg = preg_t'(p); op.gen = $urandom % 2; op.vvr = vvr_t'($urandom);
    op.addr = ADDR_W'(addr); op.vl = vl_t'(vl); op.rob = rob_idx_t'($urandom);
    if (dbg) $display("%0t run %s p=%0d vl=%0d", $time, k.name(), p, vl);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    first = -1; last = -1; cyc = 0; stalls = 0;
    while (!done.valid) begin
      if (mreq && mgnt) begin if (first < 0) first = cyc; last = cyc; end
      if (mreq && !mgnt && first >= 0) stalls++;
      @(negedge clk); cyc++;
    end
    if (mreq && mgnt) last = cyc;
    req_span = last - first + 1 - stalls;
    checks++;
    if (done.preg != op.preg || done.gen != op.gen || done.rob != op.rob ||
        done.has_dst != (k == M_LOAD || k == M_SWLOAD) || done.to_rob != (k == M_LOAD || k == M_STORE) ||
        rel_en != (k == M_STORE || k == M_SWSTORE)) begin
      failures++; $display("completion report wrong for %s", k.name());
    end
    // model
    for (int e = 0; e < vl; e++) begin
      int unsigned w;
      w = addr / 8 + e;
      if (k == M_LOAD || k == M_SWLOAD) ref_reg[e % 8][p * rows + e / 8] = ref_mem[w];
      else ref_mem[w] = ref_reg[e % 8][p * rows + e / 8];
    end
    @(negedge clk);
  endtask

  initial begin
    int span;
    #1;
    for (int l = 0; l < LINES; l++) for (int e = 0; e < LANES; e++) ref_mem[l * LANES + e] = u_mem.pattern(l, e);
    #11 rst_n = 1;
    for (int s = 0; s < 8; s++) begin
      int np, mvl;
      if (s != 0 && s != 2 && s != 7) continue;
      sel = mvl_sel_t'(s); #1;
      np = int'(num_pregs(sel)); mvl = int'(mvl_elems(sel));
      // fill every register with a full load
      for (int p = 0; p < np; p++) run(M_LOAD, p, mvl, 32'h0_0000 + p * 1024, span);
      for (int t = 0; t < 80; t++) begin
        int k, p, vl;
        k = $urandom % 4; p = $urandom % np;
        vl = (k >= 2) ? mvl : 1 + $urandom % mvl;
        run(mkind_e'(k), p, vl, ((k >= 2) ? 32'h2_0000 : 32'h1_0000) + ($urandom % 32) * 1024, span);
      end
      // timing: one request per cycle apart from cycles the memory refused
      run(M_LOAD, 0, mvl, 32'h0_0000, span);
      checks++;
      if (span != mvl / 8) begin failures++; $display("load of %0d rows issued over %0d cycles", mvl / 8, span); end
      // dump every register and compare memory
      for (int p = 0; p < np; p++) run(M_STORE, p, mvl, 32'h3_0000 + p * 1024, span);
      for (int unsigned w = 32'h1_0000 / 8; w < 32'h3_0000 / 8 + 64 * 128; w++) begin
        checks++;
        if (u_mem.mem[w / 8][w % 8] !== ref_mem[w]) begin
          failures++;
          if (failures < 10) $display("MVL %0d word %0h: %h exp %h", mvl, w, u_mem.mem[w / 8][w % 8], ref_mem[w]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
