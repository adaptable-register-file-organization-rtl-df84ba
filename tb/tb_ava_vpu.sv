// tb_ava_vpu: end-to-end test of the AVA vector unit at its default sizes.
//
// A scalar-core driver sends random vector programs (loads, stores, add,
// sub, mul, multiply-accumulate, random vector lengths) to the unit, and an
// architectural reference model executes the same program in order. Three
// phases run with MVL = 16, 128 and 48 elements (64, 8 and 21 physical
// registers), the configuration register being rewritten in between. Each
// phase loads all 32 logical registers, runs the random program, then
// stores every logical register with VL = MVL; the memory contents are then
// compared with the model, element by element, wherever the model knows the
// value (elements past an instruction's VL are left undefined by design).
// The testbench counts how often each mechanism happened (renames, rename
// stalls, aggressive reclaims, swap-stores, swap-loads, pre-issue stalls,
// commits, MVL changes) and fails if any never did. It also checks that
// MVL=128 reports 8 physical registers' worth of swapping and that the
// memory port carried 512-bit rows.
module tb_ava_vpu;
  import ava_pkg::*;

  localparam int unsigned LINES     = 8192;
  localparam int unsigned MVRF_BASE = 32'h4_0000;   // 256 KB, 64 KB long
  localparam int unsigned INIT_BASE = 32'h0_0000;   // 32 x 1 KB initial data
  localparam int unsigned SCR_BASE  = 32'h1_0000;   // 32 x 1 KB scratch
  localparam int unsigned DUMP_BASE = 32'h2_0000;   // 32 x 1 KB final dump
  localparam int unsigned NOPS      = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               core_req, core_gnt, core_stall;
  vinst_t             core_inst;
  logic               cfg_we;
  mvl_sel_t           cfg_sel, mvl_sel;
  logic [ADDR_W-1:0]  cfg_base;
  logic               idle;
  logic               mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [LINE_AW-1:0] mem_addr;
  logic [MEM_W-1:0]   mem_wdata, mem_rdata;
  logic [LANES-1:0]   mem_be;
  ava_events_t        ev;

  ava_vpu dut (
    .clk, .rst_n,
    .core_req_i(core_req), .core_inst_i(core_inst), .core_gnt_o(core_gnt), .core_stall_o(core_stall),
    .cfg_we_i(cfg_we), .cfg_mvl_sel_i(cfg_sel), .cfg_mvrf_base_i(cfg_base),
    .idle_o(idle), .mvl_sel_o(mvl_sel),
    .mem_req_o(mem_req), .mem_we_o(mem_we), .mem_addr_o(mem_addr), .mem_wdata_o(mem_wdata),
    .mem_be_o(mem_be), .mem_gnt_i(mem_gnt), .mem_rvalid_i(mem_rvalid), .mem_rdata_i(mem_rdata),
    .events_o(ev)
  );

  tb_mem_model #(.LINES(LINES), .LAT(12), .STALL_PCT(10)) u_mem (
    .clk, .rst_n, .req_i(mem_req), .we_i(mem_we), .addr_i(mem_addr), .wdata_i(mem_wdata),
    .be_i(mem_be), .gnt_o(mem_gnt), .rvalid_o(mem_rvalid), .rdata_o(mem_rdata)
  );

  // reference model
  logic [ELEM_W-1:0] ref_mem [LINES*LANES];
  logic [ELEM_W-1:0] ref_reg [NUM_LREG][128];
  int                ref_kl  [NUM_LREG];     // known prefix length

  int checks = 0, failures = 0;
  int n_rename = 0, n_rstall = 0, n_reclaim = 0, n_swst = 0, n_swld = 0;
  int n_pstall = 0, n_commit = 0, n_reconf = 0, n_sent = 0;
  int swst_at128 = 0, swst_at16 = 0;

  always_ff @(posedge clk) if (rst_n) begin
    if (ev.rename) n_rename++;
    if (ev.rename_stall) n_rstall++;
    if (ev.reclaim) n_reclaim++;
    if (ev.swap_store) begin n_swst++; if (mvl_sel == 3'd7) swst_at128++; if (mvl_sel == 3'd0) swst_at16++; end
    if (ev.swap_load) n_swld++;
    if (ev.preissue_stall) n_pstall++;
    if (ev.commit) n_commit++;
  end

  // watchdog
  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int min2(int a, int b);
    return a < b ? a : b;
  endfunction

  task automatic send(vop_e op, int vd, int vs1, int vs2, int vl, int unsigned addr);
    int mvl;
    mvl = int'(mvl_elems(mvl_sel));
    core_inst.op   = op;
    core_inst.vd   = lreg_t'(vd);
    core_inst.vs1  = lreg_t'(vs1);
    core_inst.vs2  = lreg_t'(vs2);
    core_inst.vl   = vl_t'(vl);
    core_inst.addr = ADDR_W'(addr);
    core_req = 1'b1;
    // the grant is stable between the falling and the rising edge
    @(negedge clk);
    while (!core_gnt) @(negedge clk);
    @(posedge clk);
    #1 core_req = 1'b0;
    n_sent++;
    // architectural effect, in program order
    case (op)
      OP_VLE: begin
        for (int e = 0; e < vl; e++) ref_reg[vd][e] = ref_mem[addr / 8 + e];
        ref_kl[vd] = vl;
      end
      OP_VSE: begin
        for (int e = 0; e < vl; e++) ref_mem[addr / 8 + e] = ref_reg[vs1][e];
      end
      default: begin
        logic [ELEM_W-1:0] r [128];
        int kl;
        kl = min2(vl, min2(ref_kl[vs1], ref_kl[vs2]));
        if (op == OP_VMACC) kl = min2(kl, ref_kl[vd]);
        for (int e = 0; e < vl; e++) begin
          case (op)
            OP_VADD:  r[e] = ref_reg[vs1][e] + ref_reg[vs2][e];
            OP_VSUB:  r[e] = ref_reg[vs1][e] - ref_reg[vs2][e];
            OP_VMUL:  r[e] = ref_reg[vs1][e] * ref_reg[vs2][e];
            default:  r[e] = ref_reg[vs1][e] * ref_reg[vs2][e] + ref_reg[vd][e];
          endcase
        end
        for (int e = 0; e < vl; e++) ref_reg[vd][e] = r[e];
        ref_kl[vd] = kl;
      end
    endcase
    if (vl > mvl) $fatal(1, "vl above MVL");
  endtask

  task automatic wait_idle();
    do @(posedge clk); while (!idle);
    #1;
  endtask

  task automatic configure(int sel);
    wait_idle();
    cfg_sel = mvl_sel_t'(sel);
    cfg_base = ADDR_W'(MVRF_BASE);
    cfg_we = 1'b1;
    @(posedge clk);
    #1 cfg_we = 1'b0;
    n_reconf++;
    checks++;
    @(posedge clk);
    #1;
    if (mvl_sel != mvl_sel_t'(sel)) begin failures++; $display("MVL not set"); end
  endtask

  task automatic run_phase(int sel, int nops);
    int mvl;
    configure(sel);
    mvl = int'(mvl_elems(mvl_sel));
    // after a change of MVL register contents are undefined: reload all
    for (int r = 0; r < NUM_LREG; r++) send(OP_VLE, r, 0, 0, mvl, INIT_BASE + r * 1024);
    for (int i = 0; i < nops; i++) begin
      int k, vd, a, b, vl;
      k  = $urandom % 10;
      vd = $urandom % NUM_LREG; a = $urandom % NUM_LREG; b = $urandom % NUM_LREG;
      vl = ($urandom % 3 == 0) ? 1 + $urandom % mvl : mvl;
      case (k)
        0, 1: send(OP_VLE, vd, 0, 0, vl, (($urandom % 2) ? SCR_BASE : INIT_BASE) + ($urandom % 32) * 1024);
        2:    if (ref_kl[a] > 0) send(OP_VSE, 0, a, 0, 1 + $urandom % ref_kl[a], SCR_BASE + ($urandom % 32) * 1024);
        3, 4: send(OP_VADD, vd, a, b, vl, 0);
        5:    send(OP_VSUB, vd, a, b, vl, 0);
        6, 7: send(OP_VMUL, vd, a, b, vl, 0);
        default: send(OP_VMACC, vd, a, b, vl, 0);
      endcase
    end
    for (int r = 0; r < NUM_LREG; r++) send(OP_VSE, 0, r, 0, mvl, DUMP_BASE + r * 1024);
    wait_idle();
    // compare
    for (int r = 0; r < NUM_LREG; r++)
      for (int e = 0; e < ref_kl[r]; e++) begin
        int unsigned w;
        w = (DUMP_BASE + r * 1024) / 8 + e;
        checks++;
        if (u_mem.mem[w / 8][w % 8] !== ref_reg[r][e]) begin
          failures++;
          if (failures < 10) $display("MVL=%0d v%0d[%0d]: got %h exp %h", mvl, r, e,
                                      u_mem.mem[w / 8][w % 8], ref_reg[r][e]);
        end
      end
    for (int unsigned w = SCR_BASE / 8; w < (SCR_BASE + 32 * 1024) / 8; w++) begin
      checks++;
      if (u_mem.mem[w / 8][w % 8] !== ref_mem[w]) begin
        failures++;
        if (failures < 10) $display("scratch word %0d: got %h exp %h", w, u_mem.mem[w / 8][w % 8], ref_mem[w]);
      end
    end
    $display("phase MVL=%0d done at %0t: sent=%0d swap-stores=%0d swap-loads=%0d reclaims=%0d",
             mvl, $time, n_sent, n_swst, n_swld, n_reclaim);
  endtask

  initial begin
    core_req = 1'b0; core_inst = '0; cfg_we = 1'b0; cfg_sel = '0; cfg_base = '0;
    for (int r = 0; r < NUM_LREG; r++) ref_kl[r] = 0;
    #1;
    for (int l = 0; l < LINES; l++)
      for (int e = 0; e < LANES; e++) ref_mem[l * LANES + e] = u_mem.pattern(l, e);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    run_phase(0, NOPS);   // MVL 16: 64 physical registers
    run_phase(7, NOPS);   // MVL 128: 8 physical registers
    run_phase(2, NOPS);   // MVL 48: 21 physical registers
    // every mechanism must have happened
    checks++; if (n_rename == 0)   begin failures++; $display("no rename"); end
    checks++; if (n_rstall == 0)   begin failures++; $display("no rename stall"); end
    checks++; if (n_reclaim == 0)  begin failures++; $display("no reclaim"); end
    checks++; if (n_swst == 0)     begin failures++; $display("no swap-store"); end
    checks++; if (n_swld == 0)     begin failures++; $display("no swap-load"); end
    checks++; if (n_pstall == 0)   begin failures++; $display("no pre-issue stall"); end
    checks++; if (n_commit != n_sent) begin failures++; $display("commits %0d != sent %0d", n_commit, n_sent); end
    checks++; if (n_reconf != 3)   begin failures++; $display("reconfigurations %0d", n_reconf); end
    checks++; if (swst_at128 == 0) begin failures++; $display("no swap at MVL=128"); end
    checks++; if (swst_at16 != 0)  begin failures++; $display("swap at MVL=16 (64 registers suffice)"); end
    $display("renames=%0d rename-stalls=%0d reclaims=%0d swap-stores=%0d swap-loads=%0d preissue-stalls=%0d commits=%0d mvl-changes=%0d",
             n_rename, n_rstall, n_reclaim, n_swst, n_swld, n_pstall, n_commit, n_reconf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
