// tb_axpy: runs the integer form of the Axpy kernel, y = a*x + y over 1024
// 64-bit elements, on the full-size vector unit at each AVA configuration
// (MVL 16, 32, 48, 64 and 128: 64, 32, 21, 16 and 8 physical registers).
// The program is strip-mined the usual way: per strip of VL = min(MVL,
// remaining) elements it issues vle x, vle y, vmacc y = a*x + y, vse y,
// with a loaded once per configuration as a broadcast vector. Each
// configuration writes its own copy of y, which is compared element by
// element with the reference. The testbench also checks that the number
// of vector instructions is 4*ceil(1024/MVL)+1, and prints the cycle count
// and the swap traffic of each configuration. Only three logical registers
// are live, so the kernel never runs out of VVRs; at MVL 128 the 8 physical
// registers can still run out while old values wait to be reclaimed, and
// swap operations are then reported.
module tb_axpy;
  import ava_pkg::*;

  localparam int unsigned LINES     = 8192;
  localparam int unsigned N         = 1024;
  localparam int unsigned X_BASE    = 32'h0_0000;
  localparam int unsigned Y_BASE    = 32'h1_0000;   // initial y, 8 KB
  localparam int unsigned OUT_BASE  = 32'h2_0000;   // 5 copies of y, 8 KB each
  localparam int unsigned A_BASE    = 32'h3_0000;   // broadcast a, 1 KB
  localparam int unsigned MVRF_BASE = 32'h4_0000;
  localparam logic [ELEM_W-1:0] A   = 64'd3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               core_req = 1'b0, core_gnt, core_stall;
  vinst_t             core_inst = '0;
  logic               cfg_we = 1'b0;
  mvl_sel_t           cfg_sel = '0, mvl_sel;
  logic [ADDR_W-1:0]  cfg_base = '0;
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

  // memory: the model's contents, with the words of the a-vector forced to A
  logic a_region;
  logic [MEM_W-1:0] raw_rdata;
  tb_mem_model #(.LINES(LINES), .LAT(12), .STALL_PCT(0)) u_mem (
    .clk, .rst_n, .req_i(mem_req), .we_i(mem_we), .addr_i(mem_addr), .wdata_i(mem_wdata),
    .be_i(mem_be), .gnt_o(mem_gnt), .rvalid_o(mem_rvalid), .rdata_o(raw_rdata)
  );
  // reads of the a-vector region return A in every element (requests are
  // answered in order, so a FIFO of region flags follows them)
  logic rq_flag [$];
  always_ff @(posedge clk) begin
    if (mem_req && mem_gnt && !mem_we) rq_flag.push_back(mem_addr >= LINE_AW'(A_BASE / 64) && mem_addr < LINE_AW'(A_BASE / 64 + 16));
    if (mem_rvalid) void'(rq_flag.pop_front());
  end
  assign a_region = mem_rvalid && rq_flag.size() != 0 && rq_flag[0];
  assign mem_rdata = a_region ? {LANES{A}} : raw_rdata;

  int checks = 0, failures = 0;
  int n_inst, n_swst = 0, n_swld = 0;

  always_ff @(posedge clk) if (rst_n) begin
    if (ev.swap_store) n_swst++;
    if (ev.swap_load) n_swld++;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(vop_e op, int vd, int vs1, int vs2, int vl, int unsigned addr);
    core_inst.op = op; core_inst.vd = lreg_t'(vd); core_inst.vs1 = lreg_t'(vs1);
    core_inst.vs2 = lreg_t'(vs2); core_inst.vl = vl_t'(vl); core_inst.addr = ADDR_W'(addr);
    core_req = 1'b1;
    @(negedge clk);
    while (!core_gnt) @(negedge clk);
    @(posedge clk);
    #1 core_req = 1'b0;
    n_inst++;
  endtask

  task automatic wait_idle();
    do @(posedge clk); while (!idle);
    #1;
  endtask

  task automatic run(int sel, int copy);
    int mvl, t0, t1, ss0, sl0, expect_inst;
    wait_idle();
    cfg_sel = mvl_sel_t'(sel); cfg_base = ADDR_W'(MVRF_BASE); cfg_we = 1'b1;
    @(posedge clk); #1 cfg_we = 1'b0;
    @(posedge clk); #1;
    mvl = int'(mvl_elems(mvl_sel));
    n_inst = 0; ss0 = n_swst; sl0 = n_swld;
    t0 = int'($time / 10);
    send(OP_VLE, 0, 0, 0, mvl, A_BASE);                               // v0 = a
    for (int i = 0; i < N; i += mvl) begin
      int vl;
      vl = (N - i < mvl) ? N - i : mvl;
      send(OP_VLE, 1, 0, 0, vl, X_BASE + i * 8);                      // v1 = x
      send(OP_VLE, 2, 0, 0, vl, Y_BASE + i * 8);                      // v2 = y
      send(OP_VMACC, 2, 0, 1, vl, 0);                                  // v2 = v0*v1 + v2
      send(OP_VSE, 0, 2, 0, vl, OUT_BASE + copy * 8192 + i * 8);      // y' = v2
    end
    wait_idle();
    t1 = int'($time / 10);
    expect_inst = 4 * ((N + mvl - 1) / mvl) + 1;
    checks++;
    if (n_inst != expect_inst) begin failures++; $display("MVL %0d: %0d instructions, expected %0d", mvl, n_inst, expect_inst); end
    for (int i = 0; i < N; i++) begin
      int unsigned wx, wy, wo;
      logic [ELEM_W-1:0] exp;
      wx = X_BASE / 8 + i; wy = Y_BASE / 8 + i; wo = (OUT_BASE + copy * 8192) / 8 + i;
      exp = A * u_mem.pattern(wx / 8, wx % 8) + u_mem.pattern(wy / 8, wy % 8);
      checks++;
      if (u_mem.mem[wo / 8][wo % 8] !== exp) begin
        failures++;
        if (failures < 10) $display("MVL %0d y[%0d] = %h, expected %h", mvl, i, u_mem.mem[wo / 8][wo % 8], exp);
      end
    end
    $display("AVA X%0d (MVL %0d): %0d vector instructions, %0d cycles, %0d swap-stores, %0d swap-loads",
             mvl / 16, mvl, n_inst, t1 - t0, n_swst - ss0, n_swld - sl0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    run(0, 0);
    run(1, 1);
    run(2, 2);
    run(3, 3);
    run(7, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
