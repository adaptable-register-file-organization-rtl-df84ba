// ava_vpu: top level of the adaptable vector processing unit (AVA).
//
// An 8-lane vector unit with a small physical register file (64 registers
// of 16 elements, 8 KB) whose maximum vector length can be raised to 128
// elements by a configuration register; the registers that no longer fit
// live in a memory register file (M-VRF) reached through the memory port.
// Instruction flow:
//   scalar core -> rename_unit (logical -> VVR, ROB entry, counters)
//   -> pre-issue queue -> preissue_stage (VVR -> physical, swaps)
//   -> memory queue / arithmetic queue (32 entries each, in order)
//   -> issue_logic -> vmu / arith_ctrl driving the 8 vector_lanes
//   -> rob (commit frees the old destination VVR, updates counters).
// The register access counters (rac) sit between rename, pre-issue and
// commit.
//
// Interfaces:
//   core_*  instruction port of the scalar core. core_gnt_o high in the cycle
//           an offered instruction is taken; core_stall_o while none can be.
//   cfg_*   configuration register: MVL = 16*(cfg_mvl_sel_i+1) elements and
//           base byte address of the M-VRF, 64-byte aligned (1 KB per
//           VVR). Written with cfg_we_i, taken only while idle_o is high;
//           register contents are undefined after a change of MVL.
//   mem_*   512-bit memory port of the vector memory unit (see vmu).
//   events_o one-cycle pulses of the mechanisms (rename, rename stall,
//           reclaim, swap-store, swap-load, pre-issue stall, commit).
// Instructions are taken at most one per cycle and commit in order.
//
// Origin: From the published design: the block structure (two renaming
// levels, swap mechanism, pre-issue/memory/arithmetic queues, 8 lanes,
// 512-bit memory unit) and all sizes. Own choices: the port protocols, the
// configuration port and the idle-only reconfiguration.
module ava_vpu
  import ava_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               core_req_i,
  input  vinst_t             core_inst_i,
  output logic               core_gnt_o,
  output logic               core_stall_o,
  input  logic               cfg_we_i,
  input  mvl_sel_t           cfg_mvl_sel_i,
  input  logic [ADDR_W-1:0]  cfg_mvrf_base_i,
  output logic               idle_o,
  output mvl_sel_t           mvl_sel_o,
  output logic               mem_req_o,
  output logic               mem_we_o,
  output logic [LINE_AW-1:0] mem_addr_o,
  output logic [MEM_W-1:0]   mem_wdata_o,
  output logic [LANES-1:0]   mem_be_o,
  input  logic               mem_gnt_i,
  input  logic               mem_rvalid_i,
  input  logic [MEM_W-1:0]   mem_rdata_i,
  output ava_events_t        events_o
);
  // configuration register
  mvl_sel_t          mvl_sel_q;
  logic [ADDR_W-1:0] mvrf_base_q;
  logic              reload;
  logic [4:0]        rpr;

  // rename <-> others
  logic       pq_push, pq_full, pq_empty, pq_pop;
  ren_inst_t  pq_in, pq_head;
  logic [$clog2(PREISSUE_DEPTH+1)-1:0] pq_count;
  logic       rob_alloc, rob_full, rob_empty;
  rob_idx_t   rob_idx;
  vvr_t       rob_old_dst;
  rac_t       rac_cnt [NUM_VVR];
  logic       rac_inc_en [4];
  vvr_t       rac_inc_vvr [4];
  logic       rac_dec_en;
  vvr_t       rac_dec_vvr;
  logic [NUM_VVR-1:0] vvr_valid;
  logic       set_valid [2];
  vvr_t       set_valid_vvr [2];

  // commit
  logic       commit, commit_has_dst;
  vvr_t       commit_old_dst;
  logic [2:0] commit_src_en;
  vvr_t [2:0] commit_src;
  logic       cdec_en [3];
  vvr_t       cdec_vvr [3];

  // pre-issue / issue
  logic       alloc;
  preg_t      alloc_preg;
  logic       rd_add_en [3];
  preg_t      rd_add_preg [3];
  logic       rd_add_gen [3];
  logic [MAX_PREG-1:0] alloc_gen, written;
  logic       memq_push, memq_full, memq_empty, memq_pop;
  mem_op_t    memq_in, memq_head;
  logic       arq_push, arq_full, arq_empty, arq_pop;
  arith_op_t  arq_in, arq_head;
  logic [$clog2(QUEUE_DEPTH+1)-1:0] memq_count, arq_count;
  logic       ar_ready, vmu_ready;
  done_t      ar_done, mem_done;
  logic       ar_rel_en [3];
  preg_t      ar_rel_preg [3];
  logic       ar_rel_gen [3];
  logic       mem_rel_en;
  preg_t      mem_rel_preg;
  logic       mem_rel_gen;
  logic       ev_reclaim, ev_swst, ev_swld, ev_pstall;

  // lanes
  logic       ar_rd_en;
  entry_t     ar_rd_addr [3];
  logic       fu_valid;
  vop_e       fu_op;
  logic [LANES-1:0] ar_wr_en;
  entry_t     ar_wr_addr;
  logic       lm_rd_en;
  entry_t     lm_rd_addr;
  elem_t      lm_rd_data [LANES];
  logic [LANES-1:0] lm_wr_en;
  entry_t     lm_wr_addr;
  elem_t      lm_wr_data [LANES];

  assign idle_o = pq_empty && memq_empty && arq_empty && rob_empty && ar_ready && vmu_ready;
  assign reload = cfg_we_i && idle_o;
  assign rpr    = rows_per_reg(mvl_sel_q);
  assign mvl_sel_o = mvl_sel_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mvl_sel_q   <= '0;
      mvrf_base_q <= '0;
    end else if (reload) begin
      mvl_sel_q   <= cfg_mvl_sel_i;
      mvrf_base_q <= cfg_mvrf_base_i;
    end
  end

  rename_unit u_rename (
    .clk, .rst_n,
    .core_req_i, .core_inst_i, .core_gnt_o, .core_stall_o,
    .block_i(cfg_we_i),
    .pq_full_i(pq_full), .pq_push_o(pq_push), .pq_data_o(pq_in),
    .rob_full_i(rob_full), .rob_idx_i(rob_idx), .rob_alloc_o(rob_alloc), .rob_old_dst_o(rob_old_dst),
    .rac_i(rac_cnt), .rac_inc_en_o(rac_inc_en), .rac_inc_vvr_o(rac_inc_vvr),
    .rac_dec_en_o(rac_dec_en), .rac_dec_vvr_o(rac_dec_vvr),
    .free_i(commit && commit_has_dst), .free_vvr_i(commit_old_dst),
    .set_valid_i(set_valid), .set_valid_vvr_i(set_valid_vvr),
    .vvr_valid_o(vvr_valid)
  );

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      cdec_en[k]  = commit && commit_src_en[k];
      cdec_vvr[k] = commit_src[k];
    end
    set_valid[0]     = ar_done.valid && ar_done.set_valid;
    set_valid_vvr[0] = ar_done.vvr;
    set_valid[1]     = mem_done.valid && mem_done.set_valid;
    set_valid_vvr[1] = mem_done.vvr;
  end

  rac u_rac (
    .clk, .rst_n,
    .inc_en_i(rac_inc_en), .inc_vvr_i(rac_inc_vvr),
    .dec_en_i(rac_dec_en), .dec_vvr_i(rac_dec_vvr),
    .cdec_en_i(cdec_en), .cdec_vvr_i(cdec_vvr),
    .clr_en_i(commit && commit_has_dst), .clr_vvr_i(commit_old_dst),
    .count_o(rac_cnt)
  );

  logic     rob_exec_en [2];
  rob_idx_t rob_exec_idx [2];
  always_comb begin
    rob_exec_en[0]  = ar_done.valid && ar_done.to_rob;
    rob_exec_idx[0] = ar_done.rob;
    rob_exec_en[1]  = mem_done.valid && mem_done.to_rob;
    rob_exec_idx[1] = mem_done.rob;
  end

  rob u_rob (
    .clk, .rst_n,
    .alloc_i(rob_alloc), .alloc_has_dst_i(pq_in.has_dst), .alloc_old_dst_i(rob_old_dst),
    .alloc_src_en_i(pq_in.src_en), .alloc_src_i(pq_in.src),
    .alloc_idx_o(rob_idx), .full_o(rob_full), .empty_o(rob_empty),
    .exec_en_i(rob_exec_en), .exec_idx_i(rob_exec_idx),
    .commit_o(commit), .commit_has_dst_o(commit_has_dst), .commit_old_dst_o(commit_old_dst),
    .commit_src_en_o(commit_src_en), .commit_src_o(commit_src)
  );

  sync_fifo #(.T(ren_inst_t), .DEPTH(PREISSUE_DEPTH)) u_preissue_q (
    .clk, .rst_n, .flush_i(1'b0),
    .push_i(pq_push), .data_i(pq_in), .full_o(pq_full),
    .pop_i(pq_pop), .data_o(pq_head), .empty_o(pq_empty), .count_o(pq_count)
  );

  preissue_stage u_preissue (
    .clk, .rst_n,
    .mvl_sel_i(reload ? cfg_mvl_sel_i : mvl_sel_q), .mvrf_base_i(mvrf_base_q), .reload_i(reload),
    .head_valid_i(!pq_empty), .head_i(pq_head), .head_pop_o(pq_pop),
    .rac_i(rac_cnt), .vvr_valid_i(vvr_valid),
    .alloc_gen_i(alloc_gen), .written_i(written),
    .alloc_o(alloc), .alloc_preg_o(alloc_preg),
    .rd_add_en_o(rd_add_en), .rd_add_preg_o(rd_add_preg), .rd_add_gen_o(rd_add_gen),
    .mem_pipe_empty_i(memq_empty && vmu_ready),
    .memq_full_i(memq_full), .memq_push_o(memq_push), .memq_data_o(memq_in),
    .arq_full_i(arq_full), .arq_push_o(arq_push), .arq_data_o(arq_in),
    .ev_reclaim_o(ev_reclaim), .ev_swap_store_o(ev_swst), .ev_swap_load_o(ev_swld),
    .ev_stall_o(ev_pstall)
  );

  sync_fifo #(.T(mem_op_t), .DEPTH(QUEUE_DEPTH)) u_mem_q (
    .clk, .rst_n, .flush_i(1'b0),
    .push_i(memq_push), .data_i(memq_in), .full_o(memq_full),
    .pop_i(memq_pop), .data_o(memq_head), .empty_o(memq_empty), .count_o(memq_count)
  );

  sync_fifo #(.T(arith_op_t), .DEPTH(QUEUE_DEPTH)) u_arith_q (
    .clk, .rst_n, .flush_i(1'b0),
    .push_i(arq_push), .data_i(arq_in), .full_o(arq_full),
    .pop_i(arq_pop), .data_o(arq_head), .empty_o(arq_empty), .count_o(arq_count)
  );

  issue_logic u_issue (
    .clk, .rst_n,
    .alloc_i(alloc), .alloc_preg_i(alloc_preg),
    .rd_add_en_i(rd_add_en), .rd_add_preg_i(rd_add_preg), .rd_add_gen_i(rd_add_gen),
    .alloc_gen_o(alloc_gen), .written_o(written),
    .ar_head_valid_i(!arq_empty), .ar_head_i(arq_head), .ar_unit_ready_i(ar_ready), .ar_issue_o(arq_pop),
    .mem_head_valid_i(!memq_empty), .mem_head_i(memq_head), .mem_unit_ready_i(vmu_ready), .mem_issue_o(memq_pop),
    .ar_done_i(ar_done), .ar_rel_en_i(ar_rel_en), .ar_rel_preg_i(ar_rel_preg), .ar_rel_gen_i(ar_rel_gen),
    .mem_done_i(mem_done), .mem_rel_en_i(mem_rel_en), .mem_rel_preg_i(mem_rel_preg), .mem_rel_gen_i(mem_rel_gen)
  );

  arith_ctrl u_arith (
    .clk, .rst_n, .rows_per_reg_i(rpr),
    .start_i(arq_pop), .op_i(arq_head), .ready_o(ar_ready),
    .ar_rd_en_o(ar_rd_en), .ar_rd_addr_o(ar_rd_addr), .fu_valid_o(fu_valid), .fu_op_o(fu_op),
    .ar_wr_en_o(ar_wr_en), .ar_wr_addr_o(ar_wr_addr),
    .done_o(ar_done), .rel_en_o(ar_rel_en), .rel_preg_o(ar_rel_preg), .rel_gen_o(ar_rel_gen)
  );

  vmu u_vmu (
    .clk, .rst_n, .rows_per_reg_i(rpr),
    .start_i(memq_pop), .op_i(memq_head), .ready_o(vmu_ready),
    .mem_rd_en_o(lm_rd_en), .mem_rd_addr_o(lm_rd_addr), .mem_rd_data_i(lm_rd_data),
    .mem_wr_en_o(lm_wr_en), .mem_wr_addr_o(lm_wr_addr), .mem_wr_data_o(lm_wr_data),
    .mem_req_o, .mem_we_o, .mem_addr_o, .mem_wdata_o, .mem_be_o,
    .mem_gnt_i, .mem_rvalid_i, .mem_rdata_i,
    .done_o(mem_done), .rel_en_o(mem_rel_en), .rel_preg_o(mem_rel_preg), .rel_gen_o(mem_rel_gen)
  );

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    vector_lane u_lane (
      .clk, .rst_n,
      .ar_rd_en_i(ar_rd_en), .ar_rd_addr_i(ar_rd_addr),
      .fu_valid_i(fu_valid), .fu_op_i(fu_op),
      .ar_wr_en_i(ar_wr_en[l]), .ar_wr_addr_i(ar_wr_addr),
      .mem_rd_en_i(lm_rd_en), .mem_rd_addr_i(lm_rd_addr), .mem_rd_data_o(lm_rd_data[l]),
      .mem_wr_en_i(lm_wr_en[l]), .mem_wr_addr_i(lm_wr_addr), .mem_wr_data_i(lm_wr_data[l])
    );
  end

  always_comb begin
    events_o.rename         = core_gnt_o;
    events_o.rename_stall   = core_req_i && !core_gnt_o;
    events_o.reclaim        = ev_reclaim;
    events_o.swap_store     = ev_swst;
    events_o.swap_load      = ev_swld;
    events_o.preissue_stall = ev_pstall;
    events_o.commit         = commit;
  end
endmodule
