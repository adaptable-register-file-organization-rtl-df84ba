// preissue_stage: first stage of the two-stage vector issue unit. It maps
// the VVRs of the instruction at the head of the pre-issue queue to physical
// registers (second renaming level) and, when the P-VRF has no room, runs
// the swap mechanism. It owns the VRF-mapping tables (vrf_mapping) and the
// swap decision logic (swap_logic).
//
// Each cycle it performs at most one of these actions, in priority order:
//  1. Reclaim: a VVR in the P-VRF whose access counter is 0 gives its
//     physical register back to the PFRL (VRLT bit cleared). As in the
//     published scheme this only happens while no vector memory operation is
//     queued or executing.
//  2. Source mapping (step A): for the first source whose VRLT bit is 0, a
//     free physical register is taken and a swap-load is queued to bring the
//     VVR back from the memory register file. With no free register, the
//     swap logic picks a victim and a swap-store is queued instead; the
//     victim's register returns to the PFRL at once (the issue logic keeps
//     the next owner from writing it before the swap-store has read it).
//  3. Destination mapping (step B): a free physical register (or a swap-
//     store first, as above) becomes the destination. A VVR that still has a
//     register from an earlier life keeps it.
//  4. Dispatch (step C): the fully mapped instruction goes to the memory or
//     arithmetic queue if that queue has room; otherwise the stage stalls.
// With no free register and no victim (all candidates unwritten, or only
// reclaimable ones waiting for the memory pipeline to drain) it waits.
// Swap operations address the memory register file at
// mvrf_base_i + VVR * 1 KB and move MVL elements. Every new owner of a
// physical register is announced to the issue logic (alloc_o), and every
// queued reader is counted there (rd_add_*).
// mvl_sel_i must carry the new setting in the cycle of reload_i.
//
// Origin: From the published design: steps (A) sources, (B) destination, (C)
// dispatch, reclamation at count 0 with no older memory operation, victims
// by lowest count excluding sources. Own choices: one step per cycle, the
// reclaim test (memory queue empty and memory unit idle), the M-VRF slot
// layout and the reuse of a stale destination mapping.
module preissue_stage
  import ava_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  mvl_sel_t   mvl_sel_i,
  input  logic [ADDR_W-1:0] mvrf_base_i,
  input  logic       reload_i,
  // pre-issue queue head
  input  logic       head_valid_i,
  input  ren_inst_t  head_i,
  output logic       head_pop_o,
  // counters and valid bits
  input  rac_t       rac_i [NUM_VVR],
  input  logic [NUM_VVR-1:0] vvr_valid_i,
  // issue logic
  input  logic [MAX_PREG-1:0] alloc_gen_i,
  input  logic [MAX_PREG-1:0] written_i,
  output logic       alloc_o,
  output preg_t      alloc_preg_o,
  output logic       rd_add_en_o   [3],
  output preg_t      rd_add_preg_o [3],
  output logic       rd_add_gen_o  [3],
  // memory pipeline state (reclaim condition)
  input  logic       mem_pipe_empty_i,
  // issue queues
  input  logic       memq_full_i,
  output logic       memq_push_o,
  output mem_op_t    memq_data_o,
  input  logic       arq_full_i,
  output logic       arq_push_o,
  output arith_op_t  arq_data_o,
  // events
  output logic       ev_reclaim_o,
  output logic       ev_swap_store_o,
  output logic       ev_swap_load_o,
  output logic       ev_stall_o
);
  vvr_t       rd_vvr  [4];
  preg_t      rd_preg [4];
  logic       rd_loc  [4];
  preg_t      prmt    [NUM_VVR];
  logic [NUM_VVR-1:0] vrlt;
  preg_t      pfrl_head;
  logic       pfrl_empty;
  logic       map, unmap, pfrl_pop, pfrl_push;
  vvr_t       map_vvr, unmap_vvr;
  preg_t      map_preg, pfrl_push_val;
  logic       excl_en [3];
  vvr_t       excl_vvr [3];
  logic       rc_valid, vic_valid;
  vvr_t       rc_vvr, vic_vvr;
  preg_t      rc_preg, vic_preg;
  logic       dst_mapped_q;
  logic       is_mem;

  function automatic logic [ADDR_W-1:0] slot_addr(logic [ADDR_W-1:0] base, vvr_t v);
    return base + (ADDR_W'(v) << 10);
  endfunction

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      rd_vvr[k]  = head_i.src[k];
      excl_en[k] = head_valid_i && head_i.src_en[k];
      excl_vvr[k] = head_i.src[k];
    end
    rd_vvr[3] = head_i.dst;
  end

  vrf_mapping u_map (
    .clk, .rst_n,
    .rd_vvr_i(rd_vvr), .rd_preg_o(rd_preg), .rd_loc_o(rd_loc),
    .map_i(map), .map_vvr_i(map_vvr), .map_preg_i(map_preg),
    .unmap_i(unmap), .unmap_vvr_i(unmap_vvr),
    .pfrl_pop_i(pfrl_pop), .pfrl_head_o(pfrl_head), .pfrl_empty_o(pfrl_empty),
    .pfrl_push_i(pfrl_push), .pfrl_push_val_i(pfrl_push_val),
    .reload_i(reload_i), .reload_count_i(num_pregs(mvl_sel_i)),
    .prmt_o(prmt), .vrlt_o(vrlt)
  );

  swap_logic u_swap (
    .rac_i(rac_i), .vrlt_i(vrlt), .prmt_i(prmt), .vvr_valid_i(vvr_valid_i),
    .preg_written_i(written_i), .excl_en_i(excl_en), .excl_vvr_i(excl_vvr),
    .reclaim_valid_o(rc_valid), .reclaim_vvr_o(rc_vvr), .reclaim_preg_o(rc_preg),
    .victim_valid_o(vic_valid), .victim_vvr_o(vic_vvr), .victim_preg_o(vic_preg)
  );

  assign is_mem = (head_i.op == OP_VLE) || (head_i.op == OP_VSE);

  always_comb begin
    logic need_src, need_dst;
    int   ks;
    map = 1'b0; map_vvr = '0; map_preg = '0;
    unmap = 1'b0; unmap_vvr = '0;
    pfrl_pop = 1'b0; pfrl_push = 1'b0; pfrl_push_val = '0;
    alloc_o = 1'b0; alloc_preg_o = '0;
    for (int k = 0; k < 3; k++) begin
      rd_add_en_o[k] = 1'b0; rd_add_preg_o[k] = '0; rd_add_gen_o[k] = 1'b0;
    end
    memq_push_o = 1'b0; memq_data_o = '0;
    arq_push_o = 1'b0; arq_data_o = '0;
    head_pop_o = 1'b0;
    ev_reclaim_o = 1'b0; ev_swap_store_o = 1'b0; ev_swap_load_o = 1'b0; ev_stall_o = 1'b0;

    need_src = 1'b0;
    ks = 0;
    for (int k = 2; k >= 0; k--)
      if (head_i.src_en[k] && !rd_loc[k]) begin need_src = 1'b1; ks = k; end
    need_dst = head_i.has_dst && !dst_mapped_q;

    if (reload_i) begin
      // reconfiguration: nothing else happens this cycle
    end else if (rc_valid && mem_pipe_empty_i) begin
      unmap = 1'b1; unmap_vvr = rc_vvr;
      pfrl_push = 1'b1; pfrl_push_val = rc_preg;
      ev_reclaim_o = 1'b1;
    end else if (head_valid_i) begin
      if (need_src || (need_dst && !rd_loc[3])) begin
        if (!pfrl_empty) begin
          if (need_src) begin
            // swap-load the source into a free register
            if (!memq_full_i) begin
              pfrl_pop = 1'b1;
              map = 1'b1; map_vvr = head_i.src[ks]; map_preg = pfrl_head;
              alloc_o = 1'b1; alloc_preg_o = pfrl_head;
              memq_push_o = 1'b1;
              memq_data_o.kind = M_SWLOAD;
              memq_data_o.preg = pfrl_head;
              memq_data_o.gen  = !alloc_gen_i[pfrl_head];
              memq_data_o.vvr  = head_i.src[ks];
              memq_data_o.addr = slot_addr(mvrf_base_i, head_i.src[ks]);
              memq_data_o.vl   = mvl_elems(mvl_sel_i);
              ev_swap_load_o = 1'b1;
            end else ev_stall_o = 1'b1;
          end else begin
            // fresh destination register
            pfrl_pop = 1'b1;
            map = 1'b1; map_vvr = head_i.dst; map_preg = pfrl_head;
            alloc_o = 1'b1; alloc_preg_o = pfrl_head;
          end
        end else if (vic_valid && !memq_full_i) begin
          // swap-store the victim to free its register
          unmap = 1'b1; unmap_vvr = vic_vvr;
          pfrl_push = 1'b1; pfrl_push_val = vic_preg;
          rd_add_en_o[0] = 1'b1; rd_add_preg_o[0] = vic_preg; rd_add_gen_o[0] = alloc_gen_i[vic_preg];
          memq_push_o = 1'b1;
          memq_data_o.kind = M_SWSTORE;
          memq_data_o.preg = vic_preg;
          memq_data_o.gen  = alloc_gen_i[vic_preg];
          memq_data_o.vvr  = vic_vvr;
          memq_data_o.addr = slot_addr(mvrf_base_i, vic_vvr);
          memq_data_o.vl   = mvl_elems(mvl_sel_i);
          ev_swap_store_o = 1'b1;
        end else ev_stall_o = 1'b1;
      end else if (need_dst) begin
        // the destination VVR still holds a register from an earlier life
        if (written_i[rd_preg[3]]) begin
          alloc_o = 1'b1; alloc_preg_o = rd_preg[3];
        end else ev_stall_o = 1'b1;
      end else begin
        // dispatch
        if (is_mem) begin
          if (!memq_full_i) begin
            memq_push_o = 1'b1;
            memq_data_o.addr = head_i.addr;
            memq_data_o.vl   = head_i.vl;
            memq_data_o.rob  = head_i.rob;
            if (head_i.op == OP_VLE) begin
              memq_data_o.kind = M_LOAD;
              memq_data_o.preg = rd_preg[3];
              memq_data_o.gen  = alloc_gen_i[rd_preg[3]];
              memq_data_o.vvr  = head_i.dst;
            end else begin
              memq_data_o.kind = M_STORE;
              memq_data_o.preg = rd_preg[0];
              memq_data_o.gen  = alloc_gen_i[rd_preg[0]];
              memq_data_o.vvr  = head_i.src[0];
            end
          end else ev_stall_o = 1'b1;
        end else begin
          if (!arq_full_i) begin
            arq_push_o = 1'b1;
            arq_data_o.op     = head_i.op;
            arq_data_o.src_en = head_i.src_en;
            for (int k = 0; k < 3; k++) begin
              arq_data_o.psrc[k] = rd_preg[k];
              arq_data_o.sgen[k] = alloc_gen_i[rd_preg[k]];
            end
            arq_data_o.pdst = rd_preg[3];
            arq_data_o.dgen = alloc_gen_i[rd_preg[3]];
            arq_data_o.dst  = head_i.dst;
            arq_data_o.vl   = head_i.vl;
            arq_data_o.rob  = head_i.rob;
          end else ev_stall_o = 1'b1;
        end
        if (memq_push_o || arq_push_o) begin
          head_pop_o = 1'b1;
          for (int k = 0; k < 3; k++) begin
            rd_add_en_o[k]   = head_i.src_en[k];
            rd_add_preg_o[k] = rd_preg[k];
            rd_add_gen_o[k]  = alloc_gen_i[rd_preg[k]];
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dst_mapped_q <= 1'b0;
    else if (head_pop_o) dst_mapped_q <= 1'b0;
    else if (alloc_o && !memq_push_o) dst_mapped_q <= 1'b1;
  end
endmodule
