// rename_unit: first renaming level and the scalar-core interface of the
// vector unit. It owns the register alias table (RAT, logical -> VVR), the
// free register list of VVRs (FRL, 64-entry ring, 32 VVRs free after reset)
// and the valid bit of every VVR (1-bit x 64).
//
// The scalar core offers an instruction with core_req_i/core_inst_i. When
// the unit can take it, core_gnt_o is high in the same cycle; otherwise
// core_stall_o is high. Taking an instruction, in one cycle:
//   - reads the RAT for the sources and for the destination (old dest);
//     VMACC also reads its destination as third source,
//   - takes a new destination VVR from the FRL head and writes it to the RAT,
//   - clears the new VVR's valid bit,
//   - asks the access counters to count up the new destination and each
//     source and to count down the old destination,
//   - allocates a reorder-buffer entry and pushes the renamed instruction
//     into the pre-issue queue (visible there the next cycle).
// It stalls when the FRL is empty (instructions with a destination), the
// reorder buffer or pre-issue queue is full, block_i is high, or a source
// counter is 5 or more, so that no 3-bit counter can overflow.
// Committed old destinations come back through free_i; valid bits are set
// by completions through set_valid_i.
//
// Origin: From the published design: RAT, FRL and valid-bit behaviour. Own
// choices: the core handshake, the per-operation source encoding and the
// stall that keeps the 3-bit counters from wrapping. Rollback after a
// misprediction is not built.
module rename_unit
  import ava_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // scalar core
  input  logic       core_req_i,
  input  vinst_t     core_inst_i,
  output logic       core_gnt_o,
  output logic       core_stall_o,
  input  logic       block_i,
  // downstream
  input  logic       pq_full_i,
  output logic       pq_push_o,
  output ren_inst_t  pq_data_o,
  input  logic       rob_full_i,
  input  rob_idx_t   rob_idx_i,
  output logic       rob_alloc_o,
  output vvr_t       rob_old_dst_o,
  // access counters
  input  rac_t       rac_i [NUM_VVR],
  output logic       rac_inc_en_o  [4],
  output vvr_t       rac_inc_vvr_o [4],
  output logic       rac_dec_en_o,
  output vvr_t       rac_dec_vvr_o,
  // commit and completion
  input  logic       free_i,
  input  vvr_t       free_vvr_i,
  input  logic       set_valid_i     [2],
  input  vvr_t       set_valid_vvr_i [2],
  output logic [NUM_VVR-1:0] vvr_valid_o
);
  lreg_t      rat_ra [3];
  vvr_t       rat_rd [3];
  vvr_t       new_dst;
  logic       frl_empty;
  logic [6:0] frl_count;
  logic       has_dst;
  logic [2:0] src_en;
  logic       rac_ok;
  logic       accept;
  logic [NUM_VVR-1:0] valid_q;

  assign vvr_valid_o = valid_q;

  always_comb begin
    rat_ra[0] = core_inst_i.vs1;
    rat_ra[1] = core_inst_i.vs2;
    rat_ra[2] = core_inst_i.vd;
    unique case (core_inst_i.op)
      OP_VLE:   begin has_dst = 1'b1; src_en = 3'b000; end
      OP_VSE:   begin has_dst = 1'b0; src_en = 3'b001; end
      OP_VMACC: begin has_dst = 1'b1; src_en = 3'b111; end
      default:  begin has_dst = 1'b1; src_en = 3'b011; end
    endcase
    rac_ok = 1'b1;
    for (int k = 0; k < 3; k++) if (src_en[k] && rac_i[rat_rd[k]] >= rac_t'(5)) rac_ok = 1'b0;
    accept = core_req_i && !block_i && !pq_full_i && !rob_full_i && rac_ok &&
             !(has_dst && frl_empty);
    core_gnt_o   = accept;
    core_stall_o = !(!block_i && !pq_full_i && !rob_full_i && rac_ok && !(has_dst && frl_empty));

    pq_push_o         = accept;
    pq_data_o.op      = core_inst_i.op;
    pq_data_o.has_dst = has_dst;
    pq_data_o.src_en  = src_en;
    pq_data_o.src[0]  = rat_rd[0];
    pq_data_o.src[1]  = rat_rd[1];
    pq_data_o.src[2]  = rat_rd[2];
    pq_data_o.dst     = new_dst;
    pq_data_o.vl      = core_inst_i.vl;
    pq_data_o.addr    = core_inst_i.addr;
    pq_data_o.rob     = rob_idx_i;
    rob_alloc_o       = accept;
    rob_old_dst_o     = rat_rd[2];

    rac_inc_en_o[0]  = accept && has_dst;
    rac_inc_vvr_o[0] = new_dst;
    for (int k = 0; k < 3; k++) begin
      rac_inc_en_o[k+1]  = accept && src_en[k];
      rac_inc_vvr_o[k+1] = rat_rd[k];
    end
    rac_dec_en_o  = accept && has_dst;
    rac_dec_vvr_o = rat_rd[2];
  end

  rat u_rat (
    .clk, .rst_n,
    .rd_addr_i(rat_ra), .rd_data_o(rat_rd),
    .we_i(accept && has_dst), .wr_addr_i(core_inst_i.vd), .wr_data_i(new_dst)
  );

  free_list #(.DEPTH(NUM_VVR), .W($bits(vvr_t)), .INIT_BASE(NUM_LREG),
              .INIT_COUNT(NUM_VVR - NUM_LREG)) u_frl (
    .clk, .rst_n,
    .pop_i(accept && has_dst), .head_o(new_dst), .empty_o(frl_empty),
    .push_i(free_i), .push_val_i(free_vvr_i),
    .reload_i(1'b0), .reload_count_i('0), .count_o(frl_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '1;
    end else begin
      for (int k = 0; k < 2; k++) if (set_valid_i[k]) valid_q[set_valid_vvr_i[k]] <= 1'b1;
      if (accept && has_dst) valid_q[new_dst] <= 1'b0;
    end
  end
endmodule
