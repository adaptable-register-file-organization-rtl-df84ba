// vrf_mapping: second renaming level, from virtual vector registers (VVRs)
// to physical registers of the P-VRF. It holds the three structures of the
// VRF-mapping engine:
//   PRMT  physical register mapping table, 6-bit x 64: VVR -> physical reg
//   VRLT  vector register location table, 1-bit x 64: 1 = the VVR is in the
//         P-VRF (PRMT entry valid), 0 = it is in the memory register file
//   PFRL  physical free register list (free_list)
// Four combinational read ports return PRMT and VRLT for a VVR. map_i
// writes PRMT[map_vvr_i] = map_preg_i and sets its VRLT bit; unmap_i clears
// the VRLT bit of unmap_vvr_i. All updates take effect at the clock edge.
// reload_i (used when the MVL setting changes) clears every VRLT bit and
// refills the PFRL with physical registers 0..reload_count_i-1. After reset
// all VVRs are in the memory register file and all 64 physical registers are
// free. The caller keeps map and unmap on different VVRs.
//
// Origin: From the published design: PRMT 6-bit x 64, VRLT 1-bit x 64, PFRL.
// Own choices: the port count and clearing the mapping at an MVL change.
module vrf_mapping
  import ava_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  vvr_t       rd_vvr_i  [4],
  output preg_t      rd_preg_o [4],
  output logic       rd_loc_o  [4],
  input  logic       map_i,
  input  vvr_t       map_vvr_i,
  input  preg_t      map_preg_i,
  input  logic       unmap_i,
  input  vvr_t       unmap_vvr_i,
  input  logic       pfrl_pop_i,
  output preg_t      pfrl_head_o,
  output logic       pfrl_empty_o,
  input  logic       pfrl_push_i,
  input  preg_t      pfrl_push_val_i,
  input  logic       reload_i,
  input  logic [6:0] reload_count_i,
  output preg_t      prmt_o [NUM_VVR],
  output logic [NUM_VVR-1:0] vrlt_o
);
  preg_t              prmt_q [NUM_VVR];
  logic [NUM_VVR-1:0] vrlt_q;
  logic [6:0]         pfrl_count;

  assign prmt_o = prmt_q;
  assign vrlt_o = vrlt_q;

  always_comb
    for (int p = 0; p < 4; p++) begin
      rd_preg_o[p] = prmt_q[rd_vvr_i[p]];
      rd_loc_o[p]  = vrlt_q[rd_vvr_i[p]];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vrlt_q <= '0;
      for (int v = 0; v < NUM_VVR; v++) prmt_q[v] <= '0;
    end else if (reload_i) begin
      vrlt_q <= '0;
    end else begin
      if (unmap_i) vrlt_q[unmap_vvr_i] <= 1'b0;
      if (map_i) begin
        prmt_q[map_vvr_i] <= map_preg_i;
        vrlt_q[map_vvr_i] <= 1'b1;
      end
    end
  end

  free_list #(.DEPTH(MAX_PREG), .W($bits(preg_t)), .INIT_BASE(0), .INIT_COUNT(MAX_PREG)) u_pfrl (
    .clk, .rst_n,
    .pop_i(pfrl_pop_i), .head_o(pfrl_head_o), .empty_o(pfrl_empty_o),
    .push_i(pfrl_push_i), .push_val_i(pfrl_push_val_i),
    .reload_i(reload_i), .reload_count_i(reload_count_i), .count_o(pfrl_count)
  );

  a_map_unmap_distinct: assert property (@(posedge clk) disable iff (!rst_n)
    map_i && unmap_i |-> map_vvr_i != unmap_vvr_i);
endmodule
