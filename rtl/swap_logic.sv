// swap_logic: the decision part of the swap mechanism. Purely combinational.
//
// Reclaim candidate: a VVR held in the P-VRF (VRLT=1) whose access counter
// is 0, i.e. it is no longer the mapping of any logical register and every
// reader has committed, whose valid bit is set and whose physical register
// holds its final value. Its physical register can be returned to the free
// list without copying (aggressive register reclamation).
// Swap victim: among VVRs held in the P-VRF with a counter of at least 1,
// the one with the lowest count, skipping the source VVRs of the instruction
// in the pre-issue stage (to avoid deadlock) and VVRs whose value is not yet
// written. Ties go to the lowest VVR number. It is copied to the memory
// register file by a swap-store to free its physical register.
//
// Origin: From the published design: reclaim at count 0, victim with the
// lowest count of at least 1 that is not a source. Own choices: ties broken
// to the lowest VVR, and only written, valid registers are candidates.
module swap_logic
  import ava_pkg::*;
(
  input  rac_t               rac_i   [NUM_VVR],
  input  logic [NUM_VVR-1:0] vrlt_i,
  input  preg_t              prmt_i  [NUM_VVR],
  input  logic [NUM_VVR-1:0] vvr_valid_i,
  input  logic [MAX_PREG-1:0] preg_written_i,
  input  logic               excl_en_i  [3],
  input  vvr_t               excl_vvr_i [3],
  output logic               reclaim_valid_o,
  output vvr_t               reclaim_vvr_o,
  output preg_t              reclaim_preg_o,
  output logic               victim_valid_o,
  output vvr_t               victim_vvr_o,
  output preg_t              victim_preg_o
);
  always_comb begin
    rac_t best;
    reclaim_valid_o = 1'b0;
    reclaim_vvr_o   = '0;
    victim_valid_o  = 1'b0;
    victim_vvr_o    = '0;
    best            = '1;
    for (int v = NUM_VVR - 1; v >= 0; v--) begin
      logic held, excl;
      held = vrlt_i[v] && vvr_valid_i[v] && preg_written_i[prmt_i[v]];
      excl = 1'b0;
      for (int k = 0; k < 3; k++) if (excl_en_i[k] && excl_vvr_i[k] == vvr_t'(v)) excl = 1'b1;
      if (held && rac_i[v] == '0) begin
        reclaim_valid_o = 1'b1;
        reclaim_vvr_o   = vvr_t'(v);
      end
      if (held && !excl && rac_i[v] != '0 && rac_i[v] <= best) begin
        victim_valid_o = 1'b1;
        victim_vvr_o   = vvr_t'(v);
        best           = rac_i[v];
      end
    end
    reclaim_preg_o = prmt_i[reclaim_vvr_o];
    victim_preg_o  = prmt_i[victim_vvr_o];
  end
endmodule
