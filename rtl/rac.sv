// rac: register access counters, one 3-bit counter per virtual vector
// register (3-bit x 64 entries). A count is the number of outstanding
// references to a VVR: one while it is the current mapping of a logical
// register plus one per renamed but uncommitted reader.
//
// At rename the new destination and each source VVR count up and the old
// destination counts down; at commit each source VVR of the committing
// instruction counts down and the freed old destination is cleared to 0.
// All updates of a cycle are summed per entry and applied at the clock edge;
// a clear wins over the other updates of the same entry. After reset VVRs
// 0..31 (the initial mappings of the logical registers) hold 1, the rest 0.
// The renaming stage must not let a count exceed 7 (it stalls instead); an
// assertion checks that no counter wraps.
//
// Origin: From the published design: 3-bit counters and their update rules
// at rename, commit and free. Own choices: reset values and the priority of
// clear.
module rac
  import ava_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  // rename side: 4 increments (dst + 3 sources) and 1 decrement (old dst)
  input  logic inc_en_i  [4],
  input  vvr_t inc_vvr_i [4],
  input  logic dec_en_i,
  input  vvr_t dec_vvr_i,
  // commit side: 3 source decrements and the clear of the freed VVR
  input  logic cdec_en_i  [3],
  input  vvr_t cdec_vvr_i [3],
  input  logic clr_en_i,
  input  vvr_t clr_vvr_i,
  output rac_t count_o [NUM_VVR]
);
  rac_t cnt_q [NUM_VVR];
  assign count_o = cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NUM_VVR; v++) cnt_q[v] <= (v < NUM_LREG) ? rac_t'(1) : '0;
    end else begin
      for (int v = 0; v < NUM_VVR; v++) begin
        logic signed [RAC_W+2:0] d;
        d = '0;
        for (int k = 0; k < 4; k++) if (inc_en_i[k] && inc_vvr_i[k] == vvr_t'(v)) d = d + 1;
        if (dec_en_i && dec_vvr_i == vvr_t'(v)) d = d - 1;
        for (int k = 0; k < 3; k++) if (cdec_en_i[k] && cdec_vvr_i[k] == vvr_t'(v)) d = d - 1;
        if (clr_en_i && clr_vvr_i == vvr_t'(v)) cnt_q[v] <= '0;
        else cnt_q[v] <= rac_t'($signed({3'b000, cnt_q[v]}) + d);
      end
    end
  end

  // A counter never goes below zero.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int v = 0; v < NUM_VVR; v++) begin
        int n;
        n = 0;
        for (int k = 0; k < 3; k++) if (cdec_en_i[k] && cdec_vvr_i[k] == vvr_t'(v)) n++;
        if (dec_en_i && dec_vvr_i == vvr_t'(v)) n++;
        for (int k = 0; k < 4; k++) if (inc_en_i[k] && inc_vvr_i[k] == vvr_t'(v)) n--;
        a_no_wrap: assert (clr_en_i && clr_vvr_i == vvr_t'(v) || n <= int'(cnt_q[v]))
          else $error("RAC[%0d] would drop below zero", v);
      end
    end
  end
endmodule
