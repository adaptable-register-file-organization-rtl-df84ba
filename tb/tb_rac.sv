// tb_rac: checks the register access counters against a model: reset
// values (1 for VVRs 0..31, 0 otherwise), random rename increments and
// decrements, commit decrements and clears, including several updates of
// one counter in the same cycle, and the figure's example sequence
// (VVR 38 going from 1 to 0 and VVR 42 from 0 to 2).
module tb_rac;
  import ava_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic inc_en [4]; vvr_t inc_vvr [4];
  logic dec_en; vvr_t dec_vvr;
  logic cdec_en [3]; vvr_t cdec_vvr [3];
  logic clr_en; vvr_t clr_vvr;
  rac_t cnt [NUM_VVR];
  int model [NUM_VVR];
  int checks = 0, failures = 0;

  rac dut (.clk, .rst_n, .inc_en_i(inc_en), .inc_vvr_i(inc_vvr), .dec_en_i(dec_en), .dec_vvr_i(dec_vvr),
           .cdec_en_i(cdec_en), .cdec_vvr_i(cdec_vvr), .clr_en_i(clr_en), .clr_vvr_i(clr_vvr), .count_o(cnt));

  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic idle();
    for (int k = 0; k < 4; k++) begin inc_en[k] = 0; inc_vvr[k] = '0; end
    for (int k = 0; k < 3; k++) begin cdec_en[k] = 0; cdec_vvr[k] = '0; end
    dec_en = 0; dec_vvr = '0; clr_en = 0; clr_vvr = '0;
  endtask

  task automatic compare();
    for (int v = 0; v < NUM_VVR; v++) begin
      checks++;
      if (int'(cnt[v]) != model[v]) begin failures++; $display("RAC[%0d]=%0d exp %0d", v, cnt[v], model[v]); end
    end
  endtask

  task automatic apply();
    int d [NUM_VVR];
    for (int v = 0; v < NUM_VVR; v++) d[v] = 0;
    for (int k = 0; k < 4; k++) if (inc_en[k]) d[inc_vvr[k]]++;
    if (dec_en) d[dec_vvr]--;
    for (int k = 0; k < 3; k++) if (cdec_en[k]) d[cdec_vvr[k]]--;
    @(posedge clk);
    for (int v = 0; v < NUM_VVR; v++) model[v] += d[v];
    if (clr_en) model[clr_vvr] = 0;
    #1 idle();
  endtask

  initial begin
    idle();
    for (int v = 0; v < NUM_VVR; v++) model[v] = v < NUM_LREG ? 1 : 0;
    #12 rst_n = 1;
    #1 compare();
    // example: load to v4 (new 42, old 37), load to v5 (new 43, old 38),
    // add v6 = v5 + v4 (new 44, sources 43 and 42, old 39)
    // bring 37..39 to 3, 1, 2 as in the example
    inc_en[0] = 1; inc_vvr[0] = 37; inc_en[1] = 1; inc_vvr[1] = 37; inc_en[2] = 1; inc_vvr[2] = 37; apply();
    inc_en[0] = 1; inc_vvr[0] = 38; inc_en[1] = 1; inc_vvr[1] = 39; inc_en[2] = 1; inc_vvr[2] = 39; apply();
    inc_en[0] = 1; inc_vvr[0] = 42; dec_en = 1; dec_vvr = 37; apply();
    inc_en[0] = 1; inc_vvr[0] = 43; dec_en = 1; dec_vvr = 38; apply();
    checks++; if (cnt[38] != 0) begin failures++; $display("VVR38 should reach 0"); end
    inc_en[0] = 1; inc_vvr[0] = 44; inc_en[1] = 1; inc_vvr[1] = 43; inc_en[2] = 1; inc_vvr[2] = 42;
    dec_en = 1; dec_vvr = 39; apply();
    checks++; if (cnt[42] != 2 || cnt[43] != 2 || cnt[44] != 1 || cnt[39] != 1 || cnt[37] != 2) begin
      failures++; $display("example counts wrong: %0d %0d %0d %0d", cnt[42], cnt[43], cnt[44], cnt[39]);
    end
    compare();
    // random traffic that keeps the counters within 0..7
    for (int t = 0; t < 2000; t++) begin
      int pend [NUM_VVR];
      for (int v = 0; v < NUM_VVR; v++) pend[v] = model[v];
      for (int k = 0; k < 4; k++) begin
        inc_vvr[k] = vvr_t'($urandom);
        inc_en[k] = ($urandom % 2) && pend[inc_vvr[k]] < 7;
        if (inc_en[k]) pend[inc_vvr[k]]++;
      end
      dec_vvr = vvr_t'($urandom); dec_en = ($urandom % 2) && pend[dec_vvr] > 0;
      if (dec_en) pend[dec_vvr]--;
      for (int k = 0; k < 3; k++) begin
        cdec_vvr[k] = vvr_t'($urandom);
        cdec_en[k] = ($urandom % 2) && pend[cdec_vvr[k]] > 0;
        if (cdec_en[k]) pend[cdec_vvr[k]]--;
      end
      clr_vvr = vvr_t'($urandom); clr_en = ($urandom % 8 == 0);
      apply();
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
