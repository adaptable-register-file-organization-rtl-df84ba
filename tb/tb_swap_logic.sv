// tb_swap_logic: checks the reclaim and victim choice. First the worked
// example of the register-mapping figure at MVL=128 (VVRs 35..41 and 42,
// 43 in the P-VRF; after the add is renamed VVR 39 has the lowest count, 1,
// and is the victim, its physical register 7 is freed; sources 42 and 43 are
// excluded), then random states against a reference search.
module tb_swap_logic;
  import ava_pkg::*;
  rac_t rac [NUM_VVR];
  logic [NUM_VVR-1:0] vrlt, vvalid;
  preg_t prmt [NUM_VVR];
  logic [MAX_PREG-1:0] written;
  logic excl_en [3];
  vvr_t excl [3];
  logic rc_v, vic_v;
  vvr_t rc_vvr, vic_vvr;
  preg_t rc_p, vic_p;
  int checks = 0, failures = 0;

  swap_logic dut (.rac_i(rac), .vrlt_i(vrlt), .prmt_i(prmt), .vvr_valid_i(vvalid), .preg_written_i(written),
                  .excl_en_i(excl_en), .excl_vvr_i(excl), .reclaim_valid_o(rc_v), .reclaim_vvr_o(rc_vvr),
                  .reclaim_preg_o(rc_p), .victim_valid_o(vic_v), .victim_vvr_o(vic_vvr), .victim_preg_o(vic_p));

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic clear();
    for (int v = 0; v < NUM_VVR; v++) begin rac[v] = '0; prmt[v] = '0; end
    vrlt = '0; vvalid = '1; written = '1;
    for (int k = 0; k < 3; k++) begin excl_en[k] = 0; excl[k] = '0; end
  endtask

  initial begin
    clear();
    // figure example, state when the add reaches the pre-issue stage
    prmt[35] = 2; prmt[36] = 0; prmt[37] = 1; prmt[39] = 7; prmt[40] = 4; prmt[41] = 5;
    prmt[42] = 6; prmt[43] = 3;
    rac[35] = 4; rac[36] = 3; rac[37] = 2; rac[38] = 0; rac[39] = 1; rac[40] = 4; rac[41] = 2;
    rac[42] = 2; rac[43] = 2; rac[44] = 1;
    vrlt[35] = 1; vrlt[36] = 1; vrlt[37] = 1; vrlt[39] = 1; vrlt[40] = 1; vrlt[41] = 1; vrlt[42] = 1; vrlt[43] = 1;
    excl_en[0] = 1; excl[0] = 43; excl_en[1] = 1; excl[1] = 42;
    #1 checks++;
    if (!vic_v || vic_vvr != 39 || vic_p != 7 || rc_v) begin
      failures++; $display("example: victim %0d (p%0d) valid %0d reclaim %0d", vic_vvr, vic_p, vic_v, rc_v);
    end
    // exclusion: with 39 excluded too, 37 and 41 (count 2) tie, lowest number wins
    excl_en[2] = 1; excl[2] = 39;
    #1 checks++;
    if (vic_vvr != 37) begin failures++; $display("tie: victim %0d", vic_vvr); end
    // random states
    for (int t = 0; t < 3000; t++) begin
      int best, bv, rv;
      for (int v = 0; v < NUM_VVR; v++) begin
        rac[v] = rac_t'($urandom % 5); prmt[v] = preg_t'($urandom);
      end
      vrlt = {$urandom, $urandom} & {$urandom, $urandom}; vvalid = {$urandom, $urandom} | {$urandom, $urandom};
      written = {$urandom, $urandom} | {$urandom, $urandom};
      for (int k = 0; k < 3; k++) begin excl_en[k] = $urandom % 2; excl[k] = vvr_t'($urandom); end
      best = 99; bv = -1; rv = -1;
      for (int v = 0; v < NUM_VVR; v++) begin
        bit held, ex;
        held = vrlt[v] && vvalid[v] && written[prmt[v]];
        ex = 0;
        for (int k = 0; k < 3; k++) if (excl_en[k] && excl[k] == v) ex = 1;
        if (held && rac[v] == 0 && rv < 0) rv = v;
        if (held && !ex && rac[v] != 0 && int'(rac[v]) < best) begin best = rac[v]; bv = v; end
      end
      #1 checks++;
      if (rc_v != (rv >= 0) || (rv >= 0 && (rc_vvr != vvr_t'(rv) || rc_p != prmt[rv])) ||
          vic_v != (bv >= 0) || (bv >= 0 && (vic_vvr != vvr_t'(bv) || vic_p != prmt[bv]))) begin
        failures++; $display("t=%0d reclaim %0d/%0d victim %0d/%0d", t, rc_vvr, rv, vic_vvr, bv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
