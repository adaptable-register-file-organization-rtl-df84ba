// tb_rat: checks the register alias table against a model: identity
// mapping after reset, random renames, and that a read in the cycle of a
// write still returns the old mapping.
module tb_rat;
  import ava_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  lreg_t ra [3]; vvr_t rd [3];
  logic we = 0; lreg_t wa = '0; vvr_t wd = '0;
  vvr_t model [NUM_LREG];
  int checks = 0, failures = 0;

  rat dut (.clk, .rst_n, .rd_addr_i(ra), .rd_data_o(rd), .we_i(we), .wr_addr_i(wa), .wr_data_i(wd));

  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(int p);
    checks++;
    if (rd[p] !== model[ra[p]]) begin failures++; $display("port %0d lreg %0d: %0d exp %0d", p, ra[p], rd[p], model[ra[p]]); end
  endtask

  initial begin
    for (int i = 0; i < NUM_LREG; i++) model[i] = vvr_t'(i);
    for (int p = 0; p < 3; p++) ra[p] = '0;
    #12 rst_n = 1;
    for (int i = 0; i < NUM_LREG; i++) begin ra[0] = lreg_t'(i); #1 chk(0); end
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      we = $urandom % 2; wa = lreg_t'($urandom); wd = vvr_t'($urandom);
      for (int p = 0; p < 3; p++) ra[p] = (p == 2) ? wa : lreg_t'($urandom);
      #1 for (int p = 0; p < 3; p++) chk(p);   // old mapping during the write
      @(posedge clk);
      if (we) model[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
