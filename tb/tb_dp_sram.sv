// tb_dp_sram: checks the 1W1R synchronous SRAM (64 x 128) against an array
// model: read data one cycle after the read, held while no read is
// requested, and old data for a read of the word being written.
module tb_dp_sram;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [6:0] wa = '0, ra = '0;
  logic [63:0] wd = '0, rd;
  logic [63:0] model [128];
  logic [63:0] expv;
  int checks = 0, failures = 0;

  dp_sram #(.WIDTH(64), .DEPTH(128)) dut (.clk, .we_i(we), .waddr_i(wa), .wdata_i(wd), .re_i(re), .raddr_i(ra), .rdata_o(rd));

  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    // fill
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); we = 1; wa = 7'(i); wd = {$urandom, $urandom}; model[i] = wd;
    end
    @(negedge clk); we = 0;
    expv = '0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we = $urandom % 2; wa = 7'($urandom); wd = {$urandom, $urandom};
      re = $urandom % 2; ra = (t % 5 == 0) ? wa : 7'($urandom);
      @(posedge clk);
      if (re) expv = model[ra];
      if (we) model[wa] = wd;
      #1 checks++;
      if (rd !== expv) begin failures++; $display("t=%0d read %h exp %h", t, rd, expv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
