// tb_pvrf_bank: checks the 4-read 2-write register-file slice (LVT over
// 1W1R SRAMs) against a single array model: both write ports write random
// distinct words every cycle, all four read ports read random words, and
// every read returns the latest value one cycle later, whichever port wrote
// it.
module tb_pvrf_bank;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       rd_en [4];
  logic [6:0] rd_addr [4];
  logic [63:0] rd_data [4];
  logic       wr_en [2];
  logic [6:0] wr_addr [2];
  logic [63:0] wr_data [2];
  logic [63:0] model [128];
  logic [63:0] expv [4];
  int checks = 0, failures = 0;

  pvrf_bank #(.WIDTH(64), .ENTRIES(128)) dut (.clk, .rst_n, .rd_en_i(rd_en), .rd_addr_i(rd_addr), .rd_data_o(rd_data),
                                              .wr_en_i(wr_en), .wr_addr_i(wr_addr), .wr_data_i(wr_data));

  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int r = 0; r < 4; r++) begin rd_en[r] = 0; rd_addr[r] = '0; expv[r] = '0; end
    for (int w = 0; w < 2; w++) begin wr_en[w] = 0; wr_addr[w] = '0; wr_data[w] = '0; end
    #12 rst_n = 1;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); wr_en[i % 2] = 1; wr_en[1 - i % 2] = 0; wr_addr[i % 2] = 7'(i);
      wr_data[i % 2] = {$urandom, $urandom}; model[i] = wr_data[i % 2];
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int w = 0; w < 2; w++) begin
        wr_en[w] = $urandom % 2; wr_addr[w] = 7'($urandom); wr_data[w] = {$urandom, $urandom};
      end
      if (wr_addr[1] == wr_addr[0]) wr_addr[1] = wr_addr[0] + 7'd1;
      for (int r = 0; r < 4; r++) begin rd_en[r] = $urandom % 4 != 0; rd_addr[r] = 7'($urandom); end
      @(posedge clk);
      for (int r = 0; r < 4; r++) if (rd_en[r]) expv[r] = model[rd_addr[r]];
      for (int w = 0; w < 2; w++) if (wr_en[w]) model[wr_addr[w]] = wr_data[w];
      #1 for (int r = 0; r < 4; r++) begin
        checks++;
        if (rd_data[r] !== expv[r]) begin failures++; $display("t=%0d port %0d: %h exp %h", t, r, rd_data[r], expv[r]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
