// tb_vector_lane: checks one lane. Words are written through the memory
// write port, an arithmetic operation is run through the read / FU / write
// sequence (read at t, FU at t+1, write at t+2), and results are read back
// through the memory read port and compared with the expected values.
module tb_vector_lane;
  import ava_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ar_rd_en = 0, fu_valid = 0, ar_wr_en = 0, m_rd_en = 0, m_wr_en = 0;
  entry_t ar_rd_addr [3];
  entry_t ar_wr_addr = '0, m_rd_addr = '0, m_wr_addr = '0;
  vop_e fu_op = OP_VADD;
  elem_t m_rd_data, m_wr_data = '0;
  elem_t model [LANE_ENTRIES];
  int checks = 0, failures = 0;

  vector_lane dut (.clk, .rst_n, .ar_rd_en_i(ar_rd_en), .ar_rd_addr_i(ar_rd_addr), .fu_valid_i(fu_valid), .fu_op_i(fu_op),
                   .ar_wr_en_i(ar_wr_en), .ar_wr_addr_i(ar_wr_addr), .mem_rd_en_i(m_rd_en), .mem_rd_addr_i(m_rd_addr),
                   .mem_rd_data_o(m_rd_data), .mem_wr_en_i(m_wr_en), .mem_wr_addr_i(m_wr_addr), .mem_wr_data_i(m_wr_data));

  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int k = 0; k < 3; k++) ar_rd_addr[k] = '0;
    #12 rst_n = 1;
    for (int i = 0; i < LANE_ENTRIES; i++) begin
      @(negedge clk); m_wr_en = 1; m_wr_addr = entry_t'(i); m_wr_data = {$urandom, $urandom}; model[i] = m_wr_data;
    end
    @(negedge clk); m_wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      entry_t s0, s1, s2, d;
      vop_e o;
      elem_t r;
      s0 = entry_t'($urandom); s1 = entry_t'($urandom); s2 = entry_t'($urandom); d = entry_t'($urandom);
      o = vop_e'(2 + $urandom % 4);
      case (o)
        OP_VADD: r = model[s0] + model[s1];
        OP_VSUB: r = model[s0] - model[s1];
        OP_VMUL: r = model[s0] * model[s1];
        default: r = model[s0] * model[s1] + model[s2];
      endcase
      // t: read
      @(negedge clk); ar_rd_en = 1; ar_rd_addr[0] = s0; ar_rd_addr[1] = s1; ar_rd_addr[2] = s2;
      // t+1: FU
      @(negedge clk); ar_rd_en = 0; fu_valid = 1; fu_op = o;
      // t+2: write
      @(negedge clk); fu_valid = 0; ar_wr_en = 1; ar_wr_addr = d;
      @(negedge clk); ar_wr_en = 0; model[d] = r;
      // read back through the memory port
      m_rd_en = 1; m_rd_addr = d;
      @(negedge clk); m_rd_en = 0;
      checks++;
      if (m_rd_data !== r) begin failures++; $display("t=%0d %s entry %0d: %h exp %h", t, o.name(), d, m_rd_data, r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
