// tb_arith_ctrl: checks the arithmetic sequencer driving 8 lanes at
// several MVL settings. Registers are preloaded through the lanes' memory
// write ports; random add/sub/mul/macc instructions with random vector
// lengths run; every element below VL must hold the result, elements at or
// past VL keep their old contents, and an instruction of R = ceil(VL/8)
// rows must report completion exactly R+2 cycles after it starts.
module tb_arith_ctrl;
  import ava_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] rpr;
  logic start = 0, ready;
  arith_op_t op = '0;
  logic ar_rd_en, fu_valid;
  entry_t ar_rd_addr [3];
  vop_e fu_op;
  logic [LANES-1:0] ar_wr_en;
  entry_t ar_wr_addr;
  done_t done;
  logic rel_en [3]; preg_t rel_p [3]; logic rel_g [3];
  logic m_wr_en = 0, m_rd_en = 0;
  entry_t m_wr_addr = '0, m_rd_addr = '0;
  elem_t m_wr_data [LANES];
  elem_t m_rd_data [LANES];
  elem_t model [LANES][LANE_ENTRIES];
  int checks = 0, failures = 0;
  mvl_sel_t sel;

  assign rpr = rows_per_reg(sel);

  arith_ctrl dut (.clk, .rst_n, .rows_per_reg_i(rpr), .start_i(start), .op_i(op), .ready_o(ready),
    .ar_rd_en_o(ar_rd_en), .ar_rd_addr_o(ar_rd_addr), .fu_valid_o(fu_valid), .fu_op_o(fu_op),
    .ar_wr_en_o(ar_wr_en), .ar_wr_addr_o(ar_wr_addr), .done_o(done), .rel_en_o(rel_en), .rel_preg_o(rel_p), .rel_gen_o(rel_g));

  for (genvar l = 0; l < LANES; l++) begin : g_l
    vector_lane u_lane (.clk, .rst_n, .ar_rd_en_i(ar_rd_en), .ar_rd_addr_i(ar_rd_addr), .fu_valid_i(fu_valid), .fu_op_i(fu_op),
      .ar_wr_en_i(ar_wr_en[l]), .ar_wr_addr_i(ar_wr_addr), .mem_rd_en_i(m_rd_en), .mem_rd_addr_i(m_rd_addr),
      .mem_rd_data_o(m_rd_data[l]), .mem_wr_en_i(m_wr_en), .mem_wr_addr_i(m_wr_addr), .mem_wr_data_i(m_wr_data[l]));
  end

  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    sel = '0;
    for (int l = 0; l < LANES; l++) m_wr_data[l] = '0;
    #12 rst_n = 1;
    for (int i = 0; i < LANE_ENTRIES; i++) begin
      @(negedge clk); m_wr_en = 1; m_wr_addr = entry_t'(i);
      for (int l = 0; l < LANES; l++) begin m_wr_data[l] = {$urandom, $urandom}; model[l][i] = m_wr_data[l]; end
    end
    @(negedge clk); m_wr_en = 0;
    for (int s = 0; s < 8; s += 3) begin
      int np, rows;
      sel = mvl_sel_t'(s);
      #1;
      np = int'(num_pregs(sel)); rows = int'(rpr);
      for (int t = 0; t < 60; t++) begin
        int vl, nr, cyc, ps [3], pd;
        vop_e o;
        o = vop_e'(2 + $urandom % 4);
        vl = (t % 3 == 0) ? int'(mvl_elems(sel)) : 1 + $urandom % int'(mvl_elems(sel));
        for (int k = 0; k < 3; k++) ps[k] = $urandom % np;
        pd = $urandom % np;
        op = '0; op.op = o; op.src_en = 3'b111; op.vl = vl_t'(vl); op.pdst = preg_t'(pd);
        for (int k = 0; k < 3; k++) op.psrc[k] = preg_t'(ps[k]);
        // expected results (sources read before the destination is written)
        begin
          elem_t r [LANES][MAX_ROWS];
          for (int e = 0; e < vl; e++) begin
            elem_t a, b, c;
            a = model[e % 8][ps[0] * rows + e / 8]; b = model[e % 8][ps[1] * rows + e / 8]; c = model[e % 8][ps[2] * rows + e / 8];
            case (o)
              OP_VADD: r[e % 8][e / 8] = a + b;
              OP_VSUB: r[e % 8][e / 8] = a - b;
              OP_VMUL: r[e % 8][e / 8] = a * b;
              default: r[e % 8][e / 8] = a * b + c;
            endcase
          end
          @(negedge clk); start = 1;
          @(negedge clk); start = 0;
          cyc = 0;
          while (!done.valid) begin @(negedge clk); cyc++; end
          nr = (vl + 7) / 8;
          checks++;
          if (cyc != nr + 1) begin failures++; $display("vl=%0d took %0d cycles, exp %0d", vl, cyc + 1, nr + 2); end
          @(negedge clk);
          for (int e = 0; e < vl; e++) model[e % 8][pd * rows + e / 8] = r[e % 8][e / 8];
        end
        // read the destination register back (all MVL elements)
        for (int row = 0; row < rows; row++) begin
          m_rd_en = 1; m_rd_addr = entry_t'(pd * rows + row);
          @(negedge clk); m_rd_en = 0;
          for (int l = 0; l < LANES; l++) begin
            checks++;
            if (m_rd_data[l] !== model[l][pd * rows + row]) begin
              failures++; $display("sel %0d %s vl %0d elem %0d: %h exp %h", s, o.name(), vl, row * 8 + l, m_rd_data[l], model[l][pd * rows + row]);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
