// arith_ctrl: sequencer of the arithmetic pipeline. It takes one issued
// arithmetic instruction at a time and walks it through the lanes row by
// row: a row is the 8 elements (one per lane) that share a lane entry, and
// an instruction of vector length VL takes ceil(VL/8) rows (at least one),
// so the read/write control iterates up to MVL/lanes times.
//
// Per row, cycle t: read the three source entries (psrc*MVL/8 + row);
// t+1: operands enter the FUs; t+2: the results are written to the
// destination entry, lanes holding elements at or past VL are not written.
// One row starts every cycle, so an instruction of R rows occupies the unit
// for R+2 cycles. start_i is taken when ready_o is high. done_o pulses in
// the cycle of the last write and reports the destination (for the
// scoreboard, the valid bits and the ROB); rel_* release the source reads.
//
// Origin: From the published design: iterating MVL/8 rows over the lanes, 3
// reads + 1 write per row. Own choices: the register-to-entry layout, the
// 3-stage timing and leaving tail elements untouched.
module arith_ctrl
  import ava_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic [4:0] rows_per_reg_i,
  input  logic      start_i,
  input  arith_op_t op_i,
  output logic      ready_o,
  // lane control, broadcast to all lanes
  output logic      ar_rd_en_o,
  output entry_t    ar_rd_addr_o [3],
  output logic      fu_valid_o,
  output vop_e      fu_op_o,
  output logic [LANES-1:0] ar_wr_en_o,
  output entry_t    ar_wr_addr_o,
  // completion
  output done_t     done_o,
  output logic      rel_en_o   [3],
  output preg_t     rel_preg_o [3],
  output logic      rel_gen_o  [3]
);
  arith_op_t op_q;
  logic      busy_q;
  logic [4:0] row_q, nrows_q;
  logic      rd_phase_q;           // still issuing reads
  logic      p1_v_q, p2_v_q;
  logic [4:0] p1_row_q, p2_row_q;

  function automatic entry_t entry_of(preg_t p, logic [4:0] rpr, logic [4:0] row);
    return entry_t'(int'(p) * int'(rpr) + int'(row));
  endfunction

  function automatic logic [4:0] rows_of(vl_t vl);
    logic [4:0] n;
    n = 5'((vl + 8'd7) >> 3);
    return (n == '0) ? 5'd1 : n;
  endfunction

  assign ready_o = !busy_q;

  always_comb begin
    ar_rd_en_o = busy_q && rd_phase_q;
    for (int k = 0; k < 3; k++) ar_rd_addr_o[k] = entry_of(op_q.psrc[k], rows_per_reg_i, row_q);
    fu_valid_o = p1_v_q;
    fu_op_o    = op_q.op;
    for (int l = 0; l < LANES; l++)
      ar_wr_en_o[l] = p2_v_q && (int'(p2_row_q) * LANES + l < int'(op_q.vl));
    ar_wr_addr_o = entry_of(op_q.pdst, rows_per_reg_i, p2_row_q);

    done_o           = '0;
    done_o.valid     = p2_v_q && (p2_row_q == nrows_q - 5'd1);
    done_o.has_dst   = 1'b1;
    done_o.preg      = op_q.pdst;
    done_o.gen       = op_q.dgen;
    done_o.to_rob    = 1'b1;
    done_o.rob       = op_q.rob;
    done_o.set_valid = 1'b1;
    done_o.vvr       = op_q.dst;
    for (int k = 0; k < 3; k++) begin
      rel_en_o[k]   = done_o.valid && op_q.src_en[k];
      rel_preg_o[k] = op_q.psrc[k];
      rel_gen_o[k]  = op_q.sgen[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_q <= '0; busy_q <= 1'b0; row_q <= '0; nrows_q <= '0; rd_phase_q <= 1'b0;
      p1_v_q <= 1'b0; p2_v_q <= 1'b0; p1_row_q <= '0; p2_row_q <= '0;
    end else begin
      p1_v_q   <= ar_rd_en_o;
      p1_row_q <= row_q;
      p2_v_q   <= p1_v_q;
      p2_row_q <= p1_row_q;
      if (!busy_q) begin
        if (start_i) begin
          op_q       <= op_i;
          busy_q     <= 1'b1;
          row_q      <= '0;
          nrows_q    <= rows_of(op_i.vl);
          rd_phase_q <= 1'b1;
        end
      end else begin
        if (rd_phase_q) begin
          if (row_q == nrows_q - 5'd1) rd_phase_q <= 1'b0;
          else row_q <= row_q + 5'd1;
        end
        if (done_o.valid) busy_q <= 1'b0;
      end
    end
  end
endmodule
