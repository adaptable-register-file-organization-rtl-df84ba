// tb_vector_fu: checks the lane arithmetic unit: add, sub, mul and
// multiply-accumulate on random 64-bit operands against the expected
// results, with a latency of exactly one cycle and valid_o following
// valid_i.
module tb_vector_fu;
  import ava_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic vi = 0, vo;
  vop_e op = OP_VADD;
  elem_t a = '0, b = '0, c = '0, res, expv;
  logic expvalid;
  int checks = 0, failures = 0;

  vector_fu dut (.clk, .rst_n, .valid_i(vi), .op_i(op), .a_i(a), .b_i(b), .c_i(c), .valid_o(vo), .res_o(res));

  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    #12 rst_n = 1;
    expv = '0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      vi = $urandom % 4 != 0;
      op = vop_e'(2 + $urandom % 4);
      a = {$urandom, $urandom}; b = {$urandom, $urandom}; c = {$urandom, $urandom};
      if (t % 7 == 0) a = '1;
      expvalid = vi;
      if (vi) case (op)
        OP_VADD: expv = a + b;
        OP_VSUB: expv = a - b;
        OP_VMUL: expv = a * b;
        default: expv = a * b + c;
      endcase
      @(posedge clk); #1;
      checks++;
      if (vo !== expvalid || (expvalid && res !== expv)) begin
        failures++; $display("t=%0d op %s: %h exp %h", t, op.name(), res, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
