// vector_fu: the arithmetic unit of one lane, a one-stage pipeline on 64-bit
// integer elements. Operands a_i, b_i, c_i and op_i enter with valid_i; the
// result leaves on res_o with valid_o one clock later. One element per
// cycle. Operations: add (a+b), sub (a-b), mul (a*b, low 64 bits) and
// multiply-accumulate (a*b+c). The FU of the published design is a
// floating-point pipeline; integer arithmetic keeps this model simple.
//
// Origin: The published design only names one pipelined arithmetic unit per
// lane; the integer operation set and one-cycle latency are this design's
// placeholder.
module vector_fu
  import ava_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  valid_i,
  input  vop_e  op_i,
  input  elem_t a_i,
  input  elem_t b_i,
  input  elem_t c_i,
  output logic  valid_o,
  output elem_t res_o
);
  elem_t res_d;

  always_comb begin
    unique case (op_i)
      OP_VADD:  res_d = a_i + b_i;
      OP_VSUB:  res_d = a_i - b_i;
      OP_VMUL:  res_d = a_i * b_i;
      OP_VMACC: res_d = a_i * b_i + c_i;
      default:  res_d = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      res_o   <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) res_o <= res_d;
    end
  end
endmodule
