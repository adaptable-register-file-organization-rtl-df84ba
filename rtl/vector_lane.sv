// vector_lane: one of the 8 lanes. A lane holds its slice of the physical
// vector register file (pvrf_bank, 128 x 64-bit, 4R-2W) and its arithmetic
// unit (vector_fu). Element e of a vector register lives in lane e mod 8, at
// lane entry (physical register * MVL/8) + e div 8; the controllers compute
// these entry numbers and broadcast them to all lanes.
//
// Arithmetic path: the controller raises ar_rd_en_i with three entry
// numbers; the next cycle it raises fu_valid_i with fu_op_i and the operands
// enter the FU; one cycle later it raises ar_wr_en_i with the destination
// entry and the FU result is written (read-to-write latency 2 cycles).
// Memory path: the vector memory unit reads one word per lane through read
// port 3 (data one cycle later) and writes one word per lane through write
// port 1.
//
// Origin: From the published design: 3R+1W for arithmetic and 1R+1W for
// memory per lane slice. Own choice: the pipeline timing.
module vector_lane
  import ava_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   ar_rd_en_i,
  input  entry_t ar_rd_addr_i [3],
  input  logic   fu_valid_i,
  input  vop_e   fu_op_i,
  input  logic   ar_wr_en_i,
  input  entry_t ar_wr_addr_i,
  input  logic   mem_rd_en_i,
  input  entry_t mem_rd_addr_i,
  output elem_t  mem_rd_data_o,
  input  logic   mem_wr_en_i,
  input  entry_t mem_wr_addr_i,
  input  elem_t  mem_wr_data_i
);
  logic   rd_en   [4];
  entry_t rd_addr [4];
  elem_t  rd_data [4];
  logic   wr_en   [2];
  entry_t wr_addr [2];
  elem_t  wr_data [2];
  logic   fu_vo;
  elem_t  fu_res;

  always_comb begin
    for (int r = 0; r < 3; r++) begin
      rd_en[r]   = ar_rd_en_i;
      rd_addr[r] = ar_rd_addr_i[r];
    end
    rd_en[3]   = mem_rd_en_i;
    rd_addr[3] = mem_rd_addr_i;
    wr_en[0]   = ar_wr_en_i;
    wr_addr[0] = ar_wr_addr_i;
    wr_data[0] = fu_res;
    wr_en[1]   = mem_wr_en_i;
    wr_addr[1] = mem_wr_addr_i;
    wr_data[1] = mem_wr_data_i;
  end

  pvrf_bank #(.WIDTH(ELEM_W), .ENTRIES(LANE_ENTRIES)) u_pvrf (
    .clk, .rst_n,
    .rd_en_i(rd_en), .rd_addr_i(rd_addr), .rd_data_o(rd_data),
    .wr_en_i(wr_en), .wr_addr_i(wr_addr), .wr_data_i(wr_data)
  );

  vector_fu u_fu (
    .clk, .rst_n,
    .valid_i(fu_valid_i), .op_i(fu_op_i),
    .a_i(rd_data[0]), .b_i(rd_data[1]), .c_i(rd_data[2]),
    .valid_o(fu_vo), .res_o(fu_res)
  );

  assign mem_rd_data_o = rd_data[3];

  a_wr_after_fu: assert property (@(posedge clk) disable iff (!rst_n) ar_wr_en_i |-> fu_vo);
endmodule
