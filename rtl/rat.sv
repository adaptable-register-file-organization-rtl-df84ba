// rat: register alias table of the first renaming level. It holds, for each
// of the 32 logical vector registers, the 6-bit number of the virtual vector
// register (VVR) that currently names it (6-bit x 32 entries).
//
// Three combinational read ports (two sources and the destination, whose
// current mapping becomes the instruction's old destination) and one write
// port that installs the new destination VVR at the clock edge. A read of
// the register being written in the same cycle returns the old mapping,
// which is what renaming needs. After reset logical register i maps to VVR i.
//
// Origin: From the published design: 6-bit x 32 table. Own choices: the port
// count and the identity reset mapping.
module rat
  import ava_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  lreg_t rd_addr_i [3],
  output vvr_t  rd_data_o [3],
  input  logic  we_i,
  input  lreg_t wr_addr_i,
  input  vvr_t  wr_data_i
);
  vvr_t map_q [NUM_LREG];

  always_comb
    for (int p = 0; p < 3; p++) rd_data_o[p] = map_q[rd_addr_i[p]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_LREG; i++) map_q[i] <= vvr_t'(i);
    end else if (we_i) begin
      map_q[wr_addr_i] <= wr_data_i;
    end
  end
endmodule
