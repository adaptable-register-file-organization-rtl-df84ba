// dp_sram: one-write, one-read synchronous SRAM slice (64-bit x 128 by
// default), the building block of the multi-ported register file. It stands
// in for a dual-port register-file memory macro and is written as an array.
//
// A write (we_i) stores wdata_i at waddr_i on the clock edge. A read
// (re_i) returns mem[raddr_i] on rdata_o after the edge and holds it while
// re_i is low. A read of the address written in the same cycle returns the
// old contents. Contents are not reset.
//
// Origin: From the published design: 64-bit x 128-entry slices built from
// dual-port SRAMs. Own choice: written as a behavioural array with read-old-
// data semantics.
module dp_sram #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 128
) (
  input  logic                     clk,
  input  logic                     we_i,
  input  logic [$clog2(DEPTH)-1:0] waddr_i,
  input  logic [WIDTH-1:0]         wdata_i,
  input  logic                     re_i,
  input  logic [$clog2(DEPTH)-1:0] raddr_i,
  output logic [WIDTH-1:0]         rdata_o
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    if (re_i) rdata_o <= mem[raddr_i];
  end
endmodule
