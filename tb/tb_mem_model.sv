// tb_mem_model: behavioural model of the memory system seen by the vector
// memory unit (the caches and DRAM, and the memory register file inside
// them). 512-bit lines, one request per cycle; a request is granted in the
// cycle it is made unless a pseudo-random stall (STALL_PCT percent) holds it.
// Writes update the line under the per-element byte-enable mask at once;
// reads return in order LAT cycles after the grant. After reset every
// element holds pattern(line, element) so that testbenches can predict it.
module tb_mem_model
  import ava_pkg::*;
#(
  parameter int unsigned LINES     = 8192,
  parameter int unsigned LAT       = 12,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_i,
  input  logic               we_i,
  input  logic [LINE_AW-1:0] addr_i,
  input  logic [MEM_W-1:0]   wdata_i,
  input  logic [LANES-1:0]   be_i,
  output logic               gnt_o,
  output logic               rvalid_o,
  output logic [MEM_W-1:0]   rdata_o
);
  logic [ELEM_W-1:0] mem [LINES][LANES];
  int unsigned       cycle;
  int unsigned       q_time [$];
  logic [MEM_W-1:0]  q_data [$];
  logic              stall;

  function automatic logic [ELEM_W-1:0] pattern(int unsigned line, int unsigned e);
    return {32'(line * 2654435761), 32'(line * 8 + e)} ^ 64'h5a5a_0000_0000_a5a5;
  endfunction

  initial begin
    for (int unsigned l = 0; l < LINES; l++)
      for (int unsigned e = 0; e < LANES; e++) mem[l][e] = pattern(l, e);
  end

  assign gnt_o = req_i && !stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycle <= 0;
      stall <= 1'b0;
      rvalid_o <= 1'b0;
      rdata_o  <= '0;
    end else begin
      cycle <= cycle + 1;
      stall <= (STALL_PCT != 0) && (($urandom % 100) < STALL_PCT);
      if (req_i && gnt_o) begin
        if (addr_i >= LINE_AW'(LINES)) $fatal(1, "tb_mem_model: address %0h out of range", addr_i);
        if (we_i) begin
          for (int e = 0; e < LANES; e++)
            if (be_i[e]) mem[addr_i][e] <= wdata_i[e*ELEM_W +: ELEM_W];
        end else begin
          logic [MEM_W-1:0] d;
          for (int e = 0; e < LANES; e++) d[e*ELEM_W +: ELEM_W] = mem[addr_i][e];
          q_time.push_back(cycle + LAT);
          q_data.push_back(d);
        end
      end
      rvalid_o <= 1'b0;
      if (q_time.size() != 0 && q_time[0] <= cycle) begin
        rvalid_o <= 1'b1;
        rdata_o  <= q_data[0];
        void'(q_time.pop_front());
        void'(q_data.pop_front());
      end
    end
  end
endmodule
