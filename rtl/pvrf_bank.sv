// pvrf_bank: one lane's slice of the physical vector register file, 128
// 64-bit words (1 KB), with 4 read and 2 write ports.
//
// Read ports 0..2 and write port 0 serve the arithmetic pipeline; read port
// 3 and write port 1 serve the vector memory unit. The multi-porting is built
// the live-value-table (LVT) way: every write port w owns a copy of the data,
// and each copy is replicated per read port, giving 2 x 4 one-write one-read
// SRAMs (dp_sram). A small flop table (the LVT, 1 bit per word) records
// which write port wrote each word last; a read fetches the word from both
// copies and the LVT bit picks one.
//
// Timing: reads are synchronous, data appears on rd_data_o the cycle after
// rd_en_i and holds while rd_en_i is low. A read of a word written in the same
// cycle returns the old value. The two write ports must not write the same
// word in the same cycle (assertion).
//
// Origin: From the published design: a 1 KB 4R-2W slice per lane built with
// a live value table over dual-port SRAMs. Own choice: synchronous reads and
// the port numbering.
module pvrf_bank #(
  parameter int unsigned WIDTH   = 64,
  parameter int unsigned ENTRIES = 128
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       rd_en_i   [4],
  input  logic [$clog2(ENTRIES)-1:0] rd_addr_i [4],
  output logic [WIDTH-1:0]           rd_data_o [4],
  input  logic                       wr_en_i   [2],
  input  logic [$clog2(ENTRIES)-1:0] wr_addr_i [2],
  input  logic [WIDTH-1:0]           wr_data_i [2]
);

  logic [ENTRIES-1:0] lvt_q;
  logic [3:0]         sel_q;
  logic [WIDTH-1:0]   bank_q [2][4];

  for (genvar w = 0; w < 2; w++) begin : g_wr
    for (genvar r = 0; r < 4; r++) begin : g_rd
      dp_sram #(.WIDTH(WIDTH), .DEPTH(ENTRIES)) u_ram (
        .clk    (clk),
        .we_i   (wr_en_i[w]),
        .waddr_i(wr_addr_i[w]),
        .wdata_i(wr_data_i[w]),
        .re_i   (rd_en_i[r]),
        .raddr_i(rd_addr_i[r]),
        .rdata_o(bank_q[w][r])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lvt_q <= '0;
      sel_q <= '0;
    end else begin
      for (int r = 0; r < 4; r++) if (rd_en_i[r]) sel_q[r] <= lvt_q[rd_addr_i[r]];
      if (wr_en_i[0]) lvt_q[wr_addr_i[0]] <= 1'b0;
      if (wr_en_i[1]) lvt_q[wr_addr_i[1]] <= 1'b1;
    end
  end

  always_comb
    for (int r = 0; r < 4; r++) rd_data_o[r] = sel_q[r] ? bank_q[1][r] : bank_q[0][r];

  a_no_write_clash: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en_i[0] && wr_en_i[1] |-> wr_addr_i[0] != wr_addr_i[1]);
endmodule
