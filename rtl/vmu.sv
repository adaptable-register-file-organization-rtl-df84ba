// vmu: vector memory unit. It executes the memory-queue operations one at a
// time: unit-stride vector loads and stores of the program, and the swap
// operations of the swap mechanism (swap-load: M-VRF -> P-VRF, swap-store:
// P-VRF -> M-VRF), which are the same transfers at an address inside the
// M-VRF and always move a whole register of MVL elements.
//
// A row (8 elements, one per lane) is one 512-bit beat of the memory port,
// so an operation of VL elements is ceil(VL/8) beats (at least one).
// Memory port: mem_req_o/mem_gnt_i handshake a request (line address,
// write flag, 512-bit data, one byte-enable bit per 64-bit element); read
// data returns in request order on mem_rvalid_i/mem_rdata_i after any delay.
// Loads send one request per cycle while granted and write each returning
// row into the lanes (elements at or past VL are not written). Stores read a
// row from the lanes (one cycle) and then hold the write request until it is
// granted: two cycles per row at best. done_o pulses with the last written
// row (loads) or the last granted write (stores); rel_* release the source
// register of a store.
//
// Origin: From the published design: a 512-bit memory interface that also
// carries swap-loads and swap-stores. Own choices: the request/grant
// protocol, unit stride only, and the row sequencing.
module vmu
  import ava_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  rows_per_reg_i,
  input  logic        start_i,
  input  mem_op_t     op_i,
  output logic        ready_o,
  // lane side
  output logic        mem_rd_en_o,
  output entry_t      mem_rd_addr_o,
  input  elem_t       mem_rd_data_i [LANES],
  output logic [LANES-1:0] mem_wr_en_o,
  output entry_t      mem_wr_addr_o,
  output elem_t       mem_wr_data_o [LANES],
  // memory port
  output logic               mem_req_o,
  output logic               mem_we_o,
  output logic [LINE_AW-1:0] mem_addr_o,
  output logic [MEM_W-1:0]   mem_wdata_o,
  output logic [LANES-1:0]   mem_be_o,
  input  logic               mem_gnt_i,
  input  logic               mem_rvalid_i,
  input  logic [MEM_W-1:0]   mem_rdata_i,
  // completion
  output done_t       done_o,
  output logic        rel_en_o,
  output preg_t       rel_preg_o,
  output logic        rel_gen_o
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_ST_RD, S_ST_WR} state_e;

  state_e     state_q;
  mem_op_t    op_q;
  logic [4:0] nrows_q, req_q, resp_q;
  logic       is_load;

  function automatic entry_t entry_of(preg_t p, logic [4:0] rpr, logic [4:0] row);
    return entry_t'(int'(p) * int'(rpr) + int'(row));
  endfunction

  function automatic logic [4:0] rows_of(vl_t vl);
    logic [4:0] n;
    n = 5'((vl + 8'd7) >> 3);
    return (n == '0) ? 5'd1 : n;
  endfunction

  function automatic logic [LANES-1:0] lane_mask(logic [4:0] row, vl_t vl);
    logic [LANES-1:0] m;
    for (int l = 0; l < LANES; l++) m[l] = (int'(row) * LANES + l < int'(vl));
    return m;
  endfunction

  assign ready_o = (state_q == S_IDLE);
  assign is_load = (op_q.kind == M_LOAD) || (op_q.kind == M_SWLOAD);

  always_comb begin
    mem_req_o   = 1'b0;
    mem_we_o    = 1'b0;
    mem_addr_o  = op_q.addr[ADDR_W-1:6] + LINE_AW'(req_q);
    mem_be_o    = lane_mask(req_q, op_q.vl);
    for (int l = 0; l < LANES; l++) mem_wdata_o[l*ELEM_W +: ELEM_W] = mem_rd_data_i[l];
    mem_rd_en_o   = (state_q == S_ST_RD);
    mem_rd_addr_o = entry_of(op_q.preg, rows_per_reg_i, req_q);
    mem_wr_en_o   = '0;
    mem_wr_addr_o = entry_of(op_q.preg, rows_per_reg_i, resp_q);
    for (int l = 0; l < LANES; l++) mem_wr_data_o[l] = mem_rdata_i[l*ELEM_W +: ELEM_W];

    if (state_q == S_LOAD) begin
      mem_req_o = (req_q < nrows_q);
      if (mem_rvalid_i) mem_wr_en_o = lane_mask(resp_q, op_q.vl);
    end
    if (state_q == S_ST_WR) begin
      mem_req_o = 1'b1;
      mem_we_o  = 1'b1;
    end

    done_o           = '0;
    done_o.valid     = (state_q == S_LOAD && mem_rvalid_i && resp_q == nrows_q - 5'd1) ||
                       (state_q == S_ST_WR && mem_gnt_i && req_q == nrows_q - 5'd1);
    done_o.has_dst   = is_load;
    done_o.preg      = op_q.preg;
    done_o.gen       = op_q.gen;
    done_o.to_rob    = (op_q.kind == M_LOAD) || (op_q.kind == M_STORE);
    done_o.rob       = op_q.rob;
    done_o.set_valid = (op_q.kind == M_LOAD);
    done_o.vvr       = op_q.vvr;
    rel_en_o   = done_o.valid && !is_load;
    rel_preg_o = op_q.preg;
    rel_gen_o  = op_q.gen;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; op_q <= '0; nrows_q <= '0; req_q <= '0; resp_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start_i) begin
          op_q    <= op_i;
          nrows_q <= rows_of(op_i.vl);
          req_q   <= '0;
          resp_q  <= '0;
          state_q <= (op_i.kind == M_LOAD || op_i.kind == M_SWLOAD) ? S_LOAD : S_ST_RD;
        end
        S_LOAD: begin
          if (mem_req_o && mem_gnt_i) req_q <= req_q + 5'd1;
          if (mem_rvalid_i) begin
            resp_q <= resp_q + 5'd1;
            if (resp_q == nrows_q - 5'd1) state_q <= S_IDLE;
          end
        end
        S_ST_RD: state_q <= S_ST_WR;
        S_ST_WR: if (mem_gnt_i) begin
          if (req_q == nrows_q - 5'd1) state_q <= S_IDLE;
          else begin
            req_q   <= req_q + 5'd1;
            state_q <= S_ST_RD;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_rvalid_only_for_loads: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rvalid_i |-> state_q == S_LOAD);
endmodule
