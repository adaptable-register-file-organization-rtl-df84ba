// ava_pkg: types and constants shared by the AVA vector processing unit.
//
// AVA (adaptable vector architecture) keeps a small physical vector register
// file (P-VRF, 64 registers of 16 64-bit elements spread over 8 lanes, 8 KB)
// and lets software raise the maximum vector length (MVL) from 16 to 128
// elements in steps of 16. Longer registers mean fewer of them fit in the
// P-VRF (table below); the rest of the 64 virtual vector registers (VVRs)
// live in a memory-backed register file (M-VRF). Two renaming levels
// (logical->VVR, VVR->physical) and a swap mechanism move VVRs between both.
//
// The sizes below follow the paper: 32 logical registers, 64 VVRs, 64
// physical registers at MVL=16, 8 lanes, 128 64-bit entries per lane,
// 32-entry memory and arithmetic queues, 3-bit access counters and a
// 512-bit memory interface. The reorder-buffer and pre-issue queue depths,
// the instruction encoding and the address width are this design's choices.
package ava_pkg;

  localparam int unsigned NUM_LREG      = 32;   // logical (ISA) vector registers
  localparam int unsigned NUM_VVR       = 64;   // virtual vector registers
  localparam int unsigned MAX_PREG      = 64;   // physical registers at MVL=16
  localparam int unsigned LANES         = 8;
  localparam int unsigned ELEM_W        = 64;
  localparam int unsigned LANE_ENTRIES  = 128;  // 64-bit words per lane slice
  localparam int unsigned QUEUE_DEPTH   = 32;   // memory / arithmetic queue
  localparam int unsigned ROB_DEPTH     = 32;   // own choice
  localparam int unsigned PREISSUE_DEPTH = 8;   // own choice
  localparam int unsigned RAC_W         = 3;
  localparam int unsigned ADDR_W        = 32;   // byte address
  localparam int unsigned MEM_W         = LANES * ELEM_W;  // 512-bit port
  localparam int unsigned LINE_AW       = ADDR_W - 6;      // 64-byte line address
  localparam int unsigned VL_W          = 8;    // 0..128 elements
  localparam int unsigned MAX_ROWS      = 16;   // 128 elements / 8 lanes
  // Each VVR owns a 1 KB slot (128 elements) in the M-VRF: 64 x 1 KB = 64 KB.
  localparam int unsigned MVRF_SLOT_LINES = 16;

  typedef logic [$clog2(NUM_LREG)-1:0]     lreg_t;
  typedef logic [$clog2(NUM_VVR)-1:0]      vvr_t;
  typedef logic [$clog2(MAX_PREG)-1:0]     preg_t;
  typedef logic [$clog2(LANE_ENTRIES)-1:0] entry_t;
  typedef logic [$clog2(ROB_DEPTH)-1:0]    rob_idx_t;
  typedef logic [RAC_W-1:0]                rac_t;
  typedef logic [VL_W-1:0]                 vl_t;
  typedef logic [ELEM_W-1:0]               elem_t;
  typedef logic [2:0]                      mvl_sel_t;  // MVL = 16*(sel+1)

  // Vector operations the unit executes. Arithmetic is 64-bit integer.
  typedef enum logic [2:0] {
    OP_VLE   = 3'd0,  // vd <- mem[addr ...]          (unit stride)
    OP_VSE   = 3'd1,  // mem[addr ...] <- vs1
    OP_VADD  = 3'd2,  // vd <- vs1 + vs2
    OP_VSUB  = 3'd3,  // vd <- vs1 - vs2
    OP_VMUL  = 3'd4,  // vd <- vs1 * vs2 (low 64 bits)
    OP_VMACC = 3'd5   // vd <- vs1 * vs2 + vd
  } vop_e;

  // Instruction as sent by the scalar core.
  typedef struct packed {
    vop_e              op;
    lreg_t             vd;
    lreg_t             vs1;
    lreg_t             vs2;
    vl_t               vl;
    logic [ADDR_W-1:0] addr;   // 64-byte aligned base for VLE/VSE
  } vinst_t;

  // Instruction after logical->VVR renaming (pre-issue queue entry).
  typedef struct packed {
    vop_e              op;
    logic              has_dst;
    logic [2:0]        src_en;
    vvr_t [2:0]        src;
    vvr_t              dst;
    vl_t               vl;
    logic [ADDR_W-1:0] addr;
    rob_idx_t          rob;
  } ren_inst_t;

  // Arithmetic queue entry (fully mapped to physical registers).
  // A physical register's generation bit tells which owner a reference means.
  typedef struct packed {
    vop_e        op;
    logic [2:0]  src_en;
    preg_t [2:0] psrc;
    logic [2:0]  sgen;
    preg_t       pdst;
    logic        dgen;
    vvr_t        dst;
    vl_t         vl;
    rob_idx_t    rob;
  } arith_op_t;

  typedef enum logic [1:0] {
    M_LOAD    = 2'd0,
    M_STORE   = 2'd1,
    M_SWLOAD  = 2'd2,   // M-VRF -> P-VRF
    M_SWSTORE = 2'd3    // P-VRF -> M-VRF
  } mkind_e;

  // Memory queue entry. For loads preg/gen name the destination, for stores
  // the source.
  typedef struct packed {
    mkind_e            kind;
    preg_t             preg;
    logic              gen;
    vvr_t              vvr;
    logic [ADDR_W-1:0] addr;
    vl_t               vl;
    rob_idx_t          rob;
  } mem_op_t;

  // Completion report of an execution unit.
  typedef struct packed {
    logic     valid;
    logic     has_dst;   // wrote a physical register
    preg_t    preg;
    logic     gen;
    logic     to_rob;    // instruction (not a swap) that the ROB tracks
    rob_idx_t rob;
    logic     set_valid; // set the VVR valid bit
    vvr_t     vvr;
  } done_t;

  // Pulses counting the mechanisms of the design (for monitoring).
  typedef struct packed {
    logic rename;
    logic rename_stall;
    logic reclaim;
    logic swap_store;
    logic swap_load;
    logic preissue_stall;
    logic commit;
  } ava_events_t;

  // Number of physical registers for an MVL setting: floor(1024 / MVL),
  // i.e. 64, 32, 21, 16, 12, 10, 9, 8 for MVL = 16 ... 128.
  function automatic logic [6:0] num_pregs(mvl_sel_t sel);
    return 7'(11'd1024 / (11'(sel) * 11'd16 + 11'd16));
  endfunction

  // Lane-entry rows per register (MVL / lanes) = 2 * (sel + 1).
  function automatic logic [4:0] rows_per_reg(mvl_sel_t sel);
    return 5'({2'b0, sel} + 5'd1) << 1;
  endfunction

  function automatic logic [7:0] mvl_elems(mvl_sel_t sel);
    return 8'(({5'b0, sel} + 8'd1) << 4);
  endfunction

endpackage
