// ltrf_pkg: constants and types shared by the latency-tolerant register file (LTRF).
//
// The sizes follow the example LTRF configuration: 8 active warps, 256 architectural
// registers per warp, 16 register-file-cache banks (one per register of a register-interval),
// 16 operand collectors, 1024-bit warp registers (32 lanes x 32 bits), 16 main register file
// banks and a 256-bit main-side crossbar, so one register crosses it in four beats.
// The main register file holds 64 warps x 256 registers (2 MB, the 8x-capacity design).
// Struct field widths are fixed at these maxima; module parameters may only shrink counts.
package ltrf_pkg;

  localparam int unsigned DATA_W       = 1024; // one warp register: 32 threads x 32 bits
  localparam int unsigned FLIT_W       = 256;  // main-side crossbar link width
  localparam int unsigned BEATS        = DATA_W / FLIT_W;
  localparam int unsigned MAX_WARPS    = 64;   // warps per SM
  localparam int unsigned MAX_ACTIVE   = 8;    // active warps (register cache partitions)
  localparam int unsigned MAX_REGS     = 256;  // architectural registers per warp
  localparam int unsigned RFC_BANKS    = 16;   // registers per register-interval
  localparam int unsigned MAIN_BANKS   = 16;
  localparam int unsigned MAIN_ROWS    = MAX_WARPS * MAX_REGS / MAIN_BANKS; // 1024
  localparam int unsigned NUM_OC       = 16;   // operand collectors
  localparam int unsigned NUM_SRC      = 2;    // source operands per instruction
  localparam int unsigned MAIN_LAT     = 7;    // main bank access, cycles (6.3x a 1-cycle bank)

  localparam int unsigned WARP_W = $clog2(MAX_WARPS);
  localparam int unsigned REG_W  = $clog2(MAX_REGS);
  localparam int unsigned BANK_W = $clog2(RFC_BANKS);
  localparam int unsigned OFF_W  = $clog2(MAX_ACTIVE);
  localparam int unsigned MB_W   = $clog2(MAIN_BANKS);
  localparam int unsigned ROW_W  = $clog2(MAIN_ROWS);

  typedef logic [DATA_W-1:0] reg_data_t;
  typedef logic [FLIT_W-1:0] flit_t;

  // Decoded instruction kinds seen by the register file.
  typedef enum logic [1:0] {
    OP_ALU      = 2'd0,  // reads up to two sources, may write one destination
    OP_LONG     = 2'd1,  // long-latency operation (e.g. cache miss): warp goes inactive
    OP_PREFETCH = 2'd2,  // start of a register-interval, carries the prefetch bit-vector
    OP_EXIT     = 2'd3
  } opcode_e;

  typedef struct packed {
    opcode_e                       op;
    logic [NUM_SRC-1:0]            src_valid;
    logic [NUM_SRC-1:0][REG_W-1:0] src;
    logic [NUM_SRC-1:0]            src_dead;   // dead-operand bits
    logic                          dst_valid;
    logic [REG_W-1:0]              dst;
    logic [MAX_REGS-1:0]           pf_vec;     // prefetch bit-vector (OP_PREFETCH only)
  } instr_t;

  // Transfer between the main register file and the register file cache.
  typedef enum logic {XFER_FILL = 1'b0, XFER_WB = 1'b1} xfer_dir_e;

  typedef struct packed {
    xfer_dir_e         dir;
    logic [WARP_W-1:0] warp;
    logic [REG_W-1:0]  rnum;
    logic [BANK_W-1:0] rfc_bank;
    logic [OFF_W-1:0]  rfc_off;
  } main_req_t;

  // Instruction leaving an operand collector for the SIMD unit.
  typedef struct packed {
    logic [WARP_W-1:0]              warp;
    opcode_e                        op;
    logic [NUM_SRC-1:0]             src_valid;
    logic [NUM_SRC-1:0][DATA_W-1:0] src_data;
    logic [NUM_SRC-1:0]             src_dead;
    logic [NUM_SRC-1:0][REG_W-1:0]  src;
    logic                           dst_valid;
    logic [REG_W-1:0]               dst;
    logic [BANK_W-1:0]              dst_bank;
    logic [OFF_W-1:0]               dst_off;
  } dispatch_t;

  // Result returned by the SIMD unit; it echoes the destination location it was given.
  typedef struct packed {
    logic [WARP_W-1:0] warp;
    logic [REG_W-1:0]  dst;
    logic [BANK_W-1:0] dst_bank;
    logic [OFF_W-1:0]  dst_off;
    reg_data_t         data;
  } wb_t;

  // One-cycle event flags for performance counting and tests.
  typedef struct packed {
    logic activate;          // a warp entered the active pool
    logic deactivate;        // a warp started leaving the active pool
    logic prefetch;          // a prefetch operation was issued
    logic fill;              // a register read from the main register file was started
    logic writeback;         // a register write to the main register file was started
    logic main_bank_wait;    // a warp has transfers pending but all their banks are busy
    logic fill_arb_conflict; // more than one active warp asked the fill arbiter
    logic xbar_wait;         // a main bank waited for a crossbar port
    logic rfc_bank_conflict; // a collector lost arbitration for a cache bank
    logic issue_stall;       // a ready warp could not issue (no free collector or probe)
  } ltrf_events_t;

  // Main register file placement: banks interleave on the low register-number bits,
  // rows hold {warp, upper register bits}.
  function automatic logic [MB_W-1:0] main_bank_of(input logic [REG_W-1:0] r);
    return r[MB_W-1:0];
  endfunction

  function automatic logic [ROW_W-1:0] main_row_of(input logic [WARP_W-1:0] w,
                                                   input logic [REG_W-1:0] r);
    return ROW_W'({w, r[REG_W-1:MB_W]});
  endfunction

endpackage
