// operand_collector: gathers the source operands of one issued instruction.
//
// Each operand slot carries the fields of the LTRF collector: valid, register number,
// ready, warp-offset address, cache bank number and the 1024-bit value. The issue stage
// allocates the collector with the bank numbers it read from the warp control block
// (alloc); if the instruction writes a register, the destination's bank number arrives one
// cycle later (dst_we), because the control block has two read ports and the destination is
// the third operand. While a slot is not ready it requests its cache bank; a grant is
// followed next cycle by the data (resp_valid), which sets ready. When every used slot is
// ready and the destination is located, disp_rdy is raised; disp_take frees the collector
// in that cycle. Requesting again after a lost arbitration and the two-cycle location of
// three-operand instructions follow the paper; the rest of the handshake is this design's.
module operand_collector
  import ltrf_pkg::*;
(
  input  logic                              clk,
  input  logic                              rst_n,
  output logic                              busy,
  input  logic                              alloc,
  input  logic [WARP_W-1:0]                 a_warp,
  input  opcode_e                           a_op,
  input  logic [NUM_SRC-1:0]                a_src_valid,
  input  logic [NUM_SRC-1:0][REG_W-1:0]     a_src,
  input  logic [NUM_SRC-1:0]                a_src_dead,
  input  logic [NUM_SRC-1:0][BANK_W-1:0]    a_src_bank,
  input  logic [OFF_W-1:0]                  a_off,
  input  logic                              a_dst_valid,
  input  logic [REG_W-1:0]                  a_dst,
  input  logic                              dst_we,
  input  logic [BANK_W-1:0]                 dst_bank_in,
  // cache read requests
  output logic [NUM_SRC-1:0]                rq_valid,
  output logic [NUM_SRC-1:0][BANK_W-1:0]    rq_bank,
  output logic [NUM_SRC-1:0][OFF_W-1:0]     rq_off,
  input  logic [NUM_SRC-1:0]                rq_gnt,
  input  logic [NUM_SRC-1:0]                resp_valid,
  input  reg_data_t [NUM_SRC-1:0]           resp_data,
  // dispatch
  output logic                              disp_rdy,
  input  logic                              disp_take,
  output dispatch_t                         disp
);
  typedef struct packed {
    logic              used;
    logic [REG_W-1:0]  rnum;
    logic              ready;
    logic              waiting;   // granted, data arrives next cycle
    logic [OFF_W-1:0]  off;
    logic [BANK_W-1:0] bank;
    logic              dead;
    reg_data_t         value;
  } slot_t;

  logic               valid;
  logic [WARP_W-1:0]  warp;
  opcode_e            op;
  slot_t [NUM_SRC-1:0] slot;
  logic               dst_valid, dst_known;
  logic [REG_W-1:0]   dst;
  logic [BANK_W-1:0]  dst_bank;
  logic [OFF_W-1:0]   off;

  assign busy = valid;

  always_comb begin
    logic all_ready;
    all_ready = 1'b1;
    for (int s = 0; s < NUM_SRC; s++) begin
      rq_valid[s] = valid && slot[s].used && !slot[s].ready && !slot[s].waiting;
      rq_bank[s]  = slot[s].bank;
      rq_off[s]   = slot[s].off;
      if (slot[s].used && !slot[s].ready) all_ready = 1'b0;
    end
    disp_rdy = valid && all_ready && (!dst_valid || dst_known);

    disp.warp      = warp;
    disp.op        = op;
    disp.dst_valid = dst_valid;
    disp.dst       = dst;
    disp.dst_bank  = dst_bank;
    disp.dst_off   = off;
    for (int s = 0; s < NUM_SRC; s++) begin
      disp.src_valid[s] = slot[s].used;
      disp.src_data[s]  = slot[s].value;
      disp.src_dead[s]  = slot[s].dead;
      disp.src[s]       = slot[s].rnum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid     <= 1'b0;
      warp      <= '0;
      op        <= OP_ALU;
      slot      <= '0;
      dst_valid <= 1'b0;
      dst_known <= 1'b0;
      dst       <= '0;
      dst_bank  <= '0;
      off       <= '0;
    end else if (alloc) begin
      valid     <= 1'b1;
      warp      <= a_warp;
      op        <= a_op;
      dst_valid <= a_dst_valid;
      dst_known <= 1'b0;
      dst       <= a_dst;
      off       <= a_off;
      for (int s = 0; s < NUM_SRC; s++) begin
        slot[s].used    <= a_src_valid[s];
        slot[s].rnum    <= a_src[s];
        slot[s].ready   <= 1'b0;
        slot[s].waiting <= 1'b0;
        slot[s].off     <= a_off;
        slot[s].bank    <= a_src_bank[s];
        slot[s].dead    <= a_src_dead[s];
        slot[s].value   <= '0;
      end
    end else begin
      if (disp_take && disp_rdy) valid <= 1'b0;
      if (dst_we) begin
        dst_bank  <= dst_bank_in;
        dst_known <= 1'b1;
      end
      for (int s = 0; s < NUM_SRC; s++) begin
        if (rq_valid[s] && rq_gnt[s]) slot[s].waiting <= 1'b1;
        if (resp_valid[s] && slot[s].waiting) begin
          slot[s].waiting <= 1'b0;
          slot[s].ready   <= 1'b1;
          slot[s].value   <= resp_data[s];
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) alloc |-> !valid);
endmodule
