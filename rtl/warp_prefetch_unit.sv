// warp_prefetch_unit: the per-warp LTRF controller with its warp control block and
// address allocation unit.
//
// It carries out the three register movements LTRF allows:
//  prefetch   (start of a register-interval, cmd_prefetch with the prefetch bit-vector):
//             write back the live cached registers of the finished interval, release their
//             cache banks, then load the new working set;
//  deactivate (warp stalls on a long-latency operation, or exits): write back the live
//             cached registers, release the banks, clear the valid bits;
//  activate   (warp rejoins the active pool with a new warp-offset): load the working set
//             recorded in the working-set bit-vector again.
// Loading a working set: the bit-vector is decoded one register per cycle (lowest number
// first); each register gets the head of the unused-bank queue and its bank number is
// written to the address table. With LIVENESS_AWARE (LTRF+) only live registers are read
// from the main register file and dead ones are only given space (valid at once); without
// it every register of the set is read and written back. Main register file requests are
// issued one per fill-arbiter grant, for the lowest pending register whose main bank is
// idle, so registers in different banks overlap and registers in one bank serialize.
// A fill's valid bit is set when the main bank reports it done; op_done pulses when the
// whole operation is finished and the warp may run. The paper writes back the whole set
// and refetches it on reactivation; at an interval boundary this design likewise writes
// back the finished interval's set before loading the next (no reuse of registers shared
// by consecutive intervals, which the paper does not describe).
module warp_prefetch_unit
  import ltrf_pkg::*;
#(
  parameter int unsigned WARP_ID        = 0,
  parameter int unsigned NOFF           = MAX_ACTIVE,
  parameter bit          LIVENESS_AWARE = 1'b1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         launch,
  input  logic                         cmd_prefetch,
  input  logic [MAX_REGS-1:0]          cmd_vec,
  input  logic                         cmd_activate,
  input  logic [$clog2(NOFF)-1:0]      cmd_off,
  input  logic                         cmd_deactivate,
  output logic                         op_done,
  output logic                         idle,
  // main register file requests (through the fill arbiter)
  output logic                         mreq_valid,
  output main_req_t                    mreq,
  input  logic                         mreq_gnt,
  input  logic [MAIN_BANKS-1:0]        mbank_busy,
  input  logic [MAIN_BANKS-1:0]        mdone_valid,
  input  main_req_t [MAIN_BANKS-1:0]   mdone_info,
  // collector-side lookups and liveness updates
  input  logic [1:0][REG_W-1:0]        rd_reg,
  output logic [1:0][BANK_W-1:0]       rd_bank,
  output logic [1:0]                   rd_valid,
  input  logic [MAX_REGS-1:0]          live_set,
  input  logic [MAX_REGS-1:0]          live_clr,
  output logic [$clog2(NOFF)-1:0]      warp_off,
  output logic [MAX_REGS-1:0]          ws_vec,
  output logic [MAX_REGS-1:0]          live_vec,
  output logic [MAX_REGS-1:0]          valid_vec,
  output logic                         ev_bank_wait   // a request waits on a busy main bank
);
  typedef enum logic [1:0] {S_IDLE, S_WB, S_REL, S_FILL} state_e;
  typedef enum logic [1:0] {K_PF, K_DEACT, K_ACT} kind_e;

  localparam int unsigned CW = $clog2(RFC_BANKS + 1);

  state_e              state;
  kind_e               kind;
  logic [MAX_REGS-1:0] new_vec, wb_pend, alloc_pend, fill_pend;
  logic [CW-1:0]       outstanding;

  // WCB wiring
  logic [REG_W-1:0]    ctl_reg;
  logic [BANK_W-1:0]   ctl_bank;
  logic                tbl_we;
  logic [REG_W-1:0]    tbl_reg;
  logic [MAX_REGS-1:0] valid_set;
  logic                valid_clr_all, ws_we;
  logic [MAX_REGS-1:0] ws_in;

  // AAU wiring
  logic                aau_alloc, aau_ok, aau_dealloc;
  logic [BANK_W-1:0]   aau_id, aau_head;
  logic [CW-1:0]       aau_occ, aau_free;

  warp_control_block #(.NREGS(MAX_REGS), .NBANKS(RFC_BANKS), .NOFF(NOFF)) u_wcb (
    .clk, .rst_n, .clear(launch),
    .rd_reg, .rd_bank, .rd_valid,
    .ctl_reg, .ctl_bank,
    .tbl_we, .tbl_reg, .tbl_bank(aau_id),
    .valid_set, .valid_clr_all,
    .off_we(cmd_activate), .off_in(cmd_off), .warp_off,
    .ws_we, .ws_in, .ws_vec,
    .live_set, .live_clr, .live_vec, .valid_vec
  );

  addr_alloc_unit #(.N(RFC_BANKS)) u_aau (
    .clk, .rst_n,
    .alloc_req(aau_alloc), .alloc_ok(aau_ok), .alloc_id(aau_id),
    .dealloc_req(aau_dealloc), .dealloc_id(aau_head),
    .occ_head(aau_head), .occ_count(aau_occ), .free_count(aau_free)
  );

  // ---------------- request selection ----------------
  logic [MAX_REGS-1:0] pend, elig;
  logic                pick_v, alloc_v;
  logic [REG_W-1:0]    pick, alloc_r;

  always_comb begin
    pend = (state == S_WB) ? wb_pend : (state == S_FILL) ? fill_pend : '0;
    for (int r = 0; r < MAX_REGS; r++)
      elig[r] = pend[r] && !mbank_busy[main_bank_of(REG_W'(r))];
    pick_v = 1'b0;
    pick   = '0;
    for (int r = MAX_REGS - 1; r >= 0; r--)
      if (elig[r]) begin pick_v = 1'b1; pick = REG_W'(r); end
    alloc_v = 1'b0;
    alloc_r = '0;
    for (int r = MAX_REGS - 1; r >= 0; r--)
      if (alloc_pend[r]) begin alloc_v = 1'b1; alloc_r = REG_W'(r); end
  end

  assign ev_bank_wait  = (pend != '0) && !pick_v;
  assign ctl_reg       = pick;
  assign mreq_valid    = pick_v;
  assign mreq.dir      = (state == S_WB) ? XFER_WB : XFER_FILL;
  assign mreq.warp     = WARP_W'(WARP_ID);
  assign mreq.rnum     = pick;
  assign mreq.rfc_bank = ctl_bank;
  assign mreq.rfc_off  = OFF_W'(warp_off);
  assign idle          = (state == S_IDLE);

  // completions reported by the main banks
  logic [CW-1:0]       n_done;
  logic [MAX_REGS-1:0] fill_done_mask;
  always_comb begin
    n_done         = '0;
    fill_done_mask = '0;
    for (int k = 0; k < MAIN_BANKS; k++) begin
      if (mdone_valid[k] && mdone_info[k].warp == WARP_W'(WARP_ID)) begin
        n_done = n_done + 1'b1;
        if (mdone_info[k].dir == XFER_FILL) fill_done_mask[mdone_info[k].rnum] = 1'b1;
      end
    end
  end

  logic issued;
  assign issued = pick_v && mreq_gnt;

  always_comb begin
    aau_alloc     = (state == S_FILL) && alloc_v;
    tbl_we        = aau_alloc;
    tbl_reg       = alloc_r;
    aau_dealloc   = (state == S_REL) && (aau_occ != '0);
    valid_clr_all = (state == S_REL) && (aau_occ == '0);
    valid_set     = fill_done_mask;
    if (aau_alloc && LIVENESS_AWARE && !live_vec[alloc_r]) valid_set[alloc_r] = 1'b1;
    ws_we = (state == S_REL) && (aau_occ == '0) && (kind == K_PF);
    ws_in = new_vec;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      kind        <= K_PF;
      new_vec     <= '0;
      wb_pend     <= '0;
      alloc_pend  <= '0;
      fill_pend   <= '0;
      outstanding <= '0;
      op_done     <= 1'b0;
    end else begin
      op_done     <= 1'b0;
      outstanding <= outstanding + CW'(issued) - n_done;
      case (state)
        S_IDLE: begin
          if (cmd_prefetch || cmd_deactivate) begin
            kind    <= cmd_prefetch ? K_PF : K_DEACT;
            new_vec <= cmd_vec;
            wb_pend <= ws_vec & valid_vec & (LIVENESS_AWARE ? live_vec : '1);
            state   <= S_WB;
          end else if (cmd_activate) begin
            kind       <= K_ACT;
            alloc_pend <= ws_vec;
            state      <= S_FILL;
          end
        end
        S_WB: begin
          if (issued) wb_pend[pick] <= 1'b0;
          if ((wb_pend == '0) && (outstanding == '0)) state <= S_REL;
        end
        S_REL: begin
          if (aau_occ == '0) begin
            if (kind == K_PF) begin
              alloc_pend <= new_vec;
              state      <= S_FILL;
            end else begin
              op_done <= 1'b1;
              state   <= S_IDLE;
            end
          end
        end
        S_FILL: begin
          if (aau_alloc) begin
            alloc_pend[alloc_r] <= 1'b0;
            if (!LIVENESS_AWARE || live_vec[alloc_r]) fill_pend[alloc_r] <= 1'b1;
          end
          if (issued) fill_pend[pick] <= 1'b0;
          if (!alloc_v && (fill_pend == '0) && (outstanding == '0)) begin
            op_done <= 1'b1;
            state   <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A register-interval never needs more banks than the cache has.
  assert property (@(posedge clk) disable iff (!rst_n) aau_alloc |-> aau_ok);
  assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_prefetch || cmd_deactivate || cmd_activate) |-> state == S_IDLE);
endmodule
