// two_level_scheduler: two-level warp scheduler of LTRF.
//
// Warps live in an inactive pool (state in the main register file only) or in an active
// pool of at most NA warps, each of which owns a warp-offset address, i.e. a row in every
// register cache bank. Offsets come from a global address allocation unit. An inactive
// warp that can run is activated as soon as an offset is free; its prefetch unit then
// reloads its working set (W_ACTIVATING) before it may issue. Active warps issue in
// round-robin order. An issued long-latency operation sends the warp back to the inactive
// pool once its operands have been read: its live registers are written back and its
// offset is released; it becomes eligible again when the operation completes. A prefetch
// operation pauses the warp until its new working set is loaded. Exit also writes back and
// releases. One instruction per warp is in flight at a time (no scoreboard: this design's
// simplification), and at most one activation and one offset release happen per cycle.
module two_level_scheduler
  import ltrf_pkg::*;
#(
  parameter int unsigned NW = MAX_WARPS,
  parameter int unsigned NA = MAX_ACTIVE
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         launch,
  input  logic [$clog2(NW+1)-1:0]      launch_n,
  // issue
  output logic                         cand_valid,
  output logic [$clog2(NW)-1:0]        cand_warp,
  input  logic                         issue_fire,
  input  opcode_e                      issue_op,
  input  logic [NW-1:0]                complete,     // in-flight instruction finished
  input  logic [NW-1:0]                long_done,    // long-latency operation finished
  input  logic [NW-1:0]                unit_done,    // prefetch unit finished its command
  // commands to the per-warp prefetch units
  output logic [NW-1:0]                cmd_activate,
  output logic [$clog2(NA)-1:0]        cmd_off,
  output logic [NW-1:0]                cmd_deactivate,
  output logic [NW-1:0]                has_off,
  output logic [NW-1:0][$clog2(NA)-1:0] warp_off,
  output logic [NW-1:0]                is_active,    // may issue (active and loaded)
  output logic                         all_done
);
  localparam int unsigned WW = $clog2(NW);
  localparam int unsigned OW = $clog2(NA);

  typedef enum logic [2:0] {
    W_IDLE, W_PENDING, W_WAIT, W_ACTIVATING, W_ACTIVE, W_PREFETCH, W_DEACT, W_RELEASE
  } wstate_e;

  wstate_e [NW-1:0] st;
  logic [NW-1:0]    inflight, long_wait, long_back, exiting, done_w;

  // ---------------- issue selection ----------------
  logic [NW-1:0] elig;
  logic [WW-1:0] iss_idx;
  always_comb
    for (int w = 0; w < NW; w++) begin
      elig[w]      = (st[w] == W_ACTIVE) && !inflight[w] && !long_wait[w];
      is_active[w] = (st[w] == W_ACTIVE);
    end
  rr_arbiter #(.N(NW)) u_issue_arb (
    .clk, .rst_n, .req(elig), .take(issue_fire),
    .gnt(), .gnt_idx(iss_idx), .gnt_valid(cand_valid)
  );
  assign cand_warp = iss_idx;

  // ---------------- activation ----------------
  logic [NW-1:0] pend_req;
  logic [WW-1:0] act_idx;
  logic          act_v, act_fire, off_ok;
  logic [OW-1:0] off_id;

  always_comb for (int w = 0; w < NW; w++) pend_req[w] = (st[w] == W_PENDING);
  rr_arbiter #(.N(NW)) u_act_arb (
    .clk, .rst_n, .req(pend_req), .take(act_fire),
    .gnt(), .gnt_idx(act_idx), .gnt_valid(act_v)
  );
  assign act_fire = act_v && off_ok;

  // ---------------- offset release ----------------
  logic          rel_v;
  logic [WW-1:0] rel_idx;
  always_comb begin
    rel_v   = 1'b0;
    rel_idx = '0;
    for (int w = NW - 1; w >= 0; w--)
      if (st[w] == W_RELEASE) begin rel_v = 1'b1; rel_idx = WW'(w); end
  end

  addr_alloc_unit #(.N(NA)) u_offsets (
    .clk, .rst_n,
    .alloc_req(act_fire), .alloc_ok(off_ok), .alloc_id(off_id),
    .dealloc_req(rel_v), .dealloc_id(warp_off[rel_idx]),
    .occ_head(), .occ_count(), .free_count()
  );

  // ---------------- commands ----------------
  logic issue_exit;
  assign issue_exit = issue_fire && issue_op == OP_EXIT;
  assign cmd_off    = off_id;
  always_comb begin
    for (int w = 0; w < NW; w++) begin
      cmd_activate[w]   = act_fire && act_idx == WW'(w);
      cmd_deactivate[w] = (st[w] == W_ACTIVE) &&
                          ((long_wait[w] && !inflight[w]) ||
                           (issue_exit && cand_warp == WW'(w)));
    end
  end

  always_comb begin
    all_done = 1'b1;
    for (int w = 0; w < NW; w++)
      if (!(st[w] == W_IDLE)) all_done = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= '{default: W_IDLE};
      inflight  <= '0;
      long_wait <= '0;
      long_back <= '0;
      exiting   <= '0;
      done_w    <= '0;
      has_off   <= '0;
      warp_off  <= '0;
    end else if (launch) begin
      for (int w = 0; w < NW; w++) st[w] <= (w < int'(launch_n)) ? W_PENDING : W_IDLE;
      inflight  <= '0;
      long_wait <= '0;
      long_back <= '0;
      exiting   <= '0;
      done_w    <= '0;
      has_off   <= '0;
    end else begin
      for (int w = 0; w < NW; w++) begin
        if (complete[w])  inflight[w]  <= 1'b0;
        if (long_done[w]) long_back[w] <= 1'b1;
        unique case (st[w])
          W_PENDING: if (cmd_activate[w]) begin
            st[w]       <= W_ACTIVATING;
            has_off[w]  <= 1'b1;
            warp_off[w] <= off_id;
          end
          W_ACTIVATING, W_PREFETCH: if (unit_done[w]) st[w] <= W_ACTIVE;
          W_ACTIVE: begin
            if (cmd_deactivate[w]) begin
              st[w] <= W_DEACT;
              if (issue_exit && cand_warp == WW'(w)) exiting[w] <= 1'b1;
            end else if (issue_fire && cand_warp == WW'(w)) begin
              if (issue_op == OP_PREFETCH) st[w] <= W_PREFETCH;
              else begin
                inflight[w]  <= 1'b1;
                if (issue_op == OP_LONG) begin
                  long_wait[w] <= 1'b1;
                  long_back[w] <= 1'b0;
                end
              end
            end
          end
          W_DEACT: if (unit_done[w]) st[w] <= W_RELEASE;
          W_RELEASE: if (rel_v && rel_idx == WW'(w)) begin
            has_off[w]   <= 1'b0;
            long_wait[w] <= 1'b0;
            if (exiting[w]) begin
              st[w]     <= W_IDLE;
              done_w[w] <= 1'b1;
            end else if (long_back[w] || long_done[w]) st[w] <= W_PENDING;
            else st[w] <= W_WAIT;
          end
          W_WAIT: if (long_back[w] || long_done[w]) st[w] <= W_PENDING;
          default: ;
        endcase
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) issue_fire |-> cand_valid);
endmodule
