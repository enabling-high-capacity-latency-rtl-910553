// ltrf_top: the latency-tolerant register file (LTRF) of one streaming multiprocessor.
//
// A two-level register file: a large, slow main register file (16 single-ported banks,
// MAIN_LAT-cycle access) backs a small register file cache (16 banks x one row per active
// warp). Software marks the start of every register-interval with a prefetch operation
// whose bit-vector names all registers the interval may touch; the hardware loads them into
// the warp's cache partition before the warp continues, so every operand read and result
// write inside the interval hits the cache. Slow loads are hidden by running other active
// warps. The parts, and the path of a register:
//   two_level_scheduler  active pool of NA warps, round-robin issue, activation/deactivation
//   warp_prefetch_unit   per warp: WCB + address allocation unit + load/writeback control
//   fill arbiter         NA-bit round-robin, one main-RF transfer request per cycle
//   main_rf_bank x16     slow banks; main_xbar (256-bit links) to the cache banks
//   rfc_bank x16         cache; rfc_operand_arbiter + 1024-bit crossbar to the collectors
//   operand_collector    NOC collectors, dispatch to the SIMD unit (outside this block)
// Interface: the instruction supply is outside: ifetch_warp names the warp the scheduler
// wants to issue, ifetch_instr must present that warp's next decoded instruction in the same
// cycle, and issue_fire says it was consumed. Dispatched instructions leave on disp
// (disp_valid/disp_ready); results return on wb, one per cycle, with the destination
// location they were dispatched with. A long-latency operation is reported finished on
// long_done_*. Operand location: the issue cycle reads the two source bank numbers from the
// warp control block; an instruction with a destination uses the next cycle for the third
// lookup, during which no other instruction issues.
module ltrf_top
  import ltrf_pkg::*;
#(
  parameter int unsigned NW             = MAX_WARPS,
  parameter int unsigned NA             = MAX_ACTIVE,
  parameter int unsigned NOC            = NUM_OC,
  parameter int unsigned LAT            = MAIN_LAT,
  parameter bit          LIVENESS_AWARE = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    launch,
  input  logic [$clog2(NW+1)-1:0] launch_n,
  output logic                    ifetch_valid,
  output logic [WARP_W-1:0]       ifetch_warp,
  input  instr_t                  ifetch_instr,
  output logic                    issue_fire,
  output logic                    disp_valid,
  output dispatch_t               disp,
  input  logic                    disp_ready,
  input  logic                    wb_valid,
  input  wb_t                     wb,
  input  logic                    long_done_valid,
  input  logic [WARP_W-1:0]       long_done_warp,
  output logic                    all_done,
  output ltrf_events_t            events
);
  localparam int unsigned ROWS = NW * MAX_REGS / MAIN_BANKS;
  localparam int unsigned WW   = $clog2(NW);
  localparam int unsigned OW   = $clog2(NA);
  localparam int unsigned CIW  = $clog2(NOC);
  localparam int unsigned NREQ = NOC * NUM_SRC;

  // ---------------- scheduler ----------------
  logic                 cand_valid;
  logic [WW-1:0]        cand_warp;
  logic [NW-1:0]        complete, long_done, unit_done, cmd_activate, cmd_deactivate;
  logic [NW-1:0]        has_off, is_active;
  logic [NW-1:0][OW-1:0] sched_off;
  logic [OW-1:0]        cmd_off;

  two_level_scheduler #(.NW(NW), .NA(NA)) u_sched (
    .clk, .rst_n, .launch, .launch_n,
    .cand_valid, .cand_warp, .issue_fire, .issue_op(ifetch_instr.op),
    .complete, .long_done, .unit_done,
    .cmd_activate, .cmd_off, .cmd_deactivate,
    .has_off, .warp_off(sched_off), .is_active, .all_done
  );

  always_comb begin
    long_done = '0;
    if (long_done_valid) long_done[WW'(long_done_warp)] = 1'b1;
  end

  // ---------------- per-warp prefetch units ----------------
  logic      [NW-1:0]                 mreq_valid, mreq_gnt, ev_bank_wait;
  main_req_t [NW-1:0]                 mreq;
  logic      [NW-1:0][1:0][BANK_W-1:0] rd_bank;
  logic      [NW-1:0][1:0]            rd_valid;
  logic      [NW-1:0][MAX_REGS-1:0]   live_set, live_clr;
  logic      [NW-1:0]                 cmd_prefetch;
  logic      [1:0][REG_W-1:0]         probe_reg;
  logic      [MAIN_BANKS-1:0]         mbank_busy, mdone_valid;
  main_req_t [MAIN_BANKS-1:0]         mdone_info;

  for (genvar w = 0; w < NW; w++) begin : g_warp
    warp_prefetch_unit #(.WARP_ID(w), .NOFF(NA), .LIVENESS_AWARE(LIVENESS_AWARE)) u_unit (
      .clk, .rst_n, .launch,
      .cmd_prefetch(cmd_prefetch[w]), .cmd_vec(ifetch_instr.pf_vec),
      .cmd_activate(cmd_activate[w]), .cmd_off, .cmd_deactivate(cmd_deactivate[w]),
      .op_done(unit_done[w]), .idle(),
      .mreq_valid(mreq_valid[w]), .mreq(mreq[w]), .mreq_gnt(mreq_gnt[w]),
      .mbank_busy, .mdone_valid, .mdone_info,
      .rd_reg(probe_reg), .rd_bank(rd_bank[w]), .rd_valid(rd_valid[w]),
      .live_set(live_set[w]), .live_clr(live_clr[w]),
      .warp_off(), .ws_vec(), .live_vec(), .valid_vec(),
      .ev_bank_wait(ev_bank_wait[w])
    );
  end

  // ---------------- fill arbiter (one request per cycle, by warp-offset) ----------------
  logic [NA-1:0] slot_req;
  logic [OW-1:0] slot_idx;
  logic          slot_v;
  logic [WW-1:0] sel_warp;

  always_comb begin
    slot_req = '0;
    for (int w = 0; w < NW; w++)
      if (mreq_valid[w] && has_off[w]) slot_req[sched_off[w]] = 1'b1;
  end

  rr_arbiter #(.N(NA)) u_fill_arb (
    .clk, .rst_n, .req(slot_req), .take(1'b1),
    .gnt(), .gnt_idx(slot_idx), .gnt_valid(slot_v)
  );

  always_comb begin
    mreq_gnt = '0;
    sel_warp = '0;
    for (int w = 0; w < NW; w++)
      if (slot_v && has_off[w] && mreq_valid[w] && sched_off[w] == slot_idx) begin
        mreq_gnt[w] = 1'b1;
        sel_warp    = WW'(w);
      end
  end

  // ---------------- main register file and its crossbar ----------------
  logic      [MAIN_BANKS-1:0]              mb_req_valid, mb_ready, x_req, x_gnt;
  logic      [MAIN_BANKS-1:0][BANK_W-1:0]  x_dst;
  logic      [MAIN_BANKS-1:0][OFF_W-1:0]   x_off;
  xfer_dir_e [MAIN_BANKS-1:0]              x_dir;
  flit_t     [MAIN_BANKS-1:0]              x_m2c, x_c2m;
  main_req_t                               sel_req;

  assign sel_req = mreq[sel_warp];

  for (genvar b = 0; b < MAIN_BANKS; b++) begin : g_main
    assign mb_req_valid[b] = slot_v && (main_bank_of(sel_req.rnum) == MB_W'(b));
    assign mbank_busy[b]   = !mb_ready[b];
    main_rf_bank #(.ROWS(ROWS), .LAT(LAT)) u_bank (
      .clk, .rst_n,
      .req_valid(mb_req_valid[b]), .req_ready(mb_ready[b]), .req(sel_req),
      .req_row(($clog2(ROWS))'(main_row_of(sel_req.warp, sel_req.rnum))),
      .x_req(x_req[b]), .x_dst(x_dst[b]), .x_off(x_off[b]), .x_dir(x_dir[b]),
      .x_gnt(x_gnt[b]), .x_flit_out(x_m2c[b]), .x_flit_in(x_c2m[b]),
      .done(mdone_valid[b]), .done_info(mdone_info[b])
    );
  end

  logic  [RFC_BANKS-1:0]                    fp_en, fp_we;
  logic  [RFC_BANKS-1:0][OFF_W-1:0]         fp_off;
  logic  [RFC_BANKS-1:0][$clog2(BEATS)-1:0] fp_slice;
  flit_t [RFC_BANKS-1:0]                    fp_wdata, fp_rdata;

  main_xbar #(.NM(MAIN_BANKS), .NR(RFC_BANKS)) u_main_xbar (
    .clk, .rst_n,
    .x_req, .x_dst, .x_off, .x_dir, .x_flit_m2c(x_m2c), .x_gnt, .x_flit_c2m(x_c2m),
    .fp_en, .fp_we, .fp_off, .fp_slice, .fp_wdata, .fp_rdata
  );

  // ---------------- register file cache ----------------
  logic      [RFC_BANKS-1:0]           rd_en;
  logic      [RFC_BANKS-1:0][OFF_W-1:0] rd_off;
  reg_data_t [RFC_BANKS-1:0]           rd_data;

  for (genvar b = 0; b < RFC_BANKS; b++) begin : g_rfc
    rfc_bank #(.ENTRIES(MAX_ACTIVE)) u_bank (
      .clk, .rst_n,
      .rd_en(rd_en[b]), .rd_off(rd_off[b]), .rd_data(rd_data[b]),
      .ex_we(wb_valid && wb.dst_bank == BANK_W'(b)), .ex_off(wb.dst_off), .ex_data(wb.data),
      .fp_en(fp_en[b]), .fp_we(fp_we[b]), .fp_off(fp_off[b]), .fp_slice(fp_slice[b]),
      .fp_wdata(fp_wdata[b]), .fp_rdata(fp_rdata[b])
    );
  end

  // ---------------- issue stage ----------------
  logic            need_oc, oc_free_v, issue_ok;
  logic [CIW-1:0]  oc_free;
  logic [NOC-1:0]  oc_busy, oc_alloc, oc_dst_we;
  logic            p2_valid;
  logic [WW-1:0]   p2_warp;
  logic [REG_W-1:0] p2_dst;
  logic [CIW-1:0]  p2_oc;
  logic [1:0][BANK_W-1:0] probe_bank;
  logic [1:0]             probe_valid;
  logic [WW-1:0]   probe_warp;

  assign need_oc = (ifetch_instr.op == OP_ALU) || (ifetch_instr.op == OP_LONG);

  always_comb begin
    oc_free_v = 1'b0;
    oc_free   = '0;
    for (int c = NOC - 1; c >= 0; c--)
      if (!oc_busy[c]) begin oc_free_v = 1'b1; oc_free = CIW'(c); end
  end

  assign ifetch_valid = cand_valid && !p2_valid;
  assign ifetch_warp  = WARP_W'(cand_warp);
  assign issue_ok     = cand_valid && !p2_valid && (!need_oc || oc_free_v);
  assign issue_fire   = issue_ok;

  assign probe_warp   = p2_valid ? p2_warp : cand_warp;
  assign probe_reg[0] = p2_valid ? p2_dst : ifetch_instr.src[0];
  assign probe_reg[1] = ifetch_instr.src[1];
  assign probe_bank   = rd_bank[probe_warp];
  assign probe_valid  = rd_valid[probe_warp];

  always_comb begin
    cmd_prefetch = '0;
    oc_alloc     = '0;
    oc_dst_we    = '0;
    if (issue_fire && ifetch_instr.op == OP_PREFETCH) cmd_prefetch[cand_warp] = 1'b1;
    if (issue_fire && need_oc) oc_alloc[oc_free] = 1'b1;
    if (p2_valid) oc_dst_we[p2_oc] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p2_valid <= 1'b0;
      p2_warp  <= '0;
      p2_dst   <= '0;
      p2_oc    <= '0;
    end else begin
      p2_valid <= issue_fire && need_oc && ifetch_instr.dst_valid;
      p2_warp  <= cand_warp;
      p2_dst   <= ifetch_instr.dst;
      p2_oc    <= oc_free;
    end
  end

  // ---------------- operand collectors ----------------
  logic      [NREQ-1:0]             rq_valid, rq_gnt, resp_valid;
  logic      [NREQ-1:0][BANK_W-1:0] rq_bank;
  logic      [NREQ-1:0][OFF_W-1:0]  rq_off;
  reg_data_t [NREQ-1:0]             resp_data;
  logic      [NOC-1:0]              oc_rdy, oc_take;
  dispatch_t [NOC-1:0]              oc_disp;

  for (genvar c = 0; c < NOC; c++) begin : g_oc
    operand_collector u_oc (
      .clk, .rst_n, .busy(oc_busy[c]),
      .alloc(oc_alloc[c]), .a_warp(WARP_W'(cand_warp)), .a_op(ifetch_instr.op),
      .a_src_valid(ifetch_instr.src_valid), .a_src(ifetch_instr.src),
      .a_src_dead(ifetch_instr.src_dead), .a_src_bank(probe_bank),
      .a_off(OFF_W'(sched_off[cand_warp])),
      .a_dst_valid(ifetch_instr.dst_valid), .a_dst(ifetch_instr.dst),
      .dst_we(oc_dst_we[c]), .dst_bank_in(probe_bank[0]),
      .rq_valid(rq_valid[c*NUM_SRC +: NUM_SRC]), .rq_bank(rq_bank[c*NUM_SRC +: NUM_SRC]),
      .rq_off(rq_off[c*NUM_SRC +: NUM_SRC]), .rq_gnt(rq_gnt[c*NUM_SRC +: NUM_SRC]),
      .resp_valid(resp_valid[c*NUM_SRC +: NUM_SRC]),
      .resp_data(resp_data[c*NUM_SRC +: NUM_SRC]),
      .disp_rdy(oc_rdy[c]), .disp_take(oc_take[c]), .disp(oc_disp[c])
    );
  end

  rfc_operand_arbiter #(.NREQ(NREQ), .NB(RFC_BANKS), .NOFF(MAX_ACTIVE)) u_rfc_arb (
    .clk, .rst_n, .rq_valid, .rq_bank, .rq_off, .rq_gnt,
    .rd_en, .rd_off, .rd_data, .resp_valid, .resp_data
  );

  // ---------------- dispatch to the SIMD unit ----------------
  logic [CIW-1:0] d_idx;
  logic           d_v;
  rr_arbiter #(.N(NOC)) u_disp_arb (
    .clk, .rst_n, .req(oc_rdy), .take(disp_ready),
    .gnt(), .gnt_idx(d_idx), .gnt_valid(d_v)
  );
  assign disp_valid = d_v;
  assign disp       = oc_disp[d_idx];

  always_comb begin
    oc_take  = '0;
    complete = '0;
    live_set = '0;
    live_clr = '0;
    if (d_v && disp_ready) begin
      oc_take[d_idx] = 1'b1;
      for (int s = 0; s < NUM_SRC; s++)
        if (disp.src_valid[s] && disp.src_dead[s]) live_clr[WW'(disp.warp)][disp.src[s]] = 1'b1;
      if (!disp.dst_valid) complete[WW'(disp.warp)] = 1'b1;
    end
    if (wb_valid) begin
      live_set[WW'(wb.warp)][wb.dst] = 1'b1;
      complete[WW'(wb.warp)] = 1'b1;
    end
  end

  // ---------------- events ----------------
  always_comb begin
    events                   = '0;
    events.activate          = |cmd_activate;
    events.deactivate        = |cmd_deactivate;
    events.prefetch          = |cmd_prefetch;
    events.fill              = slot_v && sel_req.dir == XFER_FILL;
    events.writeback         = slot_v && sel_req.dir == XFER_WB;
    events.main_bank_wait    = |ev_bank_wait;
    events.fill_arb_conflict = (slot_req & (slot_req - 1'b1)) != '0;
    events.xbar_wait         = |(x_req & ~x_gnt);
    events.rfc_bank_conflict = |(rq_valid & ~rq_gnt);
    events.issue_stall       = cand_valid && !issue_ok;
  end

  // Every source operand of an issued instruction is already in the register cache:
  // this is the guarantee the prefetch operations give.
  for (genvar s = 0; s < 2; s++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      (issue_fire && need_oc && ifetch_instr.src_valid[s]) |-> probe_valid[s]);
  end
  assert property (@(posedge clk) disable iff (!rst_n) p2_valid |-> probe_valid[0]);
  assert property (@(posedge clk) disable iff (!rst_n)
    slot_v |-> mb_ready[main_bank_of(sel_req.rnum)]);
endmodule
