// tb_warp_prefetch_unit: checks one warp's LTRF controller (prefetch, deactivate, activate).
//
// The main register file is modelled as 16 banks that are busy for LAT + 4 cycles per
// transfer and then report done; the fill arbiter grant is randomly withheld. Each round:
//  1. a prefetch of a random working set (with several registers sharing a main bank);
//  2. the test marks a random subset of it live (as results written by the SIMD unit do);
//  3. a deactivation, then an activation with a new warp-offset;
//  4. the next prefetch, which first writes the live part of the old set back.
// Checked: every writeback is for a live register of the old set and every fill for a live
// register of the new set, each exactly once (dead registers cost no traffic: LTRF+); no
// request goes to a busy main bank; after op_done the set is valid, every register sits in
// a different cache bank, the bank in the request equals the table entry, and the offset is
// the one given. Main bank waits must occur.
`timescale 1ns/1ps
module tb_warp_prefetch_unit;
  import ltrf_pkg::*;
  localparam int XLAT = MAIN_LAT + BEATS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic                        launch, cmd_prefetch, cmd_activate, cmd_deactivate;
  logic [MAX_REGS-1:0]         cmd_vec, live_set, live_clr, ws_vec, live_vec, valid_vec;
  logic [OFF_W-1:0]            cmd_off, warp_off;
  logic                        op_done, idle, mreq_valid, mreq_gnt, ev_bank_wait;
  main_req_t                   mreq;
  logic [MAIN_BANKS-1:0]       mbank_busy, mdone_valid;
  main_req_t [MAIN_BANKS-1:0]  mdone_info;
  logic [1:0][REG_W-1:0]       rd_reg;
  logic [1:0][BANK_W-1:0]      rd_bank;
  logic [1:0]                  rd_valid;

  int checks = 0, failures = 0, n_wait = 0;
  bit gnt_en;
  int busy_cnt [MAIN_BANKS];
  main_req_t busy_info [MAIN_BANKS];
  logic [MAX_REGS-1:0] seen_fill, seen_wb;
  int dup = 0, busy_violation = 0;

  warp_prefetch_unit #(.WARP_ID(5)) dut (.*);

  assign mreq_gnt = mreq_valid && gnt_en;
  always_comb for (int b = 0; b < MAIN_BANKS; b++) mbank_busy[b] = busy_cnt[b] > 0;

  // main register file model
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < MAIN_BANKS; b++) begin busy_cnt[b] <= 0; busy_info[b] <= '0; end
      mdone_valid <= '0;
      mdone_info  <= '0;
      gnt_en      <= 1'b0;
    end else begin
      gnt_en <= ($urandom_range(0, 3) != 0);
      mdone_valid <= '0;
      if (ev_bank_wait) n_wait++;
      for (int b = 0; b < MAIN_BANKS; b++) begin
        if (busy_cnt[b] == 1) begin
          mdone_valid[b] <= 1'b1;
          mdone_info[b]  <= busy_info[b];
        end
        if (busy_cnt[b] > 0) busy_cnt[b] <= busy_cnt[b] - 1;
      end
      if (mreq_gnt) begin
        int b;
        b = int'(main_bank_of(mreq.rnum));
        if (busy_cnt[b] != 0) busy_violation++;
        busy_cnt[b]  <= XLAT;
        busy_info[b] <= mreq;
        if (mreq.dir == XFER_FILL) begin
          if (seen_fill[mreq.rnum]) dup++;
          seen_fill[mreq.rnum] = 1'b1;
        end else begin
          if (seen_wb[mreq.rnum]) dup++;
          seen_wb[mreq.rnum] = 1'b1;
        end
      end
    end
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic logic [MAX_REGS-1:0] rand_set();
    logic [MAX_REGS-1:0] s;
    int n, first;
    s = '0;
    n = $urandom_range(6, 14);
    first = $urandom_range(0, 15);
    s[first] = 1'b1;
    s[first + 16 * $urandom_range(1, 15)] = 1'b1;   // same main bank as `first`
    while ($countones(s) < n) s[$urandom_range(0, MAX_REGS - 1)] = 1'b1;
    return s;
  endfunction

  task automatic wait_done(string what);
    int t;
    t = 0;
    while (!op_done && t < 2000) begin @(negedge clk); t++; end
    chk(op_done, {what, " finished"});
    @(negedge clk);
  endtask

  task automatic check_loaded(logic [MAX_REGS-1:0] s, logic [OFF_W-1:0] off, string what);
    logic [RFC_BANKS-1:0] used;
    bit ok;
    used = '0;
    ok = 1'b1;
    chk(ws_vec == s, {what, ": working set"});
    chk((valid_vec & s) == s, {what, ": all valid"});
    chk(warp_off == off, {what, ": warp offset"});
    for (int r = 0; r < MAX_REGS; r++)
      if (s[r]) begin
        rd_reg[0] = REG_W'(r);
        #0.01;
        if (used[rd_bank[0]]) ok = 1'b0;
        used[rd_bank[0]] = 1'b1;
      end
    chk(ok, {what, ": one cache bank per register"});
  endtask

  // bank in each request must match the table once the operation ends
  main_req_t req_log [$];
  always @(posedge clk) if (mreq_gnt && mreq.dir == XFER_FILL) req_log.push_back(mreq);

  initial begin
    logic [MAX_REGS-1:0] cur, nxt, live;
    logic [OFF_W-1:0] off;
    launch = 0; cmd_prefetch = 0; cmd_activate = 0; cmd_deactivate = 0; cmd_vec = '0;
    cmd_off = '0; live_set = '0; live_clr = '0; rd_reg = '0;
    seen_fill = '0; seen_wb = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // activate with offset 3 (empty working set), then run rounds
    off = 3'd3;
    launch = 1; @(negedge clk); launch = 0;
    cmd_activate = 1; cmd_off = off; @(negedge clk); cmd_activate = 0;
    wait_done("first activation");
    cur = '0;
    live = '0;
    for (int round = 0; round < 12; round++) begin
      nxt = rand_set();
      seen_fill = '0; seen_wb = '0; req_log.delete();
      cmd_prefetch = 1; cmd_vec = nxt; @(negedge clk); cmd_prefetch = 0;
      wait_done("prefetch");
      chk(seen_wb == (cur & live), $sformatf("round %0d: writebacks = live part of old set", round));
      chk(seen_fill == (nxt & live), $sformatf("round %0d: fills = live part of new set", round));
      check_loaded(nxt, off, "prefetch");
      foreach (req_log[i]) begin
        rd_reg[1] = req_log[i].rnum; #0.01;
        chk(rd_bank[1] == req_log[i].rfc_bank && req_log[i].rfc_off == off, "request bank and row");
      end
      cur = nxt;
      // results written in this interval make part of it live; some registers die
      live_set = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom} & cur;
      live_clr = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom} & cur & ~live_set;
      @(negedge clk);
      live = (live | live_set) & ~live_clr;
      live_set = '0; live_clr = '0;
      chk(live_vec == live, "liveness vector");
      // long-latency stall: out of the active pool and back with another offset
      seen_fill = '0; seen_wb = '0;
      cmd_deactivate = 1; @(negedge clk); cmd_deactivate = 0;
      wait_done("deactivation");
      chk(seen_wb == (cur & live) && seen_fill == '0, "deactivation writes back live registers only");
      chk(valid_vec == '0, "nothing cached after deactivation");
      off = OFF_W'($urandom);
      seen_fill = '0; seen_wb = '0;
      cmd_activate = 1; cmd_off = off; @(negedge clk); cmd_activate = 0;
      wait_done("activation");
      chk(seen_fill == (cur & live) && seen_wb == '0, "activation refetches live registers only");
      check_loaded(cur, off, "activation");
    end
    chk(dup == 0, "no register moved twice in one operation");
    chk(busy_violation == 0, "no request to a busy main bank");
    chk(n_wait > 0, "main bank conflicts exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
