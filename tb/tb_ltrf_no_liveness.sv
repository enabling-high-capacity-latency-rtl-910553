// tb_ltrf_no_liveness: the end-to-end workload of tb_ltrf_top without liveness tracking.
//
// With LIVENESS_AWARE = 0 the register file behaves as plain LTRF: every register of a
// working set is written back and refetched, whether or not its value is still needed,
// while the default (LTRF+) moves only live registers. The same generated 64-warp programs
// run on ltrf_top with LIVENESS_AWARE = 0; every dispatched source value is checked against
// a reference register file, every counted mechanism must occur, and the number of fills
// and writebacks is reported for comparison with the default configuration.
`timescale 1ns/1ps
module tb_ltrf_no_liveness;
  import ltrf_pkg::*;

  localparam int NWARP  = MAX_WARPS;
  localparam int MAXPC  = 48;
  localparam int EX_LAT = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic              launch;
  logic [6:0]        launch_n;
  logic              ifetch_valid, issue_fire, disp_valid, disp_ready, wb_valid;
  logic [WARP_W-1:0] ifetch_warp, long_done_warp;
  instr_t            ifetch_instr;
  dispatch_t         disp;
  wb_t               wb;
  logic              long_done_valid, all_done;
  ltrf_events_t      events;

  ltrf_top #(.LIVENESS_AWARE(1'b0)) dut (
    .clk, .rst_n, .launch, .launch_n,
    .ifetch_valid, .ifetch_warp, .ifetch_instr, .issue_fire,
    .disp_valid, .disp, .disp_ready, .wb_valid, .wb,
    .long_done_valid, .long_done_warp, .all_done, .events
  );

  int checks = 0, failures = 0;

  // ---------------- program generation ----------------
  instr_t    prog [NWARP][MAXPC];
  int        plen [NWARP];
  int        pc   [NWARP];
  reg_data_t refv [NWARP][MAX_REGS];

  function automatic instr_t mk_alu(int d, int s0, int s1);
    instr_t i;
    i = '0;
    i.op = OP_ALU;
    i.dst_valid = 1'b1;
    i.dst = REG_W'(d);
    if (s0 >= 0) begin i.src_valid[0] = 1'b1; i.src[0] = REG_W'(s0); end
    if (s1 >= 0) begin i.src_valid[1] = 1'b1; i.src[1] = REG_W'(s1); end
    return i;
  endfunction

  task automatic gen_prog(int w);
    logic [MAX_REGS-1:0] defined, needed;
    int n;
    defined = '0;
    n = 0;
    for (int k = 0; k < 3; k++) begin
      logic [MAX_REGS-1:0] s;
      int regs [$];
      int nreg, ninst;
      s = '0;
      // carry some defined registers into the new interval
      for (int r = 0; r < MAX_REGS && regs.size() < 4; r++)
        if (defined[r] && ($urandom_range(0, 1) == 1)) begin regs.push_back(r); s[r] = 1'b1; end
      nreg = $urandom_range(6, 12);
      while (regs.size() < nreg) begin
        int r;
        // half of the new registers share a main bank with one already chosen
        if (regs.size() > 0 && $urandom_range(0, 1) == 1)
          r = (regs[$urandom_range(0, regs.size() - 1)] + 16 * $urandom_range(1, 15)) % MAX_REGS;
        else
          r = $urandom_range(0, MAX_REGS - 1);
        if (!s[r]) begin s[r] = 1'b1; regs.push_back(r); end
      end
      prog[w][n] = '0;
      prog[w][n].op = OP_PREFETCH;
      prog[w][n].pf_vec = s;
      n++;
      ninst = $urandom_range(5, 9);
      for (int j = 0; j < ninst; j++) begin
        int cand [$];
        int d, s0, s1;
        foreach (regs[q]) if (defined[regs[q]]) cand.push_back(regs[q]);
        d  = regs[$urandom_range(0, regs.size() - 1)];
        s0 = (cand.size() > 0) ? cand[$urandom_range(0, cand.size() - 1)] : -1;
        s1 = (cand.size() > 1) ? cand[$urandom_range(0, cand.size() - 1)] : -1;
        if (k == 1 && j == ninst / 2) begin
          prog[w][n] = '0;
          prog[w][n].op = OP_LONG;
          if (s0 >= 0) begin prog[w][n].src_valid[0] = 1'b1; prog[w][n].src[0] = REG_W'(s0); end
        end else begin
          prog[w][n] = mk_alu(d, s0, s1);
          defined[d] = 1'b1;
        end
        n++;
      end
    end
    prog[w][n] = '0;
    prog[w][n].op = OP_EXIT;
    n++;
    plen[w] = n;
    // backward liveness: a source is dead if no later instruction reads it before a write
    needed = '0;
    for (int i = n - 1; i >= 0; i--) begin
      if (prog[w][i].op == OP_ALU || prog[w][i].op == OP_LONG) begin
        logic [MAX_REGS-1:0] after;
        after = needed;
        if (prog[w][i].dst_valid) needed[prog[w][i].dst] = 1'b0;
        for (int q = 0; q < NUM_SRC; q++)
          if (prog[w][i].src_valid[q]) begin
            prog[w][i].src_dead[q] = !after[prog[w][i].src[q]] ||
                                     (prog[w][i].dst_valid && prog[w][i].dst == prog[w][i].src[q]);
            needed[prog[w][i].src[q]] = 1'b1;
          end
      end
    end
  endtask

  // ---------------- instruction supply ----------------
  always_comb ifetch_instr = prog[ifetch_warp][pc[ifetch_warp]];

  // ---------------- SIMD unit and memory model ----------------
  wb_t          ex_pipe   [EX_LAT];
  logic         ex_pipe_v [EX_LAT];
  int           long_time [NWARP];
  int           cycle = 0;
  int unsigned  n_dispatch = 0, n_exit = 0;
  int unsigned  cnt_act = 0, cnt_deact = 0, cnt_pf = 0, cnt_fill = 0, cnt_wb = 0;
  int unsigned  cnt_mbw = 0, cnt_arb = 0, cnt_xw = 0, cnt_rfcc = 0, cnt_stall = 0;

  assign disp_ready = 1'b1;
  assign wb_valid   = ex_pipe_v[EX_LAT-1];
  assign wb         = ex_pipe[EX_LAT-1];

  always_comb begin
    long_done_valid = 1'b0;
    long_done_warp  = '0;
    for (int w = NWARP - 1; w >= 0; w--)
      if (long_time[w] >= 0 && long_time[w] <= cycle) begin
        long_done_valid = 1'b1;
        long_done_warp  = WARP_W'(w);
      end
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      cycle <= cycle + 1;
      for (int i = EX_LAT - 1; i > 0; i--) begin
        ex_pipe[i]   <= ex_pipe[i-1];
        ex_pipe_v[i] <= ex_pipe_v[i-1];
      end
      ex_pipe_v[0] <= 1'b0;
      if (issue_fire) begin
        if (ifetch_instr.op == OP_EXIT) n_exit <= n_exit + 1;
        pc[ifetch_warp] <= pc[ifetch_warp] + 1;
      end
      if (long_done_valid) long_time[long_done_warp] <= -1;
      if (disp_valid && disp_ready) begin
        reg_data_t res;
        int w;
        w = int'(disp.warp);
        n_dispatch <= n_dispatch + 1;
        for (int q = 0; q < NUM_SRC; q++)
          if (disp.src_valid[q]) begin
            checks++;
            if (disp.src_data[q] !== refv[w][disp.src[q]]) begin
              failures++;
              if (failures < 10)
                $display("FAIL: warp %0d src%0d r%0d value mismatch at cycle %0d", w, q, disp.src[q], cycle);
            end
          end
        if (disp.op == OP_LONG) long_time[w] <= cycle + 40 + int'($urandom_range(0, 100));
        if (disp.dst_valid) begin
          res = (disp.src_valid[0] ? disp.src_data[0] : '0) +
                (disp.src_valid[1] ? disp.src_data[1] : '0) +
                {disp.warp, disp.dst, 32'(n_dispatch)};
          res[DATA_W-1 -: 32] = 32'(n_dispatch) ^ 32'hA5A5_0000;
          refv[w][disp.dst] = res;
          ex_pipe[0].warp     <= disp.warp;
          ex_pipe[0].dst      <= disp.dst;
          ex_pipe[0].dst_bank <= disp.dst_bank;
          ex_pipe[0].dst_off  <= disp.dst_off;
          ex_pipe[0].data     <= res;
          ex_pipe_v[0]        <= 1'b1;
        end
      end
      if (events.activate)          cnt_act++;
      if (events.deactivate)        cnt_deact++;
      if (events.prefetch)          cnt_pf++;
      if (events.fill)              cnt_fill++;
      if (events.writeback)         cnt_wb++;
      if (events.main_bank_wait)    cnt_mbw++;
      if (events.fill_arb_conflict) cnt_arb++;
      if (events.xbar_wait)         cnt_xw++;
      if (events.rfc_bank_conflict) cnt_rfcc++;
      if (events.issue_stall)       cnt_stall++;
    end
  end

  task automatic need(string what, int unsigned n);
    checks++;
    $display("  %-22s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism '%s' never happened", what);
    end
  endtask

  initial begin
    for (int w = 0; w < NWARP; w++) begin
      gen_prog(w);
      pc[w] = 0;
      long_time[w] = -1;
    end
    for (int i = 0; i < EX_LAT; i++) begin ex_pipe_v[i] = 1'b0; ex_pipe[i] = '0; end
    launch = 1'b0;
    launch_n = 7'(NWARP);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk) launch = 1'b1;
    @(negedge clk) launch = 1'b0;
    wait (all_done);
    repeat (5) @(posedge clk);
    checks++;
    if (n_exit != NWARP) begin
      failures++;
      $display("FAIL: %0d of %0d warps exited", n_exit, NWARP);
    end
    for (int w = 0; w < NWARP; w++) begin
      checks++;
      if (pc[w] != plen[w]) begin
        failures++;
        $display("FAIL: warp %0d stopped at pc %0d of %0d", w, pc[w], plen[w]);
      end
    end
    $display("finished in %0d cycles, %0d instructions dispatched", cycle, n_dispatch);
    need("activations", cnt_act);
    need("deactivations", cnt_deact);
    need("prefetch ops", cnt_pf);
    need("fills", cnt_fill);
    need("writebacks", cnt_wb);
    need("main bank conflicts", cnt_mbw);
    need("fill arb conflicts", cnt_arb);
    need("crossbar waits", cnt_xw);
    need("cache bank conflicts", cnt_rfcc);
    need("issue stalls", cnt_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
