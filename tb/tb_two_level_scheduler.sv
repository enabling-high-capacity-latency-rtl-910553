// tb_two_level_scheduler: checks the two-level warp scheduler with 64 warps and 8 slots.
//
// The testbench plays the issue stage, the prefetch units and the memory system. Every warp
// runs 30 instructions: ALU, occasional prefetch and long-latency operations, then exit.
// Prefetch units answer a command 3..20 cycles later; instructions complete 1..6 cycles
// after issue; long operations finish 20..120 cycles later. Checked against a model:
// a warp is offered for issue only when it is active, loaded, has nothing in flight and is
// not waiting on a long operation; at most 8 warps hold warp-offsets and their offsets are
// distinct; an activation goes only to a warp that is ready to run again and gets a free
// offset; deactivation happens only for a stalled warp or on exit; all warps finish.
`timescale 1ns/1ps
module tb_two_level_scheduler;
  import ltrf_pkg::*;
  localparam int NW = MAX_WARPS, NA = MAX_ACTIVE, NINST = 30;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic                 launch, cand_valid, issue_fire, all_done;
  logic [6:0]           launch_n;
  logic [5:0]           cand_warp;
  opcode_e              issue_op;
  logic [NW-1:0]        complete, long_done, unit_done, cmd_activate, cmd_deactivate, has_off, is_active;
  logic [2:0]           cmd_off;
  logic [NW-1:0][2:0]   warp_off;

  two_level_scheduler dut (.*);

  int checks = 0, failures = 0;
  int n_act = 0, n_deact = 0, n_issue = 0, n_long = 0, n_pf = 0;
  // model state
  bit loaded [NW], inflight [NW], longw [NW], longback [NW], holding [NW], exited [NW], deact [NW];
  logic [NW-1:0] s_act, s_deact;
  logic [5:0] s_warp;
  int ninst [NW], t_unit [NW], t_cmp [NW], t_long [NW];

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    launch = 0; launch_n = 7'(NW); issue_fire = 0; issue_op = OP_ALU;
    complete = '0; long_done = '0; unit_done = '0;
    for (int w = 0; w < NW; w++) begin
      loaded[w] = 0; inflight[w] = 0; longw[w] = 0; longback[w] = 1; holding[w] = 0;
      exited[w] = 0; deact[w] = 0; ninst[w] = 0; t_unit[w] = -1; t_cmp[w] = -1; t_long[w] = -1;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); launch = 1; @(negedge clk); launch = 0;
    for (int cyc = 0; cyc < 40000 && !all_done; cyc++) begin
      // inputs for this cycle
      unit_done = '0; complete = '0; long_done = '0;
      for (int w = 0; w < NW; w++) begin
        if (t_unit[w] == 0) unit_done[w] = 1'b1;
        if (t_cmp[w] == 0)  complete[w]  = 1'b1;
        if (t_long[w] == 0) long_done[w] = 1'b1;
      end
      issue_fire = cand_valid && ($urandom_range(0, 4) != 0);
      if (cand_valid) begin
        int w, k;
        w = int'(cand_warp);
        k = ninst[w];
        issue_op = (k == NINST - 1) ? OP_EXIT :
                   ($urandom_range(0, 9) == 0) ? OP_LONG :
                   ($urandom_range(0, 9) == 0) ? OP_PREFETCH : OP_ALU;
      end
      #0.1;
      // checks on the outputs
      if (cand_valid) begin
        int w;
        w = int'(cand_warp);
        chk(holding[w] && loaded[w] && !inflight[w] && !longw[w] && !deact[w],
            $sformatf("warp %0d offered for issue when not eligible", w));
      end
      begin
        int nh;
        logic [NA-1:0] offs;
        nh = 0; offs = '0;
        for (int w = 0; w < NW; w++) if (has_off[w]) begin
          nh++;
          chk(!offs[warp_off[w]], "warp-offsets distinct");
          offs[warp_off[w]] = 1'b1;
        end
        chk(nh <= NA, "at most NA warps hold offsets");
      end
      for (int w = 0; w < NW; w++) begin
        if (cmd_activate[w]) begin
          chk(!holding[w] && !exited[w] && longback[w], $sformatf("activation of warp %0d not ready", w));
          for (int v = 0; v < NW; v++)
            if (has_off[v]) chk(warp_off[v] != cmd_off, "activation offset is free");
        end
        if (cmd_deactivate[w])
          chk((longw[w] && !inflight[w]) || (issue_fire && issue_op == OP_EXIT && int'(cand_warp) == w),
              $sformatf("deactivation of warp %0d not stalled", w));
      end
      s_act = cmd_activate; s_deact = cmd_deactivate; s_warp = cand_warp;
      @(posedge clk); #0.2;
      // model update
      for (int w = 0; w < NW; w++) begin
        if (t_unit[w] >= 0) t_unit[w]--;
        if (t_cmp[w] >= 0)  t_cmp[w]--;
        if (t_long[w] >= 0) t_long[w]--;
        if (unit_done[w]) begin
          if (deact[w]) begin deact[w] = 0; holding[w] = 0; end
          else loaded[w] = 1;
        end
        if (complete[w]) inflight[w] = 0;
        if (long_done[w]) begin longw[w] = 0; longback[w] = 1; end
      end
      for (int w = 0; w < NW; w++) begin
        if (s_act[w]) begin
          holding[w] = 1; loaded[w] = 0; t_unit[w] = $urandom_range(3, 20); n_act++;
        end
        if (s_deact[w]) begin
          deact[w] = 1; loaded[w] = 0; t_unit[w] = $urandom_range(3, 20); n_deact++;
        end
      end
      if (issue_fire) begin
        int w;
        w = int'(s_warp);
        n_issue++;
        ninst[w]++;
        case (issue_op)
          OP_EXIT: exited[w] = 1;
          OP_PREFETCH: begin loaded[w] = 0; t_unit[w] = $urandom_range(3, 20); n_pf++; end
          OP_LONG: begin
            inflight[w] = 1; t_cmp[w] = $urandom_range(1, 6);
            longw[w] = 1; longback[w] = 0; t_long[w] = $urandom_range(20, 120); n_long++;
          end
          default: begin inflight[w] = 1; t_cmp[w] = $urandom_range(1, 6); end
        endcase
      end
      @(negedge clk);
    end
    chk(all_done, "all warps finished");
    for (int w = 0; w < NW; w++) chk(exited[w] && ninst[w] == NINST, $sformatf("warp %0d ran all", w));
    chk(n_act > NW && n_deact > NW && n_long > 0 && n_pf > 0, "activations reuse offsets");
    $display("issued=%0d activations=%0d deactivations=%0d long=%0d prefetch=%0d",
             n_issue, n_act, n_deact, n_long, n_pf);
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
