// tb_operand_collector: checks one operand collector of the LTRF issue path.
//
// Random instructions (0, 1 or 2 sources, with or without a destination) are allocated;
// the destination's bank arrives one cycle later. A model of the cache-bank arbiter grants
// each pending source request randomly and returns data that encodes (bank, row, source)
// one cycle after the grant. Checked: a request carries the bank and warp-offset given at
// allocation; no source is requested again once granted; dispatch is offered exactly when
// every used source has its data and the destination is located; the dispatched fields
// and values are the ones allocated and fetched; the collector is free after dispatch.
`timescale 1ns/1ps
module tb_operand_collector;
  import ltrf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic                          busy, alloc, a_dst_valid, dst_we, disp_rdy, disp_take;
  logic [WARP_W-1:0]             a_warp;
  opcode_e                       a_op;
  logic [1:0]                    a_src_valid, a_src_dead, rq_valid, rq_gnt, resp_valid;
  logic [1:0][REG_W-1:0]         a_src;
  logic [1:0][BANK_W-1:0]        a_src_bank, rq_bank;
  logic [1:0][OFF_W-1:0]         rq_off;
  logic [OFF_W-1:0]              a_off;
  logic [REG_W-1:0]              a_dst;
  logic [BANK_W-1:0]             dst_bank_in;
  reg_data_t [1:0]               resp_data;
  dispatch_t                     disp;

  operand_collector dut (.*);

  int checks = 0, failures = 0;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic reg_data_t pat(int b, int o, int s);
    return {32{32'(b * 64 + o * 4 + s + 32'hC0DE_0000)}};
  endfunction

  initial begin
    alloc = 0; dst_we = 0; disp_take = 0; rq_gnt = '0; resp_valid = '0; resp_data = '0;
    a_warp = '0; a_op = OP_ALU; a_src_valid = '0; a_src_dead = '0; a_src = '0; a_src_bank = '0;
    a_off = '0; a_dst_valid = 0; a_dst = '0; dst_bank_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 300; it++) begin
      logic [1:0] got, sv;
      logic [1:0][BANK_W-1:0] bk;
      logic [OFF_W-1:0] off;
      logic dv;
      logic [BANK_W-1:0] db;
      int t, granted_at [2];
      @(negedge clk);
      chk(!busy, "free before allocation");
      sv = 2'($urandom); dv = $urandom_range(0, 1); off = OFF_W'($urandom);
      bk[0] = BANK_W'($urandom); bk[1] = BANK_W'($urandom); db = BANK_W'($urandom);
      alloc = 1; a_warp = WARP_W'($urandom); a_op = ($urandom_range(0, 3) == 0) ? OP_LONG : OP_ALU;
      a_src_valid = sv; a_src[0] = REG_W'($urandom); a_src[1] = REG_W'($urandom);
      a_src_dead = 2'($urandom); a_src_bank = bk; a_off = off; a_dst_valid = dv; a_dst = REG_W'($urandom);
      @(negedge clk);
      alloc = 0;
      dst_we = dv; dst_bank_in = db;
      got = '0; granted_at[0] = -1; granted_at[1] = -1;
      t = 0;
      while (t < 200) begin
        bit expect_rdy;
        // response for last cycle's grants
        resp_valid = '0;
        for (int s = 0; s < 2; s++)
          if (granted_at[s] >= 0 && granted_at[s] == t - 1) begin
            resp_valid[s] = 1'b1;
            resp_data[s]  = pat(int'(bk[s]), int'(off), s);
          end
        #0.1;
        for (int s = 0; s < 2; s++) begin
          chk(rq_valid[s] == (sv[s] && granted_at[s] < 0), $sformatf("request %0d pending state", s));
          if (rq_valid[s]) chk(rq_bank[s] == bk[s] && rq_off[s] == off, "request bank and row");
        end
        // dispatch is offered one cycle after the last response (data is registered)
        expect_rdy = (got == sv) && (t > 0 || !dv);
        chk(disp_rdy == expect_rdy, $sformatf("disp_rdy=%b expected %b it=%0d t=%0d sv=%b got=%b dv=%b ga=%0d,%0d", disp_rdy, expect_rdy, it, t, sv, got, dv, granted_at[0], granted_at[1]));
        if (disp_rdy) begin
          chk(disp.warp == a_warp && disp.op == a_op && disp.src_valid == sv &&
              disp.src_dead == a_src_dead && disp.dst_valid == dv && disp.dst == a_dst &&
              disp.dst_off == off && (!dv || disp.dst_bank == db), "dispatched fields");
          for (int s = 0; s < 2; s++)
            if (sv[s]) chk(disp.src_data[s] == pat(int'(bk[s]), int'(off), s) && disp.src[s] == a_src[s],
                           "dispatched value");
          disp_take = $urandom_range(0, 2) != 0;
        end
        for (int s = 0; s < 2; s++) rq_gnt[s] = rq_valid[s] && ($urandom_range(0, 2) == 0);
        @(posedge clk); #0.2;
        dst_we = 0;
        for (int s = 0; s < 2; s++) begin
          if (rq_gnt[s]) granted_at[s] = t;
          if (resp_valid[s]) got[s] = 1'b1;
        end
        rq_gnt = '0;
        if (disp_take) begin disp_take = 0; break; end
        @(negedge clk);
        t++;
      end
      chk(t < 200, "instruction dispatched");
    end
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
