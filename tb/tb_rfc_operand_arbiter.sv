// tb_rfc_operand_arbiter: checks the collector-to-cache-bank arbiter and crossbar.
//
// 32 requesters (16 collectors x 2 sources) raise reads to random banks and rows and hold
// them until granted. The 16 cache banks are modelled with a registered read whose data
// encodes (bank, row). Checked: at most one grant per bank per cycle, a grant only to a
// requester of that bank, the bank reads the winner's row, the winner gets resp_valid and
// the right data one cycle later, and no requester waits more than 32 cycles.
`timescale 1ns/1ps
module tb_rfc_operand_arbiter;
  import ltrf_pkg::*;
  localparam int NREQ = NUM_OC * NUM_SRC, NB = RFC_BANKS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic      [NREQ-1:0]       rq_valid, rq_gnt, resp_valid;
  logic      [NREQ-1:0][3:0]  rq_bank;
  logic      [NREQ-1:0][2:0]  rq_off;
  logic      [NB-1:0]         rd_en;
  logic      [NB-1:0][2:0]    rd_off;
  reg_data_t [NB-1:0]         rd_data;
  reg_data_t [NREQ-1:0]       resp_data;
  int        waitc [NREQ];
  logic      [NREQ-1:0] exp_resp;
  reg_data_t exp_data [NREQ];
  int checks = 0, failures = 0, conflicts = 0;

  rfc_operand_arbiter dut (.*);

  function automatic reg_data_t pat(int b, int o);
    return {32{32'(b * 8 + o + 32'hBEEF_0000)}};
  endfunction

  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++) if (rd_en[b]) rd_data[b] <= pat(b, int'(rd_off[b]));

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    rq_valid = '0; rq_bank = '0; rq_off = '0; exp_resp = '0; rd_data = '0;
    foreach (waitc[r]) waitc[r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      // responses for last cycle's grants
      chk(resp_valid == exp_resp, "resp_valid");
      for (int r = 0; r < NREQ; r++)
        if (exp_resp[r]) chk(resp_data[r] == exp_data[r], $sformatf("resp data %0d", r));
      for (int r = 0; r < NREQ; r++)
        if (!rq_valid[r] && cyc < 1900 && $urandom_range(0, 2) == 0) begin
          rq_valid[r] = 1'b1; rq_bank[r] = 4'($urandom); rq_off[r] = 3'($urandom); waitc[r] = 0;
        end
      #0.1;
      for (int b = 0; b < NB; b++) begin
        int n, nreq;
        n = 0; nreq = 0;
        for (int r = 0; r < NREQ; r++) if (rq_valid[r] && rq_bank[r] == 4'(b)) begin
          nreq++;
          if (rq_gnt[r]) begin n++; chk(rd_en[b] && rd_off[b] == rq_off[r], "bank reads winner row"); end
        end
        chk(n == (nreq > 0 ? 1 : 0), $sformatf("bank %0d grants %0d of %0d", b, n, nreq));
        if (nreq > 1) conflicts++;
      end
      chk((rq_gnt & ~rq_valid) == '0, "grant without request");
      exp_resp = rq_gnt;
      for (int r = 0; r < NREQ; r++) exp_data[r] = pat(int'(rq_bank[r]), int'(rq_off[r]));
      @(posedge clk); #0.2;
      for (int r = 0; r < NREQ; r++) begin
        if (exp_resp[r]) rq_valid[r] = 1'b0;
        else if (rq_valid[r]) begin
          waitc[r]++;
          chk(waitc[r] <= NREQ, $sformatf("requester %0d starved", r));
        end
      end
    end
    chk(conflicts > 0, "bank conflicts exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
