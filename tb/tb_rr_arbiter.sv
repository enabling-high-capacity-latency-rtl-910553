// tb_rr_arbiter: checks the round-robin arbiter used as the 8-bit fill arbiter.
//
// Random request vectors are applied; a reference pointer model predicts the winner (the
// first requester at or after the pointer) and the pointer update. A second phase holds
// all eight requests and checks that every requester is granted exactly once in 8 cycles.
`timescale 1ns/1ps
module tb_rr_arbiter;
  localparam int N = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [N-1:0] req, gnt;
  logic [2:0]   gnt_idx;
  logic         gnt_valid, take;
  int checks = 0, failures = 0;
  int ptr = 0;

  rr_arbiter #(.N(N)) dut (.clk, .rst_n, .req, .take, .gnt, .gnt_idx, .gnt_valid);

  task automatic check_once();
    int exp;
    exp = -1;
    for (int k = 0; k < N; k++) if (exp < 0 && req[(ptr + k) % N]) exp = (ptr + k) % N;
    checks++;
    if ((exp < 0 && (gnt_valid || gnt != 0)) ||
        (exp >= 0 && (!gnt_valid || gnt_idx != 3'(exp) || gnt != N'(1) << exp))) begin
      failures++;
      $display("FAIL: req=%b ptr=%0d exp=%0d got v=%b idx=%0d", req, ptr, exp, gnt_valid, gnt_idx);
    end
    if (take && exp >= 0) ptr = (exp + 1) % N;
  endtask

  initial begin
    int seen [N];
    req = '0; take = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      req  = N'($urandom);
      take = ($urandom_range(0, 3) != 0);
      #0.5 check_once();
    end
    @(negedge clk);
    req = '1; take = 1'b1;
    foreach (seen[i]) seen[i] = 0;
    for (int i = 0; i < N; i++) begin
      #0.5 seen[gnt_idx]++;
      check_once();
      @(negedge clk);
    end
    foreach (seen[i]) begin
      checks++;
      if (seen[i] != 1) begin failures++; $display("FAIL: requester %0d granted %0d times", i, seen[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
