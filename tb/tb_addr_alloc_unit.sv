// tb_addr_alloc_unit: checks the unused/occupied queue pair against queue models.
//
// N = 16 (one ID per register cache bank). Random allocations and deallocations of
// occupied IDs (in arbitrary order, as the warp-offset allocator needs) are applied, also
// both in one cycle. The unused queue must start full with 0..15 in order, hand out its
// head, and receive each released ID at its tail; counts and the occupied head must match.
`timescale 1ns/1ps
module tb_addr_alloc_unit;
  localparam int N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic       alloc_req, alloc_ok, dealloc_req;
  logic [3:0] alloc_id, dealloc_id, occ_head;
  logic [4:0] occ_count, free_count;
  int checks = 0, failures = 0;
  int unused_m [$], occ_m [$];

  addr_alloc_unit #(.N(N)) dut (.clk, .rst_n, .alloc_req, .alloc_ok, .alloc_id,
    .dealloc_req, .dealloc_id, .occ_head, .occ_count, .free_count);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    alloc_req = 0; dealloc_req = 0; dealloc_id = 0;
    for (int i = 0; i < N; i++) unused_m.push_back(i);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 600; it++) begin
      int pos;
      @(negedge clk);
      chk(free_count == 5'(unused_m.size()) && occ_count == 5'(occ_m.size()), "counts");
      chk(alloc_ok == (unused_m.size() > 0), "alloc_ok");
      if (unused_m.size() > 0) chk(alloc_id == 4'(unused_m[0]), $sformatf("alloc_id %0d exp %0d", alloc_id, unused_m[0]));
      if (occ_m.size() > 0) chk(occ_head == 4'(occ_m[0]), "occ_head");
      alloc_req   = ($urandom_range(0, 1) == 1) && unused_m.size() > 0;
      dealloc_req = ($urandom_range(0, 2) == 0) && occ_m.size() > 0;
      pos = 0;
      if (dealloc_req) begin
        pos = $urandom_range(0, occ_m.size() - 1);
        dealloc_id = 4'(occ_m[pos]);
      end
      @(posedge clk);
      // model: allocation first, then removal of the chosen entry
      if (alloc_req) occ_m.push_back(unused_m.pop_front());
      if (dealloc_req) begin
        occ_m.delete(pos);
        unused_m.push_back(int'(dealloc_id));
      end
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
