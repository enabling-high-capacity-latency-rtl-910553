// addr_alloc_unit: register file cache space allocator built from two queues.
//
// The unused queue holds free IDs and starts full (0..N-1); the occupied queue holds IDs
// in allocation order and starts empty. An allocation hands out the head of the unused
// queue and appends it to the occupied queue. A deallocation removes the given ID from the
// occupied queue and appends it to the unused queue. Per warp, N is the number of cache
// banks (IDs are bank numbers); the global instance has N = #active warps and hands out
// warp-offset addresses. Both queues are N entries of log2(N) bits, as the paper draws them.
// This design's choices: the queues are shift registers so that any occupied entry can be
// removed (warps release their offsets in any order); alloc and dealloc may happen in the
// same cycle; counts update on the next clock, alloc_id is the current head. Deallocating
// an ID that is not occupied is ignored and flagged by an assertion.
module addr_alloc_unit #(
  parameter int unsigned N = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   alloc_req,
  output logic                   alloc_ok,   // unused queue not empty
  output logic [$clog2(N)-1:0]   alloc_id,   // head of the unused queue
  input  logic                   dealloc_req,
  input  logic [$clog2(N)-1:0]   dealloc_id,
  output logic [$clog2(N)-1:0]   occ_head,   // oldest occupied ID
  output logic [$clog2(N+1)-1:0] occ_count,
  output logic [$clog2(N+1)-1:0] free_count
);
  localparam int unsigned IW = $clog2(N);
  localparam int unsigned CW = $clog2(N + 1);

  logic [N-1:0][IW-1:0] unused_q, occ_q, unused_n, occ_n;
  logic [CW-1:0]        ucnt, ocnt, ucnt_n, ocnt_n;
  logic                 found;

  assign alloc_ok   = (ucnt != '0);
  assign alloc_id   = unused_q[0];
  assign occ_head   = occ_q[0];
  assign occ_count  = ocnt;
  assign free_count = ucnt;

  always_comb begin
    unused_n = unused_q;
    occ_n    = occ_q;
    ucnt_n   = ucnt;
    ocnt_n   = ocnt;
    found    = 1'b0;
    if (alloc_req && alloc_ok) begin
      for (int unsigned i = 0; i + 1 < N; i++) unused_n[i] = unused_n[i+1];
      ucnt_n = ucnt_n - 1'b1;
      occ_n[IW'(ocnt_n)] = unused_q[0];
      ocnt_n = ocnt_n + 1'b1;
    end
    if (dealloc_req) begin
      for (int unsigned i = 0; i < N; i++) begin
        if (!found && (CW'(i) < ocnt_n) && occ_n[i] == dealloc_id) found = 1'b1;
        if (found && i + 1 < N) occ_n[i] = occ_n[i+1];
      end
      if (found) begin
        ocnt_n = ocnt_n - 1'b1;
        unused_n[IW'(ucnt_n)] = dealloc_id;
        ucnt_n = ucnt_n + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N; i++) begin
        unused_q[i] <= IW'(i);
        occ_q[i]    <= '0;
      end
      ucnt <= CW'(N);
      ocnt <= '0;
    end else begin
      unused_q <= unused_n;
      occ_q    <= occ_n;
      ucnt     <= ucnt_n;
      ocnt     <= ocnt_n;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) dealloc_req |-> found);
  assert property (@(posedge clk) disable iff (!rst_n) (ucnt + ocnt) == CW'(N));
endmodule
