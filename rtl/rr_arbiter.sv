// rr_arbiter: round-robin arbiter over N requesters.
//
// Used as the #Active_Warps-bit fill arbiter that picks which active warp may send one
// register transfer to the main register file each cycle, and as the per-bank arbiter of
// the register file cache and of the main-side crossbar. Grant is combinational from req;
// when `take` is high and a grant exists, the priority pointer moves just past the winner
// on the next clock, so a requester that stays asserted is served within N grants. The
// rotation policy is this design's choice; the text only asks for fair arbitration.
module rr_arbiter #(
  parameter int unsigned N = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 req,
  input  logic                         take,
  output logic [N-1:0]                 gnt,
  output logic [(N>1?$clog2(N):1)-1:0] gnt_idx,
  output logic                         gnt_valid
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] ptr;

  always_comb begin
    gnt       = '0;
    gnt_idx   = '0;
    gnt_valid = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned i;
      i = (int'(ptr) + k) % N;
      if (!gnt_valid && req[i]) begin
        gnt_valid = 1'b1;
        gnt_idx   = IW'(i);
        gnt[i]    = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 ptr <= '0;
    else if (take && gnt_valid) ptr <= IW'((int'(gnt_idx) + 1) % N);
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
