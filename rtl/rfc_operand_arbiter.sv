// rfc_operand_arbiter: arbiter and crossbar between operand collectors and cache banks.
//
// Each requester (one source operand of one collector) names a cache bank and a row
// (warp-offset). Every bank has a round-robin arbiter; the winner's row is read (one read
// per bank per cycle, losers retry: these are cache bank conflicts) and one cycle later the
// 1024-bit data is routed back to the winner with resp_valid. Different banks are read in
// parallel, which is why LTRF spreads a warp's registers over all banks. Round-robin per
// bank is this design's choice; the paper uses "an arbiter, as in conventional GPU
// register files".
module rfc_operand_arbiter
  import ltrf_pkg::*;
#(
  parameter int unsigned NREQ = NUM_OC * NUM_SRC,
  parameter int unsigned NB   = RFC_BANKS,
  parameter int unsigned NOFF = MAX_ACTIVE
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic      [NREQ-1:0]                  rq_valid,
  input  logic      [NREQ-1:0][$clog2(NB)-1:0]  rq_bank,
  input  logic      [NREQ-1:0][$clog2(NOFF)-1:0] rq_off,
  output logic      [NREQ-1:0]                  rq_gnt,
  output logic      [NB-1:0]                    rd_en,
  output logic      [NB-1:0][$clog2(NOFF)-1:0]  rd_off,
  input  reg_data_t [NB-1:0]                    rd_data,
  output logic      [NREQ-1:0]                  resp_valid,
  output reg_data_t [NREQ-1:0]                  resp_data
);
  localparam int unsigned RW = $clog2(NREQ);
  localparam int unsigned BW = $clog2(NB);

  logic [NB-1:0][NREQ-1:0] breq, bgnt;
  logic [NB-1:0][RW-1:0]   bidx;
  logic [NB-1:0]           bgv;
  logic [NREQ-1:0][BW-1:0] resp_bank;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    always_comb begin
      for (int r = 0; r < NREQ; r++) breq[b][r] = rq_valid[r] && (rq_bank[r] == BW'(b));
    end
    rr_arbiter #(.N(NREQ)) u_arb (
      .clk, .rst_n, .req(breq[b]), .take(1'b1),
      .gnt(bgnt[b]), .gnt_idx(bidx[b]), .gnt_valid(bgv[b])
    );
    assign rd_en[b]  = bgv[b];
    assign rd_off[b] = rq_off[bidx[b]];
  end

  always_comb begin
    rq_gnt = '0;
    for (int b = 0; b < NB; b++) rq_gnt = rq_gnt | bgnt[b];
    for (int r = 0; r < NREQ; r++) resp_data[r] = rd_data[resp_bank[r]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= '0;
      resp_bank  <= '0;
    end else begin
      resp_valid <= rq_gnt;
      for (int r = 0; r < NREQ; r++) resp_bank[r] <= rq_bank[r];
    end
  end
endmodule
