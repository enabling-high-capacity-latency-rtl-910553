// rfc_bank: one bank of the register file cache.
//
// Holds ENTRIES 1024-bit registers, one row per active warp: row = warp-offset address.
// A warp's cached registers are spread across banks, so a bank holds at most one register
// of each warp. Three ports (the port count is this design's choice; the paper gives the
// bank's size and role only):
//  - read port for the operand collectors: address in cycle t, data registered at t+1;
//  - result write port from the SIMD unit, whole register;
//  - fill port toward the main register file: reads or writes one 256-bit slice per cycle,
//    read data is combinational so the crossbar moves it the same cycle.
// The result port and a fill write never target the same row in one cycle: a row being
// filled belongs to a warp that is not executing.
module rfc_bank
  import ltrf_pkg::*;
#(
  parameter int unsigned ENTRIES = MAX_ACTIVE
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       rd_en,
  input  logic [$clog2(ENTRIES)-1:0] rd_off,
  output reg_data_t                  rd_data,
  input  logic                       ex_we,
  input  logic [$clog2(ENTRIES)-1:0] ex_off,
  input  reg_data_t                  ex_data,
  input  logic                       fp_en,
  input  logic                       fp_we,
  input  logic [$clog2(ENTRIES)-1:0] fp_off,
  input  logic [$clog2(BEATS)-1:0]   fp_slice,
  input  flit_t                      fp_wdata,
  output flit_t                      fp_rdata
);
  reg_data_t mem [ENTRIES];

  assign fp_rdata = mem[fp_off][fp_slice*FLIT_W +: FLIT_W];

  always_ff @(posedge clk) begin
    if (ex_we) mem[ex_off] <= ex_data;
    if (fp_en && fp_we) mem[fp_off][fp_slice*FLIT_W +: FLIT_W] <= fp_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_data <= '0;
    else if (rd_en) rd_data <= mem[rd_off];
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    !(ex_we && fp_en && fp_we && ex_off == fp_off));
endmodule
