// warp_control_block (WCB): per-warp metadata that locates registers in the register cache.
//
// Holds, for one warp: the register cache address table (one log2(#banks)-bit bank number
// per architectural register) with a valid bit per register, the warp-offset address
// (the row the warp owns in every cache bank), the working-set bit-vector of the current
// register-interval and the liveness bit-vector. All cached registers of a warp share the
// warp-offset, so a register's cache location is {bank number, warp-offset}.
// Two read ports serve the operand collectors, as the paper provides; a third read port
// serves this warp's prefetch/writeback controller (this design's choice: the paper does
// not say how the controller reads bank numbers for writebacks).
// Reads are combinational (the paper's one extra cycle is the issue stage register that
// captures them). Writes take effect on the next clock. Liveness: a written register
// becomes live, a dead-operand bit marks it dead; when both hit one register in a cycle it
// ends live, since an instruction reads its sources before it writes its destination.
module warp_control_block
  import ltrf_pkg::*;
#(
  parameter int unsigned NREGS  = MAX_REGS,
  parameter int unsigned NBANKS = RFC_BANKS,
  parameter int unsigned NOFF   = MAX_ACTIVE
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,          // warp launch: all dead, nothing cached
  // collector read ports
  input  logic [1:0][$clog2(NREGS)-1:0]  rd_reg,
  output logic [1:0][$clog2(NBANKS)-1:0] rd_bank,
  output logic [1:0]                     rd_valid,
  // controller read port
  input  logic [$clog2(NREGS)-1:0]  ctl_reg,
  output logic [$clog2(NBANKS)-1:0] ctl_bank,
  // address table write (allocation)
  input  logic                      tbl_we,
  input  logic [$clog2(NREGS)-1:0]  tbl_reg,
  input  logic [$clog2(NBANKS)-1:0] tbl_bank,
  // valid bits
  input  logic [NREGS-1:0]          valid_set,
  input  logic                      valid_clr_all,
  // warp-offset address
  input  logic                      off_we,
  input  logic [$clog2(NOFF)-1:0]   off_in,
  output logic [$clog2(NOFF)-1:0]   warp_off,
  // working-set bit-vector
  input  logic                      ws_we,
  input  logic [NREGS-1:0]          ws_in,
  output logic [NREGS-1:0]          ws_vec,
  // liveness bit-vector
  input  logic [NREGS-1:0]          live_set,
  input  logic [NREGS-1:0]          live_clr,
  output logic [NREGS-1:0]          live_vec,
  output logic [NREGS-1:0]          valid_vec
);
  localparam int unsigned BW = $clog2(NBANKS);

  logic [BW-1:0] bank_tbl [NREGS];

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      rd_bank[p]  = bank_tbl[rd_reg[p]];
      rd_valid[p] = valid_vec[rd_reg[p]];
    end
    ctl_bank = bank_tbl[ctl_reg];
  end

  always_ff @(posedge clk) begin
    if (tbl_we) bank_tbl[tbl_reg] <= tbl_bank;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_vec <= '0;
      warp_off  <= '0;
      ws_vec    <= '0;
      live_vec  <= '0;
    end else if (clear) begin
      valid_vec <= '0;
      ws_vec    <= '0;
      live_vec  <= '0;
    end else begin
      if (valid_clr_all) valid_vec <= valid_set;
      else               valid_vec <= valid_vec | valid_set;
      if (off_we) warp_off <= off_in;
      if (ws_we)  ws_vec   <= ws_in;
      live_vec <= (live_vec & ~live_clr) | live_set;
    end
  end
endmodule
