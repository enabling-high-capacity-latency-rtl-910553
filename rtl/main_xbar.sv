// main_xbar: crossbar between the main register file banks and the register cache banks.
//
// NM main-bank ports x NR cache-bank ports with FLIT_W-bit (256-bit) links, so a 1024-bit
// register takes BEATS = 4 cycles to cross, where the baseline 1024-bit crossbar takes one.
// Each cache-bank port has a round-robin arbiter over the main banks that request it; the
// winner owns the port for BEATS consecutive cycles (x_gnt high on each, beat k moving
// slice k of the register). FILL beats write the slice into the cache bank through its
// fill port; WB beats read the slice out of it and return it to the main bank. Different
// cache-bank ports move data in parallel. Holding a port for a whole register and the
// per-port round-robin are this design's choices.
module main_xbar
  import ltrf_pkg::*;
#(
  parameter int unsigned NM = MAIN_BANKS,
  parameter int unsigned NR = RFC_BANKS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // main-bank side
  input  logic      [NM-1:0]     x_req,
  input  logic      [NM-1:0][$clog2(NR)-1:0] x_dst,
  input  logic      [NM-1:0][OFF_W-1:0]      x_off,
  input  xfer_dir_e [NM-1:0]     x_dir,
  input  flit_t     [NM-1:0]     x_flit_m2c,
  output logic      [NM-1:0]     x_gnt,
  output flit_t     [NM-1:0]     x_flit_c2m,
  // cache-bank fill ports
  output logic      [NR-1:0]     fp_en,
  output logic      [NR-1:0]     fp_we,
  output logic      [NR-1:0][OFF_W-1:0]      fp_off,
  output logic      [NR-1:0][$clog2(BEATS)-1:0] fp_slice,
  output flit_t     [NR-1:0]     fp_wdata,
  input  flit_t     [NR-1:0]     fp_rdata
);
  localparam int unsigned MW  = $clog2(NM);
  localparam int unsigned BTW = $clog2(BEATS);

  logic [NR-1:0]          locked;
  logic [NR-1:0][MW-1:0]  owner;
  logic [NR-1:0][BTW-1:0] beat;

  logic [NR-1:0][NM-1:0]  port_req, port_gnt;
  logic [NR-1:0][MW-1:0]  port_gidx;
  logic [NR-1:0]          port_gv;
  logic [NR-1:0]          cur_v;
  logic [NR-1:0][MW-1:0]  cur_own;

  for (genvar j = 0; j < NR; j++) begin : g_port
    always_comb begin
      for (int i = 0; i < NM; i++)
        port_req[j][i] = x_req[i] && (x_dst[i] == ($clog2(NR))'(j)) && !locked[j];
    end
    rr_arbiter #(.N(NM)) u_arb (
      .clk, .rst_n, .req(port_req[j]), .take(!locked[j]),
      .gnt(port_gnt[j]), .gnt_idx(port_gidx[j]), .gnt_valid(port_gv[j])
    );
    assign cur_v[j]   = locked[j] || port_gv[j];
    assign cur_own[j] = locked[j] ? owner[j] : port_gidx[j];

    assign fp_en[j]    = cur_v[j];
    assign fp_we[j]    = cur_v[j] && (x_dir[cur_own[j]] == XFER_FILL);
    assign fp_off[j]   = x_off[cur_own[j]];
    assign fp_slice[j] = beat[j];
    assign fp_wdata[j] = x_flit_m2c[cur_own[j]];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        locked[j] <= 1'b0;
        owner[j]  <= '0;
        beat[j]   <= '0;
      end else if (cur_v[j]) begin
        owner[j]  <= cur_own[j];
        beat[j]   <= beat[j] + 1'b1;
        locked[j] <= (beat[j] != BTW'(BEATS - 1));
      end
    end
  end

  always_comb begin
    x_gnt      = '0;
    x_flit_c2m = '0;
    for (int j = 0; j < NR; j++) begin
      if (cur_v[j]) begin
        x_gnt[cur_own[j]]      = 1'b1;
        x_flit_c2m[cur_own[j]] = fp_rdata[j];
      end
    end
  end

  // A main bank sends one register at a time, so it never owns two ports at once.
  for (genvar j = 0; j < NR; j++) begin : g_chk
    for (genvar k = j + 1; k < NR; k++) begin : g_pair
      assert property (@(posedge clk) disable iff (!rst_n)
        !(cur_v[j] && cur_v[k] && cur_own[j] == cur_own[k]));
    end
  end
endmodule
