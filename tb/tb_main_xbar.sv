// tb_main_xbar: checks the 16x16 main-bank to cache-bank crossbar with 256-bit links.
//
// Each of the 16 main-bank ports randomly raises a transfer (FILL or WB) toward a random
// cache bank and holds it until four beats have been granted, driving flit k of a
// recognisable pattern on beat k. The cache-bank side is modelled by pattern functions.
// Checked: a port serves one main bank for four consecutive beats with fp_slice = beat;
// the fill port carries the owner's flit, direction and row; WB flits return the cache
// slice to the owner; a main bank never holds two ports; requests to one cache bank
// serialize; and every transfer completes within 16 x 4 cycles (no starvation).
`timescale 1ns/1ps
module tb_main_xbar;
  import ltrf_pkg::*;
  localparam int NM = MAIN_BANKS, NR = RFC_BANKS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic      [NM-1:0]              x_req, x_gnt;
  logic      [NM-1:0][3:0]         x_dst;
  logic      [NM-1:0][OFF_W-1:0]   x_off;
  xfer_dir_e [NM-1:0]              x_dir;
  flit_t     [NM-1:0]              x_flit_m2c, x_flit_c2m;
  logic      [NR-1:0]              fp_en, fp_we;
  logic      [NR-1:0][OFF_W-1:0]   fp_off;
  logic      [NR-1:0][1:0]         fp_slice;
  flit_t     [NR-1:0]              fp_wdata, fp_rdata;

  int checks = 0, failures = 0;
  int beats_done [NM];
  int wait_cyc   [NM];
  int n_xfers = 0, n_contended = 0;
  int last_owner [NR];

  main_xbar dut (.*);

  function automatic flit_t m_pat(int i, int k);
    return {8{32'(i * 16 + k + 32'h1000)}};
  endfunction
  function automatic flit_t c_pat(int j, int off, int k);
    return {8{32'(j * 256 + off * 8 + k + 32'h7000)}};
  endfunction

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  always_comb begin
    for (int i = 0; i < NM; i++) x_flit_m2c[i] = m_pat(i, beats_done[i]);
    for (int j = 0; j < NR; j++) fp_rdata[j] = c_pat(j, int'(fp_off[j]), int'(fp_slice[j]));
  end

  initial begin
    x_req = '0; x_dst = '0; x_off = '0;
    for (int i = 0; i < NM; i++) begin x_dir[i] = XFER_FILL; beats_done[i] = 0; wait_cyc[i] = 0; end
    for (int j = 0; j < NR; j++) last_owner[j] = -1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int owners [NR];
      logic [NM-1:0] g;
      @(negedge clk);
      // new requests (restricted to a few cache banks so that ports are contended)
      for (int i = 0; i < NM; i++)
        if (!x_req[i] && (cyc < 2800) && $urandom_range(0, 3) == 0) begin
          x_req[i] = 1'b1;
          x_dst[i] = 4'($urandom_range(0, 5));
          x_off[i] = OFF_W'($urandom);
          x_dir[i] = ($urandom_range(0, 1) == 1) ? XFER_FILL : XFER_WB;
          beats_done[i] = 0;
          wait_cyc[i] = 0;
        end
      #0.1;
      for (int j = 0; j < NR; j++) begin
        int own, nreq;
        owners[j] = -1;
        nreq = 0;
        for (int i = 0; i < NM; i++) if (x_req[i] && x_dst[i] == 4'(j)) nreq++;
        if (fp_en[j]) begin
          own = -1;
          for (int i = 0; i < NM; i++)
            if (x_gnt[i] && x_req[i] && x_dst[i] == 4'(j)) own = i;
          chk(own >= 0, $sformatf("port %0d enabled without a requesting owner", j));
          if (own >= 0) begin
            owners[j] = own;
            if (nreq > 1) n_contended++;
            chk(int'(fp_slice[j]) == beats_done[own], "slice follows beat");
            chk(fp_off[j] == x_off[own] && fp_we[j] == (x_dir[own] == XFER_FILL), "row and direction");
            if (x_dir[own] == XFER_FILL) chk(fp_wdata[j] == m_pat(own, beats_done[own]), "fill flit");
            else chk(x_flit_c2m[own] == c_pat(j, int'(x_off[own]), beats_done[own]), "writeback flit");
            if (beats_done[own] > 0) chk(last_owner[j] == own, "port held for the whole register");
          end
        end
      end
      for (int i = 0; i < NM; i++) begin
        int cnt;
        cnt = 0;
        for (int j = 0; j < NR; j++) if (owners[j] == i) cnt++;
        chk(cnt <= 1, "main bank holds two ports");
        if (x_gnt[i]) chk(cnt == 1, "grant without a port");
      end
      g = x_gnt;
      @(posedge clk); #0.2;
      for (int j = 0; j < NR; j++) last_owner[j] = owners[j];
      for (int i = 0; i < NM; i++) begin
        if (x_req[i]) wait_cyc[i]++;
        if (g[i]) begin
          beats_done[i]++;
          if (beats_done[i] == BEATS) begin x_req[i] = 1'b0; n_xfers++; end
        end
        if (x_req[i]) chk(wait_cyc[i] <= NM * BEATS + BEATS, $sformatf("main bank %0d starved", i));
      end
    end
    chk(x_req == '0, "all transfers finished");
    chk(n_contended > 0, "contention exercised");
    $display("transfers=%0d contended beats=%0d", n_xfers, n_contended);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
