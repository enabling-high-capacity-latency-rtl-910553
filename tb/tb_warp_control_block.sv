// tb_warp_control_block: checks the warp control block storage and its read ports.
//
// Fills the 256-entry register cache address table with random 4-bit bank numbers and
// reads it back through both collector ports and the controller port; checks that valid
// bits accumulate and clear, that the warp-offset and working-set vector are written, that
// liveness follows set/clear with set winning, and that clear (warp launch) empties it.
`timescale 1ns/1ps
module tb_warp_control_block;
  import ltrf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic                 clear, tbl_we, valid_clr_all, off_we, ws_we;
  logic [1:0][7:0]      rd_reg;
  logic [1:0][3:0]      rd_bank;
  logic [1:0]           rd_valid;
  logic [7:0]           ctl_reg, tbl_reg;
  logic [3:0]           ctl_bank, tbl_bank;
  logic [255:0]         valid_set, ws_in, ws_vec, live_set, live_clr, live_vec, valid_vec;
  logic [2:0]           off_in, warp_off;
  logic [3:0]           model [256];
  int checks = 0, failures = 0;

  warp_control_block dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    clear = 0; tbl_we = 0; valid_clr_all = 0; off_we = 0; ws_we = 0;
    rd_reg = '0; ctl_reg = 0; tbl_reg = 0; tbl_bank = 0; valid_set = '0; ws_in = '0;
    live_set = '0; live_clr = '0; off_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(valid_vec == '0 && live_vec == '0 && ws_vec == '0, "reset state");
    for (int r = 0; r < 256; r++) begin
      tbl_we = 1; tbl_reg = 8'(r); tbl_bank = 4'($urandom); model[r] = tbl_bank;
      @(negedge clk);
    end
    tbl_we = 0;
    for (int i = 0; i < 200; i++) begin
      rd_reg[0] = 8'($urandom); rd_reg[1] = 8'($urandom); ctl_reg = 8'($urandom);
      #0.1;
      chk(rd_bank[0] == model[rd_reg[0]] && rd_bank[1] == model[rd_reg[1]] &&
          ctl_bank == model[ctl_reg], "table read");
    end
    valid_set = 256'h5; @(negedge clk);
    valid_set = 256'h30; @(negedge clk);
    valid_set = '0;
    chk(valid_vec == 256'h35, "valid accumulate");
    rd_reg[0] = 8'd2; rd_reg[1] = 8'd3; #0.1;
    chk(rd_valid == 2'b01, "rd_valid");
    valid_clr_all = 1; @(negedge clk); valid_clr_all = 0;
    chk(valid_vec == '0, "valid clear");
    off_we = 1; off_in = 3'd6; ws_we = 1; ws_in = {128'd0, 128'hFFFF0000}; @(negedge clk);
    off_we = 0; ws_we = 0;
    chk(warp_off == 3'd6 && ws_vec == {128'd0, 128'hFFFF0000}, "offset and working set");
    live_set = 256'hF0; @(negedge clk);
    live_set = 256'h100; live_clr = 256'h130; @(negedge clk);
    live_set = '0; live_clr = '0;
    chk(live_vec == 256'h1C0, $sformatf("liveness %h", live_vec[15:0]));
    clear = 1; @(negedge clk); clear = 0;
    chk(live_vec == '0 && ws_vec == '0 && valid_vec == '0, "launch clear");
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
