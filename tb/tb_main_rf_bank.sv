// tb_main_rf_bank: checks one main register file bank at its default size and latency.
//
// Random registers are written back (4 flits in, then the cell access) and later filled
// (cell access, then 4 flits out), with the crossbar grant randomly withheld. The test
// checks the data read back against a model, the flit order, the busy window (no second
// request can be taken while busy, so same-bank transfers serialize), and the transfer time:
// LAT + BEATS cycles from acceptance to done plus one cycle per withheld grant.
`timescale 1ns/1ps
module tb_main_rf_bank;
  import ltrf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic       req_valid, req_ready, x_req, x_gnt, done;
  main_req_t  req, done_info;
  logic [9:0] req_row;
  logic [BANK_W-1:0] x_dst;
  logic [OFF_W-1:0]  x_off;
  xfer_dir_e  x_dir;
  flit_t      x_flit_out, x_flit_in;
  reg_data_t  model [1024];
  bit         written [1024];
  int checks = 0, failures = 0;
  bit gnt_random = 1'b0;

  main_rf_bank dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // one transfer; returns the number of cycles from acceptance to done
  task automatic xfer(xfer_dir_e dir, int row, reg_data_t wdata, output reg_data_t rdata,
                      output int cycles, output int stalls);
    int beat;
    rdata = '0; cycles = 0; stalls = 0; beat = 0;
    @(negedge clk);
    chk(req_ready, "bank idle before request");
    req_valid = 1'b1;
    req = '0; req.dir = dir; req.rnum = REG_W'(row); req.rfc_bank = BANK_W'($urandom); req.rfc_off = OFF_W'($urandom);
    req_row = 10'(row);
    @(negedge clk);
    req_valid = 1'b0;
    chk(!req_ready, "bank busy after acceptance");
    cycles = 1;
    while (!done) begin
      x_gnt = x_req && (!gnt_random || $urandom_range(0, 1) == 1);
      if (x_req && !x_gnt) stalls++;
      if (x_req) chk(x_dir == dir && x_dst == req.rfc_bank && x_off == req.rfc_off, "crossbar tags");
      if (x_gnt) begin
        x_flit_in = wdata[beat*FLIT_W +: FLIT_W];
        if (dir == XFER_FILL) rdata[beat*FLIT_W +: FLIT_W] = x_flit_out;
        beat++;
      end
      if (!done) chk(!req_ready, "busy until done");
      @(negedge clk);
      cycles++;
      x_gnt = 1'b0;
    end
    cycles--;
    chk(beat == BEATS, "four flits");
    chk(done_info.rnum == REG_W'(row) && done_info.dir == dir, "done info");
  endtask

  initial begin
    reg_data_t w, r;
    int cyc, st;
    req_valid = 0; req = '0; req_row = 0; x_gnt = 0; x_flit_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 60; it++) begin
      int row;
      gnt_random = (it >= 20);
      row = $urandom_range(0, 1023);
      for (int k = 0; k < DATA_W / 32; k++) w[k*32 +: 32] = $urandom;
      if ($urandom_range(0, 1) == 1 || !written[row]) begin
        xfer(XFER_WB, row, w, r, cyc, st);
        model[row] = w; written[row] = 1'b1;
      end else begin
        xfer(XFER_FILL, row, '0, r, cyc, st);
        chk(r == model[row], $sformatf("fill data row %0d", row));
      end
      chk(cyc == MAIN_LAT + BEATS + st,
          $sformatf("transfer took %0d cycles, expected %0d", cyc, MAIN_LAT + BEATS + st));
    end
    // read every written row once more
    for (int row = 0; row < 1024; row++)
      if (written[row]) begin
        xfer(XFER_FILL, row, '0, r, cyc, st);
        chk(r == model[row], $sformatf("final fill row %0d", row));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
