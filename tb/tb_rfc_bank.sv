// tb_rfc_bank: checks one register file cache bank (8 rows of 1024 bits).
//
// Random whole-register writes from the result port, random 256-bit slice writes from the
// fill port (never to the row the result port writes in the same cycle), random reads.
// Checked against a model: the read port returns the row one cycle after the address, and
// the fill port's read slice is combinational.
`timescale 1ns/1ps
module tb_rfc_bank;
  import ltrf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic       rd_en, ex_we, fp_en, fp_we;
  logic [2:0] rd_off, ex_off, fp_off;
  logic [1:0] fp_slice;
  reg_data_t  rd_data, ex_data;
  flit_t      fp_wdata, fp_rdata;
  reg_data_t  model [8];
  reg_data_t  exp_rd;
  bit         exp_rd_v;
  int checks = 0, failures = 0;

  rfc_bank dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic reg_data_t rnd_reg();
    reg_data_t d;
    for (int k = 0; k < DATA_W / 32; k++) d[k*32 +: 32] = $urandom;
    return d;
  endfunction

  initial begin
    rd_en = 0; ex_we = 0; fp_en = 0; fp_we = 0; rd_off = 0; ex_off = 0; fp_off = 0;
    fp_slice = 0; ex_data = '0; fp_wdata = '0; exp_rd_v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // initialise all rows through the result port
    for (int r = 0; r < 8; r++) begin
      @(negedge clk);
      ex_we = 1; ex_off = 3'(r); ex_data = rnd_reg(); model[r] = ex_data;
    end
    @(negedge clk); ex_we = 0;
    for (int it = 0; it < 1000; it++) begin
      @(negedge clk);
      if (exp_rd_v) chk(rd_data == exp_rd, "read port data");
      rd_en = $urandom_range(0, 1); rd_off = 3'($urandom);
      ex_we = $urandom_range(0, 2) == 0; ex_off = 3'($urandom); ex_data = rnd_reg();
      fp_en = $urandom_range(0, 1); fp_we = $urandom_range(0, 1);
      fp_off = 3'($urandom); fp_slice = 2'($urandom); fp_wdata = 256'(rnd_reg());
      if (ex_we && fp_off == ex_off) fp_off = ex_off + 3'd1;
      #0.1;
      chk(fp_rdata == model[fp_off][fp_slice*FLIT_W +: FLIT_W], "fill port read slice");
      exp_rd_v = rd_en;
      if (rd_en) exp_rd = model[rd_off];
      @(posedge clk);
      if (ex_we) model[ex_off] = ex_data;
      if (fp_en && fp_we) model[fp_off][fp_slice*FLIT_W +: FLIT_W] = fp_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
