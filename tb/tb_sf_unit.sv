// tb_sf_unit: drives random chunked neurons (1..4 chunks, random bias, scale,
// shifts and activation) through one SF lane and compares the int8 result
// with a reference computed in the testbench; also checks that y_valid comes
// exactly one cycle after the last chunk and never after other chunks.
module tb_sf_unit;
  import npe_pkg::*;
  logic clk = 0, rst_n = 0;
  logic en = 0, first = 0, last = 0;
  logic signed [ATW-1:0] x = '0;
  logic signed [DW-1:0] bias = '0;
  logic [DW-1:0] scale = '0;
  act_e act = ACT_NONE;
  logic [4:0] shift = '0, bshift = '0;
  logic [2:0] lshift = '0;
  logic signed [DW-1:0] y;
  logic y_valid;
  int checks = 0, failures = 0;
  int n_relu = 0, n_leaky = 0, n_sat = 0, n_chunked = 0;

  sf_unit #(.XW(ATW)) dut (.*);

  always #5 clk = ~clk;

  function automatic int ref_out(longint s, int b, int sc, int sh, int bsh, act_e a, int lsh);
    longint v = (s + (longint'(b) <<< bsh)) * sc;
    if (sh != 0) v = (v + (longint'(1) <<< (sh - 1))) >>> sh;
    if (a == ACT_RELU && v < 0) v = 0;
    if (a == ACT_LEAKY && v < 0) v = v >>> lsh;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 3000; t++) begin
      automatic int nch = 1 + $urandom_range(0, 3);
      automatic longint s = 0;
      automatic int e;
      bias   <= DW'($urandom);
      scale  <= DW'($urandom_range(0, 255));
      shift  <= 5'($urandom_range(6, 20));
      bshift <= 5'($urandom_range(0, 8));
      lshift <= 3'($urandom_range(0, 7));
      act    <= act_e'($urandom_range(0, 2));
      for (int c = 0; c < nch; c++) begin
        automatic logic signed [ATW-1:0] xv = ATW'($signed($urandom_range(0, 40000)) - 20000);
        s += longint'(xv);
        en <= 1; first <= (c == 0); last <= (c == nch - 1); x <= xv;
        @(posedge clk);
        en <= 0;
        // no valid result before the last chunk
        if (c != nch - 1) begin
          #1; checks++; if (y_valid) failures++;
        end
        // idle gap between chunks now and then
        if (c != nch - 1 && $urandom_range(0, 3) == 0) begin
          @(posedge clk);
        end
      end
      #1;
      e = ref_out(s, int'(bias), int'(scale), int'(shift), int'(bshift), act, int'(lshift));
      checks++;
      if (!y_valid || int'(y) != e) begin
        failures++;
        if (failures < 5) $display("t=%0d y=%0d ref=%0d valid=%0b", t, y, e, y_valid);
      end
      if (nch > 1) n_chunked++;
      if (act == ACT_RELU && e == 0) n_relu++;
      if (act == ACT_LEAKY && e < 0) n_leaky++;
      if (e == 127 || e == -128) n_sat++;
    end
    checks++; if (n_relu == 0 || n_leaky == 0 || n_sat == 0 || n_chunked == 0) failures++;
    $display("relu=%0d leaky=%0d sat=%0d chunked=%0d", n_relu, n_leaky, n_sat, n_chunked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
