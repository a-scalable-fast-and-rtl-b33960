// tb_weight_regfile: random writes to either bank while the other is read;
// checks that a write lands only in its bank, at the clock edge, and that reset
// clears both banks.
module tb_weight_regfile;
  import npe_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_bank = 0, rd_bank = 0;
  logic [WBYTES*8-1:0] wr_word = '0, rd_word;
  logic [WBYTES*8-1:0] sh [2];
  int checks = 0, failures = 0;

  weight_regfile dut (.*);
  always #5 clk = ~clk;

  function automatic logic [WBYTES*8-1:0] rnd();
    logic [WBYTES*8-1:0] v;
    for (int i = 0; i < WBYTES / 4; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    sh[0] = '0; sh[1] = '0;
    for (int b = 0; b < 2; b++) begin
      rd_bank = b[0]; #1; checks++; if (rd_word !== '0) failures++;
    end
    for (int t = 0; t < 500; t++) begin
      automatic logic [WBYTES*8-1:0] v = rnd();
      automatic logic bk = 1'($urandom);
      automatic logic en = 1'($urandom);
      wr_en <= en; wr_bank <= bk; wr_word <= v; rd_bank <= ~bk;
      #1;
      // before the edge the bank still holds its old word
      checks++; if (rd_word !== sh[~bk]) failures++;
      @(posedge clk);
      if (en) sh[bk] = v;
      #1;
      rd_bank = bk; #1;
      checks++; if (rd_word !== sh[bk]) failures++;
      rd_bank = ~bk; #1;
      checks++; if (rd_word !== sh[~bk]) failures++;
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
