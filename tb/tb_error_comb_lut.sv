// tb_error_comb_lut: loads a random LUT, runs random argmax commands (pieces of
// 1..6 bits and the logical class) on random score windows, then COMBINE, and
// checks the estimated bits and the XOR pattern against a testbench model;
// also checks that err_valid follows COMBINE by one cycle and that clr resets
// the estimate.
module tb_error_comb_lut;
  import npe_pkg::*;
  logic clk = 0, rst_n = 0;
  host_ld_t ld = '0;
  logic clr = 0, am_go = 0, am_lc = 0, comb = 0;
  logic [2:0] am_nbits = '0;
  logic [5:0] am_bitpos = '0;
  logic signed [DW-1:0] win [AM_MAX];
  logic err_valid, lc;
  logic [NQ-1:0] err;
  logic [SYN_W-1:0] s_est;
  logic [NQ-1:0] lut [SYN_W+1];
  logic m_lc;
  logic [SYN_W-1:0] m_s;
  int checks = 0, failures = 0;

  error_comb_lut dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int j = 0; j < AM_MAX; j++) win[j] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r <= SYN_W; r++) begin
      lut[r] = {$urandom, $urandom, $urandom};
      ld.valid <= 1; ld.target <= LD_LUT; ld.addr <= HAW'(r); ld.data <= HW'(lut[r]);
      @(posedge clk);
    end
    ld.valid <= 0;
    for (int t = 0; t < 300; t++) begin
      clr = 1; @(posedge clk); #1; clr = 0;
      m_lc = 0; m_s = '0;
      checks++; if (lc !== 1'b0 || s_est !== '0) failures++;
      for (int c = 0; c < 8; c++) begin
        automatic int nb  = $urandom_range(1, 6);
        automatic int bp  = $urandom_range(0, SYN_W - 1);
        automatic logic islc = ($urandom_range(0, 4) == 0);
        automatic int best = 0;
        if (islc) nb = 1;
        for (int j = 0; j < AM_MAX; j++) win[j] = DW'($urandom_range(0, 40)) - 8'sd20;
        for (int j = 1; j < (1 << nb); j++) if (win[j] > win[best]) best = j;
        am_go = 1; am_nbits = 3'(nb); am_bitpos = 6'(bp); am_lc = islc;
        @(posedge clk); #1;
        am_go = 0;
        if (islc) m_lc = best[0];
        else for (int i = 0; i < nb; i++) if (bp + i < SYN_W) m_s[bp + i] = best[i];
      end
      checks++; if (lc !== m_lc || s_est !== m_s) failures++;
      comb = 1; @(posedge clk); #1; comb = 0;
      begin
        automatic logic [NQ-1:0] e = m_lc ? lut[0] : '0;
        for (int k = 0; k < SYN_W; k++) if (m_s[k]) e ^= lut[k+1];
        checks++;
        if (!err_valid || err !== e) begin
          failures++;
          if (failures < 5) $display("t=%0d err mismatch %h %h lc %b %b s %h %h v=%b", t, err, e, lc, m_lc, s_est, m_s, err_valid);
        end
      end
      @(posedge clk); #1; checks++; if (err_valid) failures++;
    end
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
