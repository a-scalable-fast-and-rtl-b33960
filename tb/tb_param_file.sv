// tb_param_file: writes random weight words (piece by piece) and bias/scale
// entries, then checks word reads (one cycle latency, hold when w_re is low)
// and the NLANE-wide bias/scale lookup from random bases, including wrap-round.
module tb_param_file;
  import npe_pkg::*;
  localparam int WORDS = 64, BD = 512;
  logic clk = 0;
  host_ld_t ld = '0;
  logic w_re = 0;
  logic [$clog2(WORDS)-1:0] w_addr = '0;
  logic [WBYTES*8-1:0] w_word;
  logic [$clog2(BD)-1:0] b_base = '0;
  logic signed [DW-1:0] bias [NLANE];
  logic [DW-1:0] scale [NLANE];
  logic [WBYTES*8-1:0] wsh [WORDS];
  logic [15:0] bsh [BD];
  int checks = 0, failures = 0;

  param_file #(.WORDS(WORDS), .BDEPTH(BD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < WORDS; a++)
      for (int p = 0; p < WLANES; p++) begin
        logic [HW-1:0] d;
        d = {$urandom, $urandom, $urandom, $urandom};
        wsh[a][p*HW +: HW] = d;
        ld.valid <= 1; ld.target <= LD_WMEM; ld.addr <= HAW'(a * WLANES + p); ld.data <= d;
        @(posedge clk);
      end
    for (int a = 0; a < BD; a++) begin
      bsh[a] = 16'($urandom);
      ld.valid <= 1; ld.target <= LD_BMEM; ld.addr <= HAW'(a); ld.data <= HW'(bsh[a]);
      @(posedge clk);
    end
    ld.valid <= 0;
    for (int t = 0; t < 200; t++) begin
      automatic int a = $urandom_range(0, WORDS - 1);
      w_addr <= $clog2(WORDS)'(a); w_re <= 1;
      @(posedge clk); #1;
      checks++; if (w_word !== wsh[a]) failures++;
      // hold: without w_re the word stays
      w_re <= 0; w_addr <= w_addr + 1'b1;
      @(posedge clk); #1;
      checks++; if (w_word !== wsh[a]) failures++;
    end
    for (int t = 0; t < 200; t++) begin
      automatic int b = (t == 0) ? BD - 5 : $urandom_range(0, BD - 1);
      b_base = $clog2(BD)'(b); #1;
      for (int o = 0; o < NLANE; o++) begin
        checks++;
        if (bias[o] !== bsh[(b + o) % BD][7:0] || scale[o] !== bsh[(b + o) % BD][15:8]) failures++;
      end
    end
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
