// tb_adder_tree: for every tap level, checks each group sum against a direct
// sum of the inputs of that group, and that lanes above the group count are 0.
module tb_adder_tree;
  import npe_pkg::*;
  localparam int N = NMAU;
  logic signed [MAUW-1:0] x [N];
  logic [$clog2(N):0] level;
  logic signed [ATW-1:0] y [N];
  int checks = 0, failures = 0;

  adder_tree #(.N(N), .XW(MAUW), .YW(ATW)) dut (.x, .level, .y);

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < N; i++) x[i] = MAUW'($urandom);
      for (int l = 0; l <= $clog2(N); l++) begin
        level = l[$clog2(N):0];
        #1;
        for (int g = 0; g < N; g++) begin
          automatic longint r = 0;
          if (g < (N >> l))
            for (int i = g << l; i < (g+1) << l; i++) r += longint'(x[i]);
          checks++;
          if (longint'(y[g]) != r) begin
            failures++;
            if (failures < 5) $display("level %0d lane %0d y=%0d ref=%0d", l, g, y[g], r);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
