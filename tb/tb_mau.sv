// tb_mau: checks the multiply-add unit against a plain sum of products over
// random int8 operands, plus the extreme corner (-128 * -128 in every product).
module tb_mau;
  import npe_pkg::*;
  localparam int K = MK;
  logic signed [DW-1:0] d [K], w [K];
  logic signed [2*DW+$clog2(K)-1:0] y;
  int checks = 0, failures = 0;

  mau #(.K(K)) dut (.d, .w, .y);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      automatic int ref_sum = 0;
      for (int k = 0; k < K; k++) begin
        d[k] = (t == 0) ? -8'sd128 : DW'($urandom);
        w[k] = (t == 0) ? -8'sd128 : DW'($urandom);
        ref_sum += int'(d[k]) * int'(w[k]);
      end
      #1;
      checks++;
      if (int'(y) != ref_sum) begin
        failures++;
        if (failures < 5) $display("mismatch t=%0d y=%0d ref=%0d", t, y, ref_sum);
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
