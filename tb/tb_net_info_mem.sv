// tb_net_info_mem: fills the layer table with random descriptors and checks
// the combinational read of every entry; writes to other targets are ignored.
module tb_net_info_mem;
  import npe_pkg::*;
  logic clk = 0;
  host_ld_t ld = '0;
  logic [NIW-1:0] layer = '0;
  layer_info_t info;
  layer_info_t shadow [NI_DEPTH];
  int checks = 0, failures = 0;

  net_info_mem dut (.clk, .ld, .layer, .info);
  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < NI_DEPTH; a++) begin
      shadow[a] = layer_info_t'({$urandom, $urandom});
      ld.valid <= 1; ld.target <= LD_NI; ld.addr <= HAW'(a); ld.data <= HW'(shadow[a]);
      @(posedge clk);
    end
    for (int a = 0; a < NI_DEPTH; a++) begin
      ld.target <= LD_IMEM; ld.addr <= HAW'(a); ld.data <= {4{$urandom}};
      @(posedge clk);
    end
    ld.valid <= 0;
    for (int r = 0; r < 4; r++)
      for (int a = 0; a < NI_DEPTH; a++) begin
        layer = NIW'(a); #1;
        checks++;
        if (info !== shadow[a]) failures++;
      end
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
