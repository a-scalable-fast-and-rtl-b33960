// tb_instr_mem: writes random VLIW words through the host port, reads them
// back in random order and checks the one-cycle read latency; writes aimed at
// another target must leave the memory unchanged.
module tb_instr_mem;
  import npe_pkg::*;
  logic clk = 0;
  host_ld_t ld = '0;
  logic [IAW-1:0] raddr = '0;
  instr_t rdata;
  instr_t shadow [IMEM_DEPTH];
  int checks = 0, failures = 0;

  instr_mem dut (.clk, .ld, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < IMEM_DEPTH; a++) begin
      shadow[a] = instr_t'({$urandom, $urandom, $urandom});
      ld.valid <= 1; ld.target <= LD_IMEM; ld.addr <= HAW'(a);
      ld.data <= HW'(shadow[a]);
      @(posedge clk);
    end
    // writes to other targets are ignored
    for (int a = 0; a < 64; a++) begin
      ld.target <= LD_NI; ld.addr <= HAW'(a); ld.data <= {4{$urandom}};
      @(posedge clk);
    end
    ld.valid <= 0;
    for (int t = 0; t < 3000; t++) begin
      automatic int a = $urandom_range(0, IMEM_DEPTH - 1);
      raddr <= IAW'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== shadow[a]) begin
        failures++;
        if (failures < 5) $display("addr %0d mismatch", a);
      end
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
