// tb_data_regfile: stores syndrome rounds and write-back blocks, keeps a shadow
// copy, and checks the strided operand gather and the argmax window against
// it; also checks that a write-back wins over a syndrome write to the same
// byte and that only wb_n bytes are written.
module tb_data_regfile;
  import npe_pkg::*;
  localparam int D = DREG_DEPTH;
  logic clk = 0, rst_n = 0;
  logic syn_we = 0;
  logic [7:0] syn_round = '0;
  logic [SYN_W-1:0] syn_bits = '0;
  logic [DAW-1:0] src = '0, wb_addr = '0, win_addr = '0;
  logic [7:0] mstride = '0, kstride = '0, wb_n = '0;
  logic signed [DW-1:0] ops [VEC];
  logic wb_en = 0;
  logic signed [DW-1:0] wb_data [NLANE];
  logic signed [DW-1:0] win [AM_MAX];
  logic signed [DW-1:0] sh [D];
  int checks = 0, failures = 0;

  data_regfile dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int o = 0; o < NLANE; o++) wb_data[o] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // fill everything through write-back blocks first
    for (int a = 0; a < D; a += NLANE) begin
      wb_en <= 1; wb_addr <= DAW'(a); wb_n <= 8'(NLANE);
      for (int o = 0; o < NLANE; o++) begin
        automatic logic signed [DW-1:0] v = DW'($urandom);
        wb_data[o] <= v; sh[a+o] = v;
      end
      @(posedge clk);
    end
    wb_en <= 0;
    for (int t = 0; t < 400; t++) begin
      // one syndrome round and one partial write-back per cycle
      automatic int r = $urandom_range(0, 20);
      automatic int wa = $urandom_range(0, D - 1);
      automatic int wn = $urandom_range(0, NLANE);
      automatic logic [SYN_W-1:0] bits = {$urandom, $urandom};
      syn_we <= 1; syn_round <= 8'(r); syn_bits <= bits;
      for (int i = 0; i < SYN_W; i++) sh[(r*SYN_W + i) % D] = DW'(bits[i]);
      wb_en <= 1; wb_addr <= DAW'(wa); wb_n <= 8'(wn);
      for (int o = 0; o < NLANE; o++) begin
        automatic logic signed [DW-1:0] v = DW'($urandom);
        wb_data[o] <= v;
        if (o < wn) sh[(wa + o) % D] = v;
      end
      @(posedge clk);
      syn_we <= 0; wb_en <= 0;
      // gather with random strides
      src <= DAW'($urandom); mstride <= 8'($urandom_range(0, 64)); kstride <= 8'($urandom_range(0, 8));
      win_addr <= DAW'($urandom);
      #1;
      for (int m = 0; m < NMAU; m++)
        for (int k = 0; k < MK; k++) begin
          checks++;
          if (ops[m*MK+k] !== sh[(int'(src) + m*int'(mstride) + k*int'(kstride)) % D]) failures++;
        end
      for (int j = 0; j < AM_MAX; j++) begin
        checks++;
        if (win[j] !== sh[(int'(win_addr) + j) % D]) failures++;
      end
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
