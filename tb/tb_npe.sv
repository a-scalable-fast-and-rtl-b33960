// tb_npe: self-checking test of the neural processing engine.
//
// Drives random groups of passes: each group computes one set of neurons in
// 1 to 3 chunks (first ... last), with a random adder-tree tap level, random
// activation, shifts, output count, int8 operands and weights, and random idle
// cycles between passes. Bias and scale come from a random table indexed by
// sf_bias_base + lane, as the parameter file would supply them. The expected
// results are worked out here directly: per column c and group g the sum of
// d[m*MK+k]*w[c][m][k] over the MAUs of the group, accumulated over the
// chunks, then bias, scale, rounding shift, activation and int8 saturation.
// Checks the write-back data, address, count and cycle (4 cycles after the
// last chunk is issued), that nothing else is written, and that busy is high
// exactly while a pass is in flight.
module tb_npe;
  import npe_pkg::*;
  import dec_model_pkg::*;
  localparam int NGROUPS = 300;

  logic clk = 0, rst_n = 0;
  logic issue = 0;
  npe_ctl_t ctl = '0;
  logic signed [DW-1:0] ops [VEC];
  logic [WBYTES*8-1:0] wts = '0;
  logic [BAW-1:0] sf_bias_base;
  logic signed [DW-1:0] bias [NLANE];
  logic [DW-1:0] scale [NLANE];
  logic wb_en;
  logic [DAW-1:0] wb_addr;
  logic [7:0] wb_n;
  logic signed [DW-1:0] wb_data [NLANE];
  logic busy;
  int checks = 0, failures = 0;
  int cyc = 0;

  npe dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  logic [15:0] btab [BMEM_DEPTH];
  always_comb
    for (int o = 0; o < NLANE; o++) begin
      bias[o]  = btab[(int'(sf_bias_base) + o) % BMEM_DEPTH][7:0];
      scale[o] = btab[(int'(sf_bias_base) + o) % BMEM_DEPTH][15:8];
    end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // expected write-backs
  typedef struct {
    int cyc;
    int dst;
    int n;
    logic signed [DW-1:0] d [NLANE];
  } wb_t;
  wb_t exp_q[$];
  int issue_cyc[$];
  int n_lvl [LVLW];
  int n_chunked = 0, n_sat = 0, n_relu0 = 0, n_leak = 0;

  // monitor: compare every write-back and busy
  always @(posedge clk) if (rst_n) begin
    automatic bit inflight = 0;
    foreach (issue_cyc[i]) if (cyc > issue_cyc[i] && cyc <= issue_cyc[i] + 4) inflight = 1;
    check(busy == inflight, $sformatf("busy=%0d at cycle %0d", busy, cyc));
    if (wb_en) begin
      if (exp_q.size() == 0) check(0, $sformatf("unexpected write-back at %0d", cyc));
      else begin
        automatic wb_t e = exp_q.pop_front();
        check(cyc == e.cyc, $sformatf("write-back at %0d, expected %0d", cyc, e.cyc));
        check(int'(wb_addr) == e.dst && int'(wb_n) == e.n, "write-back address/count");
        for (int o = 0; o < e.n; o++)
          check(wb_data[o] === e.d[o], $sformatf("lane %0d: %0d vs %0d", o, wb_data[o], e.d[o]));
      end
    end else if (exp_q.size() > 0) check(cyc < exp_q[0].cyc, $sformatf("missing write-back due at %0d", exp_q[0].cyc));
  end

  initial begin
    for (int i = 0; i < VEC; i++) ops[i] = '0;
    for (int i = 0; i < BMEM_DEPTH; i++) btab[i] = 16'($urandom);
    for (int l = 0; l < LVLW; l++) n_lvl[l] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int grp = 0; grp < NGROUPS; grp++) begin
      automatic int lvl = $urandom_range(0, LVLW - 1);
      automatic int G = NMAU >> lvl;
      automatic int nch = $urandom_range(1, 3);
      automatic layer_info_t inf = '0;
      automatic longint acc [NCOL][NMAU];
      automatic wb_t e;
      automatic int bb = $urandom_range(0, BMEM_DEPTH - 1);
      inf.act = act_e'($urandom_range(0, 2));
      inf.shift = 5'($urandom_range(6, 16));
      inf.bshift = 5'($urandom_range(0, 8));
      inf.lshift = 3'($urandom_range(0, 7));
      inf.level = LVLW'(lvl);
      inf.n_out = 8'($urandom_range(1, NCOL * G));
      n_lvl[lvl]++;
      if (nch > 1) n_chunked++;
      for (int ch = 0; ch < nch; ch++) begin
        // operands of this chunk
        for (int i = 0; i < VEC; i++) ops[i] = DW'($urandom);
        for (int i = 0; i < WBYTES / 4; i++) wts[i*32 +: 32] = $urandom;
        ctl.info = inf;
        ctl.dst = DAW'($urandom);
        ctl.bias_base = BAW'(bb);
        ctl.first = (ch == 0);
        ctl.last = (ch == nch - 1);
        for (int c = 0; c < NCOL; c++)
          for (int g = 0; g < G; g++) begin
            automatic longint s = 0;
            for (int m = g << lvl; m < (g + 1) << lvl; m++)
              for (int k = 0; k < MK; k++)
                s += longint'(ops[m*MK + k]) * longint'($signed(wts[(c*VEC + m*MK + k)*8 +: 8]));
            acc[c][g] = (ch == 0) ? s : acc[c][g] + s;
          end
        if (ctl.last) begin
          e.cyc = cyc + 4; e.dst = int'(ctl.dst); e.n = int'(inf.n_out);
          for (int c = 0; c < NCOL; c++)
            for (int g = 0; g < G; g++) begin
              automatic int o = c * G + g;
              automatic int be = (bb + o) % BMEM_DEPTH;
              automatic bit s1, r0, ln;
              e.d[o] = DW'(DecModel::sf_finish(acc[c][g], int'($signed(btab[be][7:0])), int'(btab[be][15:8]),
                       int'(inf.shift), int'(inf.bshift), inf.act, int'(inf.lshift), s1, r0, ln));
              if (o < e.n) begin n_sat += s1; n_relu0 += r0; n_leak += ln; end
            end
          exp_q.push_back(e);
        end
        issue = 1;
        issue_cyc.push_back(cyc);
        @(posedge clk); #1;
        issue = 0;
        // scramble the inputs while idle: they must not matter
        ctl = npe_ctl_t'({$urandom, $urandom, $urandom});
        if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 6)) @(posedge clk);
        if (issue_cyc.size() > 8) void'(issue_cyc.pop_front());
        #1;
      end
    end
    repeat (8) @(posedge clk);
    #1;
    check(exp_q.size() == 0, "write-backs missing at the end");
    $display("levels %0d %0d %0d %0d %0d, chunked %0d, sat %0d, relu0 %0d, leaky-neg %0d",
             n_lvl[0], n_lvl[1], n_lvl[2], n_lvl[3], n_lvl[4], n_chunked, n_sat, n_relu0, n_leak);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
