// tb_control_unit: self-checking test of the control unit.
//
// The program is the small multi-task network of dec_model_pkg, held in a
// synchronous-read instruction memory modelled here, with a layer table. NPE
// busy is modelled as the real engine behaves: high for the 4 cycles after
// each issued pass. Syndrome rounds arrive every PERIOD cycles, with a random
// extra delay per QEC cycle. For every executed word (the cycle the control
// unit advances past it) the test checks the cycle against the interlock
// rules as the reference model predicts them, and that the word's slots come
// out in that cycle only: the NPE issue with its descriptor, operand base,
// strides and bank, the weight-word read with its address and the bank write
// one cycle later, the argmax and combine commands, and the one-cycle `done`
// after END. It also checks the round counter and the round index used for
// storing syndromes, and counts each kind of wait.
module tb_control_unit;
  import npe_pkg::*;
  import dec_model_pkg::*;
  localparam int T = 10, NCYC = 4;

  logic clk = 0, rst_n = 0;
  logic start = 0, syn_valid = 0;
  logic [7:0] syn_round, rounds;
  logic [IAW-1:0] imem_raddr;
  instr_t imem_rdata;
  logic [NIW-1:0] ni_layer;
  layer_info_t ni_info;
  logic npe_busy, npe_issue;
  npe_ctl_t npe_ctl;
  logic [DAW-1:0] op_src;
  logic [7:0] op_mstride, op_kstride;
  logic op_wbank;
  logic w_re, wr_en, wr_bank;
  logic [WAW-1:0] w_addr;
  logic am_go, am_lc, comb, running, done;
  logic [DAW-1:0] am_src;
  logic [2:0] am_nbits;
  logic [5:0] am_bitpos;
  int checks = 0, failures = 0;
  int cyc = 0;

  control_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  DecModel mdl;
  instr_t imem [IMEM_DEPTH];
  always_ff @(posedge clk) imem_rdata <= imem[imem_raddr];
  assign ni_info = mdl.ni[ni_layer];

  logic [3:0] issued;
  always_ff @(posedge clk)
    if (!rst_n) issued <= '0;
    else        issued <= {issued[2:0], npe_issue};
  assign npe_busy = |issued;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // observed execution: which word advanced in which cycle
  int t0 = 0;
  int seen_cyc[$];
  int n_syn = 0;
  bit prev_w_re = 0;
  bit prev_mbank = 0;
  int c_wait_syn = 0, c_wait_ld = 0, c_wait_sync = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.state == 2'd2) begin
      automatic instr_t ir = imem_rdata;
      if (dut.stall) begin
        if (ir.op == C_WAITSYN) c_wait_syn++;
        else if (ir.c_valid && dut.ld_pend && dut.ld_bank == ir.wbank) c_wait_ld++;
        else c_wait_sync++;
        check(!npe_issue && !w_re && !am_go && !comb, "a slot executed while waiting");
      end else begin
        // this word executes now
        check(ir === mdl.prog[seen_cyc.size()], $sformatf("word %0d fetched wrong", seen_cyc.size()));
        seen_cyc.push_back(cyc - t0);
        check(npe_issue == ir.c_valid, "npe_issue");
        if (ir.c_valid)
          check(npe_ctl.info == mdl.ni[ir.layer] && npe_ctl.dst == ir.dst && npe_ctl.bias_base == ir.bias_base &&
                npe_ctl.first == ir.first && npe_ctl.last == ir.last && op_src == ir.src &&
                op_mstride == mdl.ni[ir.layer].mstride && op_kstride == mdl.ni[ir.layer].kstride &&
                op_wbank == ir.wbank, "pass fields");
        check(w_re == ir.m_valid && (!ir.m_valid || w_addr == ir.waddr), "weight read");
        check(am_go == (ir.op == C_ARGMAX), "am_go");
        if (ir.op == C_ARGMAX)
          check(am_src == ir.am_src && am_nbits == ir.am_nbits && am_bitpos == ir.am_bitpos && am_lc == ir.am_lc,
                "argmax fields");
        check(comb == (ir.op == C_COMBINE), "comb");
      end
    end else check(!npe_issue && !w_re && !am_go && !comb, "a slot executed outside RUN");
    // bank write one cycle after the read
    check(wr_en == prev_w_re && (!wr_en || wr_bank == prev_mbank), "bank write");
    prev_w_re = w_re;
    if (w_re) prev_mbank = imem_rdata.mbank;
    if (syn_valid) begin
      check(int'(syn_round) == n_syn, $sformatf("syn_round %0d, expected %0d", syn_round, n_syn));
      n_syn++;
    end
  end

  initial begin
    int exec[$];
    int rc[$];
    int nws, nwl, nwsync;
    mdl = new();
    mdl.build_toy(T);
    for (int i = 0; i < IMEM_DEPTH; i++) imem[i] = (i < mdl.prog.size()) ? mdl.prog[i] : '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk);
    #1;
    for (int q = 0; q < NCYC; q++) begin
      automatic int period = 8 + 8 * q;
      automatic int t_done = -1;
      rc.delete();
      for (int r = 0; r < T; r++) rc.push_back(r * period);
      mdl.predict(rc, exec, nws, nwl, nwsync);
      seen_cyc.delete();
      t0 = cyc; n_syn = 0;
      fork
        begin
          for (int r = 0; r < T; r++) begin
            if (r == 0) start = 1;
            syn_valid = 1;
            @(posedge clk); #1;
            start = 0; syn_valid = 0;
            check(int'(rounds) == r + 1, $sformatf("rounds %0d after round %0d", rounds, r));
            repeat (period - 1) @(posedge clk);
            #1;
          end
        end
        begin
          while (t_done < 0) begin
            @(posedge clk); #1;
            if (done) t_done = cyc - t0;
          end
        end
      join
      check(seen_cyc.size() == mdl.prog.size(), $sformatf("%0d words executed of %0d", seen_cyc.size(), mdl.prog.size()));
      foreach (seen_cyc[i])
        if (i < exec.size())
          check(seen_cyc[i] == exec[i], $sformatf("qec %0d word %0d executed at %0d, expected %0d", q, i, seen_cyc[i], exec[i]));
      check(t_done == exec[exec.size()-1] + 1, $sformatf("done at %0d, expected %0d", t_done, exec[exec.size()-1] + 1));
      @(posedge clk); #1;
      check(!done && !running, "done not a single pulse, or still running");
      $display("qec %0d (round period %0d): END at %0d, waits syn %0d ld %0d sync %0d", q, period, t_done, nws, nwl, nwsync);
      repeat ($urandom_range(2, 10)) @(posedge clk);
      #1;
    end
    $display("waiting cycles: syndrome %0d, weight bank %0d, pipeline %0d", c_wait_syn, c_wait_ld, c_wait_sync);
    check(c_wait_syn > 0 && c_wait_ld > 0 && c_wait_sync > 0, "a kind of wait never happened");
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
