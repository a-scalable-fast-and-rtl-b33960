// tb_prog_decoder: end-to-end test of one programmable decoder.
//
// Loads the small multi-task network of dec_model_pkg (stepper convolution,
// chunked fully connected layer, three backend heads, argmax, LUT combine)
// through the host port, then runs several QEC cycles with random syndromes
// of T rounds arriving every PERIOD cycles. Checks, per cycle: the error
// pattern against the reference model, the cycle in which err_valid and done
// appear against the model's timing prediction, and every data-register byte
// the model wrote. Counts how often each mechanism happened (waiting for a
// syndrome round, waiting for a weight bank, waiting for the pipeline, chunk
// accumulation, bypass, each adder-tree tap level, a weight load overlapping a
// pass) and fails if one never did.
module tb_prog_decoder;
  import npe_pkg::*;
  import dec_model_pkg::*;
  localparam int T = 10, PERIOD = 24, NCYC = 3;

  logic clk = 0, rst_n = 0;
  host_ld_t ld = '0;
  logic start = 0, syn_valid = 0;
  logic [SYN_W-1:0] syn_bits = '0;
  logic busy, done, err_valid;
  logic [NQ-1:0] err;
  int checks = 0, failures = 0;
  int cyc = 0;

  prog_decoder dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters, from the design's own control signals
  int c_wait_syn = 0, c_wait_ld = 0, c_wait_sync = 0, c_overlap = 0;
  always @(posedge clk) if (rst_n && dut.u_cu.state == 2'd2 && dut.u_cu.stall) begin
    if (dut.u_cu.ir.op == C_WAITSYN && dut.u_cu.rounds < dut.u_cu.ir.rounds) c_wait_syn++;
    else if (dut.u_cu.ir.c_valid && dut.u_cu.ld_pend && dut.u_cu.ld_bank == dut.u_cu.ir.wbank) c_wait_ld++;
    else c_wait_sync++;
  end
  always @(posedge clk) if (rst_n && dut.npe_issue && dut.w_re) c_overlap++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  DecModel mdl;
  host_ld_t img[$];

  initial begin
    int exec[$];
    int rc[$];
    int nws, nwl, nwsync;
    automatic int tot_chunk = 0, tot_bypass = 0;
    int tot_lvl [LVLW];
    mdl = new();
    mdl.build_toy(T);
    mdl.host_image(img);
    for (int l = 0; l < LVLW; l++) tot_lvl[l] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    foreach (img[i]) begin
      ld = img[i];
      @(posedge clk); #1;
    end
    ld = '0;
    for (int q = 0; q < NCYC; q++) begin
      logic [SYN_W-1:0] rb [T];
      int t0, t_err, t_done;
      for (int r = 0; r < T; r++) rb[r] = SYN_W'({$urandom, $urandom});
      rc.delete();
      for (int r = 0; r < T; r++) rc.push_back(r * PERIOD);
      for (int r = 0; r < T; r++) mdl.store_round(r, rb[r]);
      mdl.run();
      mdl.predict(rc, exec, nws, nwl, nwsync);
      tot_chunk += mdl.n_chunk_acc; tot_bypass += mdl.n_bypass;
      for (int l = 0; l < LVLW; l++) tot_lvl[l] += mdl.n_level[l];
      // start the QEC cycle; round r arrives PERIOD*r cycles later
      t0 = cyc; t_err = -1; t_done = -1;
      fork
        begin
          for (int r = 0; r < T; r++) begin
            if (r == 0) start = 1;
            syn_valid = 1; syn_bits = rb[r];
            @(posedge clk); #1;
            start = 0; syn_valid = 0;
            repeat (PERIOD - 1) @(posedge clk);
            #1;
          end
        end
        begin
          while (t_err < 0 || t_done < 0) begin
            @(posedge clk); #1;
            if (err_valid && t_err < 0) begin
              t_err = cyc - t0;
              check(err === mdl.err, $sformatf("qec %0d error pattern %h vs %h", q, err, mdl.err));
            end
            if (done && t_done < 0) t_done = cyc - t0;
          end
        end
      join
      check(t_err == exec[exec.size()-2] + 1, $sformatf("qec %0d err_valid at %0d, expected %0d", q, t_err, exec[exec.size()-2] + 1));
      check(t_done == exec[exec.size()-1] + 1, $sformatf("qec %0d done at %0d, expected %0d", q, t_done, exec[exec.size()-1] + 1));
      $display("qec %0d: err_valid %0d cycles after start, %0d after the last round (model waits: syn %0d ld %0d sync %0d)",
               q, t_err, t_err - rc[T-1], nws, nwl, nwsync);
      for (int a = 0; a < DREG_DEPTH; a++)
        if (mdl.written[a]) check(dut.u_drf.mem[a] === mdl.dreg[a], $sformatf("dreg[%0d]", a));
      repeat (5) @(posedge clk);
      #1;
    end
    $display("mechanisms: wait_syn=%0d wait_ld=%0d wait_sync=%0d overlap=%0d chunk=%0d bypass=%0d lvl0=%0d lvl3=%0d lvl4=%0d relu0=%0d leakyneg=%0d sat=%0d",
             c_wait_syn, c_wait_ld, c_wait_sync, c_overlap, tot_chunk, tot_bypass, tot_lvl[0], tot_lvl[3], tot_lvl[4],
             mdl.n_relu0, mdl.n_leaky_neg, mdl.n_sat);
    check(c_wait_syn > 0, "syndrome wait never happened");
    check(c_wait_ld > 0, "weight-bank wait never happened");
    check(c_wait_sync > 0, "pipeline drain never happened");
    check(c_overlap > 0, "load/compute overlap never happened");
    check(tot_chunk > 0 && tot_bypass > 0, "accumulate or bypass never happened");
    check(tot_lvl[0] > 0 && tot_lvl[3] > 0 && tot_lvl[4] > 0, "a tap level never used");
    check(mdl.n_relu0 > 0 && mdl.n_leaky_neg > 0 && mdl.n_sat > 0, "an activation case never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
