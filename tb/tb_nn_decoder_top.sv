// tb_nn_decoder_top: end-to-end test of the neural decoding module at its
// default size.
//
// Builds two independent small multi-task networks with the reference model
// of dec_model_pkg (random weights, biases, layer descriptors and LUTs): one
// for the X-error decoder, one for the Z-error decoder. Each image is loaded
// through the shared host port with ld_sel selecting the decoder, so a
// mis-steered load shows up as wrong results. Then several QEC cycles run:
// T rounds of random Z-type and X-type syndromes arrive PERIOD cycles apart,
// starting with `start`. Per cycle and decoder the test checks the error
// pattern against the model, the cycle of err_valid against the model's
// timing prediction, every data-register byte the model wrote, and that the
// module's `done` comes one cycle after the later decoder finished.
// It counts each mechanism (syndrome wait, weight-bank wait, pipeline drain,
// weight load overlapping a pass, chunk accumulation, bypass, each tap level,
// ReLU clamp, LeakyReLU on a negative value, int8 saturation) over both
// decoders and fails if one never happened. No parameter is overridden.
module tb_nn_decoder_top;
  import npe_pkg::*;
  import dec_model_pkg::*;
  localparam int T = 10, PERIOD = 24, NCYC = 2;

  logic clk = 0, rst_n = 0;
  logic ld_sel = 0;
  host_ld_t ld = '0;
  logic start = 0, syn_valid = 0;
  logic [SYN_W-1:0] syn_z = '0, syn_x = '0;
  logic x_err_valid, z_err_valid, busy, done;
  logic [NQ-1:0] x_err, z_err;
  int checks = 0, failures = 0;
  int cyc = 0;

  nn_decoder_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters, from the control units of both decoders
  int c_wait_syn = 0, c_wait_ld = 0, c_wait_sync = 0, c_overlap = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_xdec.u_cu.state == 2'd2 && dut.u_xdec.u_cu.stall) begin
      if (dut.u_xdec.u_cu.ir.op == C_WAITSYN && dut.u_xdec.u_cu.rounds < dut.u_xdec.u_cu.ir.rounds) c_wait_syn++;
      else if (dut.u_xdec.u_cu.ir.c_valid && dut.u_xdec.u_cu.ld_pend &&
               dut.u_xdec.u_cu.ld_bank == dut.u_xdec.u_cu.ir.wbank) c_wait_ld++;
      else c_wait_sync++;
    end
    if (dut.u_zdec.u_cu.state == 2'd2 && dut.u_zdec.u_cu.stall) begin
      if (dut.u_zdec.u_cu.ir.op == C_WAITSYN && dut.u_zdec.u_cu.rounds < dut.u_zdec.u_cu.ir.rounds) c_wait_syn++;
      else if (dut.u_zdec.u_cu.ir.c_valid && dut.u_zdec.u_cu.ld_pend &&
               dut.u_zdec.u_cu.ld_bank == dut.u_zdec.u_cu.ir.wbank) c_wait_ld++;
      else c_wait_sync++;
    end
    if (dut.u_xdec.npe_issue && dut.u_xdec.w_re) c_overlap++;
    if (dut.u_zdec.npe_issue && dut.u_zdec.w_re) c_overlap++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  DecModel mx, mz;
  host_ld_t img[$];

  initial begin
    int ex[$], ez[$];
    int rc[$];
    int nws, nwl, nwsync;
    automatic int tot_chunk = 0, tot_bypass = 0, tot_relu0 = 0, tot_leak = 0, tot_sat = 0;
    int tot_lvl [LVLW];
    mx = new(); mz = new();
    mx.build_toy(T); mz.build_toy(T);
    for (int l = 0; l < LVLW; l++) tot_lvl[l] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int d = 0; d < 2; d++) begin
      if (d == 0) mx.host_image(img); else mz.host_image(img);
      ld_sel = d[0];
      foreach (img[i]) begin
        ld = img[i];
        @(posedge clk); #1;
      end
    end
    ld = '0;
    for (int q = 0; q < NCYC; q++) begin
      logic [SYN_W-1:0] rz [T], rx [T];
      int t0, t_x, t_z, t_done;
      for (int r = 0; r < T; r++) begin rz[r] = SYN_W'({$urandom, $urandom}); rx[r] = SYN_W'({$urandom, $urandom}); end
      rc.delete();
      for (int r = 0; r < T; r++) rc.push_back(r * PERIOD);
      for (int r = 0; r < T; r++) begin mx.store_round(r, rz[r]); mz.store_round(r, rx[r]); end
      mx.run(); mz.run();
      mx.predict(rc, ex, nws, nwl, nwsync);
      mz.predict(rc, ez, nws, nwl, nwsync);
      tot_chunk += mx.n_chunk_acc + mz.n_chunk_acc; tot_bypass += mx.n_bypass + mz.n_bypass;
      tot_relu0 += mx.n_relu0 + mz.n_relu0; tot_leak += mx.n_leaky_neg + mz.n_leaky_neg;
      tot_sat += mx.n_sat + mz.n_sat;
      for (int l = 0; l < LVLW; l++) tot_lvl[l] += mx.n_level[l] + mz.n_level[l];
      t0 = cyc; t_x = -1; t_z = -1; t_done = -1;
      fork
        begin
          for (int r = 0; r < T; r++) begin
            if (r == 0) start = 1;
            syn_valid = 1; syn_z = rz[r]; syn_x = rx[r];
            @(posedge clk); #1;
            start = 0; syn_valid = 0;
            repeat (PERIOD - 1) @(posedge clk);
            #1;
          end
        end
        begin
          while (t_x < 0 || t_z < 0 || t_done < 0) begin
            @(posedge clk); #1;
            if (x_err_valid && t_x < 0) begin
              t_x = cyc - t0;
              check(x_err === mx.err, $sformatf("qec %0d X errors %h vs %h", q, x_err, mx.err));
            end
            if (z_err_valid && t_z < 0) begin
              t_z = cyc - t0;
              check(z_err === mz.err, $sformatf("qec %0d Z errors %h vs %h", q, z_err, mz.err));
            end
            if (done) begin
              check(t_done < 0, "done pulsed twice");
              t_done = cyc - t0;
            end
          end
        end
      join
      check(t_x == ex[ex.size()-2] + 1, $sformatf("qec %0d x_err_valid at %0d, expected %0d", q, t_x, ex[ex.size()-2] + 1));
      check(t_z == ez[ez.size()-2] + 1, $sformatf("qec %0d z_err_valid at %0d, expected %0d", q, t_z, ez[ez.size()-2] + 1));
      // each decoder's END is one word after COMBINE; the module's done one cycle later
      begin
        automatic int e_end = (ex[ex.size()-1] > ez[ez.size()-1]) ? ex[ex.size()-1] : ez[ez.size()-1];
        check(t_done == e_end + 2, $sformatf("qec %0d done at %0d, expected %0d", q, t_done, e_end + 2));
      end
      $display("qec %0d: X errors %0d cycles after start, Z errors %0d, done %0d", q, t_x, t_z, t_done);
      for (int a = 0; a < DREG_DEPTH; a++) begin
        if (mx.written[a]) check(dut.u_xdec.u_drf.mem[a] === mx.dreg[a], $sformatf("X dreg[%0d]", a));
        if (mz.written[a]) check(dut.u_zdec.u_drf.mem[a] === mz.dreg[a], $sformatf("Z dreg[%0d]", a));
      end
      repeat (5) @(posedge clk);
      #1;
      check(!busy, "busy after both programs ended");
    end
    $display("mechanisms: wait_syn=%0d wait_ld=%0d wait_sync=%0d overlap=%0d chunk=%0d bypass=%0d lvl0=%0d lvl3=%0d lvl4=%0d relu0=%0d leakyneg=%0d sat=%0d",
             c_wait_syn, c_wait_ld, c_wait_sync, c_overlap, tot_chunk, tot_bypass, tot_lvl[0], tot_lvl[3], tot_lvl[4],
             tot_relu0, tot_leak, tot_sat);
    check(c_wait_syn > 0, "syndrome wait never happened");
    check(c_wait_ld > 0, "weight-bank wait never happened");
    check(c_wait_sync > 0, "pipeline drain never happened");
    check(c_overlap > 0, "load/compute overlap never happened");
    check(tot_chunk > 0, "chunk accumulation never happened");
    check(tot_bypass > 0, "accumulator bypass never happened");
    check(tot_lvl[0] > 0 && tot_lvl[3] > 0 && tot_lvl[4] > 0, "a tap level never used");
    check(tot_relu0 > 0, "ReLU clamp never happened");
    check(tot_leak > 0, "LeakyReLU on a negative value never happened");
    check(tot_sat > 0, "int8 saturation never happened");
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
