// dec_model_pkg: reference model of the programmable decoder, for testbenches.
//
// DecModel holds its own copy of every memory (program, layer table, weight
// words, biases, LUT) and executes a program one VLIW word at a time, in
// program order, with the arithmetic written out directly (no adder tree, no
// pipeline). It also predicts, from the syndrome arrival cycles, in which cycle
// each word executes, using the interlock rules of the control unit: one word
// per cycle; WAITSYN n waits until the cycle after round n-1 arrived; a pass
// with sync, and ARGMAX/COMBINE/END, wait until 5 cycles after the last pass
// was issued (NPE latency 4); a pass that reads the bank loaded by the word
// just before it waits one more cycle.
//
// build_toy() writes a small multi-task network in the style of the paper's
// decoder: a stepper convolution over the syndrome rounds (started on early
// rounds, sliding-window style), a chunked fully connected layer with
// LeakyReLU, a hidden layer of three backend heads computed side by side
// through adder-tree taps, the output layers of the heads (logical class and
// two 6-bit pieces of the pure-error bits), three argmaxes and the combine.
package dec_model_pkg;
  import npe_pkg::*;

  typedef logic [WBYTES*8-1:0] wword_t;

  class DecModel;
    // memories
    instr_t              prog[$];
    layer_info_t         ni [NI_DEPTH];
    wword_t              wmem [int];
    logic [15:0]         bmem [BMEM_DEPTH];
    logic [NQ-1:0]       lut [SYN_W+1];
    // run state
    logic signed [DW-1:0] dreg [DREG_DEPTH];
    bit                  written [DREG_DEPTH];
    wword_t              bank [2];
    longint              acc [NCOL][NMAU];
    bit                  lc;
    logic [SYN_W-1:0]    s_est;
    logic [NQ-1:0]       err;
    int                  rounds_used;
    // event counts of the last run
    int n_pass, n_chunk_acc, n_bypass, n_level [LVLW], n_relu0, n_leaky_neg, n_sat, n_loads, n_shared_w;

    function new();
      for (int i = 0; i < BMEM_DEPTH; i++) bmem[i] = '0;
      for (int i = 0; i < NI_DEPTH; i++) ni[i] = '0;
      for (int i = 0; i <= SYN_W; i++) lut[i] = '0;
    endfunction

    // ------------------------------------------------------------ arithmetic
    static function automatic int sf_finish(longint s, int b, int sc, int sh, int bsh, act_e a, int lsh,
                                            output bit sat, output bit relu0, output bit leakneg);
      longint v = (s + (longint'(b) <<< bsh)) * sc;
      if (sh != 0) v = (v + (longint'(1) <<< (sh - 1))) >>> sh;
      relu0 = 0; leakneg = 0; sat = 0;
      if (a == ACT_RELU && v < 0) begin v = 0; relu0 = 1; end
      if (a == ACT_LEAKY && v < 0) begin v = v >>> lsh; leakneg = 1; end
      if (v > 127) begin v = 127; sat = 1; end
      if (v < -128) begin v = -128; sat = 1; end
      return int'(v);
    endfunction

    function automatic int wbyte(wword_t w, int c, int m, int k);
      logic signed [7:0] b = w[(c*VEC + m*MK + k)*8 +: 8];
      return int'(b);
    endfunction

    // one NPE pass: returns the NLANE outputs and how many are written
    function automatic void pass(instr_t ir, output logic signed [DW-1:0] outv [NLANE], output int nout, output bit wr);
      layer_info_t inf = ni[ir.layer];
      int lvl = int'(inf.level);
      int G = NMAU >> lvl;
      longint mres [NCOL][NMAU];
      n_pass++;
      n_level[lvl]++;
      for (int o = 0; o < NLANE; o++) outv[o] = '0;
      for (int c = 0; c < NCOL; c++)
        for (int m = 0; m < NMAU; m++) begin
          mres[c][m] = 0;
          for (int k = 0; k < MK; k++) begin
            int a = (int'(ir.src) + m*int'(inf.mstride) + k*int'(inf.kstride)) % DREG_DEPTH;
            int w = wbyte(bank[ir.wbank], c, m, k);
            if (w != 0) mres[c][m] += longint'(int'(dreg[a])) * w;
          end
        end
      wr = ir.last;
      nout = int'(inf.n_out);
      if (ir.first && ir.last) n_bypass++;
      else n_chunk_acc++;
      for (int c = 0; c < NCOL; c++)
        for (int g = 0; g < G; g++) begin
          longint x = 0;
          for (int m = g << lvl; m < (g+1) << lvl; m++) x += mres[c][m];
          x = ir.first ? x : acc[c][g] + x;
          if (!ir.last) acc[c][g] = x;
          else begin
            int o = c*G + g;
            int be = (int'(ir.bias_base) + o) % BMEM_DEPTH;
            bit s1, r0, ln;
            int y = sf_finish(x, int'($signed(bmem[be][7:0])), int'(bmem[be][15:8]), int'(inf.shift),
                              int'(inf.bshift), inf.act, int'(inf.lshift), s1, r0, ln);
            outv[o] = DW'(y);
            if (o < nout) begin n_sat += s1; n_relu0 += r0; n_leaky_neg += ln; end
          end
        end
    endfunction

    // ------------------------------------------------------------ execution
    function automatic void store_round(int r, logic [SYN_W-1:0] bits);
      for (int i = 0; i < SYN_W; i++) begin
        dreg[(r*SYN_W + i) % DREG_DEPTH] = DW'(bits[i]);
        written[(r*SYN_W + i) % DREG_DEPTH] = 1;
      end
    endfunction

    function automatic void run();
      n_pass = 0; n_chunk_acc = 0; n_bypass = 0; n_relu0 = 0; n_leaky_neg = 0; n_sat = 0; n_loads = 0;
      for (int l = 0; l < LVLW; l++) n_level[l] = 0;
      lc = 0; s_est = '0; err = '0;
      foreach (prog[i]) begin
        instr_t ir = prog[i];
        if (ir.c_valid) begin
          logic signed [DW-1:0] outv [NLANE];
          int nout; bit wr;
          pass(ir, outv, nout, wr);
          if (wr) for (int o = 0; o < nout; o++) begin
            dreg[(int'(ir.dst) + o) % DREG_DEPTH] = outv[o];
            written[(int'(ir.dst) + o) % DREG_DEPTH] = 1;
          end
        end
        if (ir.m_valid) begin
          bank[ir.mbank] = wmem.exists(int'(ir.waddr)) ? wmem[int'(ir.waddr)] : '0;
          n_loads++;
        end
        if (ir.op == C_ARGMAX) begin
          int best = 0;
          for (int j = 1; j < (1 << ir.am_nbits); j++)
            if (dreg[(int'(ir.am_src) + j) % DREG_DEPTH] > dreg[(int'(ir.am_src) + best) % DREG_DEPTH]) best = j;
          if (ir.am_lc) lc = best[0];
          else for (int b = 0; b < int'(ir.am_nbits); b++)
            if (int'(ir.am_bitpos) + b < SYN_W) s_est[int'(ir.am_bitpos) + b] = best[b];
        end
        if (ir.op == C_COMBINE) begin
          err = lc ? lut[0] : '0;
          for (int k = 0; k < SYN_W; k++) if (s_est[k]) err ^= lut[k+1];
        end
      end
    endfunction

    // cycle (relative to the cycle `start` is high, = 0) at which each word
    // executes, given the cycle each syndrome round is strobed in
    function automatic void predict(int round_cyc[$], output int exec_cyc[$], output int n_wait_syn,
                                    output int n_wait_ld, output int n_wait_sync);
      int t = 1;              // cycle before the first RUN cycle
      int last_issue = -100;
      int prev_ld_cyc = -100;
      bit prev_ld_bank = 0;
      n_wait_syn = 0; n_wait_ld = 0; n_wait_sync = 0;
      exec_cyc.delete();
      foreach (prog[i]) begin
        instr_t ir = prog[i];
        int e = t + 1;
        if (ir.op == C_WAITSYN && ir.rounds != 0) begin
          int ri, need;
          ri = int'(ir.rounds) - 1;
          need = round_cyc[ri] + 1;
          if (need > e) begin e = need; n_wait_syn++; end
        end
        if ((ir.c_valid && ir.sync) || ir.op == C_ARGMAX || ir.op == C_COMBINE || ir.op == C_END)
          if (last_issue + 5 > e) begin e = last_issue + 5; n_wait_sync++; end
        if (ir.c_valid && prev_ld_cyc == e - 1 && prev_ld_bank == ir.wbank) begin e = e + 1; n_wait_ld++; end
        exec_cyc.push_back(e);
        if (ir.c_valid) last_issue = e;
        if (ir.m_valid) begin prev_ld_cyc = e; prev_ld_bank = ir.mbank; end
        t = e;
      end
    endfunction

    // ------------------------------------------------------------ host load image
    function automatic void host_image(output host_ld_t q[$]);
      host_ld_t h;
      q.delete();
      foreach (prog[i]) begin
        h = '0; h.valid = 1; h.target = LD_IMEM; h.addr = HAW'(i); h.data = HW'(prog[i]); q.push_back(h);
      end
      for (int i = 0; i < NI_DEPTH; i++) begin
        h = '0; h.valid = 1; h.target = LD_NI; h.addr = HAW'(i); h.data = HW'(ni[i]); q.push_back(h);
      end
      foreach (wmem[a])
        for (int p = 0; p < WLANES; p++) begin
          h = '0; h.valid = 1; h.target = LD_WMEM; h.addr = HAW'(a * WLANES + p);
          h.data = wmem[a][p*HW +: HW]; q.push_back(h);
        end
      for (int i = 0; i < BMEM_DEPTH; i++) begin
        h = '0; h.valid = 1; h.target = LD_BMEM; h.addr = HAW'(i); h.data = HW'(bmem[i]); q.push_back(h);
      end
      for (int i = 0; i <= SYN_W; i++) begin
        h = '0; h.valid = 1; h.target = LD_LUT; h.addr = HAW'(i); h.data = HW'(lut[i]); q.push_back(h);
      end
    endfunction

    // ------------------------------------------------------------ toy network
    static function automatic wword_t rnd_word();
      wword_t w;
      for (int i = 0; i < WBYTES/4; i++) w[i*32 +: 32] = $urandom;
      return w;
    endfunction

    static function automatic layer_info_t mk_info(act_e a, int sh, int bsh, int lsh, int lvl, int ms, int ks, int nout);
      layer_info_t x;
      x.act = a; x.shift = 5'(sh); x.bshift = 5'(bsh); x.lshift = 3'(lsh);
      x.level = LVLW'(lvl); x.mstride = 8'(ms); x.kstride = 8'(ks); x.n_out = 8'(nout);
      return x;
    endfunction

    // passes: list of (instr with compute fields), each with a weight word id;
    // banks and the look-ahead loads are filled in here
    function automatic void add_passes(instr_t ps[$], int wid[$]);
      // first word goes to bank 0 ahead of everything
      instr_t first_ld = '0;
      int cur_bank = 0;
      int n = ps.size();
      first_ld.m_valid = 1; first_ld.waddr = WAW'(wid[0]); first_ld.mbank = 0;
      prog.push_back(first_ld);
      for (int i = 0; i < n; i++) begin
        instr_t ir = ps[i];
        if (i > 0 && wid[i] != wid[i-1]) cur_bank ^= 1;
        ir.c_valid = 1;
        ir.wbank = cur_bank[0];
        // the first pass of a word fetches the next different word into the other bank
        if (i == 0 || wid[i] != wid[i-1]) begin
          for (int j = i + 1; j < n; j++)
            if (wid[j] != wid[i]) begin
              ir.m_valid = 1; ir.waddr = WAW'(wid[j]); ir.mbank = ~cur_bank[0];
              break;
            end
        end
        prog.push_back(ir);
      end
    endfunction

    function automatic void build_toy(int T);
      instr_t ps[$];
      int wid[$];
      instr_t ir;
      int nsyn = T * SYN_W;
      int l0_passes = (nsyn + VEC - 1) / VEC;
      prog.delete();
      wmem.delete();
      for (int i = 0; i < BMEM_DEPTH; i++) bmem[i] = 16'({8'($urandom_range(64, 255)), 8'($urandom)});
      for (int i = 0; i <= SYN_W; i++) lut[i] = NQ'({$urandom, $urandom, $urandom});
      // layer descriptors
      ni[0] = mk_info(ACT_RELU,  10, 2, 0, 0, MK, 1, NLANE);  // stepper conv: 16 windows x 8 channels
      ni[1] = mk_info(ACT_LEAKY, 17, 6, 3, $clog2(NMAU), MK, 1, NCOL);  // FC 512 -> 128, 4 chunks
      ni[2] = mk_info(ACT_RELU,  16, 4, 0, 3, MK, 1, 2*NCOL);  // head hidden: 2 neurons/column
      ni[3] = mk_info(ACT_NONE,  15, 3, 0, 0, 0, 1, 64);        // head output: 128 neurons of 8 inputs
      ni[4] = mk_info(ACT_NONE,  15, 3, 0, 0, 0, 1, 2);         // logical-class head output
      ni[5] = mk_info(ACT_RELU,  16, 4, 0, 3, MK, 1, NCOL);     // head hidden, second half
      // weights: word 0 = conv kernel, replicated over the MAUs of each column
      begin
        wword_t w = rnd_word();
        for (int c = 0; c < NCOL; c++)
          for (int m = 1; m < NMAU; m++)
            for (int k = 0; k < MK; k++)
              w[(c*VEC + m*MK + k)*8 +: 8] = w[(c*VEC + k)*8 +: 8];
        wmem[0] = w;
      end
      for (int i = 1; i < 1 + 64 + 2 + 3; i++) wmem[i] = rnd_word();
      // ---- layer 0: stepper conv over the rounds, started as rounds arrive
      for (int p = 0; p < l0_passes; p++) begin
        int s = (p * VEC + VEC > nsyn) ? nsyn - VEC : p * VEC;
        ir = '0;
        ir.op = C_WAITSYN; ir.rounds = 8'((s + VEC + SYN_W - 1) / SYN_W);
        ir.layer = 0; ir.src = DAW'(s); ir.dst = DAW'(1024 + p*VEC); ir.bias_base = 0;
        ir.first = 1; ir.last = 1;
        ps.push_back(ir); wid.push_back(0);
      end
      // ---- layer 1: FC, 16 groups of 8 neurons, 4 chunks of 128 inputs
      for (int g = 0; g < 16; g++)
        for (int ch = 0; ch < 4; ch++) begin
          ir = '0;
          ir.layer = 1; ir.src = DAW'(1024 + ch*VEC); ir.dst = DAW'(2048 + g*NCOL);
          ir.bias_base = BAW'(128 + g*NCOL);
          ir.first = (ch == 0); ir.last = (ch == 3); ir.sync = (g == 0 && ch == 0);
          ps.push_back(ir); wid.push_back(1 + g*4 + ch);
        end
      // ---- layer 2: hidden layer of the three heads (24 neurons), AT tap level 3
      for (int p = 0; p < 2; p++) begin
        ir = '0;
        ir.layer = (p == 0) ? 0 + 2 : 5; ir.src = 2048; ir.dst = DAW'(2304 + p*16);
        ir.bias_base = BAW'(512 + p*16); ir.first = 1; ir.last = 1; ir.sync = (p == 0);
        ps.push_back(ir); wid.push_back(65 + p);
      end
      // ---- layer 3: head outputs, one neuron per MAU (tap level 0)
      for (int h = 0; h < 3; h++) begin
        ir = '0;
        ir.layer = (h == 0) ? 4 : 3; ir.src = DAW'(2304 + h*8); ir.dst = DAW'(2560 + h*128);
        ir.bias_base = BAW'(1024 + h*128); ir.first = 1; ir.last = 1; ir.sync = (h == 0);
        ps.push_back(ir); wid.push_back(67 + h);
      end
      add_passes(ps, wid);
      // ---- argmax of the three heads, combine, end
      ir = '0; ir.op = C_ARGMAX; ir.am_src = 2560;       ir.am_nbits = 1; ir.am_lc = 1; prog.push_back(ir);
      ir = '0; ir.op = C_ARGMAX; ir.am_src = 2560 + 128; ir.am_nbits = 6; ir.am_bitpos = 0; prog.push_back(ir);
      ir = '0; ir.op = C_ARGMAX; ir.am_src = 2560 + 256; ir.am_nbits = 6; ir.am_bitpos = 6; prog.push_back(ir);
      ir = '0; ir.op = C_COMBINE; prog.push_back(ir);
      ir = '0; ir.op = C_END; prog.push_back(ir);
      rounds_used = T;
    endfunction
  endclass
endpackage
