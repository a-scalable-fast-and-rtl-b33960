// npe: the three-stage neural processing engine of the programmable decoder.
//
// NCOL identical columns ("processing engines") work on one pass at a time.
// All columns see the same VEC data operands; each column has its own VEC
// weights (byte col*VEC + m*MK + k of the weight word), so each column computes
// its own neurons. A pass goes through four registers:
//   S0 operand registers (Data Ops / Weight Ops, captured on `issue`),
//   S1 MA stage: NMAU multiply-add units per column,
//   S2 AT stage: adder tree, tapped at ctl.info.level, giving G = NMAU>>level
//      sums per column,
//   S3 SF stage: accumulate or bypass, bias, scale, activation, int8.
// On the last chunk of a pass the NCOL*G results are written back to the data
// register file as one block: output o = col*G + g goes to ctl.dst + o, for
// o < ctl.info.n_out. The SF lane of output o takes the bias/scale entry
// bias_base + o, which the NPE asks for on sf_bias_base while the pass is in
// S2. Latency: a pass issued in cycle t is written back at the end of cycle
// t+4; one pass can be issued every cycle. busy is high while any pass is in
// flight. The three-stage split, the adder-tree taps and the SF accumulator
// follow the paper; the register placement and the output layout are this
// design's choices. The S3 control register keeps the whole descriptor for
// simplicity; only dst, n_out and last are used after the SF stage, so lint
// reports its other bits as unused.
module npe
  import npe_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  issue,
  input  npe_ctl_t              ctl,
  input  logic signed [DW-1:0]  ops [VEC],
  input  logic [WBYTES*8-1:0]   wts,
  // bias / scale lookup for the pass in the AT register
  output logic [BAW-1:0]        sf_bias_base,
  input  logic signed [DW-1:0]  bias  [NLANE],
  input  logic [DW-1:0]         scale [NLANE],
  // write-back
  output logic                  wb_en,
  output logic [DAW-1:0]        wb_addr,
  output logic [7:0]            wb_n,
  output logic signed [DW-1:0]  wb_data [NLANE],
  output logic                  busy
);
  localparam int LG = $clog2(NMAU);

  // ---------------------------------------------------------------- S0
  logic                  v0, v1, v2, v3;
  npe_ctl_t              c0, c1, c2, c3;
  logic signed [DW-1:0]  d0 [VEC];
  logic [WBYTES*8-1:0]   w0;

  always_ff @(posedge clk)
    if (!rst_n) begin
      v0 <= 1'b0; c0 <= '0; w0 <= '0;
      for (int i = 0; i < VEC; i++) d0[i] <= '0;
    end else begin
      v0 <= issue;
      if (issue) begin
        c0 <= ctl;
        w0 <= wts;
        for (int i = 0; i < VEC; i++) d0[i] <= ops[i];
      end
    end

  // ---------------------------------------------------------------- S1: MA
  logic signed [MAUW-1:0] mres [NCOL][NMAU];
  logic signed [MAUW-1:0] m1   [NCOL][NMAU];

  for (genvar c = 0; c < NCOL; c++) begin : g_col
    for (genvar m = 0; m < NMAU; m++) begin : g_mau
      logic signed [DW-1:0] dv [MK];
      logic signed [DW-1:0] wv [MK];
      for (genvar k = 0; k < MK; k++) begin : g_k
        assign dv[k] = d0[m*MK + k];
        assign wv[k] = w0[(c*VEC + m*MK + k)*DW +: DW];
      end
      mau #(.K(MK)) u_mau (.d(dv), .w(wv), .y(mres[c][m]));
    end
  end

  always_ff @(posedge clk)
    if (!rst_n) begin
      v1 <= 1'b0; c1 <= '0;
      for (int c = 0; c < NCOL; c++) for (int m = 0; m < NMAU; m++) m1[c][m] <= '0;
    end else begin
      v1 <= v0;
      if (v0) begin
        c1 <= c0;
        m1 <= mres;
      end
    end

  // ---------------------------------------------------------------- S2: AT
  logic signed [ATW-1:0] ares [NCOL][NMAU];
  logic signed [ATW-1:0] a2   [NCOL][NMAU];

  for (genvar c = 0; c < NCOL; c++) begin : g_at
    adder_tree #(.N(NMAU), .XW(MAUW), .YW(ATW)) u_at (
      .x(m1[c]), .level(c1.info.level), .y(ares[c]));
  end

  always_ff @(posedge clk)
    if (!rst_n) begin
      v2 <= 1'b0; c2 <= '0;
      for (int c = 0; c < NCOL; c++) for (int m = 0; m < NMAU; m++) a2[c][m] <= '0;
    end else begin
      v2 <= v1;
      if (v1) begin
        c2 <= c1;
        a2 <= ares;
      end
    end

  // ---------------------------------------------------------------- S3: SF
  logic [LG:0]          gsh;       // log2 of groups per column
  assign gsh = (LG+1)'(LG) - c2.info.level;
  assign sf_bias_base = c2.bias_base;

  logic signed [DW-1:0] y   [NCOL][NMAU];
  logic                 yv  [NCOL][NMAU];

  for (genvar c = 0; c < NCOL; c++) begin : g_sf
    for (genvar g = 0; g < NMAU; g++) begin : g_lane
      logic [$clog2(NLANE)-1:0] o;
      assign o = $clog2(NLANE)'((c << gsh) + g);
      sf_unit #(.XW(ATW)) u_sf (
        .clk, .rst_n,
        .en(v2), .first(c2.first), .last(c2.last), .x(a2[c][g]),
        .bias(bias[o]), .scale(scale[o]),
        .act(c2.info.act), .shift(c2.info.shift), .bshift(c2.info.bshift), .lshift(c2.info.lshift),
        .y(y[c][g]), .y_valid(yv[c][g]));
    end
  end

  always_ff @(posedge clk)
    if (!rst_n) begin
      v3 <= 1'b0; c3 <= '0;
    end else begin
      v3 <= v2;
      if (v2) c3 <= c2;
    end

  // ---------------------------------------------------------------- write-back
  logic [LG:0] wsh;
  assign wsh = (LG+1)'(LG) - c3.info.level;

  always_comb
    for (int o = 0; o < NLANE; o++) begin
      int c, g;
      c = o >> wsh;
      g = o & ((1 << wsh) - 1);
      wb_data[o] = (c < NCOL) ? y[c % NCOL][g % NMAU] : '0;
    end

  assign wb_en   = v3 && c3.last && yv[0][0];
  assign wb_addr = c3.dst;
  assign wb_n    = c3.info.n_out;
  assign busy    = v0 || v1 || v2 || v3;
endmodule
