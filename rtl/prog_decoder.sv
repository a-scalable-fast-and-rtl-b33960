// prog_decoder: programmable neural decoder for one error type.
//
// Wires the blocks of the programmable architecture together: syndrome rounds
// are stored into the data register file; the control unit fetches the VLIW
// program from the instruction memory, reads layer descriptors from the
// network information table, issues NPE passes whose operands are gathered
// from the data register file and whose weights come from the weight register
// file, and moves weight words from the network parameter file into the free
// weight bank. The NPE writes its int8 results back into the data register
// file, and the LUT for error combination turns the final scores into the
// error pattern err (one bit per data qubit, valid with err_valid).
// Interface: host load port `ld` (program, layer table, weights, biases, LUT)
// used before decoding; `start` begins a QEC cycle; one syndrome round per
// syn_valid; `done` pulses when the program has ended. Timing: one VLIW word
// per cycle when nothing waits; an NPE pass is written back 4 cycles after
// its issue; err_valid follows COMBINE by one cycle.
// The round counter of the control unit and the estimated bits held by the
// LUT block are internal state and are left unconnected here.
module prog_decoder
  import npe_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  host_ld_t         ld,
  input  logic             start,
  input  logic             syn_valid,
  input  logic [SYN_W-1:0] syn_bits,
  output logic             busy,
  output logic             done,
  output logic             err_valid,
  output logic [NQ-1:0]    err
);
  // control unit <-> memories
  logic [7:0]           syn_round;
  logic [IAW-1:0]       imem_raddr;
  instr_t               imem_rdata;
  logic [NIW-1:0]       ni_layer;
  layer_info_t          ni_info;
  // NPE
  logic                 npe_busy, npe_issue;
  npe_ctl_t             npe_ctl;
  logic [DAW-1:0]       op_src;
  logic [7:0]           op_mstride, op_kstride;
  logic                 op_wbank;
  logic signed [DW-1:0] ops [VEC];
  logic [WBYTES*8-1:0]  wts, w_word;
  logic [BAW-1:0]       sf_bias_base;
  logic signed [DW-1:0] bias [NLANE];
  logic [DW-1:0]        scale [NLANE];
  logic                 wb_en;
  logic [DAW-1:0]       wb_addr;
  logic [7:0]           wb_n;
  logic signed [DW-1:0] wb_data [NLANE];
  // weight transfer
  logic                 w_re, wr_en, wr_bank;
  logic [WAW-1:0]       w_addr;
  // error combination
  logic                 am_go, am_lc, comb;
  logic [DAW-1:0]       am_src;
  logic [2:0]           am_nbits;
  logic [5:0]           am_bitpos;
  logic signed [DW-1:0] win [AM_MAX];

  control_unit u_cu (
    .clk, .rst_n, .start, .syn_valid, .syn_round, .rounds(),
    .imem_raddr, .imem_rdata, .ni_layer, .ni_info,
    .npe_busy, .npe_issue, .npe_ctl, .op_src, .op_mstride, .op_kstride, .op_wbank,
    .w_re, .w_addr, .wr_en, .wr_bank,
    .am_go, .am_src, .am_nbits, .am_bitpos, .am_lc, .comb, .running(busy), .done);

  instr_mem    u_imem (.clk, .ld, .raddr(imem_raddr), .rdata(imem_rdata));
  net_info_mem u_ni   (.clk, .ld, .layer(ni_layer), .info(ni_info));

  param_file u_pf (
    .clk, .ld, .w_re, .w_addr, .w_word,
    .b_base(sf_bias_base), .bias, .scale);

  weight_regfile u_wrf (
    .clk, .rst_n, .wr_en, .wr_bank, .wr_word(w_word), .rd_bank(op_wbank), .rd_word(wts));

  data_regfile u_drf (
    .clk, .rst_n,
    .syn_we(syn_valid), .syn_round, .syn_bits,
    .src(op_src), .mstride(op_mstride), .kstride(op_kstride), .ops,
    .wb_en, .wb_addr, .wb_n, .wb_data,
    .win_addr(am_src), .win);

  npe u_npe (
    .clk, .rst_n, .issue(npe_issue), .ctl(npe_ctl), .ops, .wts,
    .sf_bias_base, .bias, .scale,
    .wb_en, .wb_addr, .wb_n, .wb_data, .busy(npe_busy));

  error_comb_lut u_lut (
    .clk, .rst_n, .ld, .clr(start),
    .am_go, .am_nbits, .am_bitpos, .am_lc, .win, .comb,
    .err_valid, .err, .lc(), .s_est());
endmodule
