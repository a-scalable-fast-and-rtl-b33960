// data_regfile: data register file of the programmable decoder.
//
// A byte-wide register file that holds the syndrome rounds of the current QEC
// cycle and the int8 activations of every network layer. It has four ports:
//  * syndrome write: round r, bit i is stored as the int8 value 0 or 1 at
//    address r*SYN_W + i (whole round in one cycle, syn_we);
//  * operand gather for the MA stage ("Data Ops"): element (m,k) of the
//    VEC-long operand vector is the byte at src + m*mstride + k*kstride;
//  * SF-stage write-back: wb_n consecutive bytes from wb_addr (wb_en);
//  * an AM_MAX-byte window from win_addr for the argmax of the output scores.
// Addresses wrap modulo DEPTH. A write-back to the same byte as a syndrome
// write wins. Reads are combinational; writes take effect at the clock edge
// and are blocked during reset. Like a memory, the contents are not reset: a
// program reads only bytes that a syndrome round or an earlier pass wrote
// (unused operands meet zero weights). The paper fixes the role of the file (results are
// written back and fetched as input of the next layer); the layout and the
// strided gather are this design's choices.
module data_regfile
  import npe_pkg::*;
#(
  parameter int DEPTH = DREG_DEPTH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // syndrome input
  input  logic                      syn_we,
  input  logic [7:0]                syn_round,
  input  logic [SYN_W-1:0]          syn_bits,
  // operand gather
  input  logic [$clog2(DEPTH)-1:0]  src,
  input  logic [7:0]                mstride,
  input  logic [7:0]                kstride,
  output logic signed [DW-1:0]      ops [VEC],
  // write-back
  input  logic                      wb_en,
  input  logic [$clog2(DEPTH)-1:0]  wb_addr,
  input  logic [7:0]                wb_n,
  input  logic signed [DW-1:0]      wb_data [NLANE],
  // argmax window
  input  logic [$clog2(DEPTH)-1:0]  win_addr,
  output logic signed [DW-1:0]      win [AM_MAX]
);
  localparam int AW = $clog2(DEPTH);
  logic signed [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (syn_we)
        for (int i = 0; i < SYN_W; i++)
          mem[AW'(int'(syn_round) * SYN_W + i)] <= DW'(syn_bits[i]);
      if (wb_en)
        for (int o = 0; o < NLANE; o++)
          if (o < int'(wb_n)) mem[wb_addr + AW'(o)] <= wb_data[o];
    end
  end

  always_comb begin
    for (int m = 0; m < NMAU; m++)
      for (int k = 0; k < MK; k++)
        ops[m*MK + k] = mem[src + AW'(m * int'(mstride)) + AW'(k * int'(kstride))];
    for (int j = 0; j < AM_MAX; j++)
      win[j] = mem[win_addr + AW'(j)];
  end

  // a pass never writes more than one result per SF lane
  a_wb_n: assert property (@(posedge clk) disable iff (!rst_n) wb_en |-> wb_n <= 8'(NLANE));
endmodule
