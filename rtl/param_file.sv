// param_file: network parameter file (weights and biases).
//
// The paper splits the parameter storage in two: a weight part and a bias part,
// all quantised to 8-bit signed numbers, kept on chip so that parameter sets can
// be switched quickly during decoding, with the biases in simple registers.
// Here the weight part is a memory of WORDS wide words; one word is the full
// set of weights of one NPE pass (NCOL columns x NMAU MAUs x MK products, byte
// index col*VEC + m*MK + k). A read (w_re, w_addr) returns the word one cycle
// later on w_word. The host writes a word in WLANES pieces of 16 bytes
// (target LD_WMEM, addr = word*WLANES + piece).
// The bias part holds one {scale, bias} pair per neuron (target LD_BMEM,
// data[15:8] = scale, data[7:0] = bias); NLANE consecutive entries from
// b_base are read combinationally, one per SF lane. Keeping a per-neuron
// scale beside the bias is this design's choice (Fig. 8 prints "Bias and
// Scale Ops").
module param_file
  import npe_pkg::*;
#(
  parameter int WORDS = WMEM_WORDS,
  parameter int BDEPTH = BMEM_DEPTH
) (
  input  logic                        clk,
  input  host_ld_t                    ld,
  input  logic                        w_re,
  input  logic [$clog2(WORDS)-1:0]    w_addr,
  output logic [WBYTES*8-1:0]         w_word,
  input  logic [$clog2(BDEPTH)-1:0]   b_base,
  output logic signed [DW-1:0]        bias  [NLANE],
  output logic [DW-1:0]               scale [NLANE]
);
  localparam int LW = $clog2(WLANES);

  logic [HW-1:0] wmem [WORDS][WLANES];
  logic [15:0]   bmem [BDEPTH];

  always_ff @(posedge clk) begin
    if (ld.valid && ld.target == LD_WMEM)
      wmem[ld.addr[LW +: $clog2(WORDS)]][ld.addr[LW-1:0]] <= ld.data;
    if (ld.valid && ld.target == LD_BMEM)
      bmem[ld.addr[$clog2(BDEPTH)-1:0]] <= ld.data[15:0];
    if (w_re)
      for (int p = 0; p < WLANES; p++)
        w_word[p*HW +: HW] <= wmem[w_addr][p];
  end

  always_comb
    for (int o = 0; o < NLANE; o++) begin
      logic [$clog2(BDEPTH)-1:0] a;
      a        = b_base + ($clog2(BDEPTH))'(o);
      bias[o]  = bmem[a][7:0];
      scale[o] = bmem[a][15:8];
    end
endmodule
