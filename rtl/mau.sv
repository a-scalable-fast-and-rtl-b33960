// mau: multiplication-addition unit of the NPE MA stage.
//
// Multiplies MK int8 data operands by MK int8 weights and adds the products
// with a balanced adder tree into one MAUW-bit signed sum, as the paper's
// first NPE stage does ("multiply two sets of inputs and add all element-wise
// products"). Purely combinational; the stage register sits in the NPE.
module mau
  import npe_pkg::*;
#(
  parameter int K = MK
) (
  input  logic signed [DW-1:0]                  d [K],
  input  logic signed [DW-1:0]                  w [K],
  output logic signed [2*DW+$clog2(K)-1:0]      y
);
  localparam int YW = 2*DW + $clog2(K);

  always_comb begin
    logic signed [YW-1:0] p [K];
    for (int k = 0; k < K; k++) p[k] = YW'(d[k] * w[k]);
    // pairwise reduction, in place
    for (int span = 1; span < K; span *= 2)
      for (int k = 0; k + span < K; k += 2*span)
        p[k] = p[k] + p[k+span];
    y = p[0];
  end
endmodule
