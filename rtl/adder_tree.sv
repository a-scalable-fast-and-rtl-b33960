// adder_tree: AT stage of the NPE with taps at every depth.
//
// Adds the N results of the MA stage in log2(N) levels of pairwise adders. As
// in the paper, multiplexers can take the results out of any level instead of
// only the root: with tap `level`, lane g of y is the sum of x[g*2^level ..
// (g+1)*2^level-1] for g < N>>level, and 0 for the lanes above. Level 0 passes
// the MAU results through (N independent small dot products), level log2(N)
// gives one full sum. This lets one pass compute several narrow neurons, or
// several layers side by side. Combinational.
module adder_tree
  import npe_pkg::*;
#(
  parameter int N  = NMAU,
  parameter int XW = MAUW,
  parameter int YW = XW + $clog2(N)
) (
  input  logic signed [XW-1:0]          x [N],
  input  logic [$clog2(N):0]            level,
  output logic signed [YW-1:0]          y [N]
);
  localparam int NL = $clog2(N) + 1;

  always_comb begin
    logic signed [YW-1:0] t [NL][N];
    for (int i = 0; i < N; i++) t[0][i] = YW'(x[i]);
    for (int l = 1; l < NL; l++) begin
      for (int i = 0; i < N; i++) t[l][i] = '0;
      for (int i = 0; i < (N >> l); i++) t[l][i] = t[l-1][2*i] + t[l-1][2*i+1];
    end
    for (int i = 0; i < N; i++) begin
      y[i] = '0;
      for (int l = 0; l < NL; l++)
        if (int'(level) == l) y[i] = t[l][i];
    end
  end
endmodule
