// sf_unit: one lane of the NPE special-function (SF) stage.
//
// Receives one adder-tree result per pass. When a layer's input vector is too
// long for one pass it is split into chunks; the lane's accumulator adds the
// chunks up (first = start a new sum, last = the final chunk). A neuron that
// fits into one pass (first and last together) bypasses the accumulator. On the
// last chunk the sum is finished as
//     v = ((sum + (bias <<< bshift)) * scale + 2^(shift-1)) >>> shift
//     y = sat_int8( act(v) ),  act = none | ReLU | LeakyReLU (v<0: v >>> lshift)
// and registered, with y_valid high for one cycle. The paper gives the order
// bias -> scaling -> activation -> int8 quantisation and the accumulator with
// bypass; the rounding, the bias shift and the LeakyReLU slope 2^-lshift are
// this design's choices. Latency: one cycle from en to y/y_valid.
module sf_unit
  import npe_pkg::*;
#(
  parameter int XW = ATW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 first,
  input  logic                 last,
  input  logic signed [XW-1:0] x,
  input  logic signed [DW-1:0] bias,
  input  logic [DW-1:0]        scale,
  input  act_e                 act,
  input  logic [4:0]           shift,
  input  logic [4:0]           bshift,
  input  logic [2:0]           lshift,
  output logic signed [DW-1:0] y,
  output logic                 y_valid
);
  localparam int VW = ACCW + DW + 2;

  logic signed [ACCW-1:0] acc;
  logic signed [ACCW-1:0] sum;
  logic signed [VW-1:0]   v, r;
  logic signed [DW-1:0]   q;

  always_comb begin
    sum = first ? ACCW'(x) : acc + ACCW'(x);
    v   = (VW'(sum) + (VW'(bias) <<< bshift)) * $signed({1'b0, scale});
    if (shift != 0) r = (v + (VW'(1) <<< (shift - 5'd1))) >>> shift;
    else            r = v;
    unique case (act)
      ACT_RELU:  if (r < 0) r = '0;
      ACT_LEAKY: if (r < 0) r = r >>> lshift;
      default: ;
    endcase
    if (r > VW'(127))       q = 8'sd127;
    else if (r < -VW'(128)) q = -8'sd128;
    else                    q = r[DW-1:0];
  end

  always_ff @(posedge clk)
    if (!rst_n) begin
      acc     <= '0;
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= en && last;
      if (en && !last) acc <= sum;
      if (en && last)  y   <= q;
    end
endmodule
