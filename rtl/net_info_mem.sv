// net_info_mem: network information table.
//
// One descriptor per network layer (activation, requantisation shifts, the
// adder-tree tap level, operand gather strides and the number of outputs of a
// pass). The paper only says that basic network information is pre-stored in
// memory and read by the control unit at run time; the descriptor fields are
// this design's own (see layer_info_t in npe_pkg). Written by the host
// (target LD_NI, addr = layer id); read combinationally, since the table is
// small (NI_DEPTH registers).
module net_info_mem
  import npe_pkg::*;
#(
  parameter int DEPTH = NI_DEPTH
) (
  input  logic                     clk,
  input  host_ld_t                 ld,
  input  logic [$clog2(DEPTH)-1:0] layer,
  output layer_info_t              info
);
  layer_info_t tbl [DEPTH];

  always_ff @(posedge clk)
    if (ld.valid && ld.target == LD_NI)
      tbl[ld.addr[$clog2(DEPTH)-1:0]] <= layer_info_t'(ld.data[LINFO_W-1:0]);

  assign info = tbl[layer];
endmodule
