// instr_mem: instruction memory of the programmable decoder.
//
// Holds the VLIW program that describes the network; the program is written
// through the host load port before decoding starts and read by the control
// unit one word per cycle. Following the paper, the program is generated
// offline and loaded into on-chip memory ahead of the quantum computation.
// This design's choices: synchronous read with one cycle of latency (rdata
// shows the word at the raddr of the previous cycle) and the host write port
// (target LD_IMEM, addr = instruction index, data[INSTR_W-1:0]).
module instr_mem
  import npe_pkg::*;
#(
  parameter int DEPTH = IMEM_DEPTH
) (
  input  logic                     clk,
  input  host_ld_t                 ld,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output instr_t                   rdata
);
  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ld.valid && ld.target == LD_IMEM)
      mem[ld.addr[$clog2(DEPTH)-1:0]] <= instr_t'(ld.data[INSTR_W-1:0]);
    rdata <= mem[raddr];
  end
endmodule
