// control_unit: instruction fetch, instruction decoder, NPE scheduler and
// register file manager of the programmable decoder.
//
// A decoding starts with `start` (one per QEC cycle): the syndrome round
// counter is cleared, the program counter goes to 0 and the first VLIW word is
// fetched (one cycle, the instruction memory reads synchronously). From then on
// one VLIW word is executed per cycle unless it has to wait. Each word has
//  * a control slot: NOP, WAITSYN (wait until `rounds` syndrome rounds are in;
//    this is how a program starts on early rounds before the last one arrives,
//    the sliding-window decoding of the paper), ARGMAX and COMBINE (commands
//    to the error-combination LUT) and END;
//  * a computation slot for the NPE scheduler: one NPE pass (layer descriptor
//    from the network information table, operand base, destination, bias base,
//    first/last chunk flags, weight bank);
//  * a memory-transfer slot for the register file manager: read one weight
//    word from the parameter file into a weight register bank. The word arrives
//    one cycle later and is written into the bank at the end of that cycle.
// The word waits (nothing of it is executed) while
//  * its pass reads a weight bank that a transfer is still filling,
//  * it has sync=1, or its control slot is ARGMAX/COMBINE/END, and the NPE
//    still has passes in flight (read-after-write through the data register
//    file),
//  * it is WAITSYN and fewer rounds have arrived.
// The FSM is IDLE -> FETCH -> RUN -> IDLE (at END, with a one-cycle `done`).
// The paper gives the split into instruction decoder, NPE scheduler (an FSM)
// and register file manager, VLIW words, and the two instruction groups; the
// field layout, the control slot and the interlocks are this design's choices.
// Most outputs are fields of the current instruction word (or of its layer
// descriptor) passed straight through: decoding a VLIW word is wiring, and
// the logic of this block is the sequencing and the wait conditions.
module control_unit
  import npe_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  // syndrome rounds
  input  logic                 syn_valid,
  output logic [7:0]           syn_round,   // index the incoming round is stored at
  output logic [7:0]           rounds,      // rounds received so far
  // instruction memory
  output logic [IAW-1:0]       imem_raddr,
  input  instr_t               imem_rdata,
  // network information
  output logic [NIW-1:0]       ni_layer,
  input  layer_info_t          ni_info,
  // NPE scheduler
  input  logic                 npe_busy,
  output logic                 npe_issue,
  output npe_ctl_t             npe_ctl,
  output logic [DAW-1:0]       op_src,
  output logic [7:0]           op_mstride,
  output logic [7:0]           op_kstride,
  output logic                 op_wbank,
  // register file manager
  output logic                 w_re,
  output logic [WAW-1:0]       w_addr,
  output logic                 wr_en,
  output logic                 wr_bank,
  // error combination
  output logic                 am_go,
  output logic [DAW-1:0]       am_src,
  output logic [2:0]           am_nbits,
  output logic [5:0]           am_bitpos,
  output logic                 am_lc,
  output logic                 comb,
  output logic                 running,
  output logic                 done
);
  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_RUN} state_e;
  state_e          state;
  logic [IAW-1:0]  pc;
  instr_t          ir;
  logic            ld_pend;      // a weight transfer is in flight
  logic            ld_bank;
  logic            stall, go;

  assign ir = imem_rdata;

  // ---------------------------------------------------------------- rounds
  assign syn_round = start ? 8'd0 : rounds;
  always_ff @(posedge clk)
    if (!rst_n)          rounds <= '0;
    else if (start)      rounds <= syn_valid ? 8'd1 : 8'd0;
    else if (syn_valid)  rounds <= rounds + 8'd1;

  // ---------------------------------------------------------------- decode
  always_comb begin
    stall = 1'b0;
    if (ir.c_valid && ld_pend && ld_bank == ir.wbank) stall = 1'b1;
    if (ir.c_valid && ir.sync && npe_busy)            stall = 1'b1;
    unique case (ir.op)
      C_WAITSYN:                 if (rounds < ir.rounds) stall = 1'b1;
      C_ARGMAX, C_COMBINE, C_END: if (npe_busy)          stall = 1'b1;
      default: ;
    endcase
  end
  assign go = (state == S_RUN) && !stall;

  assign ni_layer   = ir.layer;
  assign op_src     = ir.src;
  assign op_mstride = ni_info.mstride;
  assign op_kstride = ni_info.kstride;
  assign op_wbank   = ir.wbank;

  assign npe_issue           = go && ir.c_valid;
  assign npe_ctl.info        = ni_info;
  assign npe_ctl.dst         = ir.dst;
  assign npe_ctl.bias_base   = ir.bias_base;
  assign npe_ctl.first       = ir.first;
  assign npe_ctl.last        = ir.last;

  assign w_re   = go && ir.m_valid;
  assign w_addr = ir.waddr;
  assign wr_en  = ld_pend;
  assign wr_bank = ld_bank;

  assign am_go     = go && ir.op == C_ARGMAX;
  assign am_src    = ir.am_src;
  assign am_nbits  = ir.am_nbits;
  assign am_bitpos = ir.am_bitpos;
  assign am_lc     = ir.am_lc;
  assign comb      = go && ir.op == C_COMBINE;
  assign running   = state != S_IDLE;

  assign imem_raddr = (state == S_RUN && go) ? pc + IAW'(1) : (state == S_RUN ? pc : '0);

  // ---------------------------------------------------------------- sequencing
  always_ff @(posedge clk)
    if (!rst_n) begin
      state   <= S_IDLE;
      pc      <= '0;
      ld_pend <= 1'b0;
      ld_bank <= 1'b0;
      done    <= 1'b0;
    end else begin
      done    <= 1'b0;
      ld_pend <= w_re;
      if (w_re) ld_bank <= ir.mbank;
      if (start) begin
        state <= S_FETCH;
        pc    <= '0;
      end else begin
        unique case (state)
          S_FETCH: state <= S_RUN;
          S_RUN: if (go) begin
            pc <= pc + IAW'(1);
            if (ir.op == C_END) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
          default: ;
        endcase
      end
    end

  // the NPE is never issued a pass outside a running program
  a_issue_run: assert property (@(posedge clk) disable iff (!rst_n) npe_issue |-> state == S_RUN);
  // a pass never reads the bank being filled
  a_bank: assert property (@(posedge clk) disable iff (!rst_n) npe_issue && ld_pend |-> ld_bank != ir.wbank);
endmodule
