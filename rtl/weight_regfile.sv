// weight_regfile: double-buffered weight register file.
//
// Two banks, each holding the weights of one NPE pass (WBYTES bytes). A memory
// transfer writes the word arriving from the parameter file into bank wr_bank
// while the NPE reads bank rd_bank, so that reading parameter memory overlaps
// NPE execution as the paper intends. The double buffering itself is this
// design's way of realising that overlap. Writes take effect at the clock
// edge; rd_word is combinational. Reset clears both banks.
module weight_regfile
  import npe_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic                wr_bank,
  input  logic [WBYTES*8-1:0] wr_word,
  input  logic                rd_bank,
  output logic [WBYTES*8-1:0] rd_word
);
  logic [WBYTES*8-1:0] bank [2];

  always_ff @(posedge clk)
    if (!rst_n) begin
      bank[0] <= '0;
      bank[1] <= '0;
    end else if (wr_en)
      bank[wr_bank] <= wr_word;

  assign rd_word = bank[rd_bank];
endmodule
