// error_comb_lut: LUT for error combination.
//
// The network's backend ends in one score vector per marginal distribution:
// one for the logical class L_c and one for every piece s_j of the pure-error
// bits. An ARGMAX command (am_go) takes the 2^am_nbits scores in `win`, finds
// the index of the largest (the lowest index wins a tie) and stores its bits:
// bit i of the index becomes estimated bit am_bitpos+i, or, with am_lc, bit 0
// becomes the logical class. A COMBINE command (comb) then forms the error
// pattern as the XOR of LUT row 0 (the logical operator L_c) if the class is 1
// and of row k+1 (the pure error T(h_k)) for every estimated bit k that is 1,
// and presents it on `err` with a one-cycle err_valid in the next cycle. The
// LUT has 1 + SYN_W rows of NQ bits, written by the host (target LD_LUT,
// addr = row, data[NQ-1:0]). `clr` (a new decoding) clears the estimated bits.
// The LUT contents and the XOR combination follow the paper; the argmax over
// int8 scores and the command interface are this design's choices.
module error_comb_lut
  import npe_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  host_ld_t             ld,
  input  logic                 clr,
  input  logic                 am_go,
  input  logic [2:0]           am_nbits,
  input  logic [5:0]           am_bitpos,
  input  logic                 am_lc,
  input  logic signed [DW-1:0] win [AM_MAX],
  input  logic                 comb,
  output logic                 err_valid,
  output logic [NQ-1:0]        err,
  output logic                 lc,
  output logic [SYN_W-1:0]     s_est
);
  logic [NQ-1:0] lut [SYN_W + 1];

  // argmax over the first 2^am_nbits scores
  logic [5:0]           best;
  logic signed [DW-1:0] bestv;
  always_comb begin
    best  = '0;
    bestv = win[0];
    for (int j = 1; j < AM_MAX; j++)
      if (j < (1 << am_nbits) && win[j] > bestv) begin
        best  = 6'(j);
        bestv = win[j];
      end
  end

  // estimated bits after this cycle's argmax
  logic [SYN_W-1:0] s_next;
  always_comb begin
    s_next = s_est;
    for (int i = 0; i < 6; i++)
      if (i < int'(am_nbits) && int'(am_bitpos) + i < SYN_W)
        s_next[int'(am_bitpos) + i] = best[i];
  end

  logic [NQ-1:0] pattern;
  always_comb begin
    pattern = lc ? lut[0] : '0;
    for (int k = 0; k < SYN_W; k++)
      if (s_est[k]) pattern ^= lut[k+1];
  end

  always_ff @(posedge clk) begin
    if (ld.valid && ld.target == LD_LUT && int'(ld.addr) <= SYN_W)
      lut[ld.addr[$clog2(SYN_W+1)-1:0]] <= ld.data[NQ-1:0];
    if (!rst_n) begin
      lc        <= 1'b0;
      s_est     <= '0;
      err       <= '0;
      err_valid <= 1'b0;
    end else begin
      err_valid <= comb;
      if (comb) err <= pattern;
      if (clr) begin
        lc    <= 1'b0;
        s_est <= '0;
      end else if (am_go) begin
        if (am_lc) lc <= best[0];
        else       s_est <= s_next;
      end
    end
  end
endmodule
