// nn_decoder_top: neural decoding module for one rotated surface-code patch.
//
// Two programmable decoders run side by side, as the paper's two decoding
// FPGAs do: the X-error decoder infers X errors from the Z-type syndromes and
// the Z-error decoder infers Z errors from the X-type syndromes. Both get the
// same `start` (beginning of a QEC cycle) and the same round strobe syn_valid;
// each has its own program, layer table, parameters and LUT, loaded through
// the shared host port `ld` with ld_sel choosing the decoder (0 = X, 1 = Z).
// x_err / z_err give one bit per data qubit (valid with x_err_valid /
// z_err_valid) for the control logic that applies the corrections; `done`
// is high for one cycle when the later of the two programs has ended, and
// `busy` is high while either decoder is running a program.
// The readout logic feeding the syndrome ports and the control logic taking
// the error positions are outside this module.
module nn_decoder_top
  import npe_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ld_sel,
  input  host_ld_t         ld,
  input  logic             start,
  input  logic             syn_valid,
  input  logic [SYN_W-1:0] syn_z,
  input  logic [SYN_W-1:0] syn_x,
  output logic             x_err_valid,
  output logic [NQ-1:0]    x_err,
  output logic             z_err_valid,
  output logic [NQ-1:0]    z_err,
  output logic             busy,
  output logic             done
);
  host_ld_t ld_x, ld_z;
  logic     busy_x, busy_z, done_x, done_z, fin_x, fin_z;

  always_comb begin
    ld_x = ld; ld_x.valid = ld.valid && !ld_sel;
    ld_z = ld; ld_z.valid = ld.valid &&  ld_sel;
  end

  prog_decoder u_xdec (
    .clk, .rst_n, .ld(ld_x), .start, .syn_valid, .syn_bits(syn_z),
    .busy(busy_x), .done(done_x), .err_valid(x_err_valid), .err(x_err));

  prog_decoder u_zdec (
    .clk, .rst_n, .ld(ld_z), .start, .syn_valid, .syn_bits(syn_x),
    .busy(busy_z), .done(done_z), .err_valid(z_err_valid), .err(z_err));

  assign busy = busy_x || busy_z;

  // done once both programs of this QEC cycle have ended
  always_ff @(posedge clk)
    if (!rst_n || start) begin
      fin_x <= 1'b0;
      fin_z <= 1'b0;
      done  <= 1'b0;
    end else begin
      fin_x <= fin_x || done_x;
      fin_z <= fin_z || done_z;
      done  <= (fin_x || done_x) && (fin_z || done_z) && !(fin_x && fin_z);
    end
endmodule
