// thr_cmp: CSPADE threshold comparison for one beam.
//
// The complex input x = x_re + j x_im on one of the B shared input ports is
// tested against a threshold with the l-infinity-tilde norm, max(|x_re|,|x_im|):
// the absolute values of both parts are compared with the threshold and the two
// results are ANDed. The threshold is tau_w while LW is high (the ports then
// carry a row of W) and tau_y while LW is low (the ports carry y). The result c
// is 1 when the input is "small", i.e. both parts are strictly below the
// threshold, and is broadcast to the CSPADE-CM of this beam in every DOTP.
//
// Purely combinational; no clock. The LW-controlled threshold multiplexer, the
// abs units, the two comparators and the AND follow the paper. The strict "<"
// and the unsigned threshold width are this design's choices.
module thr_cmp
  import cspade_pkg::*;
#(
  parameter int unsigned XW_P = XW,
  parameter int unsigned TW_P = TW
) (
  input  logic                   lw,
  input  logic [TW_P-1:0]        tau_y,
  input  logic [TW_P-1:0]        tau_w,
  input  logic signed [XW_P-1:0] x_re,
  input  logic signed [XW_P-1:0] x_im,
  output logic                   c
);
  logic [TW_P-1:0] tau;
  logic [XW_P-1:0] abs_re, abs_im;

  always_comb begin
    tau    = lw ? tau_w : tau_y;
    abs_re = x_re[XW_P-1] ? XW_P'(-x_re) : XW_P'(x_re);
    abs_im = x_im[XW_P-1] ? XW_P'(-x_im) : XW_P'(x_im);
    c      = (32'(abs_re) < 32'(tau)) && (32'(abs_im) < 32'(tau));
  end
endmodule
