// cspade_pkg: widths and helper functions shared by the CSPADE equalizer.
//
// The fixed-point formats follow the paper's table of equalizer signals:
//   y     (beamspace receive vector)  9 bits, 1 fractional bit
//   W     (beamspace LMMSE matrix)   12 bits, 11 fractional bits
//   s_hat (equalizer output)         13 bits, 8 fractional bits
// The shared input ports carry either a row of W or y, so they are as wide as
// the wider of the two (12 bits); y arrives sign-extended. The threshold width
// and the full-precision internal widths are this design's own choice.
package cspade_pkg;

  localparam int unsigned B_DEF  = 64;  // beams / BS antennas
  localparam int unsigned U_DEF  = 8;   // users (rows of W)

  localparam int unsigned YW     = 9;   // y word width
  localparam int unsigned YF     = 1;   // y fractional bits
  localparam int unsigned WW     = 12;  // W word width
  localparam int unsigned WF     = 11;  // W fractional bits
  localparam int unsigned SW     = 13;  // s_hat word width
  localparam int unsigned SF     = 8;   // s_hat fractional bits

  localparam int unsigned XW     = (WW > YW) ? WW : YW;  // shared input port width
  localparam int unsigned TW     = XW;                   // threshold width (unsigned)
  localparam int unsigned PW     = YW + WW + 1;          // complex product, full precision
  localparam int unsigned PF     = YF + WF;              // fractional bits of a product

  // Cycles from an input vector on the x ports to its product at a CM output.
  localparam int unsigned CM_LAT = 2;

  // Absolute value of an XW-bit two's-complement number as an XW-bit unsigned
  // number (-2^(XW-1) maps to 2^(XW-1), which still fits).
  function automatic logic [XW-1:0] abs_x(input logic signed [XW-1:0] v);
    return v[XW-1] ? XW'(-v) : XW'(v);
  endfunction

endpackage
