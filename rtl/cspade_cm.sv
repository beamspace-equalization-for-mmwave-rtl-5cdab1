// cspade_cm: mute-capable complex multiplier of the CSPADE equalizer (CSPADE-CM).
//
// One CSPADE-CM sits at every (user u, beam b) position of the fully unrolled
// matrix-vector multiplier and computes W[u][b] * y[b].
//
// Weight phase (lw = LW-u = 1): the x ports carry W[u][b]; it is stored in the
// w registers together with its smallness bit c (stored as c_w).
// Data phase (lw = 0): the x ports carry y[b] (sign-extended to the port width).
// The unit-active flag is UA = !(sp & c & c_w): the complex multiplication is
// skipped only when save-power is on and both the weight and the input are
// below their thresholds. When UA is 1 the y registers capture the input
// (enable UA & !lw); the four real multipliers and two adders form
//   Re = yR*wR - yI*wI,   Im = yR*wI + yI*wR
// into the output registers, enabled by UA1 (UA one cycle later). The output
// multiplexers, selected by UA2 (UA two cycles later), give 0 + j0 for a skipped
// product. When UA is 0 the y registers, multipliers, adders and output
// registers do not toggle, which is where the power is saved.
//
// Timing: the product of the input presented in cycle t appears on p_re/p_im in
// cycle t+2 (CM_LAT). One product per cycle.
//
// Register structure, enables and the position of the muting multiplexers after
// the output registers follow the paper. Full-precision product width, storing
// only the low YW bits of the port as y, and zero reset of every register are
// this design's choices.
module cspade_cm
  import cspade_pkg::*;
#(
  parameter int unsigned XW_P = XW,
  parameter int unsigned YW_P = YW,
  parameter int unsigned WW_P = WW,
  parameter int unsigned PW_P = YW_P + WW_P + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   lw,     // LW-u from this DOTP's controller
  input  logic                   sp,     // save power
  input  logic                   c,      // smallness bit of the current input
  input  logic signed [XW_P-1:0] x_re,
  input  logic signed [XW_P-1:0] x_im,
  output logic signed [PW_P-1:0] p_re,
  output logic signed [PW_P-1:0] p_im
);
  logic signed [WW_P-1:0] w_re, w_im;
  logic                   c_w;
  logic signed [YW_P-1:0] y_re, y_im;
  logic signed [PW_P-1:0] o_re, o_im;
  logic                   ua, ua1, ua2;

  logic signed [YW_P+WW_P-1:0] m_rr, m_ii, m_ri, m_ir;
  logic signed [PW_P-1:0]      sum_re, sum_im;

  assign ua = !(sp && c && c_w);

  // weight registers and weight comparison bit (enable LW)
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_re <= '0;
      w_im <= '0;
      c_w  <= 1'b0;
    end else if (lw) begin
      w_re <= WW_P'(x_re);
      w_im <= WW_P'(x_im);
      c_w  <= c;
    end
  end

  // input registers (enable UA & !LW)
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y_re <= '0;
      y_im <= '0;
    end else if (ua && !lw) begin
      y_re <= YW_P'(x_re);
      y_im <= YW_P'(x_im);
    end
  end

  // four real multipliers and two adders
  always_comb begin
    m_rr   = y_re * w_re;
    m_ii   = y_im * w_im;
    m_ri   = y_re * w_im;
    m_ir   = y_im * w_re;
    sum_re = PW_P'(m_rr) - PW_P'(m_ii);
    sum_im = PW_P'(m_ri) + PW_P'(m_ir);
  end

  // activity pipeline and output registers (enable UA1)
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ua1  <= 1'b0;
      ua2  <= 1'b0;
      o_re <= '0;
      o_im <= '0;
    end else begin
      ua1 <= ua;
      ua2 <= ua1;
      if (ua1) begin
        o_re <= sum_re;
        o_im <= sum_im;
      end
    end
  end

  // muting multiplexers after the output registers (select UA2)
  assign p_re = ua2 ? o_re : '0;
  assign p_im = ua2 ? o_im : '0;

endmodule
