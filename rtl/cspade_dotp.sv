// cspade_dotp: one dot-product unit (DOTP) of the adder-tree CSPADE equalizer.
//
// DOTP-u computes s_hat[u] = sum_b W[u][b] * y[b]. It holds a load controller
// (dotp_ctrl), B mute-capable complex multipliers (cspade_cm), one per beam, and
// a pipelined adder tree. All B input ports and the B comparison bits from the
// shared threshold units reach every DOTP; the controller lets this DOTP's CMs
// store weights only in cycle IDX of an LW burst, so the DOTP keeps row IDX of W.
//
// The exact sum (PF = 12 fractional bits) is converted to the output format of
// s_hat (SW = 13 bits, SF = 8 fractional bits) by dropping the 4 lowest bits
// (rounding toward minus infinity) and saturating to the 13-bit range, and is
// registered. Rounding and saturation are this design's choices; the paper gives
// only the output format.
//
// Timing: the input vector of cycle t gives s_re/s_im in cycle
// t + CM_LAT + clog2(B) + 1 (9 cycles for B = 64). One result per cycle.
module cspade_dotp
  import cspade_pkg::*;
#(
  parameter int unsigned B   = B_DEF,
  parameter int unsigned U   = U_DEF,
  parameter int unsigned IDX = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 lw,
  input  logic                 sp,
  input  logic [B-1:0]         c,
  input  logic signed [XW-1:0] x_re [B],
  input  logic signed [XW-1:0] x_im [B],
  output logic signed [SW-1:0] s_re,
  output logic signed [SW-1:0] s_im
);
  localparam int unsigned TL  = (B > 1) ? $clog2(B) : 1;  // adder-tree latency
  localparam int unsigned OW  = PW + TL;                   // exact sum width
  localparam int unsigned SH  = PF - SF;                   // bits dropped

  logic                 lw_u;
  logic signed [PW-1:0] p_re [B];
  logic signed [PW-1:0] p_im [B];
  logic signed [OW-1:0] t_re, t_im;

  dotp_ctrl #(.U(U), .IDX(IDX)) u_ctrl (
    .clk, .rst_n, .lw, .lw_u
  );

  for (genvar b = 0; b < B; b++) begin : g_cm
    cspade_cm u_cm (
      .clk, .rst_n,
      .lw   (lw_u),
      .sp,
      .c    (c[b]),
      .x_re (x_re[b]),
      .x_im (x_im[b]),
      .p_re (p_re[b]),
      .p_im (p_im[b])
    );
  end

  adder_tree #(.N(B), .IW(PW)) u_tree (
    .clk, .rst_n,
    .in_re  (p_re),
    .in_im  (p_im),
    .sum_re (t_re),
    .sum_im (t_im)
  );

  // drop SH fractional bits, then saturate to SW bits
  function automatic logic signed [SW-1:0] to_out(input logic signed [OW-1:0] v);
    logic signed [OW-1:0] sh;
    sh = v >>> SH;
    if (sh > OW'(signed'({1'b0, {(SW-1){1'b1}}})))       return {1'b0, {(SW-1){1'b1}}};
    else if (sh < OW'(signed'({1'b1, {(SW-1){1'b0}}})))  return {1'b1, {(SW-1){1'b0}}};
    else                                                 return SW'(sh);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_re <= '0;
      s_im <= '0;
    end else begin
      s_re <= to_out(t_re);
      s_im <= to_out(t_im);
    end
  end

endmodule
