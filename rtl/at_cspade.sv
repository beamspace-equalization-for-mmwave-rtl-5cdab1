// at_cspade: fully unrolled adder-tree (AT) CSPADE beamspace equalizer.
//
// Computes s_hat = W y for a B-beam, U-user massive MIMO uplink, one complex
// matrix-vector product per clock cycle. W is the U x B beamspace LMMSE matrix
// (12-bit, 11 fractional bits), y the beamspace receive vector (9-bit,
// 1 fractional bit, sign-extended onto the 12-bit ports), s_hat is 13-bit with
// 8 fractional bits.
//
// Loading W: hold lw high for U cycles and present row u (u = 0..U-1) in the
// u-th of them on x_re/x_im. Equalizing: with lw low, every cycle's x_re/x_im is
// a receive vector y.
//
// Complex sparsity-adaptive equalization (CSPADE): one threshold unit per beam
// compares max(|Re x_b|, |Im x_b|) with tau_w (while loading) or tau_y
// (while equalizing) and broadcasts the result to the CM of beam b in all U
// DOTPs. With sp high, a CM whose stored weight and current input are both
// below their thresholds freezes its registers and contributes 0 to the sum;
// with sp low every product is computed. Thresholds are unsigned, in LSBs of
// the x ports (tau_w in W units of 2^-11, tau_y in y units of 2^-1).
//
// Timing: s_re/s_im for the input of cycle t appear in cycle t + LAT with
// LAT = 2 + clog2(B) + 1 (9 for B = 64); s_valid marks outputs that come from a
// cycle with lw low. s_valid is this design's addition, as are the reset values
// and the assertion that every LW burst lasts exactly U cycles.
module at_cspade
  import cspade_pkg::*;
#(
  parameter int unsigned B = B_DEF,
  parameter int unsigned U = U_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 lw,
  input  logic                 sp,
  input  logic [TW-1:0]        tau_y,
  input  logic [TW-1:0]        tau_w,
  input  logic signed [XW-1:0] x_re [B],
  input  logic signed [XW-1:0] x_im [B],
  output logic signed [SW-1:0] s_re [U],
  output logic signed [SW-1:0] s_im [U],
  output logic                 s_valid
);
  localparam int unsigned LAT = CM_LAT + ((B > 1) ? $clog2(B) : 1) + 1;

  logic [B-1:0]   c;
  logic [LAT-1:0] vld_sr;

  // threshold comparison, shared by all DOTPs
  for (genvar b = 0; b < B; b++) begin : g_thr
    thr_cmp u_thr (
      .lw, .tau_y, .tau_w,
      .x_re (x_re[b]),
      .x_im (x_im[b]),
      .c    (c[b])
    );
  end

  // one DOTP per user
  for (genvar u = 0; u < U; u++) begin : g_dotp
    cspade_dotp #(.B(B), .U(U), .IDX(u)) u_dotp (
      .clk, .rst_n, .lw, .sp, .c, .x_re, .x_im,
      .s_re (s_re[u]),
      .s_im (s_im[u])
    );
  end

  // output-valid pipeline
  always_ff @(posedge clk) begin
    if (!rst_n) vld_sr <= '0;
    else        vld_sr <= {vld_sr[LAT-2:0], !lw};
  end
  assign s_valid = vld_sr[LAT-1];

  // Loading rule: every LW burst lasts exactly U cycles, one row of W per cycle.
  localparam int unsigned RW = $clog2(U + 2);
  logic [RW-1:0] lw_run;

  always_ff @(posedge clk) begin
    if (!rst_n || !lw)            lw_run <= '0;
    else if (lw_run <= RW'(U))    lw_run <= lw_run + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst_n && !lw && lw_run != '0)
      assert (lw_run == RW'(U))
        else $error("at_cspade: LW burst of %0d cycles, expected U=%0d", lw_run, U);
  end

endmodule
