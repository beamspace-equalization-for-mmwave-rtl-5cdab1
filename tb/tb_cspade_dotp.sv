// tb_cspade_dotp: self-checking testbench of one DOTP unit at a reduced size
// (B = 8 beams, U = 4 rows, the unit keeps row IDX = 2).
//
// The testbench plays the role of the shared threshold units: it computes the
// smallness bits c itself from fixed thresholds. It loads matrices of U rows
// (only row 2 may be stored), streams back-to-back vectors with save-power on,
// off and switching, forces saturation in both directions, and checks every
// output exactly 2 + clog2(B) + 1 = 6 cycles after its input against an integer
// model (sum of active products, floor to 8 fractional bits, saturation to 13
// bits).
module tb_cspade_dotp;
  localparam int B = 8, U = 4, IDX = 2;
  localparam int LAT = 2 + $clog2(B) + 1;
  localparam int XW = 12, SW = 13;
  localparam int SMAX = (1 << (SW - 1)) - 1, SMIN = -(1 << (SW - 1));
  localparam int TAUW = 30, TAUY = 10;
  localparam int HIST = 16;

  logic                 clk = 1'b0;
  logic                 rst_n, lw, sp;
  logic [B-1:0]         c;
  logic signed [XW-1:0] x_re [B], x_im [B];
  logic signed [SW-1:0] s_re, s_im;

  cspade_dotp #(.B(B), .U(U), .IDX(IDX)) dut (.clk, .rst_n, .lw, .sp, .c, .x_re, .x_im, .s_re, .s_im);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, row = 0;
  int n_muted = 0, n_sat = 0;
  int wr [B], wi [B];
  bit cw [B];
  bit eval [HIST];
  int er [HIST], ei [HIST];
  int xr [B], xi [B];

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit is_small(input int re, input int im, input int tau);
    int ar = (re < 0) ? -re : re;
    int ai = (im < 0) ? -im : im;
    return (ar < tau) && (ai < tau);
  endfunction

  function automatic int sat(input longint v);
    longint f = v >>> 4;
    if (f > SMAX) begin n_sat++; return SMAX; end
    if (f < SMIN) begin n_sat++; return SMIN; end
    return int'(f);
  endfunction

  task automatic apply(input bit l, input bit s);
    int k = cyc % HIST;
    if (cyc >= LAT && eval[(cyc - LAT) % HIST]) begin
      checks++;
      if (s_re !== SW'(er[(cyc - LAT) % HIST]) || s_im !== SW'(ei[(cyc - LAT) % HIST])) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: got %0d,%0dj expected %0d,%0dj", cyc, s_re, s_im,
                                    er[(cyc - LAT) % HIST], ei[(cyc - LAT) % HIST]);
      end
    end
    lw = l; sp = s;
    for (int b = 0; b < B; b++) begin
      x_re[b] = XW'(xr[b]); x_im[b] = XW'(xi[b]);
      c[b] = is_small(xr[b], xi[b], l ? TAUW : TAUY);
    end
    if (l) begin
      if (row == IDX) for (int b = 0; b < B; b++) begin wr[b] = xr[b]; wi[b] = xi[b]; cw[b] = c[b]; end
      row++;
      eval[k] = 1'b0;
    end else begin
      longint ar = 0, ai = 0;
      row = 0;
      for (int b = 0; b < B; b++) begin
        if (s && c[b] && cw[b]) n_muted++;
        else begin
          ar += longint'(wr[b]) * xr[b] - longint'(wi[b]) * xi[b];
          ai += longint'(wr[b]) * xi[b] + longint'(wi[b]) * xr[b];
        end
      end
      er[k] = sat(ar); ei[k] = sat(ai); eval[k] = 1'b1;
    end
    @(negedge clk);
    cyc++;
  endtask

  function automatic int sparse(input int tau, input int big);
    int r = $urandom_range(0, 9);
    if (r < 2) return 0;
    if (r < 6) return int'($urandom_range(0, 2 * tau - 2)) - (tau - 1);
    return int'($urandom_range(0, 2 * big)) - big;
  endfunction

  initial begin
    rst_n = 1'b0; lw = 1'b0; sp = 1'b0; c = '0;
    foreach (x_re[b]) begin x_re[b] = '0; x_im[b] = '0; xr[b] = 0; xi[b] = 0; wr[b] = 0; wi[b] = 0; cw[b] = 0; end
    foreach (eval[k]) eval[k] = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 6; m++) begin
      for (int u = 0; u < U; u++) begin
        foreach (xr[b]) begin xr[b] = sparse(TAUW, 2047); xi[b] = sparse(TAUW, 2047); end
        apply(1'b1, 1'b0);
      end
      for (int i = 0; i < 40; i++) begin
        foreach (xr[b]) begin xr[b] = sparse(TAUY, 255); xi[b] = sparse(TAUY, 255); end
        apply(1'b0, (m < 2) ? 1'b1 : (m < 4) ? 1'b0 : 1'($urandom));
      end
    end
    // saturation in both directions
    for (int u = 0; u < U; u++) begin
      foreach (xr[b]) begin xr[b] = 2047; xi[b] = 0; end
      apply(1'b1, 1'b0);
    end
    foreach (xr[b]) begin xr[b] = 255; xi[b] = 255; end
    apply(1'b0, 1'b1);
    foreach (xr[b]) begin xr[b] = -256; xi[b] = -256; end
    apply(1'b0, 1'b1);
    foreach (xr[b]) begin xr[b] = 0; xi[b] = 0; end
    for (int i = 0; i < LAT + 1; i++) apply(1'b1, 1'b0);
    checks++;
    if (n_muted == 0 || n_sat < 4) begin
      failures++;
      $display("FAIL muting (%0d) or saturation (%0d) never happened", n_muted, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
