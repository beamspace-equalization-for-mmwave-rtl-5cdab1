// tb_at_cspade: end-to-end testbench of the adder-tree CSPADE equalizer at its
// default size (B = 64 beams, U = 8 users; no parameter is overridden).
//
// The test loads a sparse random beamspace matrix W (LW high for U cycles, one
// row per cycle), streams back-to-back random sparse receive vectors y with
// save-power switched on and off, reloads W with other thresholds in the middle
// of the stream, and finally loads a matrix that drives the outputs into
// saturation. A cycle-based integer model computes every output:
//   s[u] = sat13( floor( sum_b act(u,b) * W[u][b] * y[b] / 2^4 ) ),
//   act(u,b) = !(sp & (||W[u][b]|| < tau_w) & (||y[b]|| < tau_y)),
// with ||.|| = max(|re|, |im|), W in units of 2^-11, y in units of 2^-1 and s in
// units of 2^-8. Outputs and s_valid are checked exactly LAT = 9 cycles after
// the input (one vector per cycle throughput). It also counts how often each
// mechanism happened (weight loads, muted products, both-small products with SP
// off, products kept because only one operand was small, saturation,
// back-to-back outputs, SP switches) and fails if one never did. The
// multiplier activity rate seen with SP on is printed.
module tb_at_cspade;
  localparam int B = 64, U = 8;
  localparam int LAT = 2 + $clog2(B) + 1;
  localparam int XW = 12, SW = 13;
  localparam int SMAX = (1 << (SW - 1)) - 1, SMIN = -(1 << (SW - 1));
  localparam int HIST = 16;

  logic                 clk = 1'b0;
  logic                 rst_n, lw, sp;
  logic [XW-1:0]        tau_y, tau_w;
  logic signed [XW-1:0] x_re [B], x_im [B];
  logic signed [SW-1:0] s_re [U], s_im [U];
  logic                 s_valid;

  at_cspade dut (.clk, .rst_n, .lw, .sp, .tau_y, .tau_w, .x_re, .x_im, .s_re, .s_im, .s_valid);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_loads = 0, n_muted = 0, n_sp0_small = 0, n_wonly = 0, n_yonly = 0;
  int n_sat = 0, n_b2b = 0, n_spsw = 0, n_prod_sp1 = 0, n_act_sp1 = 0;
  bit prev_valid = 1'b0, prev_sp = 1'b0;

  // model state
  int wr [U][B], wi [U][B];
  bit cw [U][B];
  int row;  // index of the next row within an LW burst
  // expected outputs, indexed by cycle modulo HIST
  bit eval [HIST];
  int er [HIST][U], ei [HIST][U];

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
    longint f = v >>> 4;  // 12 -> 8 fractional bits, floor
    if (f > SMAX) begin n_sat++; return SMAX; end
    if (f < SMIN) begin n_sat++; return SMIN; end
    return int'(f);
  endfunction

  // check the outputs that belong to the input of cycle cyc-LAT
  task automatic check_outputs();
    int k;
    if (cyc < LAT) return;
    k = (cyc - LAT) % HIST;
    checks++;
    if (s_valid !== eval[k]) begin
      failures++;
      if (failures < 10) $display("FAIL cycle %0d: s_valid=%0d expected %0d", cyc, s_valid, eval[k]);
    end
    if (eval[k]) begin
      if (prev_valid) n_b2b++;
      for (int u = 0; u < U; u++) begin
        checks++;
        if (s_re[u] !== SW'(er[k][u]) || s_im[u] !== SW'(ei[k][u])) begin
          failures++;
          if (failures < 10)
            $display("FAIL cycle %0d user %0d: got %0d,%0dj expected %0d,%0dj",
                     cyc, u, s_re[u], s_im[u], er[k][u], ei[k][u]);
        end
      end
    end
    prev_valid = eval[k];
  endtask

  // apply one cycle of inputs and record the model's outputs for it
  task automatic apply(input bit l, input bit s, input int xr [B], input int xi [B]);
    int k = cyc % HIST;
    check_outputs();
    lw = l; sp = s;
    for (int b = 0; b < B; b++) begin
      x_re[b] = XW'(xr[b]);
      x_im[b] = XW'(xi[b]);
    end
    if (l) begin
      if (row < U) begin
        for (int b = 0; b < B; b++) begin
          wr[row][b] = xr[b]; wi[row][b] = xi[b];
          cw[row][b] = is_small(xr[b], xi[b], int'(tau_w));
        end
        if (row == U - 1) n_loads++;
      end
      row++;
      eval[k] = 1'b0;
    end else begin
      row = 0;
      if (s != prev_sp) n_spsw++;
      prev_sp = s;
      for (int u = 0; u < U; u++) begin
        longint ar = 0, ai = 0;
        for (int b = 0; b < B; b++) begin
          bit cy = is_small(xr[b], xi[b], int'(tau_y));
          bit act = !(s && cy && cw[u][b]);
          if (s) begin n_prod_sp1++; if (act) n_act_sp1++; end
          if (!act) n_muted++;
          else begin
            if (!s && cy && cw[u][b]) n_sp0_small++;
            if (s && (cy != cw[u][b])) begin if (cw[u][b]) n_wonly++; else n_yonly++; end
            ar += longint'(wr[u][b]) * xr[b] - longint'(wi[u][b]) * xi[b];
            ai += longint'(wr[u][b]) * xi[b] + longint'(wi[u][b]) * xr[b];
          end
        end
        er[k][u] = sat(ar);
        ei[k][u] = sat(ai);
      end
      eval[k] = 1'b1;
    end
    @(negedge clk);
    cyc++;
  endtask

  int xr [B], xi [B];

  // sparse random value: mostly below tau, some exact zeros, some large
  function automatic int sparse(input int tau, input int big);
    int r = $urandom_range(0, 9);
    if (r < 2) return 0;
    if (r < 7) return int'($urandom_range(0, 2 * tau - 2)) - (tau - 1);
    return int'($urandom_range(0, 2 * big)) - big;
  endfunction

  task automatic load_w(input int tau, input int big, input bit s);
    for (int u = 0; u < U; u++) begin
      for (int b = 0; b < B; b++) begin
        xr[b] = sparse(tau, big);
        xi[b] = sparse(tau, big);
      end
      apply(1'b1, s, xr, xi);
    end
  endtask

  task automatic send_y(input int n, input int tau, input int big, input int sp_mode);
    for (int i = 0; i < n; i++) begin
      for (int b = 0; b < B; b++) begin
        xr[b] = sparse(tau, big);
        xi[b] = sparse(tau, big);
      end
      apply(1'b0, (sp_mode == 2) ? 1'($urandom) : 1'(sp_mode), xr, xi);
    end
  endtask

  initial begin
    rst_n = 1'b0; lw = 1'b0; sp = 1'b0; tau_y = '0; tau_w = '0;
    foreach (x_re[b]) begin x_re[b] = '0; x_im[b] = '0; end
    foreach (eval[k]) eval[k] = 1'b0;
    foreach (wr[u, b]) begin wr[u][b] = 0; wi[u][b] = 0; cw[u][b] = 1'b0; end
    row = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // reset state: the pipeline holds no valid output
    for (int i = 0; i < LAT; i++) begin
      checks++;
      if (s_valid !== 1'b0) failures++;
      @(negedge clk);
    end
    cyc = 0;
    foreach (eval[k]) eval[k] = 1'b0;

    // first matrix, thresholds tau_w = 40 (~0.02), tau_y = 12 (6.0)
    tau_w = 12'd40; tau_y = 12'd12;
    load_w(40, 200, 1'b1);
    send_y(60, 12, 40, 1);      // save power on
    send_y(40, 12, 40, 0);      // save power off
    send_y(60, 12, 40, 2);      // switching every vector
    // new matrix and thresholds in the middle of the stream
    tau_w = 12'd100; tau_y = 12'd30;
    load_w(100, 250, 1'b0);
    send_y(80, 30, 40, 2);
    // saturation: W = 2047 (about 1.0) everywhere, y at full scale
    for (int u = 0; u < U; u++) begin
      for (int b = 0; b < B; b++) begin xr[b] = 2047; xi[b] = (u % 2 == 0) ? 0 : -2048; end
      apply(1'b1, 1'b1, xr, xi);
    end
    for (int b = 0; b < B; b++) begin xr[b] = 255; xi[b] = -256; end
    apply(1'b0, 1'b1, xr, xi);
    for (int b = 0; b < B; b++) begin xr[b] = -256; xi[b] = 3; end
    apply(1'b0, 1'b1, xr, xi);
    send_y(10, 30, 40, 1);
    // drain the pipeline
    for (int b = 0; b < B; b++) begin xr[b] = 0; xi[b] = 0; end
    for (int i = 0; i < LAT + 1; i++) apply(1'b0, 1'b0, xr, xi);

    $display("mechanisms: weight loads=%0d muted products=%0d both-small with SP off=%0d",
             n_loads, n_muted, n_sp0_small);
    $display("            kept (only W small)=%0d kept (only y small)=%0d saturations=%0d",
             n_wonly, n_yonly, n_sat);
    $display("            back-to-back outputs=%0d SP switches=%0d", n_b2b, n_spsw);
    if (n_prod_sp1 > 0)
      $display("multiplier activity rate with SP on: %0d / %0d complex products", n_act_sp1, n_prod_sp1);
    checks++;
    if (n_loads < 3 || n_muted == 0 || n_sp0_small == 0 || n_wonly == 0 || n_yonly == 0 ||
        n_sat == 0 || n_b2b == 0 || n_spsw == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
