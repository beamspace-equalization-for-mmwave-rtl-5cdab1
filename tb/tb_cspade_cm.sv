// tb_cspade_cm: self-checking testbench of the CSPADE mute-capable multiplier.
//
// Loads random weights (with random smallness bits), then streams random inputs
// with random c and SP. An integer model predicts each output two cycles after
// its input: W*y when the unit is active, 0 + j0 when SP, the stored c_w and
// the current c are all 1. It also checks that a muted cycle leaves the y
// registers unchanged (the power-saving freeze), and counts how often each case
// (active, muted, SP=0 with both small) occurred.
module tb_cspade_cm;
  localparam int XW = 12, YW = 9, WW = 12, PW = 22;

  logic                 clk = 1'b0;
  logic                 rst_n, lw, sp, c;
  logic signed [XW-1:0] x_re, x_im;
  logic signed [PW-1:0] p_re, p_im;
  int checks = 0, failures = 0;
  int n_active = 0, n_muted = 0, n_sp0_small = 0, n_load = 0;

  cspade_cm dut (.clk, .rst_n, .lw, .sp, .c, .x_re, .x_im, .p_re, .p_im);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model state
  int  mw_re, mw_im;
  bit  mc_w;
  int  exp_re [$], exp_im [$];
  bit  exp_vld [$];

  task automatic drive(input bit l, input bit s, input bit cc, input int re, input int im);
    int er, ei;
    bit act;
    lw = l; sp = s; c = cc; x_re = XW'(re); x_im = XW'(im);
    act = !(s && cc && mc_w);
    if (l) begin
      mw_re = re; mw_im = im; mc_w = cc; n_load++;
      exp_vld.push_back(1'b0); exp_re.push_back(0); exp_im.push_back(0);
    end else begin
      if (act) begin
        er = re * mw_re - im * mw_im;
        ei = re * mw_im + im * mw_re;
        n_active++;
        if (!s && cc && mc_w) n_sp0_small++;
      end else begin
        er = 0; ei = 0; n_muted++;
      end
      exp_vld.push_back(1'b1); exp_re.push_back(er); exp_im.push_back(ei);
    end
    @(negedge clk);
    // freeze check: a muted data cycle must not change the y registers
    if (!l && !act) begin
      checks++;
      if (dut.y_re !== last_y_re || dut.y_im !== last_y_im) begin
        failures++;
        $display("FAIL y registers changed in a muted cycle");
      end
    end
    last_y_re = dut.y_re; last_y_im = dut.y_im;
  endtask

  logic signed [YW-1:0] last_y_re, last_y_im;

  // output checker: compares p two cycles after each input
  always @(negedge clk) begin
    if (rst_n && exp_vld.size() > 2) begin
      bit v; int er, ei;
      v = exp_vld.pop_front(); er = exp_re.pop_front(); ei = exp_im.pop_front();
      if (v) begin
        checks++;
        if (p_re !== PW'(er) || p_im !== PW'(ei)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0t got %0d,%0dj exp %0d,%0dj", $time, p_re, p_im, er, ei);
        end
      end
    end
  end

  function automatic int rnd_w(); return int'($urandom_range(0, 4095)) - 2048; endfunction
  function automatic int rnd_y(); return int'($urandom_range(0, 511)) - 256; endfunction

  initial begin
    rst_n = 1'b0; lw = 1'b0; sp = 1'b0; c = 1'b0; x_re = '0; x_im = '0;
    mw_re = 0; mw_im = 0; mc_w = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    last_y_re = dut.y_re; last_y_im = dut.y_im;
    for (int blk = 0; blk < 200; blk++) begin
      drive(1'b1, 1'($urandom), 1'($urandom), rnd_w(), rnd_w());
      repeat ($urandom_range(5, 30)) drive(1'b0, 1'($urandom), 1'($urandom), rnd_y(), rnd_y());
    end
    // extremes
    drive(1'b1, 1'b0, 1'b0, -2048, -2048);
    drive(1'b0, 1'b0, 1'b0, -256, -256);
    drive(1'b0, 1'b0, 1'b0, 255, -256);
    repeat (4) drive(1'b0, 1'b0, 1'b0, 0, 0);
    checks++;
    if (n_active == 0 || n_muted == 0 || n_sp0_small == 0 || n_load == 0) begin
      failures++;
      $display("FAIL a case never occurred: active=%0d muted=%0d sp0_small=%0d load=%0d",
               n_active, n_muted, n_sp0_small, n_load);
    end
    $display("cases: active=%0d muted=%0d sp0_both_small=%0d loads=%0d", n_active, n_muted, n_sp0_small, n_load);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
