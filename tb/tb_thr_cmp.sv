// tb_thr_cmp: self-checking testbench of the CSPADE threshold unit.
//
// Drives random and corner-case inputs (including the most negative 12-bit
// value and values equal to the threshold) with random thresholds, for both
// LW values, and compares c with an integer model:
//   c = max(|x_re|, |x_im|) < (lw ? tau_w : tau_y).
module tb_thr_cmp;
  localparam int XW = 12;

  logic                 clk = 1'b0;
  logic                 lw;
  logic [XW-1:0]        tau_y, tau_w;
  logic signed [XW-1:0] x_re, x_im;
  logic                 c;
  int checks = 0, failures = 0;

  thr_cmp dut (.lw, .tau_y, .tau_w, .x_re, .x_im, .c);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit model(input bit l, input int ty, input int tw, input int re, input int im);
    int t, ar, ai;
    t  = l ? tw : ty;
    ar = (re < 0) ? -re : re;
    ai = (im < 0) ? -im : im;
    return (ar < t) && (ai < t);
  endfunction

  task automatic check_one();
    #1;
    checks++;
    if (c !== model(lw, int'(tau_y), int'(tau_w), int'(x_re), int'(x_im))) begin
      failures++;
      if (failures < 10)
        $display("FAIL lw=%0d tau_y=%0d tau_w=%0d x=%0d,%0dj c=%0d", lw, tau_y, tau_w, x_re, x_im, c);
    end
  endtask

  initial begin
    // corner cases: equality with the threshold, most negative value
    lw = 1'b0; tau_y = 12'd10; tau_w = 12'd100;
    x_re = 12'sd9;   x_im = -12'sd9;  check_one();  // both below tau_y -> 1
    x_re = 12'sd10;  x_im = 12'sd0;   check_one();  // equal -> 0
    x_re = -12'sd10; x_im = 12'sd3;   check_one();  // |-10| equal -> 0
    x_re = 12'sd3;   x_im = 12'sd50;  check_one();  // imag too large -> 0
    lw = 1'b1;
    x_re = 12'sd50;  x_im = 12'sd99;  check_one();  // below tau_w -> 1
    x_re = -12'sd2048; x_im = 12'sd0; check_one();  // |-2048| = 2048 -> 0
    tau_w = 12'd4095;
    x_re = -12'sd2048; x_im = -12'sd2048; check_one(); // 2048 < 4095 -> 1
    tau_w = 12'd0;
    x_re = 12'sd0; x_im = 12'sd0; check_one();      // nothing below 0 -> 0
    // random
    for (int i = 0; i < 5000; i++) begin
      lw    = 1'($urandom);
      tau_y = 12'($urandom_range(0, 300));
      tau_w = 12'($urandom_range(0, 2100));
      if ($urandom_range(0, 1) == 0) begin
        x_re = 12'(int'($urandom_range(0, 80)) - 40);
        x_im = 12'(int'($urandom_range(0, 80)) - 40);
      end else begin
        x_re = 12'($urandom);
        x_im = 12'($urandom);
      end
      check_one();
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
