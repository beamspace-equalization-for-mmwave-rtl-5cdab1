// tb_adder_tree: self-checking testbench of the pipelined adder tree.
//
// Two instances: the full 64-input tree with 22-bit inputs and a 5-input tree
// (non-power-of-two, zero padded) with 8-bit inputs. Every cycle new random
// inputs are applied, including all-maximum and all-minimum vectors; the sum of
// the inputs of cycle t must appear exactly clog2(N) cycles later.
module tb_adder_tree;
  localparam int N1 = 64, W1 = 22, L1 = 6;
  localparam int N2 = 5,  W2 = 8,  L2 = 3;
  localparam int NCYC = 400;

  logic clk = 1'b0;
  logic rst_n;
  logic signed [W1-1:0] a_re [N1], a_im [N1];
  logic signed [W2-1:0] b_re [N2], b_im [N2];
  logic signed [W1+L1-1:0] sa_re, sa_im;
  logic signed [W2+L2-1:0] sb_re, sb_im;
  longint ea_re [NCYC], ea_im [NCYC], eb_re [NCYC], eb_im [NCYC];
  int checks = 0, failures = 0;

  adder_tree #(.N(N1), .IW(W1)) dut_a (.clk, .rst_n, .in_re(a_re), .in_im(a_im), .sum_re(sa_re), .sum_im(sa_im));
  adder_tree #(.N(N2), .IW(W2)) dut_b (.clk, .rst_n, .in_re(b_re), .in_im(b_im), .sum_re(sb_re), .sum_im(sb_im));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd(input int w, input int mode);
    longint mx = (64'sd1 <<< (w - 1));
    case (mode)
      0: return mx - 1;
      1: return -mx;
      default: return longint'($urandom_range(0, 32'((mx << 1) - 1))) - mx;
    endcase
  endfunction

  initial begin
    rst_n = 1'b0;
    foreach (a_re[i]) begin a_re[i] = '0; a_im[i] = '0; end
    foreach (b_re[i]) begin b_re[i] = '0; b_im[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NCYC; t++) begin
      int mode;
      // check the sums of the inputs applied L cycles ago
      if (t >= L1) begin
        checks++;
        if (sa_re !== (W1+L1)'(ea_re[t-L1]) || sa_im !== (W1+L1)'(ea_im[t-L1])) begin
          failures++;
          if (failures < 10) $display("FAIL N=64 t=%0d got %0d,%0d exp %0d,%0d", t, sa_re, sa_im, ea_re[t-L1], ea_im[t-L1]);
        end
      end
      if (t >= L2) begin
        checks++;
        if (sb_re !== (W2+L2)'(eb_re[t-L2]) || sb_im !== (W2+L2)'(eb_im[t-L2])) begin
          failures++;
          if (failures < 10) $display("FAIL N=5 t=%0d got %0d,%0d exp %0d,%0d", t, sb_re, sb_im, eb_re[t-L2], eb_im[t-L2]);
        end
      end
      mode = (t == 10) ? 0 : (t == 11) ? 1 : 2;
      ea_re[t] = 0; ea_im[t] = 0; eb_re[t] = 0; eb_im[t] = 0;
      foreach (a_re[i]) begin
        longint r = rnd(W1, mode), m = rnd(W1, (mode == 2) ? 2 : 1 - mode);
        a_re[i] = W1'(r); a_im[i] = W1'(m); ea_re[t] += r; ea_im[t] += m;
      end
      foreach (b_re[i]) begin
        longint r = rnd(W2, mode), m = rnd(W2, mode);
        b_re[i] = W2'(r); b_im[i] = W2'(m); eb_re[t] += r; eb_im[t] += m;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
