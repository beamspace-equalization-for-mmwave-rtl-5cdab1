// tb_dotp_ctrl: self-checking testbench of the DOTP load controller.
//
// Instantiates one controller for every DOTP index of a U = 8 equalizer and
// drives LW bursts of U cycles, shorter and longer bursts and idle gaps. In
// each cycle it checks that lw_u of DOTP k is high exactly when LW is high and
// LW has been high for k earlier cycles of the current burst.
module tb_dotp_ctrl;
  localparam int U = 8;

  logic         clk = 1'b0;
  logic         rst_n;
  logic         lw;
  logic [U-1:0] lw_u;
  int           run;  // LW-high cycles before the current one in this burst
  int checks = 0, failures = 0;
  int hits [U];

  for (genvar k = 0; k < U; k++) begin : g_dut
    dotp_ctrl #(.U(U), .IDX(k)) dut (.clk, .rst_n, .lw, .lw_u(lw_u[k]));
  end

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input bit l);
    lw = l;
    #1;
    for (int k = 0; k < U; k++) begin
      checks++;
      if (lw_u[k] !== (l && (run == k))) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0t lw=%0d run=%0d k=%0d lw_u=%0d", $time, l, run, k, lw_u[k]);
      end
      if (lw_u[k]) hits[k]++;
    end
    @(negedge clk);
    run = l ? run + 1 : 0;
  endtask

  initial begin
    foreach (hits[k]) hits[k] = 0;
    rst_n = 1'b0; lw = 1'b0; run = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // full bursts of U cycles separated by gaps
    for (int n = 0; n < 3; n++) begin
      repeat (U) step(1'b1);
      repeat (1 + n) step(1'b0);
    end
    // short, long and random bursts
    repeat (3) step(1'b1);
    step(1'b0);
    repeat (U + 4) step(1'b1);
    step(1'b0);
    for (int i = 0; i < 1000; i++) step(($urandom_range(0, 3) != 0));
    // every DOTP must have been selected at least once per full burst
    for (int k = 0; k < U; k++) begin
      checks++;
      if (hits[k] < 3) begin
        failures++;
        $display("FAIL DOTP %0d selected only %0d times", k, hits[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
