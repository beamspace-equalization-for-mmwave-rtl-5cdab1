// tb_workload_64x16: the equalizer on a B = 64 antenna, U = 16 user uplink,
// one of the system sizes evaluated for beamspace equalization, with synthetic
// line-of-sight and non-line-of-sight channels, 16-QAM, 6-bit quantization and
// an SNR of 20 dB. The equalizer is built with U = 16.
//
// A workload_runner generates the channels and vectors and checks every output
// bit-exactly against an integer model. This testbench prints, per channel
// type, the symbol error rate with save power on and off and the multiplier
// activity rate, and fails if save power costs more than 5 % symbol errors or
// if the symbol error rate without it exceeds 10 %.
module tb_workload_64x16;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int rc, rf;
  bit rd;
  int checks = 0, failures = 0;

  workload_runner #(.B(64), .U(16)) r (.clk, .checks(rc), .failures(rf), .done(rd));

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic report(input string name, input real ser_on, input real ser_off, input real act);
    $display("%-12s SER save-power on %6.4f  off %6.4f  multiplier activity %5.3f", name, ser_on, ser_off, act);
    checks += 2;
    if (ser_on > ser_off + 0.05) begin
      failures++;
      $display("FAIL %s: save power costs too many symbol errors", name);
    end
    if (ser_off > 0.10) begin
      failures++;
      $display("FAIL %s: symbol error rate without save power too high", name);
    end
  endtask

  initial begin
    wait (rd);
    checks += rc;
    failures += rf;
    report("64x16 LoS",  r.ser(0, 1), r.ser(0, 0), r.activity(0));
    report("64x16 NLoS", r.ser(1, 1), r.ser(1, 0), r.activity(1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
