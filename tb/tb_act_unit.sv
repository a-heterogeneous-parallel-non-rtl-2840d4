// tb_act_unit: checks the activation phi(x) exhaustively over [-4, 4) (every
// Q2.10 code and beyond the saturation points), on very large accumulator
// values, and spot-checks the textbook points phi(+-2) = +-1, phi(1) = 0.75.
// It also checks that phi stays within 0.05 of tanh over the whole range,
// the property that makes it a drop-in replacement for tanh.
module tb_act_unit;
  import mlmd_pkg::*;
  import tb_ref_pkg::*;

  acc_t q;
  fx_t  phi;
  int checks = 0, failures = 0;

  act_unit dut (.q, .phi);

  task automatic check(input longint qv, input longint expv);
    q = acc_t'(qv);
    #1;
    checks++;
    if (longint'(phi) !== expv) begin
      failures++;
      $display("FAIL q=%0d: got %0d expected %0d", qv, phi, expv);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(2048, 1024);
    check(-2048, -1024);
    check(1024, 768);
    check(-1024, -768);
    check(0, 0);
    check(64'sd1000000, 1024);
    check(-64'sd1000000, -1024);
    check(64'sd2147483647, 1024);
    check(-64'sd2147483648, -1024);
    for (int v = -4096; v < 4096; v++) check(v, ref_phi(v));
    for (int v = -4096; v < 4096; v += 8) begin
      real xr, d;
      q = acc_t'(v);
      #1;
      xr = real'(v) / 1024.0;
      d  = real'(phi) / 1024.0 - ((($exp(xr) - $exp(-xr)) / ($exp(xr) + $exp(-xr))));
      checks++;
      if (d > 0.05 || d < -0.05) begin
        failures++; $display("FAIL phi(%f) differs from tanh by %f", xr, d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
