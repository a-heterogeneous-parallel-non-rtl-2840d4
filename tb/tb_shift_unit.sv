// tb_shift_unit: checks the shift unit against the reference shift-sum on
// hand-picked cases (left, right and zero shifts, absent terms, all signs,
// extreme inputs) and on 4000 random inputs and weight encodings.
module tb_shift_unit;
  import mlmd_pkg::*;
  import tb_ref_pkg::*;

  fx_t          a;
  shift_param_t w;
  acc_t         p;
  int checks = 0, failures = 0;

  shift_unit dut (.a, .w, .p);

  task automatic check(input int av, input int sgn, input int n0, input int n1, input int n2);
    longint expv;
    a = fx_t'(av);
    w = shift_param_t'(wword(sgn, n0, n1, n2));
    #1;
    expv = ref_su(av, sgn, n0, n1, n2);
    checks++;
    if (longint'(p) !== expv) begin
      failures++;
      $display("FAIL a=%0d s=%0d n=(%0d,%0d,%0d): got %0d expected %0d", av, sgn, n0, n1, n2, p, expv);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(1024, 1, 0, -1, -2);      // 1.0 * 1.75
    check(-1024, 1, 0, -1, -2);
    check(1024, -1, 0, -1, -2);
    check(777, 0, 3, 2, 1);         // zero weight
    check(-3, 1, -1, NONE, NONE);   // floor rounding of a negative input
    check(5, 1, 2, NONE, NONE);     // left shift
    check(-4096, 1, 15, 15, 15);    // largest left shifts
    check(4095, -1, -15, -14, -13);
    check(100, 1, NONE, NONE, NONE);
    for (int i = 0; i < 4000; i++) begin
      int av, sg, n[3];
      av = int'($urandom_range(0, 8191)) - 4096;
      sg = int'($urandom_range(0, 2)) - 1;
      for (int k = 0; k < 3; k++) n[k] = int'($urandom_range(0, 31)) - 16;
      check(av, sg, n[0], n[1], n[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
