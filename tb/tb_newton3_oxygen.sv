// tb_newton3_oxygen: checks F_O = -(F_H1 + F_H2) per component, with
// saturation, on corner values and 3000 random force pairs.
module tb_newton3_oxygen;
  import mlmd_pkg::*;
  import tb_ref_pkg::*;

  localparam int D = 2;
  fx_t f_h1 [D];
  fx_t f_h2 [D];
  fx_t f_o  [D];
  int checks = 0, failures = 0;

  newton3_oxygen dut (.f_h1, .f_h2, .f_o);

  task automatic check(input int x0, input int y0, input int x1, input int y1);
    f_h1[0] = fx_t'(x0); f_h1[1] = fx_t'(y0);
    f_h2[0] = fx_t'(x1); f_h2[1] = fx_t'(y1);
    #1;
    for (int d = 0; d < D; d++) begin
      longint e;
      e = sat13(-(longint'(f_h1[d]) + longint'(f_h2[d])));
      checks++;
      if (longint'(f_o[d]) !== e) begin
        failures++; $display("FAIL d=%0d got %0d exp %0d", d, f_o[d], e);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(100, -200, 300, 50);
    check(-4096, -4096, -4096, 4095);
    check(4095, 0, 4095, 1);
    check(0, 0, 0, 0);
    for (int i = 0; i < 3000; i++)
      check(int'($urandom_range(0, 8191)) - 4096, int'($urandom_range(0, 8191)) - 4096,
            int'($urandom_range(0, 8191)) - 4096, int'($urandom_range(0, 8191)) - 4096);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
