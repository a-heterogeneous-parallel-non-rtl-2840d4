// tb_matrix_unit: streams 3000 random input vectors through one neuron row
// (random gaps between vectors, weights and bias changed between bursts) and
// checks every neuron sum against the reference and its 2-cycle latency.
module tb_matrix_unit;
  import mlmd_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  fx_t  a [N];
  shift_param_t w [N];
  fx_t  b;
  logic out_valid;
  acc_t q;
  int checks = 0, failures = 0;
  int cyc = 0;

  matrix_unit dut (.clk, .rst_n, .in_valid, .a, .w, .b, .out_valid, .q);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  longint exp_q [$];
  int     exp_t [$];
  int sg [N];
  int ex [N][3];

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      longint e; int t;
      e = exp_q.pop_front(); t = exp_t.pop_front();
      if (longint'(q) !== e || cyc - t != 2) begin
        failures++;
        $display("FAIL q=%0d exp=%0d latency=%0d", q, e, cyc - t);
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) begin a[k] = '0; w[k] = '0; end
    b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int burst = 0; burst < 30; burst++) begin
      in_valid = 0;
      repeat (3) @(negedge clk);   // let the pipeline drain before parameters change
      for (int k = 0; k < N; k++) begin
        sg[k] = int'($urandom_range(0, 2)) - 1;
        for (int t = 0; t < 3; t++) ex[k][t] = int'($urandom_range(0, 23)) - 16;
        w[k] = shift_param_t'(wword(sg[k], ex[k][0], ex[k][1], ex[k][2]));
      end
      b = fx_t'(int'($urandom_range(0, 8191)) - 4096);
      for (int i = 0; i < 100; i++) begin
        longint e;
        in_valid = ($urandom_range(0, 3) != 0);
        for (int k = 0; k < N; k++) a[k] = fx_t'(int'($urandom_range(0, 8191)) - 4096);
        if (in_valid) begin
          e = longint'(b);
          for (int k = 0; k < N; k++) e += ref_su(longint'(a[k]), sg[k], ex[k][0], ex[k][1], ex[k][2]);
          exp_q.push_back(e);
          exp_t.push_back(cyc + 1);
        end
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
