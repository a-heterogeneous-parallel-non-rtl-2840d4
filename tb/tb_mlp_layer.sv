// tb_mlp_layer: loads one 3-input, 3-neuron layer through its configuration
// port with quantised random weights, streams 2000 input vectors (with gaps)
// and checks every output vector against the reference layer and its
// 3-cycle latency. Also counts that both activation regions were exercised.
module tb_mlp_layer;
  import mlmd_pkg::*;
  import tb_ref_pkg::*;

  localparam int NI = 3, NO = 3;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_wdata = '0;
  logic in_valid = 0;
  fx_t  a [NI];
  logic out_valid;
  fx_t  x [NO];
  int checks = 0, failures = 0, cyc = 0;
  RefMlp m;
  longint exp_x [$];
  int     exp_t [$];

  mlp_layer dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .in_valid, .a, .out_valid, .x);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid) begin
    int t;
    checks++;
    if (exp_t.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      t = exp_t.pop_front();
      if (cyc - t != 3) begin failures++; $display("FAIL latency %0d", cyc - t); end
      for (int j = 0; j < NO; j++) begin
        longint e;
        e = exp_x.pop_front();
        checks++;
        if (longint'(x[j]) !== e) begin failures++; $display("FAIL x[%0d]=%0d exp %0d", j, x[j], e); end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m = new(NI, 0, 0, NO);
    m.rand_init(3.0);
    for (int k = 0; k < NI; k++) a[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int j = 0; j < NO; j++)
      for (int k = 0; k <= NI; k++) begin
        cfg_we = 1; cfg_addr = CFG_ADDR_W'(j * (NI + 1) + k); cfg_wdata = m.cfg_word(0, j, k);
        @(negedge clk);
      end
    cfg_we = 0;
    for (int i = 0; i < 2000; i++) begin
      longint f [8];
      longint o [8];
      in_valid = ($urandom_range(0, 4) != 0);
      for (int k = 0; k < 8; k++) f[k] = 0;
      for (int k = 0; k < NI; k++) begin
        f[k] = longint'($urandom_range(0, 6000)) - 3000;
        a[k] = fx_t'(f[k]);
      end
      if (in_valid) begin
        m.eval(f, o);
        for (int j = 0; j < NO; j++) exp_x.push_back(o[j]);
        exp_t.push_back(cyc + 1);
      end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (exp_t.size() != 0 || m.n_sat == 0 || m.n_mid == 0) begin
      failures++;
      $display("FAIL missing=%0d sat=%0d mid=%0d", exp_t.size(), m.n_sat, m.n_mid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
