// tb_mlp_chip: the force chip at its default 3-3-3-2 size. Writes quantised
// random weights and biases into all three layers, streams 3000 feature
// vectors back to back and with gaps, and checks each force pair against the
// reference network and the 9-cycle latency, and that the chip accepts one
// vector per clock. A second weight set is then loaded and checked again.
module tb_mlp_chip;
  import mlmd_pkg::*;
  import tb_ref_pkg::*;

  localparam int NI = 3, NH = 3, NHL = 2, NO = 2;
  localparam int LAT = 3 * (NHL + 1);
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [LAYER_SEL_W-1:0] cfg_layer = '0;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_wdata = '0;
  logic in_valid = 0;
  fx_t  feat [NI];
  logic out_valid;
  fx_t  force_o [NO];
  int checks = 0, failures = 0, cyc = 0, n_out = 0;
  RefMlp m;
  longint exp_f [$];
  int     exp_t [$];

  mlp_chip dut (.clk, .rst_n, .cfg_we, .cfg_layer, .cfg_addr, .cfg_wdata,
                .in_valid, .feat, .out_valid, .force_o);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid) begin
    int t;
    checks++;
    n_out++;
    if (exp_t.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      t = exp_t.pop_front();
      if (cyc - t != LAT) begin failures++; $display("FAIL latency %0d", cyc - t); end
      for (int j = 0; j < NO; j++) begin
        longint e;
        e = exp_f.pop_front();
        checks++;
        if (longint'(force_o[j]) !== e) begin
          failures++; $display("FAIL force[%0d]=%0d exp %0d", j, force_o[j], e);
        end
      end
    end
  end

  task automatic load();
    for (int l = 0; l <= NHL; l++)
      for (int j = 0; j < m.sz[l+1]; j++)
        for (int k = 0; k <= m.sz[l]; k++) begin
          cfg_we = 1; cfg_layer = LAYER_SEL_W'(l);
          cfg_addr = CFG_ADDR_W'(j * (m.sz[l] + 1) + k); cfg_wdata = m.cfg_word(l, j, k);
          @(negedge clk);
        end
    cfg_we = 0;
  endtask

  task automatic stream(input int n, input int gap_one_in);
    for (int i = 0; i < n; i++) begin
      longint f [8];
      longint o [8];
      in_valid = (gap_one_in == 0) || ($urandom_range(0, gap_one_in - 1) != 0);
      for (int k = 0; k < 8; k++) f[k] = 0;
      for (int k = 0; k < NI; k++) begin
        f[k] = longint'($urandom_range(0, 6000)) - 3000;
        feat[k] = fx_t'(f[k]);
      end
      if (in_valid) begin
        m.eval(f, o);
        for (int j = 0; j < NO; j++) exp_f.push_back(o[j]);
        exp_t.push_back(cyc + 1);
      end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LAT + 2) @(negedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_before;
    for (int k = 0; k < NI; k++) feat[k] = '0;
    m = new(NI, NH, NHL, NO);
    m.rand_init(2.0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    load();
    n_before = n_out;
    stream(1000, 0);               // back to back: one result per clock
    checks++;
    if (n_out - n_before != 1000) begin failures++; $display("FAIL throughput %0d", n_out - n_before); end
    stream(1000, 3);
    m = new(NI, NH, NHL, NO);
    m.rand_init(4.0);
    load();
    stream(1000, 2);
    checks++;
    if (exp_t.size() != 0 || m.n_sat == 0 || m.n_mid == 0 || m.n_left == 0) begin
      failures++;
      $display("FAIL missing=%0d sat=%0d mid=%0d left=%0d", exp_t.size(), m.n_sat, m.n_mid, m.n_left);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
