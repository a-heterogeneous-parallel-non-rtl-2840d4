// tb_md_controller: runs the step sequencer against simple models of its
// neighbours: a feature source that answers after 0..4 cycles, two chips
// that answer after different latencies, and counts integration pulses.
// Checks the number of steps, that each step issues exactly once, that the
// integration waits for both chips, the cycle count of a step without
// waiting (11 with 9-cycle chips), done and a zero-step run.
module tb_md_controller;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [15:0] n_steps = '0;
  logic busy, done, fe_req, fe_valid, mlp_issue, chip0_valid, chip1_valid, integ_step;
  logic [15:0] step_count;
  int checks = 0, failures = 0, cyc = 0;
  int lat0 = 9, lat1 = 9, fe_delay = 0, fe_cnt = 0;
  int issues = 0, integs = 0, last_issue = 0, ans0 = -1, ans1 = -1, stalls = 0;
  logic [15:0] sh0 = '0, sh1 = '0;
  logic [63:0] hist0 = '0, hist1 = '0;

  md_controller dut (.clk, .rst_n, .start, .n_steps, .busy, .done, .step_count,
                     .fe_req, .fe_valid, .mlp_issue, .chip0_valid, .chip1_valid, .integ_step);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // Feature source: answers fe_delay cycles after the request rises.
  always @(posedge clk) begin
    if (fe_req && !fe_valid) fe_cnt <= fe_cnt + 1;
    else fe_cnt <= 0;
  end
  assign fe_valid = fe_req && (fe_cnt >= fe_delay);

  // Chip models: fixed latency delay lines.
  always @(posedge clk) begin
    hist0 <= {hist0[62:0], mlp_issue};
    hist1 <= {hist1[62:0], mlp_issue};
  end
  assign chip0_valid = hist0[lat0-1];
  assign chip1_valid = hist1[lat1-1];

  always @(posedge clk) if (rst_n) begin
    if (fe_req && !fe_valid) stalls++;
    if (mlp_issue) begin issues++; last_issue = cyc; end
    if (chip0_valid) ans0 = cyc;
    if (chip1_valid) ans1 = cyc;
    if (integ_step) begin
      integs++;
      checks++;
      if (ans0 < last_issue || ans1 < last_issue) begin
        failures++; $display("FAIL integration before both chips answered");
      end
    end
  end

  task automatic run(input int n, input int l0, input int l1, input int fdel);
    int t0, steps_before;
    repeat (70) @(negedge clk);      // let the chip models' delay lines empty
    lat0 = l0; lat1 = l1; fe_delay = fdel;
    issues = 0; integs = 0;
    n_steps = 16'(n); start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    while (!done) @(negedge clk);
    checks += 3;
    if (issues != n || integs != n || step_count != 16'(n)) begin
      failures++;
      $display("FAIL n=%0d issues=%0d integs=%0d count=%0d", n, issues, integs, step_count);
    end
    if (fdel == 0 && l0 == 9 && l1 == 9 && n > 0 && (cyc - t0) != 11 * n) begin
      failures++;
      $display("FAIL %0d cycles for %0d steps, expected %0d", cyc - t0, n, 11 * n);
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    checks++;
    if (busy || done) begin failures++; $display("FAIL not idle after reset"); end
    run(10, 9, 9, 0);
    run(7, 9, 14, 3);
    run(5, 20, 4, 1);
    run(0, 9, 9, 0);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no feature stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
