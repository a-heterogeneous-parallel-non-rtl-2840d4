// tb_mlmd_system: end-to-end run of the complete MLMD system at its default
// size (two 3-3-3-2 force chips, three atoms, two coordinates).
//
// The testbench plays the host and the feature-extraction logic. As host it
// loads one quantised random force network into each chip separately (chip
// mask 01, then 10), writes a water-like starting geometry, velocities and
// gains, and starts runs of several MD steps. As feature extractor it
// answers every feature request after 0..3 cycles with stand-in features
// (H-O displacement and the x distance to the other hydrogen; the real
// features are not defined by the design). A reference model of the network,
// of Newton's third law and of the integration follows along, and after
// every step the positions, velocities and all three forces are compared.
// It also checks the 11-cycle step time when features come back at once,
// a zero-step run, and counts that every mechanism happened: feature stalls,
// immediate answers, both activation regions, left-shift weights, per-chip
// configuration, multi-step runs and host writes blocked during a run.
module tb_mlmd_system;
  import mlmd_pkg::*;
  import tb_ref_pkg::*;

  localparam int D = 2;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [1:0] cfg_chip_mask = '0;
  logic [LAYER_SEL_W-1:0] cfg_layer = '0;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_wdata = '0;
  logic st_we = 0;
  st_sel_e st_sel = ST_POS;
  logic [1:0] st_atom = '0, st_dim = '0;
  fx_t st_wdata = '0;
  logic start = 0;
  logic [15:0] n_steps = '0;
  logic busy, done, fe_req, fe_valid = 0;
  logic [15:0] step_count;
  fx_t pos [3][D];
  fx_t vel [3][D];
  fx_t forces [3][D];
  fx_t feat_h1 [3];
  fx_t feat_h2 [3];

  longint r_m [3][D];
  longint v_m [3][D];
  longint f_m [3][D];
  longint kv_m [3];
  longint kdt_m;
  RefMlp  m;
  int checks = 0, failures = 0, cyc = 0;
  int n_blocked_writes = 0, n_stall = 0, n_immediate = 0, n_steps_run = 0, n_cfg_masked = 0, n_zero_run = 0;

  mlmd_system dut (
    .clk, .rst_n, .cfg_we, .cfg_chip_mask, .cfg_layer, .cfg_addr, .cfg_wdata,
    .st_we, .st_sel, .st_atom, .st_dim, .st_wdata,
    .start, .n_steps, .busy, .done, .step_count,
    .fe_req, .pos, .fe_valid, .feat_h1, .feat_h2,
    .vel, .forces);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic expect_eq(input string what, input longint got, input longint want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (step %0d)", what, got, want, n_steps_run);
    end
  endtask

  task automatic compare_state();
    for (int i = 0; i < 3; i++)
      for (int d = 0; d < D; d++) begin
        expect_eq($sformatf("pos[%0d][%0d]", i, d), longint'(pos[i][d]), r_m[i][d]);
        expect_eq($sformatf("vel[%0d][%0d]", i, d), longint'(vel[i][d]), v_m[i][d]);
        expect_eq($sformatf("force[%0d][%0d]", i, d), longint'(forces[i][d]), f_m[i][d]);
      end
  endtask

  task automatic load_chip(input logic [1:0] mask);
    for (int l = 0; l < m.nl; l++)
      for (int j = 0; j < m.sz[l+1]; j++)
        for (int k = 0; k <= m.sz[l]; k++) begin
          cfg_we = 1; cfg_chip_mask = mask; cfg_layer = LAYER_SEL_W'(l);
          cfg_addr = CFG_ADDR_W'(j * (m.sz[l] + 1) + k); cfg_wdata = m.cfg_word(l, j, k);
          @(negedge clk);
        end
    cfg_we = 0;
    n_cfg_masked++;
  endtask

  task automatic wr(input st_sel_e sel, input int at, input int dm, input longint v);
    st_we = 1; st_sel = sel; st_atom = 2'(at); st_dim = 2'(dm); st_wdata = fx_t'(v);
    @(negedge clk);
    st_we = 0;
  endtask

  // Stand-in features of hydrogen h (1 or 2) from the model positions.
  function automatic void features(input int h, output longint f[8]);
    for (int k = 0; k < 8; k++) f[k] = 0;
    f[0] = sat13(r_m[h][0] - r_m[0][0]);
    f[1] = sat13(r_m[h][1] - r_m[0][1]);
    f[2] = sat13(r_m[3-h][0] - r_m[h][0]);
  endfunction

  // Reference of one MD step given the current model positions.
  task automatic model_step(input longint f1[8], input longint f2[8]);
    longint o1 [8];
    longint o2 [8];
    m.eval(f1, o1);
    m.eval(f2, o2);
    for (int d = 0; d < D; d++) begin
      f_m[1][d] = o1[d];
      f_m[2][d] = o2[d];
      f_m[0][d] = sat13(-(o1[d] + o2[d]));
    end
    for (int i = 0; i < 3; i++)
      for (int d = 0; d < D; d++) begin
        v_m[i][d] = sat13(v_m[i][d] + floor_div(f_m[i][d] * kv_m[i], 1024));
        r_m[i][d] = sat13(r_m[i][d] + floor_div(v_m[i][d] * kdt_m, 1024));
      end
  endtask

  task automatic run(input int n, input int max_delay);
    int t0;
    @(negedge clk);
    n_steps = 16'(n); start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    for (int s = 0; s < n; s++) begin
      longint f1 [8];
      longint f2 [8];
      int dly;
      while (!fe_req) @(negedge clk);
      if (s == 5 && max_delay != 0) begin  // host writes are ignored during a run
        wr(ST_POS, 1, 0, 123);
        wr(ST_DT, 0, 0, 1000);
        n_blocked_writes++;
      end
      compare_state();
      features(1, f1);
      features(2, f2);
      dly = int'($urandom_range(0, max_delay));
      if (dly == 0) n_immediate++;
      else n_stall++;
      repeat (dly) @(negedge clk);
      fe_valid = 1;
      for (int k = 0; k < 3; k++) begin
        feat_h1[k] = fx_t'(f1[k]);
        feat_h2[k] = fx_t'(f2[k]);
      end
      @(negedge clk);
      fe_valid = 0;
      model_step(f1, f2);
      n_steps_run++;
    end
    while (!done) @(negedge clk);
    if (max_delay == 0) expect_eq("cycles of a run", longint'(cyc - t0), longint'(11 * n));
    expect_eq("step_count", longint'(step_count), longint'(n));
    compare_state();
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 3; k++) begin feat_h1[k] = '0; feat_h2[k] = '0; end
    for (int i = 0; i < 3; i++) for (int d = 0; d < D; d++) f_m[i][d] = 0;
    m = new(3, 3, 2, 2);
    m.rand_init(3.0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    load_chip(2'b01);
    load_chip(2'b10);
    // Water-like geometry in the molecular plane (Q2.10 units of 1 A):
    // O at the origin, H at (+-0.757, 0.586).
    r_m[0][0] = 0;    r_m[0][1] = 0;
    r_m[1][0] = 775;  r_m[1][1] = 600;
    r_m[2][0] = -775; r_m[2][1] = 600;
    kv_m[0] = 4; kv_m[1] = 60; kv_m[2] = 60;
    kdt_m = 100;
    for (int i = 0; i < 3; i++) begin
      wr(ST_KV, i, 0, kv_m[i]);
      for (int d = 0; d < D; d++) begin
        v_m[i][d] = longint'($urandom_range(0, 100)) - 50;
        wr(ST_POS, i, d, r_m[i][d]);
        wr(ST_VEL, i, d, v_m[i][d]);
      end
    end
    wr(ST_DT, 0, 0, kdt_m);
    run(20, 0);
    run(200, 3);
    run(0, 0);
    n_zero_run++;
    expect_eq("zero-step run leaves state", longint'(pos[1][0]), r_m[1][0]);
    run(50, 0);
    $display("mechanisms: stalls=%0d immediate=%0d steps=%0d act_sat=%0d act_mid=%0d left_terms=%0d masked_loads=%0d zero_runs=%0d blocked_writes=%0d",
             n_stall, n_immediate, n_steps_run, m.n_sat, m.n_mid, m.n_left, n_cfg_masked, n_zero_run, n_blocked_writes);
    checks++;
    if (n_stall == 0 || n_immediate == 0 || n_steps_run == 0 || m.n_sat == 0 || m.n_mid == 0 ||
        m.n_left == 0 || n_cfg_masked < 2 || n_zero_run == 0 || n_blocked_writes == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
