// tb_md_integrator: loads positions, velocities and gains for three atoms,
// applies 500 steps with random forces and checks after every step that
// v += F*dt/m and then r += v*dt (with the new v), in Q2.10 with floor
// rounding and saturation, and that step_done follows step by one clock.
module tb_md_integrator;
  import mlmd_pkg::*;
  import tb_ref_pkg::*;

  localparam int NA = 3, D = 2;
  logic clk = 0, rst_n = 0;
  logic st_we = 0;
  st_sel_e st_sel = ST_POS;
  logic [1:0] st_atom = '0, st_dim = '0;
  fx_t st_wdata = '0;
  logic step = 0;
  fx_t f [NA][D];
  logic step_done;
  fx_t pos [NA][D];
  fx_t vel [NA][D];
  longint r_m [NA][D];
  longint v_m [NA][D];
  longint kv_m [NA];
  longint kdt_m;
  int checks = 0, failures = 0, n_sat = 0;

  md_integrator dut (
    .clk, .rst_n, .st_we, .st_sel, .st_atom, .st_dim, .st_wdata,
    .step, .f, .step_done, .pos, .vel);

  always #5 clk = ~clk;

  task automatic wr(input st_sel_e sel, input int at, input int dm, input longint v);
    st_we = 1; st_sel = sel; st_atom = 2'(at); st_dim = 2'(dm); st_wdata = fx_t'(v);
    @(negedge clk);
    st_we = 0;
  endtask

  task automatic compare();
    for (int i = 0; i < NA; i++)
      for (int d = 0; d < D; d++) begin
        checks += 2;
        if (longint'(pos[i][d]) !== r_m[i][d] || longint'(vel[i][d]) !== v_m[i][d]) begin
          failures++;
          $display("FAIL atom %0d dim %0d: r=%0d (exp %0d) v=%0d (exp %0d)",
                   i, d, pos[i][d], r_m[i][d], vel[i][d], v_m[i][d]);
        end
      end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NA; i++) for (int d = 0; d < D; d++) f[i][d] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NA; i++) begin
      kv_m[i] = longint'($urandom_range(20, 200));
      wr(ST_KV, i, 0, kv_m[i]);
      for (int d = 0; d < D; d++) begin
        r_m[i][d] = longint'($urandom_range(0, 2000)) - 1000;
        v_m[i][d] = longint'($urandom_range(0, 200)) - 100;
        wr(ST_POS, i, d, r_m[i][d]);
        wr(ST_VEL, i, d, v_m[i][d]);
      end
    end
    kdt_m = 64;
    wr(ST_DT, 0, 0, kdt_m);
    compare();
    for (int s = 0; s < 500; s++) begin
      for (int i = 0; i < NA; i++)
        for (int d = 0; d < D; d++) begin
          f[i][d] = fx_t'(int'($urandom_range(0, 2048)) - 1024);
          v_m[i][d] = sat13(v_m[i][d] + floor_div(longint'(f[i][d]) * kv_m[i], 1024));
          if (v_m[i][d] == 4095 || v_m[i][d] == -4096) n_sat++;
          r_m[i][d] = sat13(r_m[i][d] + floor_div(v_m[i][d] * kdt_m, 1024));
        end
      step = 1;
      @(negedge clk);
      step = 0;
      checks++;
      if (!step_done) begin failures++; $display("FAIL step_done missing"); end
      compare();
      if (s == 250) begin            // the state can be rewritten between steps
        kdt_m = 200;
        wr(ST_DT, 0, 0, kdt_m);
        checks++;
        if (step_done) begin failures++; $display("FAIL step_done without step"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
