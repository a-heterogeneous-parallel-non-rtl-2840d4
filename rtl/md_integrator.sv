// md_integrator: the time-integration stage of molecular dynamics.
//
// Keeps the position r and velocity v of N_ATOMS atoms with DIM components
// each, and on every step pulse advances them by one time step:
//
//   v(t)      = v(t-dt) + F(t) * (dt/m_i)
//   r(t+dt)   = r(t)    + v(t) * dt
//
// The new velocity is used for the position update (semi-implicit Euler, as
// the two update equations are written). All components are updated in
// parallel in one clock, using one pair of fixed-point multipliers per
// component; products are Q2.10 x Q2.10, shifted back by 10 bits
// (arithmetic, rounding toward minus infinity) and the sums saturated.
//
// Interface: st_we/st_sel/st_atom/st_dim/st_wdata host writes of positions,
// velocities, the per-atom gain dt/m_i (ST_KV) and the shared gain dt (ST_DT);
// step/f: advance one step with forces f; step_done pulses one cycle later,
// when pos/vel hold the new state.
// Timing: one clock per step.
//
// Follows the specification: the two update equations, the gains dt/m_i and
// dt, Q2.10 arithmetic. Own choices: gains as host-written Q2.10 registers
// (their units set the scaling of the whole simulation), saturation, reset
// to zero, and DIM = 2 (the force network has two outputs; a three-atom
// molecule with no external force moves in its own plane, so the design
// integrates the two in-plane coordinates).
module md_integrator
  import mlmd_pkg::*;
#(
  parameter int unsigned N_ATOMS = 3,
  parameter int unsigned DIM     = 2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    st_we,
  input  st_sel_e st_sel,
  input  logic [1:0] st_atom,
  input  logic [1:0] st_dim,
  input  fx_t     st_wdata,
  input  logic    step,
  input  fx_t     f   [N_ATOMS][DIM],
  output logic    step_done,
  output fx_t     pos [N_ATOMS][DIM],
  output fx_t     vel [N_ATOMS][DIM]
);

  fx_t kv [N_ATOMS];
  fx_t kdt;
  fx_t v_new [N_ATOMS][DIM];
  fx_t r_new [N_ATOMS][DIM];

  function automatic acc_t fx_mul(input fx_t fa, input fx_t fb);
    logic signed [2*DATA_W-1:0] m;
    m = fa * fb;
    return acc_t'(m) >>> FRAC_W;
  endfunction

  always_comb begin
    for (int i = 0; i < int'(N_ATOMS); i++)
      for (int d = 0; d < int'(DIM); d++) begin
        v_new[i][d] = sat_fx(acc_t'(vel[i][d]) + fx_mul(f[i][d], kv[i]));
        r_new[i][d] = sat_fx(acc_t'(pos[i][d]) + fx_mul(v_new[i][d], kdt));
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_done <= 1'b0;
      kdt       <= '0;
      for (int i = 0; i < int'(N_ATOMS); i++) begin
        kv[i] <= '0;
        for (int d = 0; d < int'(DIM); d++) begin
          pos[i][d] <= '0;
          vel[i][d] <= '0;
        end
      end
    end else begin
      step_done <= step;
      if (step) begin
        pos <= r_new;
        vel <= v_new;
      end else if (st_we) begin
        for (int i = 0; i < int'(N_ATOMS); i++) begin
          if (int'(st_atom) == i) begin
            if (st_sel == ST_KV) kv[i] <= st_wdata;
            for (int d = 0; d < int'(DIM); d++)
              if (int'(st_dim) == d) begin
                if (st_sel == ST_POS) pos[i][d] <= st_wdata;
                if (st_sel == ST_VEL) vel[i][d] <= st_wdata;
              end
          end
        end
        if (st_sel == ST_DT) kdt <= st_wdata;
      end
    end
  end

endmodule
