// mlmd_system: the heterogeneous MLMD computer for one water molecule.
//
// Two MLP force chips and the FPGA-side logic that surrounds them. Atom 0 is
// the oxygen, atoms 1 and 2 the hydrogens. Each MD step the controller asks
// for the features of both hydrogen atoms of the current positions, sends
// them to the two chips at the same time, captures the two predicted
// hydrogen forces, forms the oxygen force from Newton's third law and lets
// the integrator advance velocities and positions. The weights of both chips
// and the initial positions, velocities and gains are written by the host
// before start.
//
// Feature extraction itself is outside this module: fe_req with the current
// positions (pos) goes out, and the two feature vectors come back with
// fe_valid, in the same cycle or later.
//
// Interface:
//   cfg_*      host writes into the chips' parameter memories; cfg_chip_mask
//              bit c enables chip c (both hydrogens normally share one model).
//   st_*       host writes of positions, velocities and gains (md_integrator).
//   start/n_steps/busy/done/step_count  run control.
//   fe_req/pos, fe_valid/feat_h1/feat_h2  feature-extraction port.
//   vel, forces  current velocities and the forces of the last step.
// Timing: 11 cycles per MD step at the defaults when features are returned
// in the cycle they are requested (the issue cycle, 9 cycles of chip latency,
// one integration cycle).
//
// Follows the specification: two chips working in parallel, one per
// hydrogen atom; oxygen force by Newton's third law; integration; the loop.
// Own choices: all bus protocols, the atom numbering, force capture
// registers and in-plane (DIM = N_OUT = 2) coordinates.
module mlmd_system
  import mlmd_pkg::*;
#(
  parameter int unsigned N_FEAT       = 3,
  parameter int unsigned N_HID        = 3,
  parameter int unsigned N_HID_LAYERS = 2,
  parameter int unsigned DIM          = 2,
  parameter int unsigned STEP_W       = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host: chip parameter memories
  input  logic                   cfg_we,
  input  logic [1:0]             cfg_chip_mask,
  input  logic [LAYER_SEL_W-1:0] cfg_layer,
  input  logic [CFG_ADDR_W-1:0]  cfg_addr,
  input  logic [CFG_W-1:0]       cfg_wdata,
  // host: integrator state and gains
  input  logic                   st_we,
  input  st_sel_e                st_sel,
  input  logic [1:0]             st_atom,
  input  logic [1:0]             st_dim,
  input  fx_t                    st_wdata,
  // host: run control
  input  logic                   start,
  input  logic [STEP_W-1:0]      n_steps,
  output logic                   busy,
  output logic                   done,
  output logic [STEP_W-1:0]      step_count,
  // feature extraction
  output logic                   fe_req,
  output fx_t                    pos     [3][DIM],
  input  logic                   fe_valid,
  input  fx_t                    feat_h1 [N_FEAT],
  input  fx_t                    feat_h2 [N_FEAT],
  // observation
  output fx_t                    vel     [3][DIM],
  output fx_t                    forces  [3][DIM]
);

  logic mlp_issue, integ_step;
  logic chip_v [2];
  fx_t  chip_f [2][DIM];
  fx_t  f_h1_q [DIM];
  fx_t  f_h2_q [DIM];
  fx_t  f_o    [DIM];

  md_controller #(.STEP_W(STEP_W)) u_ctrl (
    .clk, .rst_n, .start, .n_steps, .busy, .done, .step_count,
    .fe_req, .fe_valid, .mlp_issue,
    .chip0_valid(chip_v[0]), .chip1_valid(chip_v[1]),
    .integ_step
  );

  mlp_chip #(.N_IN(N_FEAT), .N_HID(N_HID), .N_HID_LAYERS(N_HID_LAYERS), .N_OUT(DIM)) u_chip_h1 (
    .clk, .rst_n,
    .cfg_we(cfg_we && cfg_chip_mask[0]), .cfg_layer, .cfg_addr, .cfg_wdata,
    .in_valid(mlp_issue), .feat(feat_h1),
    .out_valid(chip_v[0]), .force_o(chip_f[0])
  );

  mlp_chip #(.N_IN(N_FEAT), .N_HID(N_HID), .N_HID_LAYERS(N_HID_LAYERS), .N_OUT(DIM)) u_chip_h2 (
    .clk, .rst_n,
    .cfg_we(cfg_we && cfg_chip_mask[1]), .cfg_layer, .cfg_addr, .cfg_wdata,
    .in_valid(mlp_issue), .feat(feat_h2),
    .out_valid(chip_v[1]), .force_o(chip_f[1])
  );

  // Forces returned by the chips, held until the integration step.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < int'(DIM); d++) begin
        f_h1_q[d] <= '0;
        f_h2_q[d] <= '0;
      end
    end else begin
      if (chip_v[0]) f_h1_q <= chip_f[0];
      if (chip_v[1]) f_h2_q <= chip_f[1];
    end
  end

  newton3_oxygen #(.DIM(DIM)) u_n3 (.f_h1(f_h1_q), .f_h2(f_h2_q), .f_o);

  always_comb begin
    forces[0] = f_o;
    forces[1] = f_h1_q;
    forces[2] = f_h2_q;
  end

  md_integrator #(.N_ATOMS(3), .DIM(DIM)) u_integ (
    .clk, .rst_n,
    .st_we(st_we && !busy), .st_sel, .st_atom, .st_dim, .st_wdata,
    .step(integ_step), .f(forces), .step_done(),
    .pos, .vel
  );

endmodule
