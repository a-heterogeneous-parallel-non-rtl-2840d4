// mlp_layer: one fully connected layer of the multiplication-less MLP,
// a_j = phi(sum_k w_jk * a_k + b_j).
//
// N_OUT matrix units (one per neuron) each take the whole input vector and
// their row of parameters from the layer's own parameter memory; each feeds
// an activation unit, whose result is registered as the layer output. That
// register drives the next layer directly, so intermediate results never
// leave the chip.
//
// Interface: cfg_we/cfg_addr/cfg_wdata write the layer's parameter memory
// (address map in layer_param_mem); in_valid/a is the input vector;
// out_valid/x the output vector (Q2.10).
// Timing: three register stages (products, neuron sums, activations); a
// vector entering in cycle t leaves in cycle t+3; one vector per cycle.
//
// Follows the specification: j MUs and j AUs per layer, parameters local to
// the layer, the activation applied in every layer (the output layer
// included, as the layer equation states it for l = 1..L+1). Own choice: the
// register placement between the stages.
module mlp_layer
  import mlmd_pkg::*;
#(
  parameter int unsigned N_IN  = 3,
  parameter int unsigned N_OUT = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_we,
  input  logic [CFG_ADDR_W-1:0] cfg_addr,
  input  logic [CFG_W-1:0]      cfg_wdata,
  input  logic                  in_valid,
  input  fx_t                   a [N_IN],
  output logic                  out_valid,
  output fx_t                   x [N_OUT]
);

  shift_param_t w      [N_OUT][N_IN];
  fx_t          b      [N_OUT];
  acc_t         q      [N_OUT];
  fx_t          phi    [N_OUT];
  logic [N_OUT-1:0] q_valid;

  layer_param_mem #(.N_IN(N_IN), .N_OUT(N_OUT)) u_mem (
    .clk, .rst_n, .we(cfg_we), .addr(cfg_addr), .wdata(cfg_wdata), .w, .b
  );

  for (genvar j = 0; j < N_OUT; j++) begin : g_neuron
    matrix_unit #(.N_IN(N_IN)) u_mu (
      .clk, .rst_n, .in_valid, .a, .w(w[j]), .b(b[j]),
      .out_valid(q_valid[j]), .q(q[j])
    );
    act_unit u_au (.q(q[j]), .phi(phi[j]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= &q_valid;
  end

  always_ff @(posedge clk) begin
    if (&q_valid) x <= phi;
  end

endmodule
