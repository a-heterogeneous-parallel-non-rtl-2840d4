// matrix_unit (MU): one neuron row of a layer, i.e. one row of the weight
// matrix times the layer input vector, plus the neuron's bias.
//
// It holds N_IN shift units, one per input a_k. Their products p_jk are
// registered (the "g" register of the near-memory datapath), then added
// together with the bias b_j and the sum q_j is registered (the "h"
// register). Weights and bias arrive in parallel from the layer's local
// parameter memory, so no parameter is fetched over a bus during inference.
//
// Interface: in_valid/a (input vector), w/b (static parameters),
// out_valid/q (neuron sum, 32-bit, 10 fractional bits).
// Timing: two register stages; a vector accepted in cycle t appears on q
// with out_valid in cycle t+2. A new vector may enter every cycle. Stage
// registers only load when their valid is high.
//
// Follows the specification: k shift units feeding one adder with the bias;
// the two register stages follow the register/logic alternation of the
// near-memory computing scheme. The registered reset of the valid bits is an
// own choice.
module matrix_unit
  import mlmd_pkg::*;
#(
  parameter int unsigned N_IN = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  fx_t          a   [N_IN],
  input  shift_param_t w   [N_IN],
  input  fx_t          b,
  output logic         out_valid,
  output acc_t         q
);

  acc_t p     [N_IN];
  acc_t p_q   [N_IN];
  logic s1_valid;

  for (genvar k = 0; k < N_IN; k++) begin : g_su
    shift_unit u_su (.a(a[k]), .w(w[k]), .p(p[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_valid  <= in_valid;
      out_valid <= s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) p_q <= p;
  end

  acc_t sum;
  always_comb begin
    sum = acc_t'(b);
    for (int k = 0; k < int'(N_IN); k++) sum += p_q[k];
  end

  always_ff @(posedge clk) begin
    if (s1_valid) q <= sum;
  end

endmodule
