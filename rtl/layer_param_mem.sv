// layer_param_mem: the locally distributed parameter memory of one MLP layer.
//
// Holds, for each of the N_OUT neurons, N_IN stored weights (sign and three
// shift exponents) and one bias, as flip-flops placed next to the matrix
// units. All entries are read in parallel every cycle, which is what lets
// the layer compute without fetching parameters. The memory is written once
// by the host before inference and then left unchanged for the whole
// trajectory.
//
// Interface: we/addr/wdata write port. Word address j*(N_IN+1)+k holds the
// weight from input k to neuron j for k < N_IN; k = N_IN holds neuron j's
// bias in wdata[12:0] (Q2.10). Writes to addresses beyond the layer are
// ignored. Outputs w[j][k] and b[j] are the stored values.
// Timing: a write takes effect at the clock edge; reads are immediate.
//
// Follows the specification: parameters stored as s, n1, n2, n3 in memory
// local to the layer, initialised once. Own choices: the address map, the
// reset value (all weights zero, all biases zero) and flip-flop storage.
module layer_param_mem
  import mlmd_pkg::*;
#(
  parameter int unsigned N_IN  = 3,
  parameter int unsigned N_OUT = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  we,
  input  logic [CFG_ADDR_W-1:0] addr,
  input  logic [CFG_W-1:0]      wdata,
  output shift_param_t          w [N_OUT][N_IN],
  output fx_t                   b [N_OUT]
);

  localparam int unsigned ROW   = N_IN + 1;
  localparam int unsigned DEPTH = N_OUT * ROW;

  initial begin
    assert (DEPTH <= (1 << CFG_ADDR_W))
      else $fatal(1, "layer_param_mem: layer does not fit the config address space");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < int'(N_OUT); j++) begin
        b[j] <= '0;
        for (int k = 0; k < int'(N_IN); k++) w[j][k] <= '0;
      end
    end else if (we && (int'(addr) < int'(DEPTH))) begin
      for (int j = 0; j < int'(N_OUT); j++) begin
        for (int k = 0; k < int'(N_IN); k++)
          if (int'(addr) == j * int'(ROW) + k) w[j][k] <= shift_param_t'(wdata);
        if (int'(addr) == j * int'(ROW) + int'(N_IN)) b[j] <= fx_t'(wdata[DATA_W-1:0]);
      end
    end
  end

endmodule
