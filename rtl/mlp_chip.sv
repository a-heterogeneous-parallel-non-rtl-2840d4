// mlp_chip: the multilayer-perceptron force chip.
//
// A fully pipelined, multiplication-less MLP with N_IN inputs, N_HID_LAYERS
// hidden layers of N_HID neurons and N_OUT outputs; the default 3-3-3-2
// network takes the three features of one hydrogen atom of a water molecule
// and returns the two predicted force components on it. Layers are chained
// register to register: layer 0 takes the features, layers 1..N_HID_LAYERS-1
// are the further hidden layers and layer N_HID_LAYERS is the output layer.
// Each layer keeps its weights and biases in its own local memory.
//
// Interface:
//   cfg_we/cfg_layer/cfg_addr/cfg_wdata  host write port of the parameter
//       memories; cfg_layer picks the layer, cfg_addr the word in it
//       (see layer_param_mem). Parameters are written once before inference.
//   in_valid/feat   one feature vector (Q2.10); no back-pressure is needed
//       because the pipeline accepts a vector every cycle.
//   out_valid/force the predicted force components (Q2.10).
// Timing: latency 3*(N_HID_LAYERS+1) cycles (9 for the defaults), throughput
// one vector per clock.
//
// Follows the specification: the 3-3-3-2 topology, K = 3 shift weights,
// 13-bit Q2.10 arithmetic, one MU/AU pair per neuron in every layer and
// pipelined, near-memory operation. Own choices: the configuration bus and
// the plain parallel input and output buses (the real chip's pin-out is not
// described).
module mlp_chip
  import mlmd_pkg::*;
#(
  parameter int unsigned N_IN         = 3,
  parameter int unsigned N_HID        = 3,
  parameter int unsigned N_HID_LAYERS = 2,
  parameter int unsigned N_OUT        = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cfg_we,
  input  logic [LAYER_SEL_W-1:0] cfg_layer,
  input  logic [CFG_ADDR_W-1:0]  cfg_addr,
  input  logic [CFG_W-1:0]       cfg_wdata,
  input  logic                   in_valid,
  input  fx_t                    feat  [N_IN],
  output logic                   out_valid,
  output fx_t                    force_o [N_OUT]
);

  localparam int unsigned N_LAYERS = N_HID_LAYERS + 1;

  initial begin
    assert (N_HID_LAYERS >= 1 && N_LAYERS <= (1 << LAYER_SEL_W))
      else $fatal(1, "mlp_chip: unsupported number of layers");
  end

  fx_t  hid   [N_HID_LAYERS][N_HID];
  logic hid_v [N_HID_LAYERS];

  // First hidden layer.
  mlp_layer #(.N_IN(N_IN), .N_OUT(N_HID)) u_l0 (
    .clk, .rst_n,
    .cfg_we(cfg_we && cfg_layer == LAYER_SEL_W'(0)), .cfg_addr, .cfg_wdata,
    .in_valid, .a(feat), .out_valid(hid_v[0]), .x(hid[0])
  );

  // Further hidden layers.
  for (genvar l = 1; l < N_HID_LAYERS; l++) begin : g_hid
    mlp_layer #(.N_IN(N_HID), .N_OUT(N_HID)) u_l (
      .clk, .rst_n,
      .cfg_we(cfg_we && cfg_layer == LAYER_SEL_W'(l)), .cfg_addr, .cfg_wdata,
      .in_valid(hid_v[l-1]), .a(hid[l-1]), .out_valid(hid_v[l]), .x(hid[l])
    );
  end

  // Output layer.
  mlp_layer #(.N_IN(N_HID), .N_OUT(N_OUT)) u_lout (
    .clk, .rst_n,
    .cfg_we(cfg_we && cfg_layer == LAYER_SEL_W'(N_HID_LAYERS)), .cfg_addr, .cfg_wdata,
    .in_valid(hid_v[N_HID_LAYERS-1]), .a(hid[N_HID_LAYERS-1]),
    .out_valid, .x(force_o)
  );

endmodule
