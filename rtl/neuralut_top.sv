// neuralut_top: a complete NeuraLUT circuit-level network.
//
// The network is a chain of NUM_LAYERS layers of L-LUTs (llut_layer). Layer i
// has LAYER_SIZE[i] L-LUTs, each with fan-in FANIN[i] and a BETA_OUT[i]-bit
// output; it reads the activations of layer i-1, or the network input for
// layer 0. Between layers the network is sparse (F wires per L-LUT); inside
// every L-LUT a dense residual sub-network of depth SUBNET.depth, width
// SUBNET.width and skip step SUBNET.skip is hidden in a ROM. Every layer ends
// in a register, so one layer is evaluated per clock cycle.
//
// Interface: in_x carries N_INPUTS already-quantized features of BETA_IN bits
// (feature i at bits [i*BETA_IN +: BETA_IN]); out_y carries the last layer's
// activations, one per output class, in the same packing. in_valid/out_valid
// mark which cycles hold a sample. Timing: out_y shows the result for the
// in_x sampled NUM_LAYERS rising edges earlier; a new sample can enter every
// cycle (throughput one inference per clock). rst_n (synchronous, active low)
// clears only the valid pipeline.
//
// The defaults are the MNIST model HDR-5L of the paper: 784 inputs of 2 bits,
// layers of 256, 100, 100, 100 and 10 L-LUTs, beta = 2, F = 6, and hidden
// sub-networks with L = 4, N = 16, S = 2. The jet-tagging models JSC-2L and
// JSC-5L are obtained by overriding the parameters. The input features are
// assumed to be quantized outside (the paper's batch-norm and quantizer of the
// raw features are learned in training); the classes' scores are output as
// they are, with no argmax, which the paper does not describe.
module neuralut_top
  import neuralut_pkg::*;
#(
  parameter int          NUM_LAYERS             = 5,
  parameter int          N_INPUTS               = 784,
  parameter int          BETA_IN                = 2,
  parameter int          LAYER_SIZE [NUM_LAYERS] = '{256, 100, 100, 100, 10},
  parameter int          FANIN      [NUM_LAYERS] = '{6, 6, 6, 6, 6},
  parameter int          BETA_OUT   [NUM_LAYERS] = '{2, 2, 2, 2, 2},
  parameter subnet_cfg_t SUBNET                 = '{depth: 4, width: 16, skip: 2},
  localparam int         OUT_W = LAYER_SIZE[NUM_LAYERS-1] * BETA_OUT[NUM_LAYERS-1]
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [N_INPUTS*BETA_IN-1:0] in_x,
  output logic                        out_valid,
  output logic [OUT_W-1:0]            out_y
);

  for (genvar i = 0; i < NUM_LAYERS; i++) begin : g_layer
    localparam int N_IN = (i == 0) ? N_INPUTS : LAYER_SIZE[(i == 0) ? 0 : i-1];
    localparam int B_IN = (i == 0) ? BETA_IN  : BETA_OUT[(i == 0) ? 0 : i-1];

    logic                                 v;
    logic [LAYER_SIZE[i]*BETA_OUT[i]-1:0] act;

    if (i == 0) begin : g_first
      llut_layer #(
        .LAYER_ID(i), .N_IN(N_IN), .N_OUT(LAYER_SIZE[i]), .F(FANIN[i]),
        .BETA_IN(B_IN), .BETA_OUT(BETA_OUT[i]), .SUBNET(SUBNET)
      ) u_layer (
        .clk, .rst_n, .valid_i(in_valid), .x_i(in_x), .valid_o(v), .y_o(act)
      );
    end else begin : g_next
      llut_layer #(
        .LAYER_ID(i), .N_IN(N_IN), .N_OUT(LAYER_SIZE[i]), .F(FANIN[i]),
        .BETA_IN(B_IN), .BETA_OUT(BETA_OUT[i]), .SUBNET(SUBNET)
      ) u_layer (
        .clk, .rst_n, .valid_i(g_layer[i-1].v), .x_i(g_layer[i-1].act),
        .valid_o(v), .y_o(act)
      );
    end
  end

  assign out_valid = g_layer[NUM_LAYERS-1].v;
  assign out_y     = g_layer[NUM_LAYERS-1].act;

endmodule
