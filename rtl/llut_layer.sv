// llut_layer: one circuit-level layer of logical lookup tables (L-LUTs).
//
// The layer holds N_OUT L-LUTs. L-LUT m reads F activations of the previous
// layer, chosen once and for all by neuralut_pkg::fanin_select (a priori
// random sparsity), and concatenates them into an address of BETA_IN*F bits:
// the activation read through fan-in slot k sits at address bits
// [k*BETA_IN +: BETA_IN]. The address selects one word of the L-LUT's ROM,
// which has 2^(BETA_IN*F) words of BETA_OUT bits, and the word is registered.
// The ROM words are the truth table of the L-LUT's hidden residual
// sub-network, quantized to BETA_OUT bits; they are written once, at start-up,
// by evaluating neuralut_pkg::subnet_eval on every address.
//
// Interface: x_i holds N_IN activations of BETA_IN bits (activation i at
// bits [i*BETA_IN +: BETA_IN]); y_o holds N_OUT activations of BETA_OUT bits
// in the same order. valid_i is carried alongside the data as valid_o.
// Timing: one clock cycle. x_i sampled at a rising edge appears on y_o after
// that edge; a new x_i can be presented every cycle. Only the valid bit is
// reset (synchronous, active low); the ROM output registers hold data only.
//
// Follows the paper: ROM of 2^(BETA*F) words per L-LUT, register at the
// output, random fan-in F, the sub-network function. This design's own
// choices: the address bit order, the valid bit, the pseudo-random weights
// (see neuralut_pkg) and the reset of the valid bit.
module llut_layer
  import neuralut_pkg::*;
#(
  parameter int          LAYER_ID = 0,   // seeds the weights and the wiring
  parameter int          N_IN     = 784, // activations from the previous layer
  parameter int          N_OUT    = 256, // L-LUTs in this layer
  parameter int          F        = 6,   // fan-in of every L-LUT
  parameter int          BETA_IN  = 2,   // bits per input activation
  parameter int          BETA_OUT = 2,   // bits per output activation
  parameter subnet_cfg_t SUBNET   = '{depth: 4, width: 16, skip: 2}
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      valid_i,
  input  logic [N_IN*BETA_IN-1:0]   x_i,
  output logic                      valid_o,
  output logic [N_OUT*BETA_OUT-1:0] y_o
);

  localparam int ADDR_W = BETA_IN * F;
  localparam int DEPTH  = 1 << ADDR_W;

  // The ROMs of all L-LUTs of the layer, filled with their truth tables.
  logic [BETA_OUT-1:0] rom [N_OUT][DEPTH];

  initial begin : build_tables
    subnet_weights_t w;
    vec_t            x;
    for (int m = 0; m < N_OUT; m++) begin
      w = subnet_weights(LAYER_ID, m, F, SUBNET);
      x = '{default: 0};
      for (int a = 0; a < DEPTH; a++) begin
        for (int k = 0; k < F; k++)
          x[k] = int'((a >> (k * BETA_IN)) & ((1 << BETA_IN) - 1));
        rom[m][a] = BETA_OUT'(quantize(subnet_eval(w, x, F, SUBNET), BETA_OUT));
      end
    end
  end

  for (genvar m = 0; m < N_OUT; m++) begin : g_llut
    localparam fanin_t IDX = fanin_select(LAYER_ID, m, N_IN, F);
    logic [ADDR_W-1:0] addr;

    // Sparse wiring: fan-in slot k reads activation IDX[k].
    always_comb begin
      for (int k = 0; k < F; k++)
        addr[k*BETA_IN +: BETA_IN] = x_i[IDX[k]*BETA_IN +: BETA_IN];
    end

    always_ff @(posedge clk) begin
      y_o[m*BETA_OUT +: BETA_OUT] <= rom[m][addr];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
  end

  // Structural rules the parameters must meet.
  initial begin
    assert (F >= 1 && F <= MAX_F) else $fatal(1, "fan-in F=%0d out of range", F);
    assert (N_IN >= F) else $fatal(1, "N_IN=%0d smaller than F=%0d", N_IN, F);
    assert (SUBNET.depth >= 1 && SUBNET.depth <= MAX_L) else $fatal(1, "bad sub-network depth");
    assert (SUBNET.width <= MAX_N) else $fatal(1, "bad sub-network width");
    assert (SUBNET.skip == 0 || SUBNET.depth % SUBNET.skip == 0)
      else $fatal(1, "depth L must be a multiple of the skip step S");
  end

endmodule
