// tb_neuralut_jsc: the two jet-substructure-tagging networks, end to end.
//
// Both take the 16 substructure features of a jet and score 5 jet classes
// with 4-bit L-LUT outputs and hidden sub-networks of depth L = 4 and skip
// step S = 2:
//   JSC-2L: inputs of 4 bits, layers of 32 and 5 L-LUTs, F = 3, N = 8
//   JSC-5L: inputs of 7 bits, layers of 128, 128, 128, 64 and 5 L-LUTs,
//           F = 2 in the first layer and 3 after it, N = 16
// Random feature vectors are streamed back to back through each network;
// every score must match the reference network of tb_ref_pkg and arrive
// after as many cycles as the network has layers (2 and 5).
module tb_neuralut_jsc;
  import tb_ref_pkg::*;
  import neuralut_pkg::subnet_cfg_t;

  localparam int SAMPLES = 40;

  // JSC-2L
  localparam int A_NL = 2, A_BI = 4;
  localparam int A_SIZES [A_NL] = '{32, 5};
  localparam int A_FAN   [A_NL] = '{3, 3};
  localparam int A_BETA  [A_NL] = '{4, 4};
  localparam subnet_cfg_t A_SUB = '{depth: 4, width: 8, skip: 2};
  // JSC-5L
  localparam int B_NL = 5, B_BI = 7;
  localparam int B_SIZES [B_NL] = '{128, 128, 128, 64, 5};
  localparam int B_FAN   [B_NL] = '{2, 3, 3, 3, 3};
  localparam int B_BETA  [B_NL] = '{4, 4, 4, 4, 4};
  localparam subnet_cfg_t B_SUB = '{depth: 4, width: 16, skip: 2};

  localparam int NI = 16, OW = 20;

  logic               clk = 0;
  logic               rst_n;
  logic               a_in_valid, b_in_valid, a_out_valid, b_out_valid;
  logic [NI*A_BI-1:0] a_in_x;
  logic [NI*B_BI-1:0] b_in_x;
  logic [OW-1:0]      a_out_y, b_out_y;

  int checks = 0, failures = 0, n_skip = 0;

  neuralut_top #(
    .NUM_LAYERS(A_NL), .N_INPUTS(NI), .BETA_IN(A_BI), .LAYER_SIZE(A_SIZES),
    .FANIN(A_FAN), .BETA_OUT(A_BETA), .SUBNET(A_SUB)
  ) u_jsc2l (
    .clk, .rst_n, .in_valid(a_in_valid), .in_x(a_in_x),
    .out_valid(a_out_valid), .out_y(a_out_y)
  );

  neuralut_top #(
    .NUM_LAYERS(B_NL), .N_INPUTS(NI), .BETA_IN(B_BI), .LAYER_SIZE(B_SIZES),
    .FANIN(B_FAN), .BETA_OUT(B_BETA), .SUBNET(B_SUB)
  ) u_jsc5l (
    .clk, .rst_n, .in_valid(b_in_valid), .in_x(b_in_x),
    .out_valid(b_out_valid), .out_y(b_out_y)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (4 * SAMPLES + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [OW-1:0] ref_net(input int xi[], input int sizes[], input int fans[],
                                            input int betas[], input subnet_cfg_t sub);
    int y[];
    logic [OW-1:0] r;
    net_eval(xi, sizes, fans, betas, int'(sub.depth), int'(sub.width), int'(sub.skip), y, n_skip);
    foreach (y[m]) r[m*4 +: 4] = 4'(y[m]);
    return r;
  endfunction

  logic [OW-1:0] a_exp [SAMPLES], b_exp [SAMPLES];

  initial begin
    int xa[], xb[];
    xa = new[NI];
    xb = new[NI];
    rst_n = 0;
    a_in_valid = 0; b_in_valid = 0;
    a_in_x = '0;    b_in_x = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    fork
      begin
        for (int s = 0; s < SAMPLES; s++) begin
          for (int i = 0; i < NI; i++) begin
            xa[i] = int'($urandom % 16);
            xb[i] = int'($urandom % 128);
            a_in_x[i*A_BI +: A_BI] = A_BI'(xa[i]);
            b_in_x[i*B_BI +: B_BI] = B_BI'(xb[i]);
          end
          a_exp[s] = ref_net(xa, '{32, 5}, '{3, 3}, '{4, 4}, A_SUB);
          b_exp[s] = ref_net(xb, '{128, 128, 128, 64, 5}, '{2, 3, 3, 3, 3}, '{4, 4, 4, 4, 4}, B_SUB);
          a_in_valid = 1; b_in_valid = 1;
          @(negedge clk);
        end
        a_in_valid = 0; b_in_valid = 0;
      end
      begin
        repeat (A_NL) @(negedge clk);
        for (int s = 0; s < SAMPLES; s++) begin
          check(a_out_valid, $sformatf("JSC-2L sample %0d valid after %0d cycles", s, A_NL));
          check(a_out_y == a_exp[s], $sformatf("JSC-2L sample %0d: %h expected %h", s, a_out_y, a_exp[s]));
          @(negedge clk);
        end
        check(!a_out_valid, "JSC-2L pipeline empties");
      end
      begin
        repeat (B_NL) @(negedge clk);
        for (int s = 0; s < SAMPLES; s++) begin
          check(b_out_valid, $sformatf("JSC-5L sample %0d valid after %0d cycles", s, B_NL));
          check(b_out_y == b_exp[s], $sformatf("JSC-5L sample %0d: %h expected %h", s, b_out_y, b_exp[s]));
          @(negedge clk);
        end
        check(!b_out_valid, "JSC-5L pipeline empties");
      end
    join
    check(n_skip > 0, "skip connections changed some L-LUT outputs");
    $display("skip connections changed %0d L-LUT outputs", n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
