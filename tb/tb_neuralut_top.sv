// tb_neuralut_top: end-to-end testbench of the L-LUT network.
//
// A reduced network (40 inputs of 2 bits, layers of 16, 8 and 4 L-LUTs with
// fan-in 4, 3, 3, 2-bit activations, hidden sub-networks L = 4, N = 8,
// S = 2) is fed a stream of random samples. Each result must appear exactly
// NUM_LAYERS cycles after its sample (one cycle per L-LUT layer) and match the
// reference network of tb_ref_pkg. The stream is made to contain every
// mechanism of the design at least once, and each is counted:
//   back_to_back - samples entered on consecutive cycles (full throughput)
//   bubble       - cycles with no sample between samples
//   skip         - L-LUT outputs changed by the hidden skip connections
//   reset        - a reset in mid-stream that must empty the valid pipeline
module tb_neuralut_top;
  import tb_ref_pkg::*;
  import neuralut_pkg::subnet_cfg_t;

  localparam int NL = 3, NI = 40, BI = 2;
  localparam int SIZES [NL] = '{16, 8, 4};
  localparam int FAN   [NL] = '{4, 3, 3};
  localparam int BETAS [NL] = '{2, 2, 2};
  localparam subnet_cfg_t SUB = '{depth: 4, width: 8, skip: 2};
  localparam int OW = SIZES[NL-1] * BETAS[NL-1];
  localparam int SAMPLES = 300;

  logic             clk = 0;
  logic             rst_n;
  logic             in_valid;
  logic [NI*BI-1:0] in_x;
  logic             out_valid;
  logic [OW-1:0]    out_y;

  int checks = 0, failures = 0;
  int n_back_to_back = 0, n_bubble = 0, n_skip = 0, n_reset = 0;

  neuralut_top #(
    .NUM_LAYERS(NL), .N_INPUTS(NI), .BETA_IN(BI), .LAYER_SIZE(SIZES),
    .FANIN(FAN), .BETA_OUT(BETAS), .SUBNET(SUB)
  ) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (SAMPLES * 8 + 100) @(posedge clk);
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

  function automatic logic [OW-1:0] reference(input logic [NI*BI-1:0] x, ref int skip_hits);
    int xi[], y[], sizes[], fans[], betas[];
    logic [OW-1:0] r;
    xi = new[NI];
    foreach (xi[i]) xi[i] = int'(x[i*BI +: BI]);
    sizes = new[NL]; fans = new[NL]; betas = new[NL];
    for (int l = 0; l < NL; l++) begin
      sizes[l] = SIZES[l]; fans[l] = FAN[l]; betas[l] = BETAS[l];
    end
    net_eval(xi, sizes, fans, betas, int'(SUB.depth), int'(SUB.width), int'(SUB.skip), y, skip_hits);
    foreach (y[m]) r[m*BETAS[NL-1] +: BETAS[NL-1]] = BETAS[NL-1]'(y[m]);
    return r;
  endfunction

  // Expected results, queued with the cycle they must come out in.
  typedef struct { logic [OW-1:0] y; longint due; } exp_t;
  exp_t   expq[$];
  longint cyc = 0;
  bit     in_reset;

  always @(posedge clk) cyc <= cyc + 1;

  // Output monitor: compares every valid output and its timing.
  exp_t got;

  always @(posedge clk) begin
    #1;
    if (rst_n && !in_reset) begin
      if (out_valid) begin
        if (expq.size() == 0) check(0, "output with no sample in flight");
        else begin
          got = expq.pop_front();
          check(cyc == got.due, $sformatf("latency: result at cycle %0d, due %0d", cyc, got.due));
          check(out_y == got.y, $sformatf("result %h, expected %h", out_y, got.y));
        end
      end else if (expq.size() > 0 && expq[0].due == cyc)
        check(0, "result due but out_valid low");
    end
  end

  initial begin
    bit   prev_valid;
    int   sent;
    exp_t e;
    rst_n    = 0;
    in_reset = 1;
    in_valid = 0;
    in_x     = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n    = 1;
    in_reset = 0;
    prev_valid = 0;
    sent = 0;
    while (sent < SAMPLES) begin
      @(negedge clk);
      // mid-stream reset with samples in flight
      if (sent == SAMPLES / 2 && n_reset == 0) begin
        in_valid = 1;
        @(negedge clk);
        rst_n = 0; in_reset = 1; in_valid = 0;
        expq.delete();
        repeat (2) @(negedge clk);
        #1 check(out_valid == 0, "reset empties the valid pipeline");
        rst_n = 1;
        repeat (NL + 1) begin
          @(posedge clk); #1 check(out_valid == 0, "no stale output after reset");
        end
        @(negedge clk);
        in_reset = 0;
        n_reset++;
        prev_valid = 0;
      end
      for (int i = 0; i < NI; i++) in_x[i*BI +: BI] = BI'($urandom);
      in_valid = ($urandom % 5) != 0;
      if (in_valid) begin
        e.y   = reference(in_x, n_skip);
        e.due = cyc + NL;  // cyc is incremented at the coming edge
        expq.push_back(e);
        if (prev_valid) n_back_to_back++;
        sent++;
      end else if (sent > 0) n_bubble++;
      prev_valid = in_valid;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (NL + 2) @(negedge clk);
    check(expq.size() == 0, "every sample produced a result");

    $display("mechanisms: back_to_back=%0d bubble=%0d skip=%0d reset=%0d",
             n_back_to_back, n_bubble, n_skip, n_reset);
    check(n_back_to_back > 0, "back-to-back samples exercised");
    check(n_bubble > 0, "bubbles exercised");
    check(n_skip > 0, "skip connections exercised");
    check(n_reset > 0, "mid-stream reset exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
