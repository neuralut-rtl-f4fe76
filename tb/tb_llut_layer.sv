// tb_llut_layer: self-checking testbench of one L-LUT layer.
//
// A small layer (12 inputs of 2 bits, 5 L-LUTs of fan-in 3, 3-bit outputs,
// sub-network L = 4, N = 8, S = 2) is driven with random samples every cycle,
// with random bubbles in valid_i. Every output word is compared, one cycle
// after its input, with tb_ref_pkg, which evaluates the hidden sub-network of
// each L-LUT directly. Also checked: the fan-in indices are distinct, valid_o
// follows valid_i by exactly one cycle, and reset clears valid_o. A second
// pass drives inputs that are all equal, the corners of the address space.
module tb_llut_layer;
  import tb_ref_pkg::*;

  localparam int N_IN = 12, N_OUT = 5, F = 3, BI = 2, BO = 3;
  localparam int L = 4, N = 8, S = 2;
  localparam int LAYER_ID = 3;
  localparam int CYCLES = 400;

  logic                  clk = 0;
  logic                  rst_n;
  logic                  valid_i;
  logic [N_IN*BI-1:0]    x_i;
  logic                  valid_o;
  logic [N_OUT*BO-1:0]   y_o;

  int checks = 0, failures = 0;
  int skip_effect = 0;

  llut_layer #(
    .LAYER_ID(LAYER_ID), .N_IN(N_IN), .N_OUT(N_OUT), .F(F),
    .BETA_IN(BI), .BETA_OUT(BO), .SUBNET('{depth: L, width: N, skip: S})
  ) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (CYCLES * 4) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N_OUT*BO-1:0] expect_y(input logic [N_IN*BI-1:0] x);
    logic [N_OUT*BO-1:0] y;
    int idx[], xin[];
    bit sm;
    for (int m = 0; m < N_OUT; m++) begin
      fanin(LAYER_ID, m, N_IN, F, idx);
      xin = new[F];
      foreach (idx[k]) xin[k] = int'(x[idx[k]*BI +: BI]);
      y[m*BO +: BO] = BO'(llut_out(LAYER_ID, m, xin, BO, L, N, S, sm));
    end
    return y;
  endfunction

  function automatic int count_skip(input logic [N_IN*BI-1:0] x);
    int idx[], xin[], n;
    bit sm;
    int q;
    n = 0;
    for (int m = 0; m < N_OUT; m++) begin
      fanin(LAYER_ID, m, N_IN, F, idx);
      xin = new[F];
      foreach (idx[k]) xin[k] = int'(x[idx[k]*BI +: BI]);
      q = llut_out(LAYER_ID, m, xin, BO, L, N, S, sm);
      if (sm) n++;
    end
    return n;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  logic [N_IN*BI-1:0] prev_x;
  logic               prev_v;
  int                 distinct_vals [int];

  initial begin
    int idx[];
    bit ok;
    rst_n   = 0;
    valid_i = 1;
    x_i     = '0;
    repeat (2) @(posedge clk);
    #1 check(valid_o == 1'b0, "reset clears valid_o");
    rst_n = 1;

    // fan-in slots are distinct and in range
    for (int m = 0; m < N_OUT; m++) begin
      fanin(LAYER_ID, m, N_IN, F, idx);
      ok = 1;
      foreach (idx[a]) begin
        if (idx[a] < 0 || idx[a] >= N_IN) ok = 0;
        foreach (idx[b]) if (a != b && idx[a] == idx[b]) ok = 0;
      end
      check(ok, $sformatf("fan-in of L-LUT %0d distinct", m));
    end

    // random traffic, one sample per cycle with bubbles
    for (int c = 0; c < CYCLES; c++) begin
      @(negedge clk);
      prev_x  = x_i;
      prev_v  = valid_i;
      if (c < 16) x_i = {N_IN{BI'(c % (1 << BI))}};  // corner inputs
      else for (int i = 0; i < N_IN; i++) x_i[i*BI +: BI] = BI'($urandom);
      valid_i = ($urandom % 4) != 0;
      @(posedge clk);
      #1;
      if (c > 0) begin
        check(y_o == expect_y(x_i), $sformatf("cycle %0d: y_o=%h expected %h", c, y_o, expect_y(x_i)));
        check(valid_o == valid_i, "valid_o follows valid_i after one cycle");
        skip_effect += count_skip(x_i);
        for (int m = 0; m < N_OUT; m++) distinct_vals[int'(y_o[m*BO +: BO])] = 1;
      end
    end

    // the outputs must not be constant: the tables differ across inputs
    check(distinct_vals.num() >= 3, "outputs take several values");
    check(skip_effect > 0, "skip connections change some outputs");
    $display("skip connections changed %0d outputs, %0d distinct output values",
             skip_effect, distinct_vals.num());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
