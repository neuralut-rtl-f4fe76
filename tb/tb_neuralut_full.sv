// tb_neuralut_full: the network at its default size, the MNIST model
// HDR-5L (784 inputs of 2 bits, layers of 256, 100, 100, 100, 10 L-LUTs,
// F = 6, beta = 2, sub-networks L = 4, N = 16, S = 2).
//
// The ROMs are filled at time zero (about 2.3 million table words), then a
// short stream of random 784-pixel samples is pushed through back to back.
// Each of the 10 class scores must equal the reference network of
// tb_ref_pkg, and must appear 5 cycles (one per L-LUT layer) after its
// sample.
module tb_neuralut_full;
  import tb_ref_pkg::*;

  localparam int NL = 5, NI = 784, BI = 2, OW = 20;
  localparam int SAMPLES = 12;

  logic             clk = 0;
  logic             rst_n;
  logic             in_valid;
  logic [NI*BI-1:0] in_x;
  logic             out_valid;
  logic [OW-1:0]    out_y;

  int checks = 0, failures = 0, n_skip = 0;

  neuralut_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (SAMPLES + 200) @(posedge clk);
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

  function automatic logic [OW-1:0] reference(input logic [NI*BI-1:0] x);
    int xi[], y[];
    int sizes[] = '{256, 100, 100, 100, 10};
    int fans[]  = '{6, 6, 6, 6, 6};
    int betas[] = '{2, 2, 2, 2, 2};
    logic [OW-1:0] r;
    xi = new[NI];
    foreach (xi[i]) xi[i] = int'(x[i*BI +: BI]);
    net_eval(xi, sizes, fans, betas, 4, 16, 2, y, n_skip);
    foreach (y[m]) r[m*2 +: 2] = 2'(y[m]);
    return r;
  endfunction

  logic [OW-1:0] expected [SAMPLES];
  int            seen_classes [int];

  initial begin
    int got;
    rst_n    = 0;
    in_valid = 0;
    in_x     = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // samples enter on consecutive cycles; results are read NL cycles later
    fork
      begin
        for (int s = 0; s < SAMPLES; s++) begin
          for (int i = 0; i < NI; i++) in_x[i*BI +: BI] = BI'($urandom);
          in_valid    = 1;
          expected[s] = reference(in_x);
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        got = 0;
        repeat (NL) @(negedge clk);
        for (int s = 0; s < SAMPLES; s++) begin
          check(out_valid == 1'b1, $sformatf("sample %0d valid after %0d cycles", s, NL));
          check(out_y == expected[s], $sformatf("sample %0d: %h expected %h", s, out_y, expected[s]));
          for (int m = 0; m < 10; m++) seen_classes[int'(out_y[m*2 +: 2])] = 1;
          @(negedge clk);
        end
        check(out_valid == 1'b0, "pipeline empties after the last sample");
      end
    join
    check(seen_classes.num() > 1, "class scores are not constant");
    check(n_skip > 0, "skip connections changed some L-LUT outputs");
    $display("skip connections changed %0d L-LUT outputs", n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
