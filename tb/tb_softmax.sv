// tb_softmax: random and corner-case score triples (equal scores, one
// dominant score, extreme values, ties). Probabilities are compared with the
// integer reference, the class with the index of the largest score, the sum of
// the probabilities with 1.0 (1024) within 3 LSB, and the latency with two
// clocks.
module tb_softmax;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  fx16_t [2:0] in_val = '0, out_prob;
  logic [1:0] out_class;
  int checks = 0, failures = 0;

  softmax dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(int a, int b, int c);
    int z [3], p [3], cls, sum;
    z = '{a, b, c};
    run_softmax(z, p, cls);
    @(negedge clk);
    in_valid = 1;
    for (int k = 0; k < 3; k++) in_val[k] = 16'(z[k]);
    @(negedge clk); in_valid = 0;
    checks++;
    if (out_valid) begin failures++; $display("result one clock early"); end
    @(negedge clk);
    checks++;
    if (!out_valid) begin failures++; $display("result missing after two clocks"); end
    sum = 0;
    for (int k = 0; k < 3; k++) begin
      sum += int'(out_prob[k]);
      checks++;
      if (int'(out_prob[k]) != p[k]) begin
        failures++;
        if (failures < 10) $display("z=(%0d,%0d,%0d) p[%0d] of %h expected %0d", a, b, c, k, out_prob, p[k]);
      end
    end
    checks++;
    if (int'(out_class) != cls) begin failures++; $display("class %0d expected %0d", out_class, cls); end
    checks++;
    if (sum < 1021 || sum > 1024) begin failures++; $display("probabilities sum to %0d", sum); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    one(0, 0, 0);
    one(1024, 0, 0);
    one(0, 5000, -3000);
    one(-32768, 32767, 0);
    one(300, 300, -100);
    one(-5, -5, -5);
    one(0, 0, 2048);
    for (int n = 0; n < 300; n++)
      one(rnd(-4096, 4096), rnd(-4096, 4096), rnd(-4096, 4096));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
