// tb_dense_layer: the 256->12 layer with ReLU (default parameters) fed as 16
// beats of 16 values with random idle clocks, against the integer reference
// (exact sum, floor to 10 fraction bits, wrap, then ReLU with rounding and
// saturation). Both the ap_fixed<16,6> outputs and the ReLU outputs are
// compared; out_valid must follow the last beat by one clock. Several
// vectors are run back to back to check that beat 0 clears the sums.
module tb_dense_layer;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, wt_we = 0, out_valid;
  logic [3:0] in_idx = '0;
  fx7_t [15:0] in_act = '0;
  logic [11:0] wt_addr = '0;
  logic [15:0] wt_data = '0;
  fx16_t [11:0] out_val;
  fx7_t [11:0] out_act;
  int checks = 0, failures = 0;

  dense_layer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pre [12];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      int wm = (trial < 6) ? 16 : 63;
      random_params(wm, 100, 63);
      for (int i = 0; i < layer_size(2); i++) begin
        @(negedge clk); wt_we = 1; wt_addr = 12'(i); wt_data = 16'(param_at(2, i));
      end
      @(negedge clk); wt_we = 0;
      foreach (POOL2[a, b, c]) POOL2[a][b][c] = rnd(0, 63);
      run_dense();
      for (int o = 0; o < 12; o++) begin
        longint s;
        s = longint'(BD1[o]) * 64;
        for (int n = 0; n < 256; n++) s += longint'(POOL2[n / 64][(n / 16) % 4][n % 16]) * WD1[n][o];
        pre[o] = wrap16(s >>> 2);
      end
      for (int b = 0; b < 16; b++) begin
        if ($urandom % 3 == 0) begin @(negedge clk); in_valid = 0; end
        @(negedge clk);
        in_valid = 1; in_idx = 4'(b);
        for (int v = 0; v < 16; v++) in_act[v] = 7'(POOL2[b / 4][b % 4][v]);
        @(posedge clk); #1;
        checks++;
        if (out_valid != (b == 15)) begin failures++; $display("out_valid wrong after beat %0d", b); end
      end
      @(negedge clk); in_valid = 0;
      for (int o = 0; o < 12; o++) begin
        fx16_t gv;
        fx7_t ga;
        gv = out_val[o];
        ga = out_act[o];
        checks++;
        if (int'(gv) != pre[o] || int'(ga) != FC1[o]) begin
          failures++;
          if (failures < 10) $display("trial %0d out %0d: %0d/%0d, expected %0d/%0d", trial, o, gv, ga, pre[o], FC1[o]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
