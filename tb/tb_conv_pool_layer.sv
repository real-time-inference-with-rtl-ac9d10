// tb_conv_pool_layer: both configurations of the convolution block used by
// the network, against the integer reference in cnn_ref_pkg:
//   layer 1: 64x64x1 ap_fixed<16,6> image -> 16x16x8 pooled map
//   layer 2: the reference 16x16x8 pooled map -> 4x4x16 pooled map
// Weights, biases and the image are random. Every pooled output (index and
// all channels) is compared, the number of outputs is checked, and 'done'
// must arrive (H+2)^2 + 3 clocks after the start edge (4359 and 327).
module tb_conv_pool_layer;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- layer 1
  logic s1 = 0, b1, d1, rd1_en, ov1;
  logic [11:0] rd1_addr;
  logic [0:0][15:0] rd1_data = '0;
  logic we1 = 0;
  logic [11:0] wa = '0;
  logic [15:0] wd = '0;
  logic [7:0] oi1;
  fx7_t [7:0] oa1;

  conv_pool_layer dut1 (
    .clk, .rst_n, .start(s1), .busy(b1), .done(d1),
    .rd_en(rd1_en), .rd_addr(rd1_addr), .rd_data(rd1_data),
    .wt_we(we1), .wt_addr(wa), .wt_data(wd),
    .out_valid(ov1), .out_idx(oi1), .out_act(oa1));

  always_ff @(posedge clk)
    if (rd1_en) rd1_data[0] <= 16'(IMGX[rd1_addr / 64][rd1_addr % 64]);

  // ---------------- layer 2
  logic s2 = 0, b2, d2, rd2_en, ov2;
  logic [7:0] rd2_addr;
  logic [7:0][6:0] rd2_data = '0;
  logic we2 = 0;
  logic [3:0] oi2;
  fx7_t [15:0] oa2;

  conv_pool_layer #(.H(16), .CIN(8), .COUT(16), .IN_W(7), .IN_FRAC(6)) dut2 (
    .clk, .rst_n, .start(s2), .busy(b2), .done(d2),
    .rd_en(rd2_en), .rd_addr(rd2_addr), .rd_data(rd2_data),
    .wt_we(we2), .wt_addr(wa), .wt_data(wd),
    .out_valid(ov2), .out_idx(oi2), .out_act(oa2));

  always_ff @(posedge clk)
    if (rd2_en)
      for (int c = 0; c < 8; c++) rd2_data[c] <= 7'(POOL1[rd2_addr / 16][rd2_addr % 16][c]);

  task automatic load(int sel);
    for (int i = 0; i < layer_size(sel); i++) begin
      @(negedge clk);
      we1 = (sel == 0); we2 = (sel == 1);
      wa = 12'(i); wd = 16'(param_at(sel, i));
    end
    @(negedge clk); we1 = 0; we2 = 0;
  endtask

  int n1, n2, cyc;

  always @(posedge clk) begin
    if (ov1) begin
      n1++;
      checks++;
      for (int c = 0; c < 8; c++)
        if (int'(oa1[c]) != POOL1[oi1 / 16][oi1 % 16][c]) begin
          failures++;
          if (failures < 10) $display("L1 idx %0d ch %0d: %0d, expected %0d", oi1, c, oa1[c], POOL1[oi1 / 16][oi1 % 16][c]);
          break;
        end
    end
    if (ov2) begin
      n2++;
      checks++;
      for (int c = 0; c < 16; c++)
        if (int'(oa2[c]) != POOL2[oi2 / 4][oi2 % 4][c]) begin
          failures++;
          if (failures < 10) $display("L2 idx %0d ch %0d: %0d, expected %0d", oi2, c, oa2[c], POOL2[oi2 / 4][oi2 % 4][c]);
          break;
        end
    end
  end

  task automatic trial(int wmax, int imax);
    random_params(wmax, 2048, 20);
    foreach (IMGX[r, c]) IMGX[r][c] = rnd(0, imax);
    run_conv1();
    run_conv2();
    begin
      int nz1 = 0, nz2 = 0;
      foreach (POOL1[a, b, c]) if (POOL1[a][b][c] != 0 && POOL1[a][b][c] != 63) nz1++;
      foreach (POOL2[a, b, c]) if (POOL2[a][b][c] != 0) nz2++;
      $display("reference: %0d of 2048 layer-1 outputs strictly between 0 and 63, %0d of 256 layer-2 outputs non-zero", nz1, nz2);
      checks++;
      if (nz1 == 0 || nz2 == 0) failures++;   // test data too degenerate to mean anything
    end
    load(0);
    load(1);
    n1 = 0; n2 = 0;
    @(negedge clk); s1 = 1; @(negedge clk); s1 = 0;
    cyc = 1;
    while (!d1 && cyc < 20000) begin @(posedge clk); #1; if (!d1) cyc++; end
    checks++;
    if (cyc != 66 * 66 + 3) begin failures++; $display("layer 1 done after %0d clocks", cyc); end
    @(posedge clk); #1;
    checks++;
    if (n1 != 256 || b1) begin failures++; $display("layer 1 gave %0d outputs", n1); end
    @(negedge clk); s2 = 1; @(negedge clk); s2 = 0;
    cyc = 1;
    while (!d2 && cyc < 20000) begin @(posedge clk); #1; if (!d2) cyc++; end
    checks++;
    if (cyc != 18 * 18 + 3) begin failures++; $display("layer 2 done after %0d clocks", cyc); end
    @(posedge clk); #1;
    checks++;
    if (n2 != 16 || b2) begin failures++; $display("layer 2 gave %0d outputs", n2); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    trial(20, 1500);     // moderate values: mostly unsaturated
    trial(63, 4000);     // full weight range: exercises wrap and saturation
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
