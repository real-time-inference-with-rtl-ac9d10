// tb_qcnn_engine: complete inferences of the quantised CNN with random
// parameters and random 64x64 images, against the integer reference model.
// Checks the three scores, the three softmax probabilities and the class,
// and the start-to-done latency: 66*66 + 18*18 + 12 = 4692 clocks, i.e. the
// 4680 scan clocks of the two padded layers plus the pipeline. Inferences run
// back to back, with the image rewritten in between.
module tb_qcnn_engine;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic img_we = 0, wt_we = 0, start = 0, busy, done;
  logic [11:0] img_addr = '0;
  fx16_t img_data = '0;
  logic [14:0] wt_addr = '0;
  logic [15:0] wt_data = '0;
  fx16_t [2:0] logits, prob;
  cls_e cls;
  int checks = 0, failures = 0;

  qcnn_engine dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_params();
    for (int sel = 0; sel < 4; sel++)
      for (int i = 0; i < layer_size(sel); i++) begin
        @(negedge clk);
        wt_we = 1; wt_addr = {3'(sel), 12'(i)}; wt_data = 16'(param_at(sel, i));
      end
    @(negedge clk); wt_we = 0;
  endtask

  task automatic load_image();
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk);
      img_we = 1; img_addr = 12'(a); img_data = 16'(IMGX[a / 64][a % 64]);
    end
    @(negedge clk); img_we = 0;
  endtask

  int classes_seen [3];

  task automatic infer();
    int cyc;
    run_all();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 20000) begin @(posedge clk); #1; if (!done) cyc++; end
    checks++;
    if (cyc != 4692) begin failures++; $display("latency %0d clocks", cyc); end
    for (int k = 0; k < 3; k++) begin
      fx16_t l, p;
      l = logits[k];
      p = prob[k];
      checks++;
      if (int'(l) != LOGIT[k] || int'(p) != PROB[k]) begin
        failures++;
        $display("class %0d: score %0d prob %0d, expected %0d %0d", k, l, p, LOGIT[k], PROB[k]);
      end
    end
    checks++;
    if (int'(cls) != CLS) begin failures++; $display("class %0d expected %0d", cls, CLS); end
    classes_seen[CLS]++;
    $display("inference: scores %0d %0d %0d -> class %0d, %0d clocks", LOGIT[0], LOGIT[1], LOGIT[2], CLS, cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      // a new parameter set every second inference
      if (t % 2 == 0) begin
        random_params(24, 1024, 32);
        // steer the output layer so that different classes win
        BD2[(t / 2) % 3] = 63;
        load_params();
      end
      // a uniform random image, or a band of strong activity on zeros
      foreach (IMGX[r, c])
        IMGX[r][c] = (t % 2 == 0) ? rnd(0, 2500) : ((r > 20 && r < 40) ? rnd(0, 8000) : 0);
      load_image();
      infer();
    end
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (classes_seen[k] == 0) begin failures++; $display("class %0d never produced", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
