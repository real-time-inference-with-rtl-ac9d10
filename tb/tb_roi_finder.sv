// tb_roi_finder: small frames (32 channels x 20 ticks, 8 lanes) with random
// sparse activity, plus an all-quiet frame. The expected box (min/max channel
// and tick of samples strictly above 560) is computed from the stored frame;
// roi_valid must pulse exactly one clock after the last beat.
module tb_roi_finder;
  import cnn_pkg::*;
  localparam int LANES = 8, NCH = 32, NT = 20, NG = NCH / LANES;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [$clog2(NT)-1:0] in_tick = '0;
  logic [$clog2(NG)-1:0] in_group = '0;
  adc_t [LANES-1:0] in_adc = '0;
  adc_t thr = adc_t'(ROI_THR_DEFAULT);
  logic roi_valid, roi_empty;
  roi_t roi;
  int checks = 0, failures = 0;
  int frame [NT][NCH];

  roi_finder #(.LANES(LANES), .NCH(NCH), .NT(NT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(int nhits);
    int elo = 1 << 20, ehi = -1, tlo = 1 << 20, thi = -1;
    foreach (frame[t, c]) frame[t][c] = ($urandom % 2) ? 0 : 520 + $urandom % 41;  // <= 560
    for (int h = 0; h < nhits; h++) begin
      int t = $urandom % NT, c = $urandom % NCH;
      frame[t][c] = 561 + $urandom % 3000;
    end
    if (nhits > 0) begin   // an exact 560 never counts
      frame[0][0] = 560;
    end
    foreach (frame[t, c]) if (frame[t][c] > 560) begin
      if (c < elo) elo = c;
      if (c > ehi) ehi = c;
      if (t < tlo) tlo = t;
      if (t > thi) thi = t;
    end
    for (int t = 0; t < NT; t++)
      for (int g = 0; g < NG; g++) begin
        // random idle clocks between beats must not matter
        if ($urandom % 5 == 0) begin
          @(negedge clk); in_valid = 0;
        end
        @(negedge clk);
        in_valid = 1; in_first = (t == 0 && g == 0); in_last = (t == NT - 1 && g == NG - 1);
        in_tick = t[$clog2(NT)-1:0]; in_group = g[$clog2(NG)-1:0];
        for (int l = 0; l < LANES; l++) in_adc[l] = adc_t'(frame[t][g * LANES + l]);
        if (!in_last) begin
          @(posedge clk); #1;
          checks++;
          if (roi_valid) begin failures++; $display("roi_valid before the last beat"); end
        end
      end
    @(posedge clk); #1;
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    checks++;
    if (!roi_valid) begin failures++; $display("roi_valid missing"); end
    checks++;
    if (roi_empty !== (ehi < 0)) begin failures++; $display("empty flag wrong"); end
    if (ehi >= 0) begin
      checks++;
      if (roi.ch_lo != elo || roi.ch_hi != ehi || roi.t_lo != tlo || roi.t_hi != thi) begin
        failures++;
        $display("box %0d..%0d x %0d..%0d, expected %0d..%0d x %0d..%0d",
                 roi.ch_lo, roi.ch_hi, roi.t_lo, roi.t_hi, elo, ehi, tlo, thi);
      end
    end
    @(posedge clk); #1;
    checks++;
    if (roi_valid) begin failures++; $display("roi_valid longer than one clock"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_frame(0);
    for (int f = 0; f < 30; f++) run_frame(1 + $urandom % 6);
    run_frame(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
