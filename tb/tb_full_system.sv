// tb_full_system: the selection chain at its full frame size (480 wires x
// 4488 ticks, 8 lanes, every parameter of the top at its default). It streams
// two event frames back to back, each classified by the network (a full frame
// lasts far longer than an inference, so nothing is dropped at this size), then
// an empty frame (CNN bypassed). Overflow drops are covered by the reduced
// end-to-end test. The expected decisions come from the same independent model
// as in the reduced end-to-end test: de-noising, ROI box, nearest-neighbour
// resize, ADC/128 scaling and the integer network reference. The latency of
// the classified frame is checked against 4096 + 4692 clocks plus the front
// end. Frames are 269280 beats each; the run simulates about 0.8 million clocks.
module tb_full_system;
  import cnn_pkg::*;
  import cnn_ref_pkg::*;
  localparam int LANES = 8, NCH = 480, NT = 4488, NG = NCH / LANES;
  localparam int CNN_LAT = 4096 + 4692 + 4;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  adc_t [LANES-1:0] in_adc = '0;
  adc_t denoise_thr = adc_t'(DENOISE_THR_DEFAULT), roi_thr = adc_t'(ROI_THR_DEFAULT);
  logic wt_we = 0;
  logic [14:0] wt_addr = '0;
  logic [15:0] wt_data = '0;
  logic dec_valid;
  decision_t dec;
  int checks = 0, failures = 0;

  cnn_trigger_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ expectations
  typedef struct {
    bit valid;
    bit empty, dropped, keep;
    int cls;
    int prob [3];
    longint end_cycle;
  } exp_t;
  exp_t expd [64];
  bit   seen [64];
  int   nframes = 0;
  longint cycle = 0;
  int   n_empty = 0, n_cnn = 0, n_drop = 0, n_keep = 0, n_discard = 0, n_par_empty = 0;
  int   frame [NT][NCH];

  always @(posedge clk) cycle++;

  function automatic void make_frame(bit event_frame);
    foreach (frame[t, c]) frame[t][c] = 470 + $urandom % 91;        // 470..560
    if (event_frame) begin
      int c0 = $urandom % (NCH - 4), t0 = $urandom % (NT - 6);
      int w = 1 + $urandom % 8, h = 1 + $urandom % 12;
      for (int t = t0; t < t0 + h && t < NT; t++)
        for (int c = c0; c < c0 + w && c < NCH; c++)
          if ($urandom % 3 != 0) frame[t][c] = 600 + $urandom % 3000;
      frame[t0][c0] = 1500;   // at least one pixel above the ROI threshold
    end
  endfunction

  // expected result of the current frame, assuming it reaches the CNN
  function automatic void predict(int fno, bit busy_cnn);
    int clo = 1 << 20, chi = -1, tlo = 1 << 20, thi = -1;
    foreach (frame[t, c]) begin
      int v = (frame[t][c] < 520) ? 0 : frame[t][c];
      if (v > 560) begin
        if (c < clo) clo = c;
        if (c > chi) chi = c;
        if (t < tlo) tlo = t;
        if (t > thi) thi = t;
      end
    end
    expd[fno].valid = 1;
    expd[fno].empty = (chi < 0);
    expd[fno].dropped = 0;
    expd[fno].cls = 0;
    expd[fno].prob = '{0, 0, 0};
    if (chi < 0) begin
      expd[fno].keep = 0;
      return;
    end
    if (busy_cnn) begin
      expd[fno].dropped = 1;
      expd[fno].keep = 1;
      return;
    end
    for (int i = 0; i < 64; i++)
      for (int j = 0; j < 64; j++) begin
        int ch = clo + (i * (chi - clo + 1)) / 64;
        int t  = tlo + (j * (thi - tlo + 1)) / 64;
        int v  = frame[t][ch];
        IMGX[i][j] = ((v < 520) ? 0 : v) * 8;
      end
    run_all();
    expd[fno].cls = CLS;
    expd[fno].prob = PROB;
    expd[fno].keep = (CLS != 0);
  endfunction

  task automatic send_frame();
    for (int t = 0; t < NT; t++)
      for (int g = 0; g < NG; g++) begin
        @(negedge clk);
        in_valid = 1;
        in_sof = (t == 0 && g == 0);
        for (int l = 0; l < LANES; l++) in_adc[l] = adc_t'(frame[t][g * LANES + l]);
      end
    @(negedge clk);
    in_valid = 0; in_sof = 0;
  endtask

  bit cnn_busy_model = 0;
  longint cnn_free_at = 0;

  // generate, predict and stream one frame; 'gap' idle clocks afterwards
  task automatic frame_cycle(bit event_frame, int gap);
    bit busy;
    make_frame(event_frame);
    // the CNN side is busy if a classified frame is still in flight when
    // this frame's last beat is written
    busy = (cycle + NT * NG + 1) < cnn_free_at;
    predict(nframes, busy);
    if (!expd[nframes].empty && busy) n_drop++;
    if (expd[nframes].empty && busy) n_par_empty++;
    send_frame();
    expd[nframes].end_cycle = cycle;
    if (!expd[nframes].empty && !busy) cnn_free_at = cycle + CNN_LAT + 2;
    nframes++;
    repeat (gap) @(negedge clk);
  endtask

  always @(posedge clk) begin
    if (rst_n && dec_valid) begin
      int f;
      f = int'(dec.frame);
      checks++;
      if (f >= nframes || !expd[f].valid || seen[f]) begin
        failures++;
        $display("unexpected decision for frame %0d", f);
      end else begin
        exp_t e;
        e = expd[f];
        seen[f] = 1;
        if (dec.empty !== e.empty || dec.dropped !== e.dropped || dec.keep !== e.keep || int'(dec.cls) != e.cls ||
            int'(dec.prob[0]) != e.prob[0] || int'(dec.prob[1]) != e.prob[1] || int'(dec.prob[2]) != e.prob[2]) begin
          failures++;
          $display("frame %0d: empty %0d dropped %0d keep %0d class %0d probs %0d %0d %0d; expected %0d %0d %0d %0d %0d %0d %0d",
                   f, dec.empty, dec.dropped, dec.keep, dec.cls, dec.prob[0], dec.prob[1], dec.prob[2],
                   e.empty, e.dropped, e.keep, e.cls, e.prob[0], e.prob[1], e.prob[2]);
        end
        if (e.empty) n_empty++;
        if (!e.empty && !e.dropped) begin
          n_cnn++;
          if (e.keep) n_keep++; else n_discard++;
          checks++;
          if (cycle - e.end_cycle > CNN_LAT + 2) begin
            failures++;
            $display("frame %0d classified %0d clocks after its end", f, cycle - e.end_cycle);
          end
        end
      end
    end
  end

  task automatic load_params(int winner);
    random_params(24, 1024, 16);
    BD2[winner] = 63;
    foreach (WD2[a, b]) WD2[a][b] = WD2[a][b] / 4;
    for (int sel = 0; sel < 4; sel++)
      for (int i = 0; i < layer_size(sel); i++) begin
        @(negedge clk);
        wt_we = 1; wt_addr = {3'(sel), 12'(i)}; wt_data = 16'(param_at(sel, i));
      end
    @(negedge clk); wt_we = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_params(1);
    frame_cycle(1, 0);             // event, goes to the CNN
    frame_cycle(1, 0);             // event; CNN has finished long before it ends
    frame_cycle(0, 9000);          // empty ROI
    repeat (100) @(negedge clk);
    for (int f = 0; f < nframes; f++) begin
      checks++;
      if (!seen[f]) begin failures++; $display("no decision for frame %0d", f); end
    end
    $display("mechanisms: empty-ROI bypass %0d (during CNN work %0d), classified %0d (kept %0d, discarded %0d), overflow drops %0d",
             n_empty, n_par_empty, n_cnn, n_keep, n_discard, n_drop);
    checks += 2;
    if (n_empty == 0) begin failures++; $display("no empty-ROI bypass"); end
    if (n_cnn < 2)    begin failures++; $display("fewer than two classified frames"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
