// tb_roi_resizer: resizes several ROIs of a 40-channel x 50-tick frame (one
// sample, a thin strip, a wide box, the whole frame). The frame buffer is
// modelled here: sample(ch, tick) = (ch*37 + tick*11 + 5) mod 4096, returned one
// clock after the read. Every image write is checked against the
// nearest-neighbour rule src = lo + floor(i*(hi-lo+1)/64) and the a/128
// scaling; the write count must be 4096 and 'done' must come 4096 clocks
// after 'start'.
module tb_roi_resizer;
  import cnn_pkg::*;
  localparam int NCH = 40, NT = 50;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  roi_t roi = '0;
  logic fb_rd_en;
  logic [$clog2(NCH)-1:0] fb_rd_ch;
  logic [$clog2(NT)-1:0] fb_rd_tick;
  adc_t fb_rd_data = '0;
  logic img_we;
  logic [11:0] img_addr;
  fx16_t img_data;
  int checks = 0, failures = 0;

  roi_resizer #(.NCH(NCH), .NT(NT)) dut (.*);

  always #5 clk = ~clk;

  function automatic int sample(int ch, int t);
    return (ch * 37 + t * 11 + 5) % 4096;
  endfunction

  always_ff @(posedge clk)
    if (fb_rd_en) fb_rd_data <= adc_t'(sample(int'(fb_rd_ch), int'(fb_rd_tick)));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int clo, int chi, int tlo, int thi);
    int nw = 0, cyc = 0;
    bit got_done = 0;
    roi = '{ch_lo: 16'(clo), ch_hi: 16'(chi), t_lo: 16'(tlo), t_hi: 16'(thi)};
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!got_done && cyc < 10000) begin
      @(posedge clk); #1;
      if (img_we) begin
        int i = nw / 64, j = nw % 64;
        int ch = clo + (i * (chi - clo + 1)) / 64;
        int t  = tlo + (j * (thi - tlo + 1)) / 64;
        checks++;
        if (int'(img_addr) != nw || int'(img_data) != sample(ch, t) * 8) begin
          failures++;
          if (failures < 10) $display("pixel %0d: addr %0d data %0d, expected %0d", nw, img_addr, img_data, sample(ch, t) * 8);
        end
        nw++;
      end
      if (done) got_done = 1;
      else cyc++;
    end
    checks++;
    if (nw != 4096) begin failures++; $display("%0d writes", nw); end
    checks++;
    if (cyc != 4096) begin failures++; $display("done after %0d clocks", cyc); end
    @(posedge clk); #1;
    checks++;
    if (busy || img_we) begin failures++; $display("still busy after done"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(7, 7, 20, 20);
    run(3, 5, 0, NT - 1);
    run(0, NCH - 1, 0, NT - 1);
    run(11, 38, 9, 41);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
