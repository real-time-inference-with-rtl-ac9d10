// tb_frame_buffer: fills both banks of a small buffer (24 channels x 10 ticks,
// 8 lanes) with different random data, then reads random samples from both
// banks, comparing with a copy kept in the testbench, one clock after rd_en.
// A second round rewrites one bank while the other is read.
module tb_frame_buffer;
  import cnn_pkg::*;
  localparam int LANES = 8, NCH = 24, NT = 10, NG = NCH / LANES, DEPTH = NT * NG;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_bank = 0, rd_en = 0, rd_bank = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr = '0;
  adc_t [LANES-1:0] wr_data = '0;
  logic [$clog2(NCH)-1:0] rd_ch = '0;
  logic [$clog2(NT)-1:0] rd_tick = '0;
  adc_t rd_data;
  int checks = 0, failures = 0;
  int model [2][NT][NCH];

  frame_buffer #(.LANES(LANES), .NCH(NCH), .NT(NT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(int b);
    for (int t = 0; t < NT; t++)
      for (int g = 0; g < NG; g++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = b[0]; wr_addr = ($clog2(DEPTH))'(t * NG + g);
        for (int l = 0; l < LANES; l++) begin
          model[b][t][g * LANES + l] = $urandom % 4096;
          wr_data[l] = adc_t'(model[b][t][g * LANES + l]);
        end
      end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic reads(int n);
    for (int k = 0; k < n; k++) begin
      int b = $urandom % 2, t = $urandom % NT, c = $urandom % NCH, e;
      @(negedge clk);
      rd_en = 1; rd_bank = b[0]; rd_tick = t[$clog2(NT)-1:0]; rd_ch = c[$clog2(NCH)-1:0];
      e = model[b][t][c];
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (int'(rd_data) != e) begin
        failures++;
        if (failures < 10) $display("bank %0d t %0d ch %0d: %0d, expected %0d", b, t, c, rd_data, e);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    fill(0);
    fill(1);
    reads(300);
    fill(0);
    reads(300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
