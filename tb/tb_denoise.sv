// tb_denoise: random samples around the 520-count threshold; every output
// lane is compared with "0 if below threshold, else unchanged", one clock
// after the input. Also checks that valid follows with one clock delay.
module tb_denoise;
  import cnn_pkg::*;
  localparam int LANES = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  adc_t [LANES-1:0] in_adc = '0, out_adc, exp_adc;
  adc_t thr;
  logic exp_valid;
  int checks = 0, failures = 0;

  denoise #(.LANES(LANES)) dut (.clk, .rst_n, .in_valid, .in_adc, .thr, .out_valid, .out_adc);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    thr = adc_t'(DENOISE_THR_DEFAULT);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      if (n == 300) thr = 12'd700;
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      for (int l = 0; l < LANES; l++)
        in_adc[l] = adc_t'(($urandom % 3 == 0) ? ($urandom % 4096) : (int'(thr) - 8 + $urandom % 16));
      exp_valid = in_valid;
      for (int l = 0; l < LANES; l++) exp_adc[l] = (int'(in_adc[l]) < int'(thr)) ? 12'd0 : in_adc[l];
      @(posedge clk); #1;
      checks++;
      if (out_valid !== exp_valid) begin failures++; $display("valid mismatch at %0d", n); end
      if (exp_valid) begin
        checks++;
        if (out_adc !== exp_adc) begin
          failures++;
          if (failures < 10) $display("data mismatch at %0d: %h vs %h (thr %0d)", n, out_adc, exp_adc, thr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
