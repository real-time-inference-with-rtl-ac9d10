// denoise: zero-suppression of raw collection-plane samples.
//
// Every sample whose ADC code is below the threshold 'thr' is replaced by 0;
// all other samples pass unchanged. This is the first pre-processing step of
// the frame-selection chain (520 ADC counts in the reference configuration,
// with the baseline near 500). LANES adjacent samples are handled per clock so
// that a 480-wire plane sampled at 2 MHz (0.96 Gsample/s) is absorbed by a
// 200 MHz clock; the lane count is this design's choice.
//
// Timing: one register stage; out_* follow in_* by one clock. No back-pressure.
module denoise
  import cnn_pkg::*;
#(
  parameter int LANES = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  adc_t [LANES-1:0]      in_adc,
  input  adc_t                  thr,
  output logic                  out_valid,
  output adc_t [LANES-1:0]      out_adc
);

  adc_t [LANES-1:0] sup;

  always_comb begin
    for (int l = 0; l < LANES; l++)
      sup[l] = (in_adc[l] < thr) ? adc_t'(0) : in_adc[l];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_adc   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_adc <= sup;
    end
  end

endmodule
