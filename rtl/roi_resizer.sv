// roi_resizer: resamples the region of interest onto the 64x64 network input.
//
// The ROI found in a frame can have any size from a single sample to the whole
// 480 x 4488 plane; the network needs exactly IMG x IMG pixels. Output pixel
// (i, j) takes the stored sample at
//     channel = ch_lo + floor(i * (ch_hi - ch_lo + 1) / IMG)
//     tick    = t_lo  + floor(j * (t_hi  - t_lo  + 1) / IMG)
// i.e. nearest-neighbour resampling, which both down-samples large ROIs and
// up-samples small ones (rows are wire channels, columns are time ticks). The
// resampling rule, the orientation and the ADC scaling are this design's
// choices; the reference method only states that the ROI is resized to 64x64.
//
// Each 12-bit ADC code a becomes the ap_fixed<16,6> value a/128 (the code
// shifted left by 3 into the 10 fraction bits), which keeps every code exact.
//
// Timing: after 'start' one pixel is requested per clock in raster order; the
// frame buffer answers one clock later and the pixel is written to the input
// image at address i*IMG+j. 'done' pulses with the last write, IMG*IMG
// clocks after the clock edge that samples start. 'roi' must stay stable while busy.
module roi_resizer
  import cnn_pkg::*;
#(
  parameter int NCH = 480,
  parameter int NT  = 4488,
  localparam int CW = $clog2(NCH),
  localparam int TW = $clog2(NT),
  localparam int IW = $clog2(IMG)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  roi_t            roi,
  output logic            busy,
  output logic            done,
  // frame buffer read port
  output logic            fb_rd_en,
  output logic [CW-1:0]   fb_rd_ch,
  output logic [TW-1:0]   fb_rd_tick,
  input  adc_t            fb_rd_data,
  // network input image write port
  output logic            img_we,
  output logic [2*IW-1:0] img_addr,
  output fx16_t           img_data
);

  logic [IW-1:0]   i_q, j_q;           // output row / column being requested
  logic            req_q;              // a read was issued last clock
  logic            last_q;             // ... and it was the last pixel
  logic [2*IW-1:0] addr_q;
  logic [15:0]     hspan, wspan;
  logic [31:0]     ch_off, t_off;

  always_comb begin
    hspan  = roi.ch_hi - roi.ch_lo + 16'd1;
    wspan  = roi.t_hi  - roi.t_lo  + 16'd1;
    ch_off = (32'(i_q) * 32'(hspan)) >> IW;
    t_off  = (32'(j_q) * 32'(wspan)) >> IW;
    fb_rd_en   = busy;
    fb_rd_ch   = CW'(32'(roi.ch_lo) + ch_off);
    fb_rd_tick = TW'(32'(roi.t_lo)  + t_off);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      i_q    <= '0;
      j_q    <= '0;
      req_q  <= 1'b0;
      last_q <= 1'b0;
      addr_q <= '0;
    end else begin
      req_q  <= busy;
      last_q <= busy && (&i_q) && (&j_q);
      addr_q <= {i_q, j_q};
      if (start && !busy) begin
        busy <= 1'b1;
        i_q  <= '0;
        j_q  <= '0;
      end else if (busy) begin
        j_q <= j_q + 1'b1;
        if (&j_q) begin
          i_q <= i_q + 1'b1;
          if (&i_q) busy <= 1'b0;
        end
      end
    end
  end

  assign img_we   = req_q;
  assign img_addr = addr_q;
  assign img_data = fx16_t'({1'b0, fb_rd_data, 3'b000});
  assign done     = last_q;

endmodule
