// roi_finder: bounding box of the activity in one collection-plane frame.
//
// While a frame streams past, the block keeps the smallest and largest channel
// number and the smallest and largest time tick of every (de-noised) sample
// strictly above 'thr' (560 ADC counts in the reference configuration). The
// rectangle they span is the region of interest (ROI) that is later resized
// for the CNN. A frame with no sample above the threshold has an empty ROI;
// such frames need no classification.
//
// Input: one beat carries LANES adjacent channels (group g holds channels
// g*LANES .. g*LANES+LANES-1) of one time tick; the caller supplies the tick
// and group of each beat and marks the first and last beat of the frame.
// Output: roi_valid pulses one clock after the last beat, with roi/roi_empty
// held until the next frame ends. Lanes are reduced with a priority search
// (lowest and highest hit lane); the streaming min/max form is this design's
// own, the rule (extreme coordinates above 560) follows the reference method.
module roi_finder
  import cnn_pkg::*;
#(
  parameter int LANES = 8,
  parameter int NCH   = 480,
  parameter int NT    = 4488,
  localparam int NG   = NCH / LANES,
  localparam int TW   = $clog2(NT),
  localparam int GW   = (NG > 1) ? $clog2(NG) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic             in_last,
  input  logic [TW-1:0]    in_tick,
  input  logic [GW-1:0]    in_group,
  input  adc_t [LANES-1:0] in_adc,
  input  adc_t             thr,
  output logic             roi_valid,
  output roi_t             roi,
  output logic             roi_empty
);

  // running box of the current frame
  logic        any_q;
  logic [15:0] ch_lo_q, ch_hi_q, t_lo_q, t_hi_q;

  // per-beat reduction
  logic        hit;
  logic [15:0] b_lo, b_hi;           // lowest / highest hit channel in the beat
  // box after merging this beat (starting fresh on the first beat)
  logic        n_any;
  logic [15:0] n_ch_lo, n_ch_hi, n_t_lo, n_t_hi;

  always_comb begin
    hit  = 1'b0;
    b_lo = '0;
    b_hi = '0;
    for (int l = LANES - 1; l >= 0; l--)
      if (in_adc[l] > thr) begin
        hit  = 1'b1;
        b_lo = 16'(in_group) * 16'(LANES) + 16'(l);
      end
    for (int l = 0; l < LANES; l++)
      if (in_adc[l] > thr) b_hi = 16'(in_group) * 16'(LANES) + 16'(l);

    n_any   = in_first ? 1'b0 : any_q;
    n_ch_lo = ch_lo_q;
    n_ch_hi = ch_hi_q;
    n_t_lo  = t_lo_q;
    n_t_hi  = t_hi_q;
    if (hit) begin
      if (!n_any) begin
        n_ch_lo = b_lo;
        n_ch_hi = b_hi;
        n_t_lo  = 16'(in_tick);
        n_t_hi  = 16'(in_tick);
      end else begin
        if (b_lo < n_ch_lo) n_ch_lo = b_lo;
        if (b_hi > n_ch_hi) n_ch_hi = b_hi;
        if (16'(in_tick) < n_t_lo) n_t_lo = 16'(in_tick);
        if (16'(in_tick) > n_t_hi) n_t_hi = 16'(in_tick);
      end
      n_any = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      any_q     <= 1'b0;
      ch_lo_q   <= '0;
      ch_hi_q   <= '0;
      t_lo_q    <= '0;
      t_hi_q    <= '0;
      roi_valid <= 1'b0;
      roi       <= '0;
      roi_empty <= 1'b1;
    end else begin
      roi_valid <= 1'b0;
      if (in_valid) begin
        any_q   <= n_any;
        ch_lo_q <= n_ch_lo;
        ch_hi_q <= n_ch_hi;
        t_lo_q  <= n_t_lo;
        t_hi_q  <= n_t_hi;
        if (in_last) begin
          roi_valid <= 1'b1;
          roi_empty <= !n_any;
          roi       <= '{ch_lo: n_ch_lo, ch_hi: n_ch_hi, t_lo: n_t_lo, t_hi: n_t_hi};
        end
      end
    end
  end

endmodule
