// cnn_trigger_top: frame-by-frame CNN data selection for one LArTPC cell.
//
// A continuous stream of collection-plane samples (NCH wires x NT time ticks
// per frame, 12-bit ADC) enters on in_*. Each frame is
//   1. de-noised: samples below denoise_thr (520) are set to zero;
//   2. searched for its region of interest: the bounding box of samples above
//      roi_thr (560), while being written into one bank of a two-bank frame
//      buffer;
//   3. if the ROI is empty, reported at once as background (NB) without any
//      CNN work - most background-only frames end here;
//   4. otherwise resized to 64x64 (nearest neighbour) and classified by the
//      quantised CNN into NB / LE (low-energy, supernova-like) / HE
//      (high-energy). The frame is to be kept when the class is LE or HE.
// One decision per frame leaves on dec_valid/dec; it is meant to drive an
// external store that holds the full multi-plane frame meanwhile (not part of
// this design). The chain and its thresholds follow the reference data
// selection scheme; buffering, the bypass and the overflow policy are this
// design's own.
//
// Input stream: one beat per clock when in_valid, LANES adjacent wires of one
// time tick (beat g of a tick holds wires g*LANES .. g*LANES+LANES-1), ticks in
// order; in_sof marks the first beat of a frame, which must have exactly
// NT*NCH/LANES beats. There is no back-pressure: the design never stalls the
// detector stream.
//
// Overflow: while the CNN side (resizer + engine, about 8800 clocks) is busy
// with one bank, frames keep streaming into the other bank. If such a frame
// completes with a non-empty ROI before the CNN side is free, it cannot be
// held; it is reported with dropped=1 and keep=1 (forwarded unclassified, so
// no candidate signal is lost). At the full frame size (269280 beats) this
// cannot happen; it is a guard for small configurations and bursts.
//
// Decision latency for a classified frame: about 4096 + 4692 clocks after the
// frame's last beat; for an empty frame 2 clocks.
//
// Parameters: the network weights are written through wt_* (see qcnn_engine).
module cnn_trigger_top
  import cnn_pkg::*;
#(
  parameter int LANES = 8,
  parameter int NCH   = 480,
  parameter int NT    = 4488,
  localparam int NG = NCH / LANES,
  localparam int TW = $clog2(NT),
  localparam int GW = (NG > 1) ? $clog2(NG) : 1,
  localparam int AW = $clog2(NT * NG),
  localparam int CW = $clog2(NCH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // detector sample stream
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  adc_t [LANES-1:0]     in_adc,
  // run-time configuration
  input  adc_t                 denoise_thr,
  input  adc_t                 roi_thr,
  input  logic                 wt_we,
  input  logic [WT_ADDR_W-1:0] wt_addr,
  input  logic [15:0]          wt_data,
  // per-frame decision
  output logic                 dec_valid,
  output decision_t            dec
);

  // ------------------------------------------------------------ beat coordinates
  logic [TW-1:0] tick_q, tick_c;
  logic [GW-1:0] grp_q, grp_c;
  logic          last_c;

  always_comb begin
    tick_c = in_sof ? '0 : tick_q;
    grp_c  = in_sof ? '0 : grp_q;
    last_c = (32'(tick_c) == NT - 1) && (32'(grp_c) == NG - 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tick_q <= '0;
      grp_q  <= '0;
    end else if (in_valid) begin
      if (32'(grp_c) == NG - 1) begin
        grp_q  <= '0;
        tick_q <= last_c ? '0 : tick_c + 1'b1;
      end else begin
        grp_q  <= grp_c + 1'b1;
        tick_q <= tick_c;
      end
    end
  end

  // ------------------------------------------------------------ de-noising
  logic             dn_valid;
  adc_t [LANES-1:0] dn_adc;
  logic             d_first, d_last;
  logic [TW-1:0]    d_tick;
  logic [GW-1:0]    d_grp;

  denoise #(.LANES(LANES)) u_denoise (
    .clk, .rst_n,
    .in_valid, .in_adc, .thr(denoise_thr),
    .out_valid(dn_valid), .out_adc(dn_adc)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d_first <= 1'b0;
      d_last  <= 1'b0;
      d_tick  <= '0;
      d_grp   <= '0;
    end else begin
      d_first <= in_valid && in_sof;
      d_last  <= in_valid && last_c;
      d_tick  <= tick_c;
      d_grp   <= grp_c;
    end
  end

  // ------------------------------------------------------------ ROI finding
  logic roi_valid, roi_empty;
  roi_t roi;

  roi_finder #(.LANES(LANES), .NCH(NCH), .NT(NT)) u_roi (
    .clk, .rst_n,
    .in_valid(dn_valid), .in_first(d_first), .in_last(d_last),
    .in_tick(d_tick), .in_group(d_grp), .in_adc(dn_adc), .thr(roi_thr),
    .roi_valid, .roi, .roi_empty
  );

  // ------------------------------------------------------------ frame buffer
  logic          wbank;            // bank being written
  logic          claimed;          // last completed frame's bank went to the CNN side
  logic          fb_rd_en;
  logic [CW-1:0] fb_rd_ch;
  logic [TW-1:0] fb_rd_tick;
  adc_t          fb_rd_data;
  logic          pbank;            // bank being read by the CNN side

  frame_buffer #(.LANES(LANES), .NCH(NCH), .NT(NT)) u_fb (
    .clk, .rst_n,
    .wr_en(dn_valid), .wr_bank(wbank), .wr_addr(AW'(32'(d_tick) * NG + 32'(d_grp))), .wr_data(dn_adc),
    .rd_en(fb_rd_en), .rd_bank(pbank), .rd_ch(fb_rd_ch), .rd_tick(fb_rd_tick), .rd_data(fb_rd_data)
  );

  // ------------------------------------------------------------ CNN side
  typedef enum logic [1:0] {P_IDLE, P_RESIZE, P_CNN} pstate_e;
  pstate_e        pstate;
  roi_t           proi;
  logic [15:0]    pframe;
  logic           rs_start, rs_busy, rs_done;
  logic           img_we;
  logic [11:0]    img_addr;
  fx16_t          img_data;
  logic           eng_busy, eng_done;
  fx16_t [NCLS-1:0] eng_logits, eng_prob;
  cls_e           eng_cls;
  logic [15:0]    frame_cnt;

  roi_resizer #(.NCH(NCH), .NT(NT)) u_resize (
    .clk, .rst_n,
    .start(rs_start), .roi(proi), .busy(rs_busy), .done(rs_done),
    .fb_rd_en, .fb_rd_ch, .fb_rd_tick, .fb_rd_data,
    .img_we, .img_addr, .img_data
  );

  qcnn_engine u_engine (
    .clk, .rst_n,
    .img_we, .img_addr, .img_data,
    .wt_we, .wt_addr, .wt_data,
    .start(rs_done), .busy(eng_busy), .done(eng_done),
    .logits(eng_logits), .prob(eng_prob), .cls(eng_cls)
  );

  // A frame's bank is handed over when its last beat is written, provided
  // the CNN side is idle; otherwise the next frame overwrites it.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wbank   <= 1'b0;
      claimed <= 1'b0;
    end else if (dn_valid && d_last) begin
      claimed <= (pstate == P_IDLE);
      if (pstate == P_IDLE) wbank <= !wbank;
    end
  end

  assign rs_start = (pstate == P_IDLE) && roi_valid && !roi_empty && claimed;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pstate <= P_IDLE;
      pbank  <= 1'b0;
      proi   <= '0;
      pframe <= '0;
    end else begin
      unique case (pstate)
        P_IDLE:   if (rs_start) begin
                    pstate <= P_RESIZE;
                    pbank  <= !wbank;
                    proi   <= roi;
                    pframe <= frame_cnt;
                  end
        P_RESIZE: if (rs_done)  pstate <= P_CNN;
        P_CNN:    if (eng_done) pstate <= P_IDLE;
        default:  pstate <= P_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ decisions
  decision_t fe_dec, cnn_dec, pend;
  logic      fe_v, pend_v;

  always_comb begin
    fe_v           = roi_valid && (roi_empty || !rs_start);
    fe_dec         = '0;
    fe_dec.frame   = frame_cnt;
    fe_dec.cls     = CLS_NB;
    fe_dec.empty   = roi_empty;
    fe_dec.dropped = !roi_empty;
    fe_dec.keep    = !roi_empty;
    cnn_dec        = '0;
    cnn_dec.frame  = pframe;
    cnn_dec.cls    = eng_cls;
    cnn_dec.keep   = (eng_cls == CLS_LE) || (eng_cls == CLS_HE);
    cnn_dec.prob   = eng_prob;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      frame_cnt <= '0;
      dec_valid <= 1'b0;
      dec       <= '0;
      pend_v    <= 1'b0;
      pend      <= '0;
    end else begin
      if (roi_valid) frame_cnt <= frame_cnt + 16'd1;
      dec_valid <= eng_done || pend_v || fe_v;
      if (eng_done) begin
        dec <= cnn_dec;
        if (fe_v) begin
          pend_v <= 1'b1;
          pend   <= fe_dec;
        end
      end else if (pend_v) begin
        dec    <= pend;
        pend_v <= fe_v;
        pend   <= fe_dec;
      end else if (fe_v) begin
        dec <= fe_dec;
      end
    end
  end

  // The engine is only started by the resizer, never while busy.
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) rs_done |-> !eng_busy);

endmodule
