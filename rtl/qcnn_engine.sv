// qcnn_engine: inference engine for the quantised CNN "Q-CNN02-DS-OP".
//
// Network (shapes and number formats as published):
//   input 64x64x1 ap_fixed<16,6>
//   -> zero pad, conv 3x3x1x8,  ReLU ap_fixed<7,1>, max pool 4x4 -> 16x16x8
//   -> zero pad, conv 3x3x8x16, ReLU ap_fixed<7,1>, max pool 4x4 -> 4x4x16
//   -> dense 256->12, ReLU ap_fixed<7,1> -> dense 12->3 -> softmax
// Weights: ap_fixed<7,1>; conv biases ap_fixed<16,6>; dense biases
// ap_fixed<7,1>; layer outputs ap_fixed<16,6>.
//
// Organisation (this design's own): the 64x64 input image is written into an
// on-chip buffer (img_*). 'start' runs the first convolution block, which
// streams the zero-padded image one position per clock (66*66 clocks) and
// writes its 16x16x8 pooled map into a feature buffer. The second block then
// streams the padded 18x18 feature map (18*18 clocks); each of its 16 pooled
// outputs goes straight into the 256->12 dense layer, which accumulates them
// as they arrive. The 12->3 layer and the softmax follow a few clocks later.
// Start-to-done latency is 66*66 + 18*18 + 12 = 4692 clocks, against the
// 4680 clocks (23.4 us at 5 ns) reported for the HLS implementation.
//
// Parameters (trained weights and biases) are written at run time through
// wt_*: wt_addr[14:12] selects conv1/conv2/dense1/dense2 (0..3), wt_addr[11:0]
// is the index inside that layer (Keras order, biases after the weights, see
// conv_pool_layer and dense_layer). They must not change during an inference.
// 'start' is ignored while busy; the image buffer may be rewritten once
// 'done' has pulsed (in fact once the first block has finished).
module qcnn_engine
  import cnn_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // input image write port: address row*64 + col
  input  logic                 img_we,
  input  logic [11:0]          img_addr,
  input  fx16_t                img_data,
  // parameter write port
  input  logic                 wt_we,
  input  logic [WT_ADDR_W-1:0] wt_addr,
  input  logic [15:0]          wt_data,
  // control and result
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output fx16_t [NCLS-1:0]     logits,
  output fx16_t [NCLS-1:0]     prob,
  output cls_e                 cls
);

  // ------------------------------------------------------------ parameter decode
  logic we_c1, we_c2, we_d1, we_d2;
  assign we_c1 = wt_we && (wt_addr[14:12] == WSEL_CONV1);
  assign we_c2 = wt_we && (wt_addr[14:12] == WSEL_CONV2);
  assign we_d1 = wt_we && (wt_addr[14:12] == WSEL_DENSE1);
  assign we_d2 = wt_we && (wt_addr[14:12] == WSEL_DENSE2);

  // ------------------------------------------------------------ input image buffer
  fx16_t img_mem [IMG*IMG];
  logic               c1_rd_en;
  logic [11:0]        c1_rd_addr;
  logic [0:0][15:0]   c1_rd_data;

  always_ff @(posedge clk) begin
    if (img_we)   img_mem[img_addr] <= img_data;
    if (c1_rd_en) c1_rd_data[0]     <= img_mem[c1_rd_addr];
  end

  // ------------------------------------------------------------ block 1
  logic            c1_start, c1_busy, c1_done, c1_ov;
  logic [7:0]      c1_oidx;
  fx7_t [C1-1:0]   c1_oact;

  conv_pool_layer #(.H(IMG), .CIN(1), .COUT(C1), .IN_W(FX16_W), .IN_FRAC(FX16_FRAC)) u_conv1 (
    .clk, .rst_n,
    .start   (c1_start), .busy(c1_busy), .done(c1_done),
    .rd_en   (c1_rd_en), .rd_addr(c1_rd_addr), .rd_data(c1_rd_data),
    .wt_we   (we_c1), .wt_addr(wt_addr[11:0]), .wt_data,
    .out_valid(c1_ov), .out_idx(c1_oidx), .out_act(c1_oact)
  );

  // ------------------------------------------------------------ feature buffer
  logic [C1-1:0][FX7_W-1:0] fmap [P1*P1];
  logic                     c2_rd_en;
  logic [7:0]               c2_rd_addr;
  logic [C1-1:0][FX7_W-1:0] c2_rd_data;

  always_ff @(posedge clk) begin
    if (c1_ov)    fmap[c1_oidx] <= c1_oact;
    if (c2_rd_en) c2_rd_data    <= fmap[c2_rd_addr];
  end

  // ------------------------------------------------------------ block 2
  logic            c2_start, c2_busy, c2_done, c2_ov;
  logic [3:0]      c2_oidx;
  fx7_t [C2-1:0]   c2_oact;

  conv_pool_layer #(.H(P1), .CIN(C1), .COUT(C2), .IN_W(FX7_W), .IN_FRAC(FX7_FRAC)) u_conv2 (
    .clk, .rst_n,
    .start   (c2_start), .busy(c2_busy), .done(c2_done),
    .rd_en   (c2_rd_en), .rd_addr(c2_rd_addr), .rd_data(c2_rd_data),
    .wt_we   (we_c2), .wt_addr(wt_addr[11:0]), .wt_data,
    .out_valid(c2_ov), .out_idx(c2_oidx), .out_act(c2_oact)
  );

  // ------------------------------------------------------------ dense layers
  logic             d1_ov, d2_ov;
  fx16_t [FC-1:0]   d1_val;
  fx7_t  [FC-1:0]   d1_act;
  fx16_t [NCLS-1:0] d2_val;
  fx7_t  [NCLS-1:0] d2_act;

  dense_layer #(.VEC(C2), .NBEATS(P2*P2), .NOUT(FC), .RELU(1'b1)) u_dense1 (
    .clk, .rst_n,
    .in_valid(c2_ov), .in_idx(c2_oidx), .in_act(c2_oact),
    .wt_we(we_d1), .wt_addr(wt_addr[11:0]), .wt_data,
    .out_valid(d1_ov), .out_val(d1_val), .out_act(d1_act)
  );

  dense_layer #(.VEC(FC), .NBEATS(1), .NOUT(NCLS), .RELU(1'b0)) u_dense2 (
    .clk, .rst_n,
    .in_valid(d1_ov), .in_idx(1'b0), .in_act(d1_act),
    .wt_we(we_d2), .wt_addr(wt_addr[11:0]), .wt_data,
    .out_valid(d2_ov), .out_val(d2_val), .out_act(d2_act)
  );

  // ------------------------------------------------------------ softmax
  logic             sm_ov;
  fx16_t [NCLS-1:0] sm_prob;
  logic [1:0]       sm_cls;

  softmax #(.N(NCLS)) u_softmax (
    .clk, .rst_n,
    .in_valid(d2_ov), .in_val(d2_val),
    .out_valid(sm_ov), .out_prob(sm_prob), .out_class(sm_cls)
  );

  // ------------------------------------------------------------ sequencing
  fx16_t [NCLS-1:0] logits_q;

  assign c1_start = start && !busy;
  assign c2_start = c1_done;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      logits   <= '0;
      logits_q <= '0;
      prob     <= '0;
      cls      <= CLS_NB;
    end else begin
      done <= sm_ov;
      if (c1_start) busy <= 1'b1;
      else if (sm_ov) busy <= 1'b0;
      if (d2_ov) logits_q <= d2_val;
      if (sm_ov) begin
        logits <= logits_q;
        prob   <= sm_prob;
        cls    <= cls_e'(sm_cls);
      end
    end
  end

endmodule
