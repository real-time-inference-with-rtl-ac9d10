// dense_layer: fully connected layer with ap_fixed<7,1> weights and biases.
//
// out[o] = bias[o] + sum_n in[n] * W[n][o]  for n < VEC*NBEATS, o < NOUT,
// with the inputs in ap_fixed<7,1> (the ReLU outputs of the previous layer).
// Products and the sum are exact; the result is cast once to ap_fixed<16,6>
// (truncate, wrap) and, when RELU=1, also passed through a ReLU into
// ap_fixed<7,1,AP_RND,AP_SAT>. The network instantiates it as the 256->12
// layer with ReLU and as the 12->3 output layer without; those shapes and
// formats are the published ones, the beat-serial organisation is this
// design's own.
//
// The inputs arrive as NBEATS beats of VEC values (in_idx = beat number, any
// order, beat 0 first), so the 256->12 layer can consume the 4x4x16 pooled
// map one pooled pixel (16 channels) per clock while it is being produced.
// Flat input index n = in_idx*VEC + v, which is Keras' row-major flatten.
// Beat 0 clears the accumulators. out_valid pulses one clock after the beat
// with in_idx = NBEATS-1.
//
// Parameters: index n*NOUT + o holds W[n][o], index VEC*NBEATS*NOUT + o holds
// bias[o]; both ap_fixed<7,1> in the low 7 bits of wt_data.
module dense_layer
  import cnn_pkg::*;
#(
  parameter int VEC    = 16,
  parameter int NBEATS = 16,
  parameter int NOUT   = 12,
  parameter bit RELU   = 1'b1,
  localparam int NIN = VEC * NBEATS,
  localparam int NW  = NIN * NOUT,
  localparam int BW  = (NBEATS > 1) ? $clog2(NBEATS) : 1,
  localparam int NWW = $clog2(NW),
  localparam int OBW = (NOUT > 1) ? $clog2(NOUT) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [BW-1:0]        in_idx,
  input  fx7_t [VEC-1:0]       in_act,
  input  logic                 wt_we,
  input  logic [11:0]          wt_addr,
  input  logic [15:0]          wt_data,
  output logic                 out_valid,
  output fx16_t [NOUT-1:0]     out_val,
  output fx7_t  [NOUT-1:0]     out_act
);

  localparam int PFRAC = 2 * FX7_FRAC;   // 12 fraction bits per product

  fx7_t wgt  [NW];
  fx7_t bias [NOUT];

  always_ff @(posedge clk) begin
    if (wt_we) begin
      if (32'(wt_addr) < NW)             wgt[NWW'(wt_addr)]            <= fx7_t'(wt_data[6:0]);
      else if (32'(wt_addr) < NW + NOUT) bias[OBW'(32'(wt_addr) - NW)] <= fx7_t'(wt_data[6:0]);
    end
  end

  logic signed [47:0] acc  [NOUT];
  logic signed [47:0] nsum [NOUT];

  always_comb begin
    for (int o = 0; o < NOUT; o++) begin
      nsum[o] = (in_idx == '0) ? 48'sd0 : acc[o];
      for (int v = 0; v < VEC; v++)
        nsum[o] += 48'(in_act[v]) * 48'(wgt[(32'(in_idx) * VEC + v) * NOUT + o]);
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int o = 0; o < NOUT; o++) acc[o] <= nsum[o];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_val   <= '0;
      out_act   <= '0;
    end else begin
      out_valid <= in_valid && (32'(in_idx) == NBEATS - 1);
      if (in_valid && (32'(in_idx) == NBEATS - 1))
        for (int o = 0; o < NOUT; o++) begin
          fx16_t y;
          y = cast_fx16(nsum[o] + (48'(bias[o]) <<< (PFRAC - FX7_FRAC)), PFRAC);
          out_val[o] <= y;
          out_act[o] <= RELU ? relu_fx7(48'(y), FX16_FRAC) : fx7_t'(0);
        end
    end
  end

endmodule
