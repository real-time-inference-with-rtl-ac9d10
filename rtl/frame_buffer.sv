// frame_buffer: two-bank store for de-noised collection-plane frames.
//
// The ROI of a frame is known only after its last sample, so the frame is
// written here while it streams in and read back afterwards by the resizer.
// Two banks (ping-pong) let the next frame be written while the previous one
// is read, so the input never stalls. Each bank holds NT time ticks of NCH
// channels; a word is one input beat of LANES adjacent channels, at word
// address tick*(NCH/LANES) + channel/LANES.
//
// Write: one beat per clock (wr_en, wr_bank, wr_addr, wr_data).
// Read : one sample per clock by (bank, channel, tick); rd_data is valid one
//        clock after rd_en (synchronous read, block-RAM style).
// The paper gives the frame size (480 x 4488, 12 bit); the banked organisation
// is this design's own.
module frame_buffer
  import cnn_pkg::*;
#(
  parameter int LANES = 8,
  parameter int NCH   = 480,
  parameter int NT    = 4488,
  localparam int NG    = NCH / LANES,
  localparam int DEPTH = NT * NG,
  localparam int AW    = $clog2(DEPTH),
  localparam int CW    = $clog2(NCH),
  localparam int TW    = $clog2(NT),
  localparam int LW    = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic             wr_bank,
  input  logic [AW-1:0]    wr_addr,
  input  adc_t [LANES-1:0] wr_data,
  input  logic             rd_en,
  input  logic             rd_bank,
  input  logic [CW-1:0]    rd_ch,
  input  logic [TW-1:0]    rd_tick,
  output adc_t             rd_data
);

  adc_t [LANES-1:0] mem [2*DEPTH];

  logic [AW:0]      raddr;   // bank*DEPTH + word
  logic [LW-1:0]    rlane;
  adc_t [LANES-1:0] rword;
  logic [LW-1:0]    rlane_q;

  always_comb begin
    raddr = (AW+1)'((rd_bank ? DEPTH : 0) + 32'(rd_tick) * NG + 32'(rd_ch) / LANES);
    rlane = LW'(32'(rd_ch) % LANES);
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[(AW+1)'((wr_bank ? DEPTH : 0) + 32'(wr_addr))] <= wr_data;
    if (rd_en) rword <= mem[raddr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rlane_q <= '0;
    else if (rd_en) rlane_q <= rlane;
  end

  assign rd_data = rword[rlane_q];

endmodule
