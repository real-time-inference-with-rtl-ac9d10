// conv_pool_layer: one convolution block of the quantised CNN.
//
// Computes, for an H x H x CIN input map,
//   zero padding by one pixel -> 3x3 convolution (stride 1, COUT filters)
//   -> ReLU into ap_fixed<7,1,AP_RND,AP_SAT> -> 4x4 max pooling,
// producing an (H/4) x (H/4) x COUT map. The network uses it twice:
// H=64, CIN=1, COUT=8 on the ap_fixed<16,6> image, and H=16, CIN=8, COUT=16
// on the pooled ap_fixed<7,1> activations of the first block. Layer shapes and
// number formats are those of the published network; the streaming
// micro-architecture below is this design's own.
//
// Dataflow: a scanner walks the (H+2) x (H+2) padded grid in raster order, one
// position per clock, reading interior positions from the input buffer
// (rd_addr = row*H + col, data back one clock later) and inserting zeros on
// the border. Two line buffers and a 3x3 window register give one complete
// window per clock; all 9*CIN*COUT products of that window are formed in
// parallel, summed exactly with the bias, cast once to ap_fixed<16,6>
// (truncate, wrap) and passed through the ReLU. A row of 4x4 pooling
// accumulators keeps the running maxima; a pooled pixel leaves on out_* when
// the bottom-right pixel of its window is done (out_idx = prow*(H/4) + pcol).
//
// Timing: start -> (H+2)^2 scan clocks; the last pooled pixel and 'done' leave
// (H+2)^2 + 3 clocks after start. One image at a time; 'start' is ignored
// while busy.
//
// Parameters: written through wt_we/wt_addr/wt_data. Index
// ((kr*3 + kc)*CIN + ci)*COUT + co holds a weight (ap_fixed<7,1>, low 7 bits
// of wt_data), index 9*CIN*COUT + co the bias of filter co (ap_fixed<16,6>).
// This is the Keras kernel order (3, 3, CIN, COUT).
module conv_pool_layer
  import cnn_pkg::*;
#(
  parameter int H       = 64,
  parameter int CIN     = 1,
  parameter int COUT    = 8,
  parameter int IN_W    = 16,   // width of one input value
  parameter int IN_FRAC = 10,   // its fraction bits
  localparam int HP  = H + 2,
  localparam int PH  = H / POOL,
  localparam int AW  = $clog2(H * H),
  localparam int OW  = (PH * PH > 1) ? $clog2(PH * PH) : 1,
  localparam int NW  = 9 * CIN * COUT,
  localparam int SW  = $clog2(HP),
  localparam int PCW = (PH > 1) ? $clog2(PH) : 1,
  localparam int NWW = $clog2(NW)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  // input map read port (synchronous, one clock latency)
  output logic                       rd_en,
  output logic [AW-1:0]              rd_addr,
  input  logic [CIN-1:0][IN_W-1:0]   rd_data,
  // parameter write port
  input  logic                       wt_we,
  input  logic [11:0]                wt_addr,
  input  logic [15:0]                wt_data,
  // pooled output stream
  output logic                       out_valid,
  output logic [OW-1:0]              out_idx,
  output fx7_t [COUT-1:0]            out_act
);

  localparam int PFRAC = IN_FRAC + FX7_FRAC;   // fraction bits of a product

  typedef logic [CIN-1:0][IN_W-1:0] pix_t;

  // ------------------------------------------------------------ parameters
  fx7_t  wgt  [NW];
  fx16_t bias [COUT];

  always_ff @(posedge clk) begin
    if (wt_we) begin
      if (32'(wt_addr) < NW)             wgt[NWW'(wt_addr)] <= fx7_t'(wt_data[6:0]);
      else if (32'(wt_addr) < NW + COUT) bias[32'(wt_addr) - NW] <= fx16_t'(wt_data);
    end
  end

  // ------------------------------------------------------------ S0: scanner
  logic          run;
  logic [SW-1:0] pr, pc;
  logic          interior;

  always_comb begin
    interior = (pr >= SW'(1)) && (pr <= SW'(H)) && (pc >= SW'(1)) && (pc <= SW'(H));
    rd_en    = run && interior;
    rd_addr  = AW'((32'(pr) - 1) * H + (32'(pc) - 1));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0;
      pr  <= '0;
      pc  <= '0;
    end else if (start && !busy) begin
      run <= 1'b1;
      pr  <= '0;
      pc  <= '0;
    end else if (run) begin
      if (pc == SW'(HP - 1)) begin
        pc <= '0;
        if (pr == SW'(HP - 1)) run <= 1'b0;
        else                   pr  <= pr + 1'b1;
      end else begin
        pc <= pc + 1'b1;
      end
    end
  end

  // ------------------------------------------------------------ S1: window
  logic          v1, int1;
  logic [SW-1:0] pr1, pc1;
  pix_t          x1;
  pix_t          lb0 [HP];       // padded row pr-1
  pix_t          lb1 [HP];       // padded row pr-2
  pix_t          win [3][3];     // [row][col], row 0 oldest, col 2 newest

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1   <= 1'b0;
      int1 <= 1'b0;
      pr1  <= '0;
      pc1  <= '0;
    end else begin
      v1   <= run;
      int1 <= interior;
      pr1  <= pr;
      pc1  <= pc;
    end
  end

  assign x1 = int1 ? rd_data : '0;

  always_ff @(posedge clk) begin
    if (v1) begin
      for (int r = 0; r < 3; r++) begin
        win[r][0] <= win[r][1];
        win[r][1] <= win[r][2];
      end
      win[0][2] <= lb1[pc1];
      win[1][2] <= lb0[pc1];
      win[2][2] <= x1;
      lb1[pc1]  <= lb0[pc1];
      lb0[pc1]  <= x1;
    end
  end

  // ------------------------------------------------------------ S2: MAC, cast, ReLU
  logic          v2;
  logic [SW-1:0] orow2, ocol2;
  fx7_t [COUT-1:0] act2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v2    <= 1'b0;
      orow2 <= '0;
      ocol2 <= '0;
    end else begin
      v2    <= v1 && (pr1 >= SW'(2)) && (pc1 >= SW'(2));
      orow2 <= pr1 - SW'(2);
      ocol2 <= pc1 - SW'(2);
    end
  end

  always_comb begin
    for (int co = 0; co < COUT; co++) begin
      logic signed [47:0] acc;
      acc = 48'(bias[co]) <<< (PFRAC - FX16_FRAC);
      for (int kr = 0; kr < 3; kr++)
        for (int kc = 0; kc < 3; kc++)
          for (int ci = 0; ci < CIN; ci++)
            acc += 48'($signed(win[kr][kc][ci])) *
                   48'(wgt[((kr * 3 + kc) * CIN + ci) * COUT + co]);
      act2[co] = relu_fx7(48'(cast_fx16(acc, PFRAC)), FX16_FRAC);
    end
  end

  // ------------------------------------------------------------ S3: pooling
  logic          v3;
  logic [SW-1:0] orow3, ocol3;
  fx7_t [COUT-1:0] act3;
  fx7_t [COUT-1:0] pacc [PH];
  fx7_t [COUT-1:0] pnew;
  logic [PCW-1:0]  pcol3;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v3    <= 1'b0;
      orow3 <= '0;
      ocol3 <= '0;
      act3  <= '0;
    end else begin
      v3    <= v2;
      orow3 <= orow2;
      ocol3 <= ocol2;
      act3  <= act2;
    end
  end

  always_comb begin
    pcol3 = PCW'(ocol3 / SW'(POOL));
    for (int co = 0; co < COUT; co++) begin
      if ((orow3 % SW'(POOL) == 0) && (ocol3 % SW'(POOL) == 0))
        pnew[co] = act3[co];
      else
        pnew[co] = (act3[co] > pacc[pcol3][co]) ? act3[co] : pacc[pcol3][co];
    end
  end

  always_ff @(posedge clk) begin
    if (v3) pacc[pcol3] <= pnew;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_act   <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= v3 && (orow3 % SW'(POOL) == SW'(POOL - 1)) && (ocol3 % SW'(POOL) == SW'(POOL - 1));
      out_idx   <= OW'(32'(orow3 / SW'(POOL)) * PH + 32'(pcol3));
      out_act   <= pnew;
      done      <= v3 && (orow3 == SW'(H - 1)) && (ocol3 == SW'(H - 1));
    end
  end

  assign busy = run || v1 || v2 || v3;

endmodule
