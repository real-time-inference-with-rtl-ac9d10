// softmax: class probabilities and decision from the three network scores.
//
// p_k = exp(z_k) / sum_j exp(z_j), evaluated in fixed point:
//   1. m = max_k z_k; u_k = m - z_k >= 0 (ap_fixed<16,6> scores, so the
//      largest term is always exp(0) = 1 and nothing overflows);
//   2. exp(-u) = 2^(-u*log2 e), with log2 e = 1477/1024. Writing
//      u*log2 e = q + f (q integer, f in [0,1), f truncated to 1/32 steps),
//      2^-(q+f) = EXP2[f*32] >> q, where EXP2[k] = round(1024 * 2^(-k/32)) is
//      a 32-entry constant table;
//   3. p_k = floor(e_k * 1024 / sum e), i.e. ap_fixed<16,6> with 10 fraction
//      bits, so probabilities sum to 1 within a few LSB.
// The decision 'out_class' is the index of the largest score (lowest index on
// a tie); it equals the index of the largest probability. Class order is
// NB, LE, HE. The output format is the published one; the exponential and
// divider are this design's choices.
//
// Timing: two register stages; out_* valid two clocks after in_valid.
module softmax
  import cnn_pkg::*;
#(
  parameter int N = NCLS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fx16_t [N-1:0]    in_val,
  output logic             out_valid,
  output fx16_t [N-1:0]    out_prob,
  output logic [1:0]       out_class
);

  localparam int LOG2E_Q10 = 1477;

  // EXP2[k] = round(1024 * 2^(-k/32)), k = 0..31
  localparam logic [10:0] EXP2 [32] = '{
    11'd1024, 11'd1002, 11'd981, 11'd960, 11'd939, 11'd919, 11'd899, 11'd880,
    11'd861, 11'd843, 11'd825, 11'd807, 11'd790, 11'd773, 11'd756, 11'd740,
    11'd724, 11'd709, 11'd693, 11'd679, 11'd664, 11'd650, 11'd636, 11'd622,
    11'd609, 11'd596, 11'd583, 11'd571, 11'd558, 11'd546, 11'd535, 11'd523
  };

  // ------------------------------------------------------------ stage A
  fx16_t       m;
  logic [1:0]  amax;
  logic [10:0] e [N];

  always_comb begin
    m    = in_val[0];
    amax = 2'd0;
    for (int k = 1; k < N; k++)
      if (in_val[k] > m) begin
        m    = in_val[k];
        amax = 2'(k);
      end
    for (int k = 0; k < N; k++) begin
      logic [16:0] u;
      logic [31:0] t;
      logic [21:0] q;
      u = 17'(18'(m) - 18'(in_val[k]));
      t = (32'(u) * LOG2E_Q10) >> 10;
      q = t[31:10];
      e[k] = (q >= 22'd16) ? 11'd0 : (EXP2[t[9:5]] >> q[3:0]);
    end
  end

  logic        va;
  logic [10:0] ea [N];
  logic [1:0]  cls_a;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      va    <= 1'b0;
      cls_a <= '0;
      for (int k = 0; k < N; k++) ea[k] <= '0;
    end else begin
      va <= in_valid;
      if (in_valid) begin
        cls_a <= amax;
        for (int k = 0; k < N; k++) ea[k] <= e[k];
      end
    end
  end

  // ------------------------------------------------------------ stage B
  logic [12:0] s;
  always_comb begin
    s = '0;
    for (int k = 0; k < N; k++) s += 13'(ea[k]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_prob  <= '0;
      out_class <= '0;
    end else begin
      out_valid <= va;
      if (va) begin
        out_class <= cls_a;
        for (int k = 0; k < N; k++)
          out_prob[k] <= fx16_t'((32'(ea[k]) << 10) / 32'(s));
      end
    end
  end

endmodule
