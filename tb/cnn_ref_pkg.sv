// cnn_ref_pkg: bit-exact software reference of the quantised CNN, used by the
// testbenches to work out expected outputs independently of the RTL.
//
// Numbers are plain integers: ap_fixed<16,6> values as integers scaled by
// 2^10, ap_fixed<7,1> values scaled by 2^6. The rules modelled are
//   conv / dense output: exact sum, floor to 10 fraction bits, wrap to 16 bits
//   ReLU:               max(0, .), round half up to 6 fraction bits, clamp 63
//   max pool 4x4, Keras weight order, row-major flatten,
//   softmax as documented in rtl/softmax.sv.
// The parameter and image arrays are package variables that a testbench fills
// (randomly) and also writes into the design.
package cnn_ref_pkg;

  int W1 [3][3][1][8];
  int B1 [8];
  int W2 [3][3][8][16];
  int B2 [16];
  int WD1 [256][12];
  int BD1 [12];
  int WD2 [12][3];
  int BD2 [3];
  int IMGX [64][64];          // network input, Q10

  // Loop bounds held in variables rather than constants, so that a simulator
  // keeps the reference loops as loops instead of unrolling them.
  int K3 = 3, NP = 4, NC1 = 8, NC2 = 16, NFC = 12, NO = 3;

  int POOL1 [16][16][8];      // Q6
  int POOL2 [4][4][16];       // Q6
  int FC1   [12];             // Q6 after ReLU
  int LOGIT [3];              // Q10
  int PROB  [3];              // Q10
  int CLS;

  function automatic int wrap16(longint v);
    longint m;
    m = v & 64'hFFFF;
    if (m >= 32768) m -= 65536;
    return int'(m);
  endfunction

  function automatic int relu7(int q10);
    int r;
    if (q10 <= 0) return 0;
    r = (q10 + 8) / 16;
    return (r > 63) ? 63 : r;
  endfunction

  // floor division by 2^n for signed values
  function automatic longint fshr(longint v, int n);
    return v >>> n;
  endfunction

  function automatic void run_conv1();
    int conv [64][64][8];
    for (int r = 0; r < 64; r++)
      for (int c = 0; c < 64; c++)
        for (int co = 0; co < NC1; co++) begin
          longint s = longint'(B1[co]) * 64;           // Q10 -> Q16
          for (int kr = 0; kr < K3; kr++)
            for (int kc = 0; kc < K3; kc++) begin
              int rr = r + kr - 1, cc = c + kc - 1;
              if (rr >= 0 && rr < 64 && cc >= 0 && cc < 64)
                s += longint'(IMGX[rr][cc]) * W1[kr][kc][0][co];
            end
          conv[r][c][co] = relu7(wrap16(fshr(s, 6)));
        end
    for (int pr = 0; pr < 16; pr++)
      for (int pc = 0; pc < 16; pc++)
        for (int co = 0; co < NC1; co++) begin
          int m = 0;
          for (int a = 0; a < NP; a++)
            for (int b = 0; b < NP; b++)
              if (conv[4*pr+a][4*pc+b][co] > m) m = conv[4*pr+a][4*pc+b][co];
          POOL1[pr][pc][co] = m;
        end
  endfunction

  function automatic void run_conv2();
    int conv [16][16][16];
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++)
        for (int co = 0; co < NC2; co++) begin
          longint s = longint'(B2[co]) * 4;            // Q10 -> Q12
          for (int kr = 0; kr < K3; kr++)
            for (int kc = 0; kc < K3; kc++) begin
              int rr = r + kr - 1, cc = c + kc - 1;
              if (rr >= 0 && rr < 16 && cc >= 0 && cc < 16)
                for (int ci = 0; ci < NC1; ci++)
                  s += longint'(POOL1[rr][cc][ci]) * W2[kr][kc][ci][co];
            end
          conv[r][c][co] = relu7(wrap16(fshr(s, 2)));
        end
    for (int pr = 0; pr < 4; pr++)
      for (int pc = 0; pc < 4; pc++)
        for (int co = 0; co < NC2; co++) begin
          int m = 0;
          for (int a = 0; a < NP; a++)
            for (int b = 0; b < NP; b++)
              if (conv[4*pr+a][4*pc+b][co] > m) m = conv[4*pr+a][4*pc+b][co];
          POOL2[pr][pc][co] = m;
        end
  endfunction

  function automatic void run_dense();
    for (int o = 0; o < NFC; o++) begin
      longint s = longint'(BD1[o]) * 64;               // Q6 -> Q12
      for (int n = 0; n < 256; n++)
        s += longint'(POOL2[n / 64][(n / 16) % 4][n % 16]) * WD1[n][o];
      FC1[o] = relu7(wrap16(fshr(s, 2)));
    end
    for (int o = 0; o < NO; o++) begin
      longint s = longint'(BD2[o]) * 64;
      for (int n = 0; n < NFC; n++) s += longint'(FC1[n]) * WD2[n][o];
      LOGIT[o] = wrap16(fshr(s, 2));
    end
  endfunction

  function automatic void run_softmax(input int z [3], output int p [3], output int cls);
    int m, e [3], sum;
    m = z[0]; cls = 0;
    for (int k = 1; k < 3; k++) if (z[k] > m) begin m = z[k]; cls = k; end
    sum = 0;
    for (int k = 0; k < 3; k++) begin
      longint t = (longint'(m - z[k]) * 1477) / 1024;
      int q = int'(t / 1024);
      int f = int'((t % 1024) / 32);
      int tab = $rtoi(1024.0 * (2.0 ** (-real'(f) / 32.0)) + 0.5);
      e[k] = (q >= 16) ? 0 : (tab >> q);
      sum += e[k];
    end
    for (int k = 0; k < 3; k++) p[k] = (e[k] * 1024) / sum;
  endfunction

  function automatic void run_all();
    run_conv1();
    run_conv2();
    run_dense();
    run_softmax(LOGIT, PROB, CLS);
  endfunction

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % 32'(hi - lo + 1));
  endfunction

  // Random parameters; 'wmax' bounds the ap_fixed<7,1> weights (<= 63).
  function automatic void random_params(int wmax, int bmax16, int bmax7);
    foreach (W1[a, b, c, d]) W1[a][b][c][d] = rnd(-wmax, wmax);
    foreach (B1[a]) B1[a] = rnd(-bmax16, bmax16);
    foreach (W2[a, b, c, d]) W2[a][b][c][d] = rnd(-wmax, wmax);
    foreach (B2[a]) B2[a] = rnd(-bmax16, bmax16);
    foreach (WD1[a, b]) WD1[a][b] = rnd(-wmax, wmax);
    foreach (BD1[a]) BD1[a] = rnd(-bmax7, bmax7);
    foreach (WD2[a, b]) WD2[a][b] = rnd(-wmax, wmax);
    foreach (BD2[a]) BD2[a] = rnd(-bmax7, bmax7);
  endfunction

  // Parameter at flat write address (layer select in bits 14:12), or -1.
  function automatic int param_at(int sel, int idx);
    case (sel)
      0: if (idx < 72) return W1[idx / 24][(idx / 8) % 3][0][idx % 8];
         else if (idx < 80) return B1[idx - 72];
      1: if (idx < 1152) return W2[idx / 384][(idx / 128) % 3][(idx / 16) % 8][idx % 16];
         else if (idx < 1168) return B2[idx - 1152];
      2: if (idx < 3072) return WD1[idx / 12][idx % 12];
         else if (idx < 3084) return BD1[idx - 3072];
      3: if (idx < 36) return WD2[idx / 3][idx % 3];
         else if (idx < 39) return BD2[idx - 36];
      default: ;
    endcase
    return 0;
  endfunction

  function automatic int layer_size(int sel);
    case (sel)
      0: return 80;
      1: return 1168;
      2: return 3084;
      default: return 39;
    endcase
  endfunction

endpackage
