// tb_model_pkg: floating-point model of the whole PRNN-CNN network for the end-to-end
// testbenches, plus the random parameter set they load. The model follows the network
// equations directly: input weighting (rounded to 16 bits as the hardware does, since it is
// exact integer arithmetic), the leaky PRNN recurrence with its 16-bit state, then
// convolutions, ELU, max pooling, the fully connected layer and log softmax in floating
// point. Parameters are integers with 12 fraction bits.
package tb_model_pkg;
  import tb_ref_pkg::*;

  int Win [16][64]; int Bin [16]; int Wrec [16][16]; int Brec [16];
  int W1 [16][16][5]; int B1 [16]; int W2 [16][16][3]; int B2 [16];
  int Wfc [30][96]; int Bfc [30];

  // random parameters in ranges that keep every stage inside the +-8 number range
  function automatic void gen_params();
    for (int n = 0; n < 16; n++) for (int j = 0; j < 64; j++) Win[n][j] = rnd_w(600);
    for (int n = 0; n < 16; n++) Bin[n] = rnd_w(1000);
    for (int n = 0; n < 16; n++) for (int m = 0; m < 16; m++) Wrec[n][m] = rnd_w(2500);
    for (int n = 0; n < 16; n++) Brec[n] = rnd_w(1500);
    for (int o = 0; o < 16; o++) for (int i = 0; i < 16; i++) for (int k = 0; k < 5; k++) W1[o][i][k] = rnd_w(1200);
    for (int o = 0; o < 16; o++) B1[o] = rnd_w(1500);
    for (int o = 0; o < 16; o++) for (int i = 0; i < 16; i++) for (int k = 0; k < 3; k++) W2[o][i][k] = rnd_w(1200);
    for (int o = 0; o < 16; o++) B2[o] = rnd_w(1500);
    for (int c = 0; c < 30; c++) for (int f = 0; f < 96; f++) Wfc[c][f] = rnd_w(1200);
    for (int c = 0; c < 30; c++) Bfc[c] = rnd_w(2000);
  endfunction

  // value of parameter word a of the address map
  function automatic int param_word(input int a);
    if (a < 1024) return Win[a/64][a%64];
    if (a < 1040) return Bin[a-1024];
    if (a < 1296) return Wrec[(a-1040)/16][(a-1040)%16];
    if (a < 1312) return Brec[a-1296];
    if (a < 2592) return W1[(a-1312)/80][((a-1312)%80)/5][(a-1312)%5];
    if (a < 2608) return B1[a-2592];
    if (a < 3376) return W2[(a-2608)/48][((a-2608)%48)/3][(a-2608)%3];
    if (a < 3392) return B2[a-3376];
    if (a < 6272) return Wfc[(a-3392)/96][(a-3392)%96];
    return Bfc[a-6272];
  endfunction

  // log-probabilities of one data unit; x is the reshaped input X[t*64+j]
  function automatic void model(input int x [2048], output real lp [30]);
    int U [32][16];
    real y [16][32], c1 [16][14], c2 [16][6], z [30];
    int s [16]; real yp [16];
    real zmax, se;
    for (int t = 0; t < 32; t++)
      for (int n = 0; n < 16; n++) begin
        longint acc;
        acc = longint'(Bin[n]) * 4096;
        for (int j = 0; j < 64; j++) acc += longint'(Win[n][j]) * longint'(x[t*64+j]);
        U[t][n] = q_round(acc);
      end
    for (int n = 0; n < 16; n++) begin s[n] = 0; yp[n] = 0.0; end
    for (int t = 0; t < 32; t++) begin
      for (int n = 0; n < 16; n++) begin
        real acc; int f;
        acc = 0.0;
        for (int m = 0; m < 16; m++) acc += real'(Wrec[n][m]) * yp[m] * 4096.0;
        f = q_round(longint'($floor(acc + 0.5)) + longint'(U[t][n] + Brec[n]) * 4096);
        s[n] = sat16(longint'(s[n] - (s[n] >>> 1) + (f >>> 1)));
        y[n][t] = sigma_r(real'(s[n]) / 4096.0);
      end
      for (int n = 0; n < 16; n++) yp[n] = y[n][t];
    end
    for (int o = 0; o < 16; o++)
      for (int p = 0; p < 14; p++) begin
        c1[o][p] = -1.0e9;
        for (int q = 2*p; q < 2*p+2; q++) begin
          real a;
          a = real'(B1[o]) / 4096.0;
          for (int i = 0; i < 16; i++) for (int k = 0; k < 5; k++) a += real'(W1[o][i][k]) / 4096.0 * y[i][q+k];
          a = elu_r(a);
          if (a > c1[o][p]) c1[o][p] = a;
        end
      end
    for (int o = 0; o < 16; o++)
      for (int p = 0; p < 6; p++) begin
        c2[o][p] = -1.0e9;
        for (int q = 2*p; q < 2*p+2; q++) begin
          real a;
          a = real'(B2[o]) / 4096.0;
          for (int i = 0; i < 16; i++) for (int k = 0; k < 3; k++) a += real'(W2[o][i][k]) / 4096.0 * c1[i][q+k];
          a = elu_r(a);
          if (a > c2[o][p]) c2[o][p] = a;
        end
      end
    zmax = -1.0e9;
    for (int c = 0; c < 30; c++) begin
      z[c] = real'(Bfc[c]) / 4096.0;
      for (int f = 0; f < 96; f++) z[c] += real'(Wfc[c][f]) / 4096.0 * c2[f/6][f%6];
      if (z[c] > zmax) zmax = z[c];
    end
    se = 0.0;
    for (int c = 0; c < 30; c++) se += $exp(z[c] - zmax);
    for (int c = 0; c < 30; c++) begin
      lp[c] = z[c] - zmax - $ln(se);
      if (lp[c] < -8.0) lp[c] = -8.0;
    end
  endfunction
endpackage
