// tb_ref_pkg: reference arithmetic for the testbenches, written with plain
// integers and independent of the RTL's package.
//
// A 10-bit activation is an integer in [-512, 511] counting 1/64 units; a
// 4-bit parameter an integer in [-8, 7] counting 1/4 units. A sum of products
// thus counts 1/256 units and a bias b enters it as b*64. A layer result is
// floor(sum / 4), clipped to [-512, 511].
package tb_ref_pkg;

  function automatic int rq(input int s);
    int q;
    q = (s >= 0) ? s / 4 : -((-s + 3) / 4);   // floor division by 4
    if (q > 511)  q = 511;
    if (q < -512) q = -512;
    return q;
  endfunction

  function automatic int relu(input int a);
    return (a > 0) ? a : 0;
  endfunction

  function automatic int rnd_act(input int mag);
    return int'($urandom_range(2*mag)) - mag;
  endfunction

  function automatic int rnd_wgt();
    return int'($urandom_range(15)) - 8;
  endfunction

  // one fused mapping: b' + sum_i w'_i * max_t ReLU(rq(w_i a_t + b_i))
  function automatic int pool_feature(input int a0, input int a1, input int npool,
                                      input int w, input int b);
    int d;
    d = relu(rq(a0 * w + b * 64));
    if (npool == 2 && relu(rq(a1 * w + b * 64)) > d) d = relu(rq(a1 * w + b * 64));
    return d;
  endfunction

  // A hand-built parameter set that turns a CNN into a polarity detector:
  // the convolutions and projections pass the signal on (its positive and
  // negative parts through separate ReLU rows), FPB3 sums the pooled
  // positive peaks into f0 and the negative peaks into f1, and the
  // classifier scores class 0 = f0, class 1 = 1.0, class 2 = f1. Windows
  // with large positive spikes give class 0, quiet windows class 1 and
  // large negative transients class 2. With jitter set, each unused
  // parameter becomes -1, 0 or +1 at random (about one in three non-zero).
  function automatic void polarity_params(output int prm [419], input bit jitter);
    for (int a = 0; a < 419; a++)
      prm[a] = (jitter && $urandom_range(2) == 0) ? int'($urandom_range(2)) - 1 : 0;
    prm[0] = 0; prm[1] = 4; prm[2] = 0;           // Conv1: identity
    prm[4]  = 4;  prm[5]  = -4;                    // FPB1 projection out rows 0, 1
    prm[14] = 0;  prm[15] = 0;
    prm[24] = 4;  prm[25] = -4;                    // FPB1 projection in
    prm[34] = 0;
    prm[35] = 0; prm[36] = 4; prm[37] = 0; prm[38] = 0;   // Conv2: identity
    prm[39] = 4;  prm[40] = -4;                    // FPB2 projection out
    prm[49] = 0;  prm[50] = 0;
    prm[59] = 4;  prm[60] = -4;                    // FPB2 projection in
    prm[69] = 0;
    for (int a = 70; a < 78; a++) prm[a] = 0;
    prm[71] = 4;  prm[74] = 4;                     // Conv3: both filters identity
    prm[78] = 4;  prm[79] = 0; prm[80] = -4; prm[81] = 0; // FPB3 projection out rows 0, 1
    prm[98] = 0;  prm[99] = 0;
    for (int p = 0; p < 15; p++) begin
      prm[108 + 10*p]           = 1;               // f0 += positive peaks / 4
      prm[108 + 10*p + 1]       = 0;
      prm[108 + 150 + 10*p]     = 0;
      prm[108 + 150 + 10*p + 1] = 1;               // f1 += negative peaks / 4
    end
    prm[408] = 0; prm[409] = 0;
    for (int a = 410; a < 419; a++) prm[a] = 0;
    prm[410] = 4;                                  // score0 = f0
    prm[415] = 4;                                  // score2 = f1
    prm[417] = 4;                                  // score1 = 1.0
  endfunction

  // A synthetic 66-sample window: low noise, plus for kind 0 three positive
  // spikes and for kind 2 three negative transients (kind 1: noise only).
  function automatic void make_window(input int kind, input int noise, output int x [66]);
    for (int t = 0; t < 66; t++) x[t] = rnd_act(noise);
    if (kind != 1)
      for (int s = 0; s < 3; s++) begin
        int c;
        c = 8 + 20*s + int'($urandom_range(6));
        for (int d = -1; d <= 1; d++) x[c+d] = (kind == 0 ? 1 : -1) * (d == 0 ? 420 : 250);
      end
  endfunction

  // Whole-network reference of one CNN. prm holds the 419 parameters in the
  // load-address order of the hardware; x is one 66-sample batch.
  function automatic void cnn_ref(input int prm [419], input int x [66],
                                  output int score [3], output int cls);
    int xp [68], y1 [66], y2 [66], y3 [64], y4 [32], y5 [2][30], f [2];
    for (int t = 0; t < 68; t++) xp[t] = (t == 0 || t == 67) ? 0 : x[t-1];
    // Conv1 (padded), parameters 0..3
    for (int j = 0; j < 66; j++)
      y1[j] = rq(64*prm[3] + prm[0]*xp[j] + prm[1]*xp[j+1] + prm[2]*xp[j+2]);
    // FPB1, parameters 4..34
    for (int j = 0; j < 66; j++) begin
      int s;
      s = 64*prm[34];
      for (int i = 0; i < 10; i++) s += prm[24+i] * relu(rq(prm[4+i]*y1[j] + 64*prm[14+i]));
      y2[j] = rq(s);
    end
    // Conv2, parameters 35..38
    for (int j = 0; j < 64; j++)
      y3[j] = rq(64*prm[38] + prm[35]*y2[j] + prm[36]*y2[j+1] + prm[37]*y2[j+2]);
    // FPB2, parameters 39..69
    for (int j = 0; j < 32; j++) begin
      int s;
      s = 64*prm[69];
      for (int i = 0; i < 10; i++) s += prm[59+i] * pool_feature(y3[2*j], y3[2*j+1], 2, prm[39+i], prm[49+i]);
      y4[j] = rq(s);
    end
    // Conv3, parameters 70..77
    for (int fl = 0; fl < 2; fl++)
      for (int j = 0; j < 30; j++)
        y5[fl][j] = rq(64*prm[76+fl] + prm[70+3*fl]*y4[j] + prm[71+3*fl]*y4[j+1] + prm[72+3*fl]*y4[j+2]);
    // FPB3, parameters 78..409
    for (int k = 0; k < 2; k++) f[k] = 64*prm[408+k];
    for (int p = 0; p < 15; p++)
      for (int i = 0; i < 10; i++) begin
        int d0, d1;
        d0 = relu(rq(prm[78+2*i]*y5[0][2*p]   + prm[79+2*i]*y5[1][2*p]   + 64*prm[98+i]));
        d1 = relu(rq(prm[78+2*i]*y5[0][2*p+1] + prm[79+2*i]*y5[1][2*p+1] + 64*prm[98+i]));
        for (int k = 0; k < 2; k++) f[k] += prm[108+150*k+10*p+i] * ((d0 > d1) ? d0 : d1);
      end
    for (int k = 0; k < 2; k++) f[k] = rq(f[k]);
    // classifier, parameters 410..418
    cls = 0;
    for (int n = 0; n < 3; n++) begin
      score[n] = relu(rq(64*prm[416+n] + prm[410+2*n]*f[0] + prm[411+2*n]*f[1]));
      if (score[n] > score[cls]) cls = n;
    end
  endfunction

endpackage
