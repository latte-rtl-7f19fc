// nldu_ref_pkg: reference arithmetic for the NLDU testbenches.
//
// Plain integer models of the network layers and the post-processing, written
// from the equations rather than from the RTL structure: a whole Conv3d layer
// is one nested loop over the three most recent rounds. Frames are flattened
// as index = position*K + channel, position = row*side + column. Weight
// arrays use the load-port order ((z*9 + x*3 + y)*K_IN + l)*K_OUT + k.
package nldu_ref_pkg;

  // arithmetic shift right with round-half-up, saturated to signed INT8
  function automatic int rq8(input longint v, input int sh);
    longint r;
    r = (sh == 0) ? v : ((v + (longint'(1) << (sh - 1))) >>> sh);
    if (r > 127)  return 127;
    if (r < -128) return -128;
    return int'(r);
  endfunction

  // one Conv3d 3x3x3 valid layer over rounds (t-2, t-1, t) = (h0, h1, h2)
  function automatic void conv3(input int h0[], input int h1[], input int h2[],
                                input int din, input int kin, input int kout,
                                input int w[], input int b[], input int sh,
                                input bit relu, output int out[]);
    int dout;
    dout = din - 2;
    out = new[dout*dout*kout];
    for (int i = 0; i < dout; i++)
      for (int j = 0; j < dout; j++)
        for (int k = 0; k < kout; k++) begin
          longint s;
          s = b[k];
          for (int z = 0; z < 3; z++)
            for (int x = 0; x < 3; x++)
              for (int y = 0; y < 3; y++)
                for (int l = 0; l < kin; l++) begin
                  int v, wi;
                  wi = ((z*9 + x*3 + y)*kin + l)*kout + k;
                  case (z)
                    0: v = h0[((i+x)*din + (j+y))*kin + l];
                    1: v = h1[((i+x)*din + (j+y))*kin + l];
                    default: v = h2[((i+x)*din + (j+y))*kin + l];
                  endcase
                  s += longint'(v) * w[wi];
                end
          out[(i*dout + j)*kout + k] = (relu && s < 0) ? 0 : rq8(s, sh);
        end
  endfunction

  // layer 4: 1x1x1, weights w[l*kout + k]
  function automatic void conv1(input int h[], input int npos, input int kin, input int kout,
                                input int w[], input int b[], input int sh, output int out[]);
    out = new[npos*kout];
    for (int p = 0; p < npos; p++)
      for (int k = 0; k < kout; k++) begin
        longint s;
        s = b[k];
        for (int l = 0; l < kin; l++) s += longint'(h[p*kin + l]) * w[l*kout + k];
        out[p*kout + k] = rq8(s, sh);
      end
  endfunction

  // predictions per position from the six scores: bit3 X, bit2 Z, bit1 M, bit0 H
  function automatic int pred(input int sc[], input int p, input int thm, input int thh);
    int best, cls;
    best = sc[p*6]; cls = 0;
    for (int c = 1; c < 4; c++) if (sc[p*6 + c] > best) begin best = sc[p*6 + c]; cls = c; end
    return ((cls == 1 || cls == 2) ? 8 : 0) | ((cls == 3 || cls == 2) ? 4 : 0) |
           ((sc[p*6 + 4] > thm) ? 2 : 0) | ((sc[p*6 + 5] > thh) ? 1 : 0);
  endfunction

  // Syndrome update of one round on an n x n region. s[p*2+ch] holds the
  // embedded detectors (ch 0 = X, 1 = Z), e_now/e_prev the predictions
  // (bit3 X, bit2 Z, bit1 M, bit0 H) on the extended plane of (n+4)^2
  // positions, index (r+2)*(n+4) + (c+2), r,c in -2..n+1.
  function automatic void syn_update(input int n, input int s[], input int e_now[], input int e_prev[],
                                     input bit vz[], input bit vx[], input bit lz[], input bit lx[],
                                     output bit sp[], output bit lzf, output bit lxf,
                                     output int cin, output int cout);
    int ne;
    ne = n + 4;
    sp = new[n*n*2];
    lzf = 0; lxf = 0; cin = 0; cout = 0;
    for (int r = 0; r < n; r++)
      for (int c = 0; c < n; c++) begin
        int p, e00, e01, e10, e11;
        bit meas, zd, xd;
        p   = r*n + c;
        e00 = e_now[(r+2)*ne + c+2];
        e01 = e_now[(r+2)*ne + c+3];
        e10 = e_now[(r+3)*ne + c+2];
        e11 = e_now[(r+3)*ne + c+3];
        meas = e00[1] ^ e_prev[(r+2)*ne + c+2][1] ^ e00[0];
        zd = (s[p*2+1] == 1) ^ meas ^ e_prev[(r+4)*ne + c+2][0] ^ e00[3] ^ e01[3] ^ e10[3] ^ e11[3];
        xd = (s[p*2+0] == 1) ^ meas ^ e_prev[(r+2)*ne + c][0]   ^ e00[2] ^ e01[2] ^ e10[2] ^ e11[2];
        sp[p*2+1] = vz[p] && zd;
        sp[p*2+0] = vx[p] && xd;
        cin  += int'(vz[p] && s[p*2+1] == 1) + int'(vx[p] && s[p*2+0] == 1);
        cout += int'(sp[p*2+1]) + int'(sp[p*2+0]);
        if (lz[p] && e00[3]) lzf ^= 1;
        if (lx[p] && e00[2]) lxf ^= 1;
      end
  endfunction

endpackage
