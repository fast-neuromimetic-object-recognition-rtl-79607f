// hmax_ref_pkg: bit-exact reference model of the HMAX pipeline, written
// directly from the definitions (no pipelining, no streaming), for the
// testbenches. Set W, NF, NP, fill img, kern and patch, then call ref_s1,
// ref_c1 and ref_c2.
//   S1: two 1-D passes, first vertical then horizontal, first-pass results
//       saturated to 23 bits, responses 0/90/45/135 = EG, GE, EE+OO, EE-OO,
//       magnitude divided by isqrt(sum of squared pixels), saturated to 16 bits.
//   C1: max over both filters of a band (smaller map centred on the larger),
//       over D x D blocks, then over 2 x 2 blocks.
//   C2: minimum over all bands and locations of the squared distance between
//       a patch and the C1 region under it.
package hmax_ref_pkg;
  int W = 128, NF = 16, NP = 320;
  int img[];                       // W*W pixels, raster order
  int kern[16][3][19];             // [filter][E,G,O][index from centre]
  int s1m[16][4][];                // [filter][orientation][r*W+c]
  int c1m[8][4][];                 // [band][orientation][i*nb+j]
  int patch[4][];                  // [k][((p*4+o)*kappa) + py*s+px]
  longint c2r[4][];                // [k][p]

  function automatic int diam(int f);  return 7 + 2*f; endfunction
  function automatic int delta(int b); return 4 + b; endfunction
  function automatic int nbk(int b);   return (W - diam(2*b+1) + 1) / delta(b); endfunction
  function automatic int side(int k);  return 4*(k+1); endfunction

  function automatic longint kv(int f, int kk, int x);   // kernel value at offset x
    int a = (x < 0) ? -x : x;
    if (kk == 2) return (x > 0) ? kern[f][2][a] : (x < 0) ? -kern[f][2][a] : 0;
    return kern[f][kk][a];
  endfunction

  function automatic longint sat23(longint v);
    if (v >  longint'(4194303)) return 4194303;
    if (v < -longint'(4194304)) return -4194304;
    return v;
  endfunction

  function automatic longint isqrt(longint v);
    longint r = 0;
    while ((r+1)*(r+1) <= v) r++;
    return r;
  endfunction

  function automatic void ref_s1(int f);
    int d = diam(f), h = 3 + f, m = W - diam(f) + 1;
    longint gv[], ev[], ov[], qv[];
    gv = new[W*W]; ev = new[W*W]; ov = new[W*W]; qv = new[W*W];
    for (int o = 0; o < 4; o++) s1m[f][o] = new[W*W];
    for (int r = 0; r < m; r++)
      for (int c = 0; c < W; c++) begin
        longint a0 = 0, a1 = 0, a2 = 0, q = 0;
        for (int x = -h; x <= h; x++) begin
          longint p = img[(r+h+x)*W + c];
          a0 += kv(f,1,x)*p; a1 += kv(f,0,x)*p; a2 += kv(f,2,x)*p; q += p*p;
        end
        gv[r*W+c] = sat23(a0); ev[r*W+c] = sat23(a1); ov[r*W+c] = sat23(a2); qv[r*W+c] = q;
      end
    for (int r = 0; r < m; r++)
      for (int c = 0; c < m; c++) begin
        longint l0 = 0, l1 = 0, l2 = 0, l3 = 0, en = 0, rt;
        longint rs[4];
        for (int x = -h; x <= h; x++) begin
          int i = r*W + c + h + x;
          l0 += kv(f,0,x)*gv[i]; l1 += kv(f,1,x)*ev[i];
          l2 += kv(f,0,x)*ev[i]; l3 += kv(f,2,x)*ov[i]; en += qv[i];
        end
        rs[0] = l0; rs[1] = l1; rs[2] = l2 + l3; rs[3] = l2 - l3;
        rt = isqrt(en);
        for (int o = 0; o < 4; o++) begin
          longint a = (rs[o] < 0) ? -rs[o] : rs[o];
          longint q = (rt == 0) ? 0 : a / rt;
          s1m[f][o][r*W+c] = int'((q > 65535) ? 65535 : q);
        end
      end
  endfunction

  function automatic void ref_c1(int b);
    int dl = delta(b), nb = nbk(b);
    int blk[4][];
    for (int o = 0; o < 4; o++) begin blk[o] = new[nb*nb]; c1m[b][o] = new[nb*nb]; end
    for (int o = 0; o < 4; o++)
      for (int i = 0; i < nb; i++)
        for (int j = 0; j < nb; j++) begin
          int mx = 0;
          for (int s = 0; s < 2; s++)
            for (int y = i*dl; y < (i+1)*dl; y++)
              for (int x = j*dl; x < (j+1)*dl; x++) begin
                int off = (s == 0) ? 1 : 0;
                int v = s1m[2*b+s][o][(y+off)*W + x+off];
                if (v > mx) mx = v;
              end
          blk[o][i*nb+j] = mx;
        end
    for (int o = 0; o < 4; o++)
      for (int i = 0; i < nb; i++)
        for (int j = 0; j < nb; j++) begin
          int mx = blk[o][i*nb+j];
          int i1 = (i+1 < nb) ? i+1 : i, j1 = (j+1 < nb) ? j+1 : j;   // edge units
          if (blk[o][i*nb+j1] > mx)  mx = blk[o][i*nb+j1];
          if (blk[o][i1*nb+j] > mx)  mx = blk[o][i1*nb+j];
          if (blk[o][i1*nb+j1] > mx) mx = blk[o][i1*nb+j1];
          c1m[b][o][i*nb+j] = mx;
        end
  endfunction

  // C2 for patches p with p % pstep == 0 (others left at all ones)
  function automatic void ref_c2(int pstep);
    for (int k = 0; k < 4; k++) begin
      c2r[k] = new[NP];
      foreach (c2r[k][p]) c2r[k][p] = (longint'(1) << 42) - 1;
    end
    for (int b = 0; b < NF/2; b++) begin
      int nb = nbk(b), g = nb;
      for (int k = 0; k < 4; k++) begin
        int s = side(k), kap = s*s;
        if (s > g) continue;
        for (int y = 0; y <= g - s; y++)
          for (int x = 0; x <= g - s; x++)
            for (int p = 0; p < NP; p += pstep) begin
              longint dsum = 0;
              for (int o = 0; o < 4; o++)
                for (int py = 0; py < s; py++)
                  for (int px = 0; px < s; px++) begin
                    longint df = longint'(c1m[b][o][(y+py)*nb + x+px])
                               - longint'(patch[k][(p*4+o)*kap + py*s+px]);
                    dsum += df*df;
                  end
              if (dsum < c2r[k][p]) c2r[k][p] = dsum;
            end
      end
    end
  endfunction

  // Gabor kernels for filter f from the paper's sigma/lambda table (gamma 0.3),
  // E made zero-mean, each 1-D kernel scaled to an l2 norm of about 255
  function automatic void make_gabor(int f);
    real sig[16] = '{1.3,1.7,2.1,2.5,2.9,3.3,3.8,4.2,4.7,5.2,5.7,6.2,6.7,7.2,7.8,8.3};
    real lam[16] = '{3.9,5.0,6.2,7.4,8.7,10.0,11.3,12.7,14.1,15.5,17.0,18.5,20.1,21.7,23.3,25.0};
    real e[37], g[37], od[37], me, ne, ng, no;
    int h = 3 + f;
    me = 0;
    for (int x = -h; x <= h; x++) begin
      e[x+h]  = $exp(-(x*x)/(2.0*sig[f]*sig[f])) * $cos(2.0*3.14159265358979*x/lam[f]);
      g[x+h]  = $exp(-(0.09*x*x)/(2.0*sig[f]*sig[f]));
      od[x+h] = $exp(-(x*x)/(2.0*sig[f]*sig[f])) * $sin(2.0*3.14159265358979*x/lam[f]);
      me += e[x+h];
    end
    me = me / (2*h+1);
    ne = 0; ng = 0; no = 0;
    for (int i = 0; i <= 2*h; i++) begin
      e[i] -= me; ne += e[i]*e[i]; ng += g[i]*g[i]; no += od[i]*od[i];
    end
    for (int i = 0; i < 19; i++) begin
      kern[f][0][i] = (i <= h) ? int'($rtoi(255.0*e[h+i]/$sqrt(ne) + ((e[h+i] >= 0) ? 0.5 : -0.5))) : 0;
      kern[f][1][i] = (i <= h) ? int'($rtoi(255.0*g[h+i]/$sqrt(ng) + 0.5)) : 0;
      kern[f][2][i] = (i <= h && i > 0) ? int'($rtoi(255.0*od[h+i]/$sqrt(no) + ((od[h+i] >= 0) ? 0.5 : -0.5))) : 0;
    end
  endfunction
endpackage
