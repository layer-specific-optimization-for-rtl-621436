// Testbench support: an independent software model of one mixed-precision
// convolution layer, and the encoder that turns its weights into the parameter
// record stream the hardware prefetcher reads.
//
// Layer semantics (what the hardware must reproduce):
//   acc[o](y,x) = sum_{i,ky,kx} (wbit ? +a : -a) << mean_shift
//               + sum_{sparse entries (o,i,ky,kx,w)} w * a,
//   a = input(i, y+ky-P, x+kx-P), zero outside the map (and, for a 1x1 layer run
//   on a 3x3 datapath, zero for every tap but the centre);
//   out[o] = sat8(((acc * scale[o]) >>> bn_shift) + bias[o]).
// Record stream per block (mt, nt) in the order mt-major, nt-minor: header word
// with the sparse count, the dense bits (o_local*TI + i_local)*KK + tap, LSB first,
// then the sparse entries {oc, ic, tap, w}, EPW per word.
package tb_conv_pkg;

  typedef logic [255:0] pword_t;

  function automatic int iw(input int n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction

  function automatic int sat8(input longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  class layer_model;
    int N, M, TI, TO, K, H, NM, TS, PW;
    int KK, NT, MT, P;
    bit k1;                      // 1x1 layer on a K x K datapath
    int mean_shift, bn_shift;
    bit dense[];                 // [(o*N + i)*KK + tap]
    int sp_cnt[];                // [mt*NT + nt]
    int sp_oc[], sp_ic[], sp_xy[], sp_w[];   // [(mt*NT + nt)*NM + e], block-local
    int scale[], bias[];
    int cur_act[];

    function new(int n, int m, int ti, int to, int k, int h, int nm, int ts, int pw,
                 bit one_by_one = 0, int max_sparse = -1, int zero_blocks_pct = 25,
                 int min_sparse = 1);
      N = n; M = m; TI = ti; TO = to; K = k; H = h; NM = nm; TS = ts; PW = pw;
      KK = K * K; NT = N / TI; MT = M / TO; P = (K - 1) / 2; k1 = one_by_one;
      mean_shift = 2;
      bn_shift = 12;
      dense  = new[M * N * KK];
      foreach (dense[j]) dense[j] = $urandom_range(0, 1);
      sp_cnt = new[NT * MT];
      sp_oc  = new[NT * MT * NM]; sp_ic = new[NT * MT * NM];
      sp_xy  = new[NT * MT * NM]; sp_w  = new[NT * MT * NM];
      for (int b = 0; b < NT * MT; b++) begin
        int per_oc[];
        int lim;
        per_oc = new[TO];
        lim = (max_sparse < 0) ? NM : max_sparse;
        sp_cnt[b] = ($urandom_range(0, 99) < zero_blocks_pct) ? 0 : $urandom_range(min_sparse, lim);
        for (int e = 0; e < sp_cnt[b]; e++) begin
          int oc;
          oc = $urandom_range(0, TO - 1);
          while (per_oc[oc] >= TS) oc = (oc + 1) % TO;
          per_oc[oc]++;
          sp_oc[b*NM + e] = oc;
          sp_ic[b*NM + e] = $urandom_range(0, TI - 1);
          sp_xy[b*NM + e] = k1 ? (KK / 2) : $urandom_range(0, KK - 1);
          sp_w[b*NM + e]  = $urandom_range(0, 255) - 128;
        end
        for (int e = sp_cnt[b]; e < NM; e++) begin
          sp_oc[b*NM + e] = 0; sp_ic[b*NM + e] = 0; sp_xy[b*NM + e] = 0; sp_w[b*NM + e] = 0;
        end
      end
      scale = new[M]; bias = new[M];
      foreach (scale[o]) begin
        scale[o] = $urandom_range(1, 64);
        bias[o]  = $urandom_range(0, 60) - 30;
      end
    endfunction

    function int entry_w();
      return iw(TO) + iw(TI) + iw(KK) + 8;
    endfunction

    // Append the record stream of all blocks (one full pass over the weights).
    function void encode(ref pword_t q[$]);
      int ew, epw, db, dw;
      ew = entry_w(); epw = PW / ew; db = TO * TI * KK; dw = (db + PW - 1) / PW;
      for (int mt = 0; mt < MT; mt++) begin
        for (int nt = 0; nt < NT; nt++) begin
          int b;
          pword_t w;
          b = mt * NT + nt;
          w = '0; w[7:0] = 8'(sp_cnt[b]); q.push_back(w);
          for (int d = 0; d < dw; d++) begin
            w = '0;
            for (int j = 0; j < PW; j++) begin
              int bi, ol, il, tap;
              bi = d * PW + j;
              if (bi < db) begin
                ol = bi / (TI * KK); il = (bi / KK) % TI; tap = bi % KK;
                w[j] = dense[((mt*TO + ol) * N + nt*TI + il) * KK + tap];
              end
            end
            q.push_back(w);
          end
          for (int e0 = 0; e0 < sp_cnt[b]; e0 += epw) begin
            w = '0;
            for (int k = 0; k < epw; k++) begin
              if (e0 + k < sp_cnt[b]) begin
                longint ent;
                int e;
                e = b * NM + e0 + k;
                ent = (longint'(sp_oc[e]) << (iw(TI) + iw(KK) + 8)) |
                      (longint'(sp_ic[e]) << (iw(KK) + 8)) |
                      (longint'(sp_xy[e]) << 8) | longint'(sp_w[e] & 255);
                for (int j = 0; j < ew; j++) w[k*ew + j] = ent[j];
              end
            end
            q.push_back(w);
          end
        end
      end
    endfunction

    function int act_at(int i, int yy, int xx, int tap);
      if (yy < 0 || yy >= H || xx < 0 || xx >= H) return 0;
      if (k1 && tap != KK / 2) return 0;
      return cur_act[(yy * H + xx) * N + i];
    endfunction

    // act: [(y*H + x)*N + c], returns out: [(y*H + x)*M + o]
    function void compute(input int act[], output int out[]);
      cur_act = act;
      out = new[H * H * M];
      for (int y = 0; y < H; y++) begin
        for (int x = 0; x < H; x++) begin
          for (int o = 0; o < M; o++) begin
            longint acc;
            int mt;
            acc = 0;
            mt = o / TO;
            for (int i = 0; i < N; i++)
              for (int tap = 0; tap < KK; tap++) begin
                int a;
                a = act_at(i, y + tap / K - P, x + tap % K - P, tap);
                acc += (dense[(o * N + i) * KK + tap] ? a : -a) * (1 << mean_shift);
              end
            for (int nt = 0; nt < NT; nt++) begin
              int b;
              b = mt * NT + nt;
              for (int e = 0; e < sp_cnt[b]; e++) begin
                int j, tap;
                j = b * NM + e;
                if (sp_oc[j] == o % TO) begin
                  tap = sp_xy[j];
                  acc += longint'(sp_w[j]) *
                         act_at(nt * TI + sp_ic[j], y + tap / K - P, x + tap % K - P, tap);
                end
              end
            end
            out[(y * H + x) * M + o] = sat8(((acc * scale[o]) >>> bn_shift) + bias[o]);
          end
        end
      end
    endfunction
  endclass

endpackage
