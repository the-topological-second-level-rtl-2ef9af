// tb_l2_ref_pkg -- reference model of the L2 algorithm for the testbenches.
//
// Works on whole camera maps held as 64 drawer words per map and recomputes
// everything pixel by pixel in camera coordinates, independently of the RTL's
// window/table/transform structure:
//   * camera grid: gx = 0..31, gy = 0..127; slot (gx/4, gy/16) is drawer
//     (gx/4) + 8*(gy/16); a pixel exists where gx+gy is even; its bit in the
//     drawer word is 8*FE + (ly mod 8) with FE = 2*(lx/2) + ly/8.
//   * camera frame coordinates: x = gx - 16, y = gy - 64.
//   * cluster membership by a bounded breadth-first search (a pixel is in a
//     cluster of >= 3 when at least 3 set pixels are reachable within 2 steps).
// Functions only, no timing. The rule follows the published algorithm; the
// camera layout matches this design's own 8 x 8 slot choice.
package tb_l2_ref_pkg;

  typedef bit [31:0] map_t [64];

  typedef struct {
    longint m, mx, my, mxx, myy, mxy;
  } ref_mom_t;

  // Loop bounds are variables, so that the simulator keeps these loops as
  // loops instead of unrolling them at every call site.
  int GW = 32, GH = 128, NN = 6;
  int DX [6] = '{0, 0, 1, 1, -1, -1};
  int DY [6] = '{2, -2, 1, -1, 1, -1};

  function automatic int bit_of(int gx, int gy, output int drawer);
    int lx = gx % 4, ly = gy % 16;
    drawer = gx / 4 + 8 * (gy / 16);
    return 8 * (2 * (lx / 2) + ly / 8) + (ly % 8);
  endfunction

  function automatic bit exists(int gx, int gy);
    return gx >= 0 && gx < GW && gy >= 0 && gy < GH && ((gx + gy) % 2 == 0);
  endfunction

  function automatic bit get(const ref map_t m, input int gx, input int gy);
    int d, b;
    if (!exists(gx, gy)) return 0;
    b = bit_of(gx, gy, d);
    return m[d][b];
  endfunction

  function automatic void put(ref map_t m, input int gx, input int gy, input bit v);
    int d, b;
    if (!exists(gx, gy)) return;
    b = bit_of(gx, gy, d);
    m[d][b] = v;
  endfunction

  function automatic void clear(ref map_t m);
    for (int i = 0; i < GW * 2; i++) m[i] = '0;
  endfunction

  // denoise: keep set pixels with a set neighbour
  function automatic void denoise(const ref map_t m, ref map_t o);
    clear(o);
    for (int gx = 0; gx < GW; gx++)
      for (int gy = 0; gy < GH; gy++)
        if (get(m, gx, gy)) begin
          bit any = 0;
          for (int j = 0; j < NN; j++) any |= get(m, gx + DX[j], gy + DY[j]);
          put(o, gx, gy, any);
        end
  endfunction

  // cluster: keep set pixels with >= 3 set pixels within two steps through set pixels
  function automatic void cluster3(const ref map_t m, ref map_t o);
    clear(o);
    for (int gx = 0; gx < GW; gx++)
      for (int gy = 0; gy < GH; gy++)
        if (get(m, gx, gy)) begin
          int px [$], py [$];
          px.push_back(gx); py.push_back(gy);
          for (int j = 0; j < NN; j++) begin
            int ax = gx + DX[j], ay = gy + DY[j];
            if (get(m, ax, ay)) begin
              bit seen = 0;
              foreach (px[q]) if (px[q] == ax && py[q] == ay) seen = 1;
              if (!seen) begin px.push_back(ax); py.push_back(ay); end
              for (int k = 0; k < NN; k++) begin
                int bx = ax + DX[k], by = ay + DY[k];
                if (get(m, bx, by)) begin
                  seen = 0;
                  foreach (px[q]) if (px[q] == bx && py[q] == by) seen = 1;
                  if (!seen) begin px.push_back(bx); py.push_back(by); end
                end
              end
            end
          end
          put(o, gx, gy, px.size() >= 3);
        end
  endfunction

  function automatic bit empty(const ref map_t m);
    for (int i = 0; i < GW * 2; i++) if (m[i] != 0) return 0;
    return 1;
  endfunction

  function automatic ref_mom_t moments(const ref map_t m, input longint w);
    ref_mom_t r = '{0, 0, 0, 0, 0, 0};
    for (int gx = 0; gx < GW; gx++)
      for (int gy = 0; gy < GH; gy++)
        if (get(m, gx, gy)) begin
          longint x = gx - 16, y = gy - 64;
          r.m += w; r.mx += w * x; r.my += w * y;
          r.mxx += w * x * x; r.myy += w * y * y; r.mxy += w * x * y;
        end
    return r;
  endfunction

  function automatic ref_mom_t add(ref_mom_t a, ref_mom_t b);
    return '{a.m + b.m, a.mx + b.mx, a.my + b.my, a.mxx + b.mxx, a.myy + b.myy, a.mxy + b.mxy};
  endfunction

  // centre-of-gravity cut: 1 = accept
  function automatic bit cog_accept(longint m, longint mx, longint my,
                                    longint xc, longint yc, longint tau2);
    longint cx, cy, d2;
    if (m <= 0) return 0;
    cx = (mx * 32) / m;
    cy = (my * 32) / m;
    d2 = (cy - yc) * (cy - yc) + 3 * (cx - xc) * (cx - xc);
    return d2 < tau2;
  endfunction

  // full decision: 0 stereo, 1 no cluster, 2 cog far, 3 cog near
  function automatic int decide(input bit stereo, const ref map_t m1, const ref map_t m2,
                                input int d1, input int d2, input longint xc, input longint yc,
                                input longint tau2);
    map_t c, h;
    ref_mom_t a;
    if (stereo) return 0;
    cluster3(m1, c);
    if (empty(c)) return 1;
    denoise(m1, h);
    a = add(moments(h, d1), moments(m2, d2 - d1));
    return cog_accept(a.m, a.mx, a.my, xc, yc, tau2) ? 3 : 2;
  endfunction

  // a random shower-like blob plus isolated noise pixels
  function automatic void random_event(ref map_t m1, ref map_t m2, input int blob_px,
                                       input int noise_px, input int cx, input int cy);
    clear(m1); clear(m2);
    for (int i = 0; i < noise_px; i++) begin
      int rx = $urandom % GW, ry = $urandom % GH;
      put(m1, rx, ry, 1);
    end
    for (int i = 0; i < blob_px; i++) begin
      int gx = cx + int'($urandom % 5) - 2, gy = cy + int'($urandom % 9) - 4;
      put(m1, gx, gy, 1);
      if ($urandom % 3 == 0) put(m2, gx, gy, 1);
    end
  endfunction

endpackage
