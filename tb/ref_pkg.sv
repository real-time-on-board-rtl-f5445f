// ref_pkg: bit-exact reference model of the disparity pipeline for the
// testbenches. Images are flat int arrays indexed y*W + x; cost volumes are
// indexed (y*W + x)*D + d. Each function mirrors one stage as specified in
// the header comments of the RTL modules, written as plain loops over the
// whole frame, independently of the streaming structure of the RTL.
package ref_pkg;

  localparam int COST_MAX = 6375;

  function automatic int iabs(int a);
    return (a < 0) ? -a : a;
  endfunction

  // Rectification: out(x,y) = raw(mx,my) if the source lies in the image and
  // within n rows of y, else 0.
  function automatic void rectify(input int raw[], input int mx[], input int my[],
                                  input int w, input int h, input int n, output int out[]);
    out = new[w*h];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int sx, sy;
        sx = mx[y*w+x];
        sy = my[y*w+x];
        if (sx < w && sy < h && iabs(sy - y) <= n) out[y*w+x] = raw[sy*w+sx];
        else out[y*w+x] = 0;
      end
  endfunction

  function automatic int census_bits(input int img[], input int w, input int h,
                                     input int x, input int y);
    int r, b;
    r = 0; b = 0;
    for (int dy = -2; dy <= 2; dy++)
      for (int dx = -2; dx <= 2; dx++)
        if (!(dx == 0 && dy == 0)) begin
          int xx, yy;
          xx = x + dx; yy = y + dy;
          if (xx >= 0 && xx < w && yy >= 0 && yy < h && img[yy*w+xx] < img[y*w+x])
            r |= (1 << b);
          b++;
        end
    return r;
  endfunction

  // Matching cost volume; sad = 1 selects SAD, 0 the census Hamming distance.
  function automatic void cost(input int l[], input int r[], input int w, input int h,
                               input int dm, input bit sad, output int c[]);
    int lc[], rc[];
    c  = new[w*h*dm];
    lc = new[w*h];
    rc = new[w*h];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        lc[y*w+x] = census_bits(l, w, h, x, y);
        rc[y*w+x] = census_bits(r, w, h, x, y);
      end
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++)
        for (int d = 0; d < dm; d++) begin
          int v;
          if (x < d) v = COST_MAX;
          else if (sad) begin
            v = 0;
            for (int dy = -2; dy <= 2; dy++)
              for (int dx = -2; dx <= 2; dx++) begin
                int yy, lx, rx;
                yy = y + dy; lx = x + dx; rx = x + dx - d;
                if (yy >= 0 && yy < h && lx >= 0 && lx < w && rx >= 0)
                  v += iabs(l[yy*w+lx] - r[yy*w+rx]);
              end
          end else
            v = $countones(lc[y*w+x] ^ rc[y*w+x-d]);
          c[(y*w+x)*dm+d] = v;
        end
  endfunction

  // One SGM path; (ox,oy) is the offset of the predecessor q = p + (ox,oy).
  function automatic void path(input int c[], input int w, input int h, input int dm,
                               input int p1, input int p2, input int ox, input int oy,
                               inout int s[]);
    int lr[];
    lr = new[w*h*dm];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int qx, qy, mn;
        qx = x + ox; qy = y + oy;
        if (qx < 0 || qx >= w || qy < 0) begin
          for (int d = 0; d < dm; d++) lr[(y*w+x)*dm+d] = c[(y*w+x)*dm+d];
        end else begin
          mn = 1 << 30;
          for (int d = 0; d < dm; d++)
            if (lr[(qy*w+qx)*dm+d] < mn) mn = lr[(qy*w+qx)*dm+d];
          for (int d = 0; d < dm; d++) begin
            int m;
            m = lr[(qy*w+qx)*dm+d];
            if (d > 0 && lr[(qy*w+qx)*dm+d-1] + p1 < m) m = lr[(qy*w+qx)*dm+d-1] + p1;
            if (d < dm-1 && lr[(qy*w+qx)*dm+d+1] + p1 < m) m = lr[(qy*w+qx)*dm+d+1] + p1;
            if (mn + p2 < m) m = mn + p2;
            lr[(y*w+x)*dm+d] = c[(y*w+x)*dm+d] + m - mn;
          end
        end
      end
    foreach (s[i]) s[i] += lr[i];
  endfunction

  function automatic void sgm(input int c[], input int w, input int h, input int dm,
                              input int p1, input int p2, output int s[]);
    s = new[w*h*dm];
    foreach (s[i]) s[i] = 0;
    path(c, w, h, dm, p1, p2, -1,  0, s);   // L0
    path(c, w, h, dm, p1, p2, -1, -1, s);   // L45
    path(c, w, h, dm, p1, p2,  0, -1, s);   // L90
    path(c, w, h, dm, p1, p2,  1, -1, s);   // L135
  endfunction

  // WTA and left-right check; rejected pixels get code inv.
  function automatic void lrcheck(input int s[], input int w, input int h, input int dm,
                                  input int inv, output int disp[], output int nrej);
    int dl[], dr[];
    disp = new[w*h];
    dl = new[w*h];
    dr = new[w*h];
    nrej = 0;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int b, bv;
        b = 0; bv = s[(y*w+x)*dm];
        for (int d = 1; d < dm; d++) if (s[(y*w+x)*dm+d] < bv) begin bv = s[(y*w+x)*dm+d]; b = d; end
        dl[y*w+x] = b;
        b = 0; bv = s[(y*w+x)*dm];
        for (int d = 1; d < dm && x + d < w; d++)
          if (s[(y*w+x+d)*dm+d] < bv) begin bv = s[(y*w+x+d)*dm+d]; b = d; end
        dr[y*w+x] = b;
      end
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int a;
        a = dl[y*w+x];
        if (x - a >= 0 && iabs(a - dr[y*w+x-a]) <= 1) disp[y*w+x] = a;
        else begin disp[y*w+x] = inv; nrej++; end
      end
  endfunction

  // 5x5 median, border pixels passed through.
  function automatic void median(input int in[], input int w, input int h,
                                 output int out[], output int nchg);
    out = new[w*h];
    nchg = 0;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        if (x < 2 || x >= w-2 || y < 2 || y >= h-2) out[y*w+x] = in[y*w+x];
        else begin
          int v[25];
          int k;
          k = 0;
          for (int dy = -2; dy <= 2; dy++)
            for (int dx = -2; dx <= 2; dx++) begin v[k] = in[(y+dy)*w+x+dx]; k++; end
          v.sort();
          out[y*w+x] = v[12];
        end
        if (out[y*w+x] != in[y*w+x]) nchg++;
      end
  endfunction

  // 8-bit pseudo-random texture value (integer hash).
  function automatic int hash8(input int seed, input int i);
    int unsigned v;
    v = 32'(i) * 32'd2654435761 + 32'(seed) * 32'd40503;
    v = v ^ (v >> 15);
    v = v * 32'd2246822519;
    v = v ^ (v >> 13);
    return int'(v & 32'hff);
  endfunction

  // Synthetic stereo pair: textured background at disparity dbg, and a
  // rectangular object (an obstacle) at disparity dobj. Right pixel (x,y)
  // shows the scene point of left pixel (x+d,y).
  function automatic void scene(input int w, input int h, input int dbg, input int dobj,
                                input int seed, output int l[], output int r[]);
    int tex[];
    int tw;
    tw = w + 64;
    l = new[w*h];
    r = new[w*h];
    tex = new[tw*h];
    for (int i = 0; i < tw*h; i++) tex[i] = hash8(seed, i);
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        bit inobj;
        inobj = (x >= w/3 && x < w/3 + w/4 && y >= h/4 && y < h/4 + h/2);
        l[y*w+x] = inobj ? (tex[y*tw + x + 32] ^ 32'h5a) : tex[y*tw + x];
      end
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int xo;
        bit inobj;
        xo = x + dobj;
        inobj = (xo >= w/3 && xo < w/3 + w/4 && y >= h/4 && y < h/4 + h/2);
        if (inobj) r[y*w+x] = tex[y*tw + xo + 32] ^ 32'h5a;
        else       r[y*w+x] = tex[y*tw + x + dbg];
      end
  endfunction

endpackage
