// ms_ref_pkg: bit-exact software model of the Microshift encoder, used by
// the end-to-end testbenches.
//
// It is written straight from the algorithm, on whole-image arrays, with no
// line buffers or pipelines: quantize every pixel with its microshift, then
// for each pixel in raster order look up its template and 3x3 tile in the
// quantized image, predict, map, Golomb- or run-code it, and append the
// bits to the stream of its subimage. The streams are finally cut into
// 32-bit words, the last one zero-padded. Counters record how often each
// coding mechanism was used so a testbench can prove it was exercised.
package ms_ref_pkg;

  class ms_ref;
    int W, H, K;
    int q [];                 // quantized image, row-major
    bit bits [9][$];          // bit stream per subimage
    logic [31:0] words [9][$];
    // mechanism counters
    int n_intra, n_inter, n_run_pix, n_seg, n_int, n_eol, n_wrap, n_nointersect, n_edge_tile;

    local int sh [9] = '{0, 4, 7, 11, 14, 18, 21, 25, 28};
    local int jt [32] = '{0,0,0,0,1,1,1,1,2,2,2,2,3,3,3,3,4,4,5,5,6,6,7,7,8,9,10,11,12,13,14,15};

    function new(int w, int h, int k = 0);
      W = w; H = h; K = k;
    endfunction

    local function int qp(int r, int c);
      if (r < 0 || c < 0 || c >= W) return 0;
      return q[r * W + c];
    endfunction

    local function int clamp2(int v);
      return v > 2 ? 2 : (v < -2 ? -2 : v);
    endfunction

    local function int fdiv2(int v);
      return (v >= 0) ? v / 2 : -((-v + 1) / 2);
    endfunction

    // q1 of a merged context: search the 625 texture vectors
    local function int q1_of(int l);
      for (int a = -2; a <= 2; a++) for (int b = -2; b <= 2; b++)
        for (int c = -2; c <= 2; c++) for (int d = -2; d <= 2; d++)
          if (125 * a + 25 * b + 5 * c + d == l) return a;
      return 0;
    endfunction

    local function void put(int s, int value, int len);
      for (int k = len - 1; k >= 0; k--) bits[s].push_back(value[k]);
    endfunction

    local function void golomb(int s, int v);
      int qq;
      qq = v >> K;
      for (int k = 0; k < qq; k++) bits[s].push_back(1'b0);
      bits[s].push_back(1'b1);
      for (int k = K - 1; k >= 0; k--) bits[s].push_back(v[k]);
    endfunction

    local function int emap(int x, int xh);
      int e;
      e = x - xh;
      if (e == 0) return 0;
      if (xh <= 4) begin
        if (e > 0) return ((e - 1 < xh) ? e - 1 : xh) + e;
        else       return ((-e < 7 - xh) ? -e : 7 - xh) - e;
      end
      if (e > 0) return ((e < xh) ? e : xh) + e;
      return ((-e - 1 < 7 - xh) ? -e - 1 : 7 - xh) - e;
    endfunction

    function void encode(int img []);
      int act [9], cnt [9], idx [9];
      q = new[W * H];
      for (int s = 0; s < 9; s++) begin
        bits[s].delete(); words[s].delete(); act[s] = 0; cnt[s] = 0; idx[s] = 0;
      end
      n_intra = 0; n_inter = 0; n_run_pix = 0; n_seg = 0; n_int = 0; n_eol = 0;
      n_wrap = 0; n_nointersect = 0; n_edge_tile = 0;
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
        int t, v;
        t = 3 * (r % 3) + c % 3;
        v = img[r * W + c] + sh[t];
        if (v >= 256) n_wrap++;
        q[r * W + c] = (v % 256) / 32;
      end
      for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
        int t, x, a, b, cc, d, e, s, ctx, xh, flat, eol, mode;
        t = 3 * (r % 3) + c % 3;
        x = q[r * W + c];
        b = qp(r, c - 3); e = qp(r, c - 6);
        a = (r >= 3) ? qp(r - 3, c) : 0;
        cc = (r >= 3) ? qp(r - 3, c - 3) : 0;
        d = (r >= 3) ? qp(r - 3, c + 3) : 0;
        s = 125 * clamp2(a - cc) + 25 * clamp2(cc - b) + 5 * clamp2(d - a) + clamp2(b - e);
        flat = (s == 0);
        ctx = s < 0 ? -s : s;
        if (t == 0) begin
          xh = b + (s < 0 ? -q1_of(ctx) : q1_of(ctx));
          xh = xh < 0 ? 0 : (xh > 7 ? 7 : xh);
          n_intra++;
        end else begin
          int lo, hi, est;
          lo = -1000; hi = 1000;
          for (int u = 0; u < t; u++) begin
            int rr, c2, l;
            rr = r - r % 3 + u / 3; c2 = c - c % 3 + u % 3;
            if (c2 >= W) begin n_edge_tile++; continue; end
            l = 32 * q[rr * W + c2] - sh[u];
            if (l > lo) lo = l;
            if (l + 32 < hi) hi = l + 32;
          end
          if (lo > hi) n_nointersect++;
          est = fdiv2(lo + hi);
          xh = ((est + sh[t] + 512) % 256) / 32;
          n_inter++;
        end
        eol = (c + 3 >= W);
        mode = act[t] || flat;
        if (!mode) golomb(t, emap(x, xh));
        else begin
          n_run_pix++;
          if (x == b) begin
            cnt[t]++;
            if (cnt[t] == (1 << jt[idx[t]])) begin
              put(t, 1, 1); n_seg++; cnt[t] = 0; if (idx[t] < 31) idx[t]++;
            end else if (eol) begin
              put(t, 1, 1); n_eol++;
            end
            if (eol) cnt[t] = 0;
            act[t] = !eol;
          end else begin
            put(t, 0, 1);
            put(t, cnt[t], jt[idx[t]]);
            golomb(t, emap(x, xh));
            n_int++;
            act[t] = 0; cnt[t] = 0; if (idx[t] > 0) idx[t]--;
          end
        end
      end
      for (int s = 0; s < 9; s++) begin
        int n;
        n = bits[s].size();
        for (int w0 = 0; w0 < n; w0 += 32) begin
          logic [31:0] wd;
          for (int k = 0; k < 32; k++) wd[31 - k] = (w0 + k < n) ? bits[s][w0 + k] : 1'b0;
          words[s].push_back(wd);
        end
      end
    endfunction
  endclass

endpackage
