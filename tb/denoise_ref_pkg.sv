// denoise_ref_pkg: behavioural reference model of the impulse-noise remover,
// used by the testbenches to compute expected values independently of the RTL.
//
// It works on plain integer arrays and sorts lists explicitly instead of
// using comparator networks or the alternating 0/255 substitution: the
// restored value of a noisy pixel is the median of the non-noisy pixels of its
// 3x3 block (the mean of the two middle values, rounded half up, for an even
// count; 128 when no pixel is non-noisy).
package denoise_ref_pkg;

  function automatic int ref_label(int p);
    if (p == 0)   return 0;
    if (p == 255) return 1;
    return 2;
  endfunction

  // Noisy decision for a centre label and its eight neighbour labels.
  function automatic bit ref_noisy(int c, int n[8], int t1);
    int diff;
    if (c == 2) return 0;
    diff = 0;
    foreach (n[i]) if (n[i] != c) diff++;
    return diff > t1;
  endfunction

  // Median of the pixels whose keep flag is set.
  function automatic int ref_median_kept(int v[9], bit keep[9]);
    int q[$];
    foreach (v[i]) if (keep[i]) q.push_back(v[i]);
    q.sort();
    if (q.size() == 0)     return 128;
    if (q.size() % 2 == 1) return q[q.size()/2];
    return (q[q.size()/2 - 1] + q[q.size()/2] + 1) / 2;
  endfunction

  function automatic int clampi(int v, int lo, int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  // Statistics gathered by ref_denoise, one counter per mechanism.
  typedef struct {
    int noise_free;     // centre label 2, passed unchanged
    int extreme_kept;   // centre 0/255 but similar to its neighbours, kept
    int restored_odd;   // noisy, odd number of non-noisy pixels (single median)
    int restored_even;  // noisy, even number of non-noisy pixels (two medians averaged)
    int restored_none;  // noisy, no non-noisy pixel in the 3x3 block
    int restored_border;// noisy pixel on the image border (replicated neighbourhood)
  } ref_stats_t;

  // Pixel of the image extended by edge replication.
  function automatic int ext_pix(const ref int img[], input int w, int h, int y, int x);
    return img[clampi(y, 0, h-1) * w + clampi(x, 0, w-1)];
  endfunction

  function automatic bit ext_noisy(const ref int img[], input int w, int h, int t1, int y, int x);
    int n[8];
    int m;
    m = 0;
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++)
        if (dy != 0 || dx != 0) begin
          n[m] = ref_label(ext_pix(img, w, h, y+dy, x+dx));
          m++;
        end
    return ref_noisy(ref_label(ext_pix(img, w, h, y, x)), n, t1);
  endfunction

  // Whole-image reference: out[y*w+x] for every pixel of img.
  function automatic void ref_denoise(const ref int img[], input int w, int h, int t1,
                                      ref int out[], ref ref_stats_t st);
    int v[9];
    bit keep[9];
    int k, nk;
    out = new[w*h];
    for (int y = 0; y < h; y++) begin
      for (int x = 0; x < w; x++) begin
        if (ref_label(img[y*w+x]) == 2) begin
          out[y*w+x] = img[y*w+x];
          st.noise_free++;
        end else if (!ext_noisy(img, w, h, t1, y, x)) begin
          out[y*w+x] = img[y*w+x];
          st.extreme_kept++;
        end else begin
          k = 0; nk = 0;
          for (int dy = -1; dy <= 1; dy++)
            for (int dx = -1; dx <= 1; dx++) begin
              v[k]    = ext_pix(img, w, h, y+dy, x+dx);
              keep[k] = !ext_noisy(img, w, h, t1, y+dy, x+dx);
              if (keep[k]) nk++;
              k++;
            end
          out[y*w+x] = ref_median_kept(v, keep);
          if (nk == 0)          st.restored_none++;
          else if (nk % 2 == 0) st.restored_even++;
          else                  st.restored_odd++;
          if (y == 0 || x == 0 || y == h-1 || x == w-1) st.restored_border++;
        end
      end
    end
  endfunction

  // Synthetic test image: a dark background, a bright elliptical body with a
  // smooth gradient, a saturated white spot and a black hole inside it (real
  // 0 and 255 pixels that must survive), then salt-and-pepper noise of the
  // given density in percent. clean receives the image before the noise.
  function automatic void make_phantom(input int w, int h, int density, int seed,
                                       ref int img[], ref int clean[]);
    int cxp, cyp, rx, ry, v;
    real dx, dy;
    img = new[w*h];
    clean = new[w*h];
    cxp = w / 2; cyp = h / 2; rx = (w * 2) / 5; ry = (h * 2) / 5;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        dx = real'(x - cxp) / real'(rx);
        dy = real'(y - cyp) / real'(ry);
        if (dx*dx + dy*dy > 1.0)         v = 0;                       // background
        else if (dx*dx + dy*dy < 0.02)   v = 255;                     // white spot
        else if ((dx-0.4)*(dx-0.4) + dy*dy < 0.03) v = 0;             // black hole
        else v = 60 + (120 * x) / w + (50 * y) / h + ((x ^ y) & 7);   // tissue
        clean[y*w+x] = v;
      end
    void'($urandom(seed));
    foreach (img[i]) begin
      img[i] = clean[i];
      if ($urandom_range(9999) < density * 100)
        img[i] = ($urandom_range(1) == 0) ? 0 : 255;
    end
  endfunction

  function automatic real psnr(const ref int a[], const ref int b[]);
    real mse;
    mse = 0.0;
    foreach (a[i]) mse += real'((a[i] - b[i]) * (a[i] - b[i]));
    mse = mse / real'(a.size());
    if (mse == 0.0) return 99.0;
    return 10.0 * $log10(255.0 * 255.0 / mse);
  endfunction

endpackage
