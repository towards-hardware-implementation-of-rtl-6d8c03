// csd_ref_pkg -- reference models used by the testbenches.
//
// Plain integer models of the extractor's arithmetic, written from the
// defining formulas rather than from the RTL structure: hue with signed
// integer division (truncating toward zero), bin index with multiply/divide
// instead of comparator chains, and the partitioned colour-structure
// histogram by brute force over every element position of every BRAM lane.
package csd_ref_pkg;

  typedef struct {
    int hue, max, min, diff, sum;
  } ref_hmmd_t;

  function automatic ref_hmmd_t ref_hmmd(int r, int g, int b);
    ref_hmmd_t o;
    int mx, mn, d;
    mx = (r > g) ? r : g;  mx = (mx > b) ? mx : b;
    mn = (r < g) ? r : g;  mn = (mn < b) ? mn : b;
    d  = mx - mn;
    o.max = mx;  o.min = mn;  o.diff = d;  o.sum = (mx + mn) / 2;
    if (d == 0)                  o.hue = 0;
    else if (mx == r && g >= b)  o.hue = 60 * (g - b) / d;
    else if (mx == r)            o.hue = 360 + 60 * (g - b) / d;
    else if (mx == g)            o.hue = 120 + 60 * (b - r) / d;
    else                         o.hue = 240 + 60 * (r - g) / d;
    return o;
  endfunction

  // HMMD quantization table: subspace -> (hue levels, sum levels)
  function automatic void ref_levels(int nbins, int s, output int h, output int sl);
    int h256 [5] = '{1, 4, 16, 16, 16};
    int s256 [5] = '{32, 8, 4, 4, 4};
    int h128 [5] = '{1, 4, 8, 8, 8};
    int s128 [5] = '{16, 4, 4, 4, 4};
    if (nbins == 128) begin h = h128[s]; sl = s128[s]; end
    else              begin h = h256[s]; sl = s256[s]; end
  endfunction

  function automatic int ref_bin(int hue, int diff, int sum, int nbins);
    int s, off, h, sl, hq, sq;
    s = (diff < 6) ? 0 : (diff < 20) ? 1 : (diff < 60) ? 2 : (diff < 110) ? 3 : 4;
    off = 0;
    for (int t = 0; t < s; t++) begin
      ref_levels(nbins, t, h, sl);
      off += h * sl;
    end
    ref_levels(nbins, s, h, sl);
    hq = ((hue % 360) * h) / 360;
    sq = (sum * sl) / 256;
    return off + hq * sl + sq;
  endfunction

  function automatic int ref_pixel_bin(int r, int g, int b, int nbins);
    ref_hmmd_t o;
    o = ref_hmmd(r, g, b);
    return ref_bin(o.hue, o.diff, o.sum, nbins);
  endfunction

  // Partitioned colour-structure histogram.  img holds bin indices in raster
  // order (w x h); column c belongs to lane c mod n, at local column c / n.
  function automatic void ref_csd(const ref int img[], input int w, int h, int n, int se,
                                  input int nbins, ref int hist[]);
    int sw;
    bit present [];
    sw = w / n;
    hist = new[nbins];
    foreach (hist[m]) hist[m] = 0;
    present = new[nbins];
    for (int k = 0; k < n; k++)
      for (int y = 0; y <= h - se; y++)
        for (int x = 0; x <= sw - se; x++) begin
          foreach (present[m]) present[m] = 0;
          for (int dy = 0; dy < se; dy++)
            for (int dx = 0; dx < se; dx++)
              present[img[(y + dy) * w + (x + dx) * n + k]] = 1;
          foreach (present[m]) if (present[m]) hist[m]++;
        end
  endfunction

  // Test images.  kind 0: blocks of a few colours with a little noise, so
  // that element positions hold one to a few colours; kind 1: independent
  // random pixels (the first one pure red with a trace of blue); kind 2: one uniform colour.  Returns {r, g, b}.
  function automatic int gen_pixel(int kind, int x, int y, int seed);
    int pal [8] = '{32'hE05020, 32'h30A040, 32'hF0D010, 32'h2040C0,
                    32'h808080, 32'h101010, 32'hF0F0F0, 32'hA020A0};
    int c;
    unique case (kind)
      0: begin
        c = pal[((x / 7) * 3 + (y / 5) * 5 + seed) % 8];
        if ($urandom_range(15) == 0) c = c ^ 32'h0F0F0F;
        return c;
      end
      // the first pixel sits in the red sector just short of 360 degrees
      1: return (x == 0 && y == 0) ? 32'hFF0001 : int'($urandom & 32'hFFFFFF);
      default: return 32'h4080C0;
    endcase
  endfunction

endpackage
