// rsd_ref_pkg -- software reference model of the road sign detection pipeline,
// used by the testbenches to work out expected results independently of the
// RTL. Images are flat dynamic arrays in raster order (index y*w + x).
//
//   gauss_ref   3x3 binomial smoothing, weights 1 2 1 / 2 4 2 / 1 2 1, /16 with
//               rounding; border pixels copied
//   nearest_ref nearest class centre under the L1 distance, lowest index on ties
//   median_ref  3x3 median (5th of 9 sorted values); border pixels copied
//   cc_ref      4-connected same-class components by flood fill, with class,
//               area and bounding box of each
//   new_labels_ref  number of labels a single-pass labeler opens: pixels whose
//               upper and left neighbours both have another class
//   is_sign_ref the sign rule, evaluated in real arithmetic
package rsd_ref_pkg;

  typedef int unsigned img_t[];

  typedef struct {
    int unsigned cls;
    int unsigned area;
    int unsigned x0, x1, y0, y1;
  } comp_t;

  function automatic void gauss_ref(int unsigned w, int unsigned h, input img_t src, output img_t dst);
    dst = new[w * h];
    for (int unsigned y = 0; y < h; y++)
      for (int unsigned x = 0; x < w; x++) begin
        if (x == 0 || y == 0 || x == w - 1 || y == h - 1) begin
          dst[y*w+x] = src[y*w+x];
        end else begin
          int unsigned s = 0;
          for (int dy = -1; dy <= 1; dy++)
            for (int dx = -1; dx <= 1; dx++) begin
              int unsigned wt = (dx == 0 ? 2 : 1) * (dy == 0 ? 2 : 1);
              s += wt * src[(y+dy)*w + (x+dx)];
            end
          dst[y*w+x] = (s + 8) / 16;
        end
      end
  endfunction

  function automatic int unsigned nearest_ref(int unsigned vec[], int unsigned centres[][]);
    int unsigned best = 0;
    int unsigned bestd = 32'hFFFF_FFFF;
    foreach (centres[c]) begin
      int unsigned d = 0;
      foreach (vec[k]) d += (vec[k] > centres[c][k]) ? vec[k] - centres[c][k] : centres[c][k] - vec[k];
      if (d < bestd) begin
        bestd = d;
        best  = c;
      end
    end
    return best;
  endfunction

  function automatic void median_ref(int unsigned w, int unsigned h, input img_t src, output img_t dst);
    dst = new[w * h];
    for (int unsigned y = 0; y < h; y++)
      for (int unsigned x = 0; x < w; x++) begin
        if (x == 0 || y == 0 || x == w - 1 || y == h - 1) begin
          dst[y*w+x] = src[y*w+x];
        end else begin
          int unsigned v[$];
          for (int dy = -1; dy <= 1; dy++)
            for (int dx = -1; dx <= 1; dx++)
              v.push_back(src[(y+dy)*w + (x+dx)]);
          v.sort();
          dst[y*w+x] = v[4];
        end
      end
  endfunction

  // comp_of[i] = component index of pixel i; comps in order of first pixel.
  function automatic void cc_ref(int unsigned w, int unsigned h, input img_t cls,
                                 output img_t comp_of, output comp_t comps[$]);
    int unsigned stack[$];
    comp_of = new[w * h];
    comps.delete();
    foreach (comp_of[i]) comp_of[i] = 32'hFFFF_FFFF;
    for (int unsigned i = 0; i < w * h; i++) begin
      if (comp_of[i] == 32'hFFFF_FFFF) begin
        comp_t c;
        int unsigned id = comps.size();
        c.cls = cls[i]; c.area = 0;
        c.x0 = i % w; c.x1 = i % w; c.y0 = i / w; c.y1 = i / w;
        comp_of[i] = id;
        stack.push_back(i);
        while (stack.size() > 0) begin
          int unsigned p = stack.pop_back();
          int unsigned px = p % w, py = p / w;
          c.area++;
          if (px < c.x0) c.x0 = px;
          if (px > c.x1) c.x1 = px;
          if (py < c.y0) c.y0 = py;
          if (py > c.y1) c.y1 = py;
          if (px > 0     && comp_of[p-1] == 32'hFFFF_FFFF && cls[p-1] == c.cls) begin comp_of[p-1] = id; stack.push_back(p-1); end
          if (px < w - 1 && comp_of[p+1] == 32'hFFFF_FFFF && cls[p+1] == c.cls) begin comp_of[p+1] = id; stack.push_back(p+1); end
          if (py > 0     && comp_of[p-w] == 32'hFFFF_FFFF && cls[p-w] == c.cls) begin comp_of[p-w] = id; stack.push_back(p-w); end
          if (py < h - 1 && comp_of[p+w] == 32'hFFFF_FFFF && cls[p+w] == c.cls) begin comp_of[p+w] = id; stack.push_back(p+w); end
        end
        comps.push_back(c);
      end
    end
  endfunction

  function automatic int unsigned new_labels_ref(int unsigned w, int unsigned h, img_t cls);
    int unsigned n = 0;
    for (int unsigned i = 0; i < w * h; i++) begin
      bit up   = (i >= w)    && (cls[i-w] == cls[i]);
      bit left = (i % w != 0) && (cls[i-1] == cls[i]);
      if (!up && !left) n++;
    end
    return n;
  endfunction

  function automatic bit is_sign_ref(comp_t c, int unsigned sign_class);
    real ratio = real'(c.x1 - c.x0 + 1) / real'(c.y1 - c.y0 + 1);
    return (c.cls == sign_class) && (c.area > 200) && (ratio > 0.7) && (ratio < 3.0);
  endfunction

endpackage
