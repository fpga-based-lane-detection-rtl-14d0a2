// tb_ref_pkg: reference models for the testbenches, written directly from
// the equations of the lane-detection pipeline and independent of the RTL
// structure (no line buffers or pipelines; whole frames in arrays).
package tb_ref_pkg;

  typedef int unsigned img_t[];

  // Gray = 0.2989 R + 0.587 G + 0.114 B with 8-bit fixed-point weights
  function automatic int unsigned ref_gray(input logic [23:0] rgb);
    int unsigned r = rgb[23:16], g = rgb[15:8], b = rgb[7:0];
    return (77 * r + 150 * g + 29 * b) / 256;
  endfunction

  // Pixel with edge replication at the frame border
  function automatic int unsigned pix(input img_t img, input int w, input int h,
                                      input int r, input int c);
    if (r < 0) r = 0;
    if (r > h - 1) r = h - 1;
    if (c < 0) c = 0;
    if (c > w - 1) c = w - 1;
    return img[r * w + c];
  endfunction

  function automatic img_t ref_avg(input img_t img, input int w, input int h);
    img_t o = new[w * h];
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        int unsigned s = 0;
        for (int dr = -1; dr <= 1; dr++)
          for (int dc = -1; dc <= 1; dc++) s += pix(img, w, h, r + dr, c + dc);
        o[r * w + c] = s / 9;
      end
    return o;
  endfunction

  function automatic img_t ref_sobel(input img_t img, input int w, input int h,
                                     input int thr);
    img_t o = new[w * h];
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        int gx, gy;
        gx = int'(pix(img, w, h, r - 1, c + 1)) - int'(pix(img, w, h, r - 1, c - 1))
           + 2 * (int'(pix(img, w, h, r, c + 1)) - int'(pix(img, w, h, r, c - 1)))
           + int'(pix(img, w, h, r + 1, c + 1)) - int'(pix(img, w, h, r + 1, c - 1));
        gy = int'(pix(img, w, h, r + 1, c - 1)) - int'(pix(img, w, h, r - 1, c - 1))
           + 2 * (int'(pix(img, w, h, r + 1, c)) - int'(pix(img, w, h, r - 1, c)))
           + int'(pix(img, w, h, r + 1, c + 1)) - int'(pix(img, w, h, r - 1, c + 1));
        o[r * w + c] = (gx * gx + gy * gy > thr) ? 1 : 0;
      end
    return o;
  endfunction

  typedef struct {
    int lanes;
    int cur;
    int lb;
    int rb;
  } lane_t;

  // One row: edge positions are scanned left to right; a gap of at least
  // gap_th non-edge pixels between consecutive edge pixels is a lane.
  function automatic lane_t ref_row(input img_t bits, input int w, input int row,
                                    input int gap_th, input int center);
    lane_t res = '{0, 0, 0, 0};
    int last = -1;
    for (int c = 0; c < w; c++) begin
      if (bits[row * w + c] != 0) begin
        if (last >= 0 && (c - last - 1) >= gap_th) begin
          if (res.lanes < 15) res.lanes++;
          if (last < center && c >= center) begin
            res.cur = res.lanes; res.lb = last; res.rb = c;
          end
        end
        last = c;
      end
    end
    return res;
  endfunction

  // Frame result: lowest row with at least one lane, else all zero
  function automatic lane_t ref_frame(input img_t bits, input int w, input int h,
                                      input int gap_th, input int center);
    for (int r = h - 1; r >= 0; r--) begin
      lane_t l = ref_row(bits, w, r, gap_th, center);
      if (l.lanes != 0) return l;
    end
    return '{0, 0, 0, 0};
  endfunction

  // Synthetic road frame, 24-bit RGB per pixel: grey asphalt with a little
  // noise and n_marks white markings, each mark_w pixels wide. Marking k
  // sits at column first + k*spacing + (slope * row) / 16 (slope in
  // sixteenths of a pixel per row); the lowest `blank_rows` rows carry no
  // markings. Brightness scales the whole frame (100 = daylight).
  function automatic img_t make_road(input int w, input int h, input int n_marks,
                                     input int first, input int spacing, input int mark_w,
                                     input int slope, input int blank_rows,
                                     input int bright);
    img_t o = new[w * h];
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        int base, rr, gg, bb;
        bit on_mark = 0;
        for (int k = 0; k < n_marks; k++) begin
          int m = first + k * spacing + (slope * r) / 16;
          if (c >= m && c < m + mark_w && r < h - blank_rows) on_mark = 1;
        end
        base = on_mark ? 225 : 70 + int'($urandom % 12);
        rr = (base * bright) / 100;
        gg = (base * bright) / 100;
        bb = ((on_mark ? base : base + 8) * bright) / 100;
        if (rr > 255) rr = 255;
        if (gg > 255) gg = 255;
        if (bb > 255) bb = 255;
        o[r * w + c] = (rr << 16) | (gg << 8) | bb;
      end
    return o;
  endfunction

  // Whole pipeline on one RGB frame: gray, mean, Sobel + threshold, decision
  function automatic lane_t ref_pipeline(input img_t rgb, input int w, input int h,
                                         input int thr, input int gap_th, input int center);
    img_t g = new[w * h];
    foreach (rgb[i]) g[i] = ref_gray(24'(rgb[i]));
    return ref_frame(ref_sobel(ref_avg(g, w, h), w, h, thr), w, h, gap_th, center);
  endfunction

endpackage
