// tb_ref_pkg: reference model of the block matching, for the testbenches.
//
// Images are held as plain arrays of rows; pixels outside the sensor are 0.
// ref_match computes, pixel by pixel, the Hamming distance between the
// reference block of slice t-d centred on (x, y) and every candidate block of
// slice t-2d centred on (x+dx, y+dy), |dx|,|dy| <= s, and returns the distances
// (index (dy+s)*(2s+1)+(dx+s)) and the lowest index with the smallest distance.
package tb_ref_pkg;

  typedef bit [255:0] row_t;
  typedef row_t       img_t [256];

  function automatic bit pix(input img_t img, input int x, input int y, input int w, input int h);
    if (x < 0 || y < 0 || x >= w || y >= h) return 1'b0;
    return img[y][x];
  endfunction

  function automatic void ref_match(input img_t td, input img_t t2d, input int x, input int y,
                                    input int w, input int h, input int bd, input int s,
                                    output int hds [25], output int best, output int n_min);
    int r, side, idx, bestv;
    r     = (bd - 1) / 2;
    side  = 2 * s + 1;
    best  = 0;
    bestv = 1 << 30;
    n_min = 0;
    for (int dy = -s; dy <= s; dy++) begin
      for (int dx = -s; dx <= s; dx++) begin
        idx = (dy + s) * side + (dx + s);
        hds[idx] = 0;
        for (int i = -r; i <= r; i++)
          for (int j = -r; j <= r; j++)
            if (pix(td, x + j, y + i, w, h) != pix(t2d, x + dx + j, y + dy + i, w, h)) hds[idx]++;
      end
    end
    for (int i = 0; i < side * side; i++) begin
      if (hds[i] < bestv) begin
        bestv = hds[i];
        best  = i;
      end
    end
    for (int i = 0; i < side * side; i++) if (hds[i] == bestv) n_min++;
  endfunction

endpackage
