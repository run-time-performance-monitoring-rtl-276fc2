// edge_ref_pkg: reference model of the edge-detection datapath, written
// independently of the RTL from the dataflow description: every output
// pixel i of a block of `n` pixels with rows of `w` pixels sees the window
// w[r][c] = pixel[i - (2-r)*w - (2-c)], 0 where that index is negative
// (the initial tokens of the delays and line buffers). Sobel uses the full
// 3x3 window, Roberts rows/columns 1..2. The result is
// (|gx| + |gy|) >> n, then 255 if above 80, else 0.
package edge_ref_pkg;
  typedef byte unsigned img_t[];

  // kernels in printed order
  const int SX[3][3] = '{'{1, 0, -1}, '{2, 0, -2}, '{1, 0, -1}};
  const int SY[3][3] = '{'{-1, 2, 1}, '{0, 0, 0}, '{-1, -2, -1}};
  const int RX[2][2] = '{'{-1, 0}, '{0, -1}};
  const int RY[2][2] = '{'{0, 1}, '{-1, 0}};

  function automatic int pix(img_t img, int idx);
    return (idx < 0) ? 0 : int'(img[idx]);
  endfunction

  // roberts = 0: Sobel (shift 2), 1: Roberts (shift 1)
  function automatic int edge_out(img_t img, int i, int w, bit roberts);
    int gx = 0, gy = 0, m;
    if (!roberts) begin
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) begin
        gx += SX[r][c] * pix(img, i - (2 - r) * w - (2 - c));
        gy += SY[r][c] * pix(img, i - (2 - r) * w - (2 - c));
      end
      m = ((gx < 0 ? -gx : gx) + (gy < 0 ? -gy : gy)) >> 2;
    end else begin
      for (int r = 0; r < 2; r++) for (int c = 0; c < 2; c++) begin
        gx += RX[r][c] * pix(img, i - (1 - r) * w - (1 - c));
        gy += RY[r][c] * pix(img, i - (1 - r) * w - (1 - c));
      end
      m = ((gx < 0 ? -gx : gx) + (gy < 0 ? -gy : gy)) >> 1;
    end
    return (m > 80) ? 255 : 0;
  endfunction

  // A test image: smooth gradient with bright squares and some noise, so
  // both detectors produce edge and non-edge pixels.
  function automatic byte unsigned test_pixel(int x, int y, int seed);
    int v;
    v = (x * 3 + y * 2 + seed) % 128;
    if (((x / 7) + (y / 5) + seed) % 3 == 0) v += 120;
    v += ((x * 31 + y * 17 + seed * 7) % 11);
    return byte'(v > 255 ? 255 : v);
  endfunction
endpackage
