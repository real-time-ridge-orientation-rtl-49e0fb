// orient_ref_pkg: reference model of the orientation estimator for the
// testbenches, written from the algorithm rather than from the RTL.
//
// ref_offset derives the line pixels from trigonometry: direction d lies at
// d * 11.25 degrees from the +j axis towards +i; the pixel k steps k along
// the axis closest to the line and floor(k * q / 4) along the other, where
// q/4 is the tangent of the angle to that axis rounded to the nearest
// quarter. ref_sd, ref_pixel_dir and ref_block_dir then follow the
// definitions: sum of absolute differences, least sum (lowest index on a
// tie), most frequent direction in a 16 x 16 block (lowest index on a tie).
// Image coordinates wrap around at the edges.
package orient_ref_pkg;

  function automatic void ref_offset(input int d, input int k,
                                     output int di, output int dj);
    real th, c, s, t;
    int q, minor;
    th = d * 11.25 * 3.14159265358979 / 180.0;
    c = $cos(th);
    s = $sin(th);
    if ((c < 0 ? -c : c) >= (s < 0 ? -s : s) - 1e-9) begin
      // nearer the j axis
      t = (c < 0 ? -s / c : s / c);
      q = $rtoi(4.0 * t + 0.5);
      minor = (k * q) / 4;
      dj = (c < 0) ? -k : k;
      di = minor;
    end else begin
      t = (s < 0 ? -c / s : c / s);
      q = $rtoi(4.0 * (t < 0 ? -t : t) + 0.5);
      minor = (k * q) / 4;
      di = k;
      dj = (c < 0) ? -minor : minor;
    end
  endfunction

  // Offset table filled once by init_ref().
  int off_i [16][8];
  int off_j [16][8];

  function automatic void init_ref();
    for (int d = 0; d < 16; d++)
      for (int k = 1; k <= 8; k++) ref_offset(d, k, off_i[d][k-1], off_j[d][k-1]);
  endfunction

  // Synthetic fingerprint-like test image of 2^cw x 2^cw pixels: in every
  // 16 x 16 block a sinusoidal ridge pattern (period 8 pixels) runs at an
  // angle that depends on the block, plus noise. For images of 64 x 64 and
  // more, block (1,1) and every pixel its lines reach are left flat, so all
  // its pixels tie and one direction counter reaches 256.
  function automatic logic [7:0] gen_pixel(input int i, input int j, input int cw,
                                           input int seed);
    int bi = i >> 4, bj = j >> 4, v;
    real phi, u;
    if (cw >= 6 && i >= 16 && i < 40 && j >= 8 && j < 40) return 8'd90;
    phi = (((bi * 5 + bj * 3 + seed) % 16) * 11.25 + 3.0) * 3.14159265358979 / 180.0;
    u = i * $cos(phi) - j * $sin(phi);
    v = $rtoi(128.0 + 90.0 * $sin(2.0 * 3.14159265358979 * u / 8.0)) +
        int'($urandom % 17) - 8;
    if (v < 0) v = 0;
    if (v > 255) v = 255;
    return 8'(v);
  endfunction

  // Direction of pixel (i, j): least sum of absolute differences, lowest
  // index on a tie; tie is set when several directions share the least sum.
  function automatic int ref_pixel_dir(const ref logic [7:0] img [], input int i,
                                       input int j, input int cw, output bit tie);
    int best = 0, bsd = 1 << 30, msk = (1 << cw) - 1;
    int f = img[(i << cw) | j];
    tie = 0;
    for (int d = 0; d < 16; d++) begin
      int sd = 0;
      for (int k = 0; k < 8; k++) begin
        int p = img[(((i + off_i[d][k]) & msk) << cw) | ((j + off_j[d][k]) & msk)];
        sd += (p > f) ? p - f : f - p;
      end
      if (sd < bsd) begin best = d; bsd = sd; tie = 0; end
      else if (sd == bsd) tie = 1;
    end
    return best;
  endfunction

  // Orientation of block (bi, bj): most frequent pixel direction, lowest
  // index on a tie. full is set when one direction takes all 256 pixels;
  // ties counts the pixels whose direction was decided by a tie.
  function automatic int ref_block_dir(const ref logic [7:0] img [], input int bi,
                                       input int bj, input int cw, output bit full,
                                       output int ties);
    int h [16];
    int best = 0;
    bit t;
    ties = 0;
    for (int d = 0; d < 16; d++) h[d] = 0;
    for (int pi = 0; pi < 16; pi++)
      for (int pj = 0; pj < 16; pj++) begin
        h[ref_pixel_dir(img, bi * 16 + pi, bj * 16 + pj, cw, t)]++;
        if (t) ties++;
      end
    for (int d = 1; d < 16; d++) if (h[d] > h[best]) best = d;
    full = (h[best] == 256);
    return best;
  endfunction

endpackage
