// orient_pkg: constants, types and the offset formula shared by the ridge
// orientation estimator.
//
// The estimator follows the pixel-based method: for every pixel it sums the
// absolute grey-level differences to n = 8 pixels along each of N = 16
// quantised directions (S_d), takes the direction of least S_d as the pixel
// direction and, per 16x16 block, keeps the direction chosen most often.
// n, N, the 8-bit pixels, the 11-bit S_d, the 15-bit {index, S_d} candidate
// of the Minimum tree, the 8-bit direction counters and the 8-bit signed
// offsets are the published sizes.
//
// Offset formula (offset_of): direction d has the nominal angle d * 11.25
// degrees, measured from the +j (column) axis towards +i (row, downwards).
// Pixel k (1..8) of direction d is stepped k along the major axis and
// floor(k*m/4) along the minor one, where m = 0..4 is the distance of d from
// the nearest axis direction; m/4 is the tangent of the nominal angle rounded
// to quarters. For direction 2 this gives (0,1),(1,2),(1,3),(2,4),(2,5),(3,6),
// (3,7),(4,8) and for direction 10 (1,0),(2,-1),(3,-1),(4,-2),(5,-2),(6,-3),
// (7,-3),(8,-4), the two published example lines. The other 14 directions
// are this design's extension of the same rule.
package orient_pkg;

  localparam int N_DIR  = 16;  // quantised directions N
  localparam int N_PIX  = 8;   // pixels per direction n
  localparam int N_TAPS = N_DIR * N_PIX;  // 128 pixels fetched per orientation
  localparam int PIX_W  = 8;   // grey level width
  localparam int SD_W   = 11;  // S_d width (sum of eight 8-bit values)
  localparam int IDX_W  = 4;   // direction index width
  localparam int CAND_W = IDX_W + SD_W;  // 15-bit Minimum tree word
  localparam int CNT_W  = 8;   // direction counter width
  localparam int OFS_W  = 8;   // signed offset width
  localparam int BLK_BITS = 4; // 16x16 pixel blocks

  typedef logic [PIX_W-1:0]  pixel_t;
  typedef logic [SD_W-1:0]   sd_t;
  typedef logic [IDX_W-1:0]  dir_t;
  typedef logic [CNT_W-1:0]  count_t;

  // One entry of the Minimum tree: direction index and its S_d.
  typedef struct packed {
    dir_t idx;
    sd_t  sd;
  } cand_t;

  // One Offset-ROM word: signed row and column offsets.
  typedef struct packed {
    logic signed [OFS_W-1:0] di;
    logic signed [OFS_W-1:0] dj;
  } offset_t;

  // Offset of pixel k (1..N_PIX) of direction d (0..N_DIR-1), see header.
  function automatic offset_t offset_of(input int d, input int k);
    offset_t o;
    int m, minor;
    int oct;
    oct = d % 8;
    m = (oct <= 4) ? oct : 8 - oct;
    minor = (k * m) / 4;
    if (d <= 4) begin           // 0..45 deg: step along +j, drift down
      o.dj = OFS_W'(k);
      o.di = OFS_W'(minor);
    end else if (d <= 8) begin  // 56.25..90 deg: step down, drift right
      o.di = OFS_W'(k);
      o.dj = OFS_W'(minor);
    end else if (d <= 12) begin // 101.25..135 deg: step down, drift left
      o.di = OFS_W'(k);
      o.dj = OFS_W'(-minor);
    end else begin              // 146.25..168.75 deg: step along -j, drift down
      o.dj = OFS_W'(-k);
      o.di = OFS_W'(minor);
    end
    return o;
  endfunction

endpackage
