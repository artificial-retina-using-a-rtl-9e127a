// retina_pkg: types, sizes and the default weight program shared by the
// retina controller.
//
// The retina is three 8x8 layers of pulsing analog cells. Layer 1 are the
// light detectors, layer 2 holds the 1-D DCT of each row of layer 1 and
// layer 3 the 1-D DCT of each column of layer 2, so that layer 3 carries the
// 2-D DCT of the image as pulse rates. Every synapse between two layers is a
// "complex" weight: a signed strength (positive excites, negative inhibits)
// plus a delay, counted in processing periods.
//
// The 8x8x3 geometry, the signed excite/inhibit weights and the delay per
// weight follow the paper. The widths (8-bit weight, 2-bit delay, 4 delay
// slots, 16-bit accumulators) and the weight scale are this design's own.
//
// Default weight program (the "hard-wired" DCT configuration):
//   T[k][n] = c(k) * cos((2n+1) k pi / 16),  c(0) = sqrt(1/8), c(k>0) = 1/2
//   weight  = round(254 * T[k][n])     (so the largest weight is 127)
//   stage 0 (layer 1 -> 2, rows):    w(dst=(r,k), src=(r',n)) = T[k][n] if r == r'
//   stage 1 (layer 2 -> 3, columns): w(dst=(k,c), src=(n,c')) = T[k][n] if c == c'
// Cell index = row * 8 + column. All default delays are zero.
package retina_pkg;

  localparam int ROWS     = 8;           // cells per column of a layer
  localparam int COLS     = 8;           // cells per row of a layer
  localparam int NCELL    = ROWS * COLS; // 64 cells per layer
  localparam int NLAYER   = 3;           // detector, row-DCT, column-DCT layers
  localparam int NSTAGE   = NLAYER - 1;  // synaptic stages between layers

  localparam int WEIGHT_W = 8;           // signed weight strength
  localparam int DELAY_W  = 2;           // delay field of a weight
  localparam int NDELAY   = 1 << DELAY_W;// delay slots in the destination-delay table
  localparam int ACC_W    = 16;          // accumulator width

  typedef logic signed [WEIGHT_W-1:0] wval_t;
  typedef logic signed [ACC_W-1:0]    acc_t;

  // One complex weight: delay in periods and signed strength.
  typedef struct packed {
    logic [DELAY_W-1:0] delay;
    wval_t              w;
  } weight_t;


  // 127 * cos(m pi / 16), m = 0..8, rounded.
  function automatic int cos16_q(input int m);
    case (m)
      0: return 127;
      1: return 125;
      2: return 117;
      3: return 106;
      4: return 90;
      5: return 71;
      6: return 49;
      7: return 25;
      default: return 0;
    endcase
  endfunction

  // round(254 * T[k][n]) for the 8-point orthonormal DCT-II.
  function automatic int dct_coef(input int k, input int n);
    int m;
    int v;
    if (k == 0) return 90;  // 254 * sqrt(1/8) = 89.8
    m = ((2 * n + 1) * k) % 32;
    if (m <= 8)       v = cos16_q(m);
    else if (m <= 16) v = -cos16_q(16 - m);
    else if (m <= 24) v = -cos16_q(m - 16);
    else              v = cos16_q(32 - m);
    return v;
  endfunction

  // Default weight of stage `stage` from source cell `src` to destination `dst`.
  function automatic weight_t dct_weight(input int stage, input int dst, input int src);
    weight_t r;
    int dr, dc, sr, sc;
    dr = dst / COLS; dc = dst % COLS;
    sr = src / COLS; sc = src % COLS;
    r.delay = '0;
    r.w     = '0;
    if (stage == 0) begin
      if (dr == sr) r.w = wval_t'(dct_coef(dc, sc));
    end else begin
      if (dc == sc) r.w = wval_t'(dct_coef(dr, sr));
    end
    return r;
  endfunction

endpackage
