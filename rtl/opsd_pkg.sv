// opsd_pkg: types and constant functions shared by the OPSD 2D FFT design.
//
// Complex samples are packed as {imaginary, real}, each a two's-complement
// fixed-point number with a single integer (sign) bit, i.e. Q1.(W-1).
// Twiddle and cosine tables are produced at elaboration time by cos_q30 /
// sin_q30, which evaluate a Taylor series in 64-bit integer arithmetic
// (Q30) so that no real-number math or data file is needed:
//   cos_q30(k, n) = round(2^30 * cos(2*pi*k/n)),  sin_q30 likewise.
// The angle is first folded into one quadrant, which keeps the series to
// nine terms with an error below 2^-29.
// The 16-bit image path width follows the paper's fixed-point precision;
// the wider boundary path, the rounding and the table formats are this
// design's own choices.
package opsd_pkg;

  // 2*pi*2^30 rounded
  localparam longint TWO_PI_Q30 = 64'sd6746518852;
  localparam longint ONE_Q30    = 64'sd1073741824;

  // Frame phases of the control unit
  typedef enum logic [2:0] {
    PH_IDLE   = 3'd0,
    PH_LOAD   = 3'd1,   // host words -> external memory / boundary BRAM
    PH_COL    = 3'd2,   // column FFTs of the image, column FFT of B(.,1)
    PH_ROW    = 3'd3,   // row FFTs of image and boundary image, artifact removal
    PH_UNLOAD = 3'd4    // external memory -> host
  } phase_e;

  // cos and sin of theta in [0, pi/2], theta in Q30; results in Q30.
  function automatic longint taylor_cos(input longint th);
    longint x2, term, acc;
    x2   = (th * th) >>> 30;
    term = ONE_Q30;
    acc  = ONE_Q30;
    for (int i = 1; i <= 9; i++) begin
      term = -((term * x2) >>> 30) / longint'((2*i-1)*(2*i));
      acc  = acc + term;
    end
    return acc;
  endfunction

  function automatic longint taylor_sin(input longint th);
    longint x2, term, acc;
    x2   = (th * th) >>> 30;
    term = th;
    acc  = th;
    for (int i = 1; i <= 9; i++) begin
      term = -((term * x2) >>> 30) / longint'((2*i)*(2*i+1));
      acc  = acc + term;
    end
    return acc;
  endfunction

  // Quadrant folding: theta = 2*pi*k/n = q*pi/2 + r.
  function automatic longint cos_q30(input int k, input int n);
    longint kk, q, r, th, c, s, nn;
    nn = longint'(n);
    kk = longint'(k) % nn;
    if (kk < 0) kk = kk + nn;
    q  = (4 * kk) / nn;
    r  = kk * 4 - q * nn;                 // remainder in units of 1/(4n) turn
    th = (r * TWO_PI_Q30) / (4 * nn);
    c  = taylor_cos(th);
    s  = taylor_sin(th);
    case (q)
      0: return c;
      1: return -s;
      2: return -c;
      default: return s;
    endcase
  endfunction

  function automatic longint sin_q30(input int k, input int n);
    longint kk, q, r, th, c, s, nn;
    nn = longint'(n);
    kk = longint'(k) % nn;
    if (kk < 0) kk = kk + nn;
    q  = (4 * kk) / nn;
    r  = kk * 4 - q * nn;
    th = (r * TWO_PI_Q30) / (4 * nn);
    c  = taylor_cos(th);
    s  = taylor_sin(th);
    case (q)
      0: return s;
      1: return c;
      2: return -s;
      default: return -c;
    endcase
  endfunction

  // Round a Q30 value to F fraction bits (F <= 30).
  function automatic longint q30_to(input longint v, input int f);
    if (f >= 30) return v <<< (f - 30);
    return (v + (64'sd1 <<< (29 - f))) >>> (30 - f);
  endfunction

  // Saturate a wide signed value to W bits.
  function automatic longint sat(input longint v, input int w);
    longint hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

endpackage
