// fs_ref_pkg: reference model shared by the filter-stage testbenches.
// It computes the OQAM output of the FS filter stage directly from the
// definition: the circular convolution Y(k) = sum_{l=-3..3} G'(l) X((k-l) mod M)
// with the integer taps G'(0..3) = 1024, -430, -86, 11 (NPR1, Q.10), followed
// by the OQAM demodulation a = Re(i^-(N+k) * Y(k)) for symbol N and
// sub-carrier k, evaluated here with complex rotation by quarter turns,
// then rounding half up by 2^10 and clipping to 16 bits.
package fs_ref_pkg;

  function automatic int gtap(int l);
    int al = (l < 0) ? -l : l;
    case (al)
      0: return 1024;
      1: return -430;
      2: return -86;
      3: return 11;
      default: return 0;
    endcase
  endfunction

  // re/im hold one symbol of M samples; n is the symbol count of that stream.
  function automatic int ref_a(input int re[], input int im[], int k,
                               int n, bit odd_symbol, output bit clip);
    int mm = re.size();
    longint yr = 0, yi = 0, v, r;
    int rot;
    for (int l = -3; l <= 3; l++) begin
      int idx = ((k - l) % mm + mm) % mm;
      yr += longint'(gtap(l)) * re[idx];
      yi += longint'(gtap(l)) * im[idx];
    end
    // symbol index N = 2n + odd_symbol; multiply Y by i^-(N+k) and keep Re
    rot = (((2 * n + int'(odd_symbol) + k) % 4) + 4) % 4;
    case (rot)
      0: v = yr;    // Re(Y)
      1: v = yi;    // Re(-i Y) = Im(Y)
      2: v = -yr;   // Re(-Y)
      default: v = -yi;  // Re(i Y) = -Im(Y)
    endcase
    r = (v + 512) >>> 10;
    clip = 0;
    if (r > 32767) begin r = 32767; clip = 1; end
    if (r < -32768) begin r = -32768; clip = 1; end
    return int'(r);
  endfunction

endpackage
