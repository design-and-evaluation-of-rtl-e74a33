// fbmc_fs_pkg: shared constants and types of the frequency-spread (FS) filter
// stage for FBMC/OQAM with the NPR1 short prototype filter.
//
// The NPR1 prototype filter of length M is
//   g(k) = sqrt(1 - 2 * sum_{l=0..2} Pg(l) * cos(2*pi*k*(2l+1)/M)),
//   Pg = {0.564447, -0.066754, 0.002300},
// and its frequency response G(l) = sum_k g(k) exp(i*2*pi*k*l/M) is real and
// symmetric, G(-l) = G(l). Truncated to NG = 7 taps (Delta = 3) and rescaled to
// G'(l) = G(l)/G(0), it gives G'(0..3) = 1, -0.4202, -0.0837, 0.0107 for
// M = 512. The filter stage uses these rescaled taps quantised to 12-bit
// signed numbers with 10 fractional bits (round to nearest): 1024, -430, -86, 11.
// The even-indexed taps {G'(-2), G'(0), G'(2)} feed the even multiple-constant
// multiplier (EMCM), the odd-indexed taps {G'(-3), G'(-1), G'(1), G'(3)} the odd
// one (OMCM). Sample and coefficient widths (16 and 12 bits) follow the
// paper's hardware comparison; the 10 fractional coefficient bits, the
// internal accumulator width and the rounding are this design's choices.
package fbmc_fs_pkg;

  // Number of sub-carriers (FFT length), the paper's LTE-like setting.
  parameter int unsigned M_DEFAULT = 512;

  // Input and output sample width, coefficient width.
  parameter int unsigned DATA_W = 16;
  parameter int unsigned COEF_W = 12;
  parameter int unsigned COEF_FRAC = 10;

  // Truncated filter: NG = 2*DELTA + 1 non-zero coefficients.
  parameter int unsigned NG = 7;
  parameter int unsigned DELTA = (NG - 1) / 2;
  parameter int unsigned N_EVEN = 3;  // taps G'(-2), G'(0), G'(2)
  parameter int unsigned N_ODD = 4;   // taps G'(-3), G'(-1), G'(1), G'(3)

  // Width of a product of a DATA_W sample and a COEF_W coefficient.
  parameter int unsigned PROD_W = DATA_W + COEF_W;
  // Accumulator width: a sum of up to NG products.
  parameter int unsigned ACC_W = PROD_W + 3;

  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [DATA_W-1:0] sample_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // One complex frequency-domain sample X'_n(k).
  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  // Rescaled NPR1 taps G'(l), l = 0..3, quantised as Q1.10.
  parameter coef_t G_Q [0:DELTA] = '{12'sd1024, -12'sd430, -12'sd86, 12'sd11};

  // Coefficients in the order the FIR chains use them: index 0 is the tap
  // applied to the newest sample. Both sets are symmetric, so the order in
  // which l runs does not change the result.
  parameter coef_t EVEN_COEFS [0:N_EVEN-1] = '{G_Q[2], G_Q[0], G_Q[2]};
  parameter coef_t ODD_COEFS [0:N_ODD-1] = '{G_Q[3], G_Q[1], G_Q[1], G_Q[3]};

  // Digit k (-1, 0 or +1) of the canonical signed digit (non-adjacent form)
  // representation of c. Used at elaboration time only.
  function automatic int csd_digit(input int c, input int k);
    int v;
    int d;
    v = c;
    d = 0;
    for (int i = 0; i <= k; i++) begin
      if (v % 2 == 0) begin
        d = 0;
      end else begin
        // v mod 4 == 1 -> +1, v mod 4 == 3 -> -1 (works for negative v too)
        d = (((v % 4) + 4) % 4 == 1) ? 1 : -1;
      end
      v = (v - d) / 2;
    end
    return d;
  endfunction

endpackage
