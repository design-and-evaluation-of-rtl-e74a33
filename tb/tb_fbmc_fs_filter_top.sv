// tb_fbmc_fs_filter_top: end-to-end test of the two-branch FS filter stage at
// its default size (M = 512 sub-carriers).
//
// The testbench builds an FBMC/OQAM link around the block:
//  * transmitter: 10 symbols of 4-PAM values a_n(m) in {-3,-1,1,3} (the real
//    and imaginary halves of 16-QAM) on 300 active sub-carriers 106..405,
//    modulated as s(k) = sum_n g(k - nM/2) sum_m (-1)^(nm) a_n(m) i^(n+m)
//    e^(i 2 pi k m / M) with the NPR1 prototype filter g computed from its
//    closed form;
//  * receiver front end: for symbol n, an M-point DFT (e^-i) of
//    s(nM/2 .. nM/2+M-1), scaled so that a recovered unit symbol reads 2048,
//    multiplied by a static per-sub-carrier channel H(m) (random gain 0.5..1.5,
//    random phase) and rounded to 16 bits. The equaliser coefficient is
//    C(m) = 1/H(m) in Q3.12. Even symbols feed the even branch, odd symbols
//    the odd branch.
// Every output is checked bit-exactly against the circular-convolution
// reference model (fs_ref_pkg), except the 3 guard outputs at each end of a
// symbol (see below), and all for latency (7 cycles) and index. The recovered
// symbols must give correct 4-PAM decisions with a signal-to-interference ratio above 45 dB
// (truncation to 7 taps alone limits it to about 55 dB; the quantised
// channel and equaliser cost a little more). The streams contain
// back-to-back symbols and idle gaps of even and odd length, so that the
// select_DP phase restart matters, and a final full-scale stress symbol per
// branch that drives the output into saturation. Each mechanism is counted and
// one that never happens counts as a failure.
module tb_fbmc_fs_filter_top;
  import fbmc_fs_pkg::*;
  import fs_ref_pkg::*;

  localparam int M = 512;
  localparam int NS = 10;           // transmitted symbols
  localparam int A0 = 106;          // first active sub-carrier
  localparam int NA = 300;          // active sub-carriers
  localparam real PI = 3.14159265358979323846;
  localparam int UNIT = 2048;       // output value of a unit PAM symbol
  localparam int LAT = 7;

  int checks = 0;
  int failures = 0;

  logic clk = 0;
  logic rst_n = 0;
  logic ev_in_valid = 0, ev_in_first = 0, od_in_valid = 0, od_in_first = 0;
  cplx_t ev_in_x = '0, od_in_x = '0, ev_in_c = '0, od_in_c = '0;
  logic ev_out_valid, ev_out_first, ev_out_sat, od_out_valid, od_out_first, od_out_sat;
  logic [8:0] ev_out_k, od_out_k;
  sample_t ev_out_a, od_out_a;

  fbmc_fs_filter_top dut (.*);

  always #5 clk = ~clk;

  // ------------------------------------------------------------ stimulus data
  int a [NS][M];                   // transmitted PAM values
  real cosT [M], sinT [M];
  real g [M];
  // quantised receiver input per branch and per symbol of that branch
  // (entry NS/2 is the stress symbol)
  int xr [2][NS/2+1][];   // equalised samples X'(k), used by the reference
  int xi [2][NS/2+1][];
  int fr [2][NS/2+1][];   // samples fed to the block
  int fi [2][NS/2+1][];
  int cqr [M], cqi [M];   // equaliser coefficients, Q3.12
  real hr [M], hi [M];    // channel

  // ---------------------------------------------------------------- results
  typedef struct { int s; int k; int cyc; } ev_t;
  ev_t q [2][$];
  int got [2][NS/2+1][M];
  int cyc = 0;
  int n_out [2] = '{0, 0};
  int n_sat [2] = '{0, 0};
  int n_rot [2][4];                // outputs per rotation class (Re, Im, -Re, -Im)
  int n_odd_gap = 0, n_gap = 0, n_b2b = 0;
  int n_edge = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_out(int d, logic v, logic f, logic [8:0] kk, sample_t av, logic st);
    ev_t e;
    int exp_a;
    bit clip;
    bit edge_k;
    if (!v) return;
    checks++;
    if (q[d].size() == 0) begin
      failures++;
      $display("branch %0d: unexpected output", d);
      return;
    end
    e = q[d].pop_front();
    exp_a = ref_a(xr[d][e.s], xi[d][e.s], e.k, e.s, bit'(d), clip);
    // The Delta = 3 outermost sub-carriers at each end are guard outputs: the
    // streamed filter uses the neighbouring stream samples there instead of
    // the wrapped ones, so only their index and timing are checked.
    edge_k = (e.k < DELTA || e.k >= M - DELTA);
    if (edge_k) n_edge++;
    if (kk != 9'(e.k) || f != (e.k == 0) || cyc != e.cyc + LAT ||
        (!edge_k && (int'(av) != exp_a || st != clip))) begin
      failures++;
      if (failures < 10)
        $display("branch %0d sym %0d k %0d: got k=%0d a=%0d sat=%0b cyc=%0d exp a=%0d sat=%0b cyc=%0d",
                 d, e.s, e.k, kk, av, st, cyc, exp_a, clip, e.cyc + LAT);
    end
    got[d][e.s][e.k] = int'(av);
    n_rot[d][(((2 * e.s + d + e.k) % 4) + 4) % 4]++;
    if (st) n_sat[d]++;
    n_out[d]++;
  endtask

  always @(negedge clk) begin
    if (rst_n) begin
      check_out(0, ev_out_valid, ev_out_first, ev_out_k, ev_out_a, ev_out_sat);
      check_out(1, od_out_valid, od_out_first, od_out_k, od_out_a, od_out_sat);
    end
  end

  task automatic drive(int d, logic v, logic f, int re, int im, int c_re, int c_im);
    if (d == 0) begin
      ev_in_valid = v; ev_in_first = f;
      ev_in_x.re = sample_t'(re); ev_in_x.im = sample_t'(im);
      ev_in_c.re = sample_t'(c_re); ev_in_c.im = sample_t'(c_im);
    end else begin
      od_in_valid = v; od_in_first = f;
      od_in_x.re = sample_t'(re); od_in_x.im = sample_t'(im);
      od_in_c.re = sample_t'(c_re); od_in_c.im = sample_t'(c_im);
    end
  endtask

  // equaliser arithmetic: round half up by 2^12, clip to 16 bits
  function automatic int eq_rs(longint v);
    longint r = (v + 2048) >>> 12;
    if (r > 32767) return 32767;
    if (r < -32768) return -32768;
    return int'(r);
  endfunction

  task automatic stream(int d, int gaps []);
    for (int s = 0; s <= NS / 2; s++) begin
      if (s > 0) begin
        if (gaps[s-1] == 0) n_b2b++;
        else n_gap++;
        if (gaps[s-1] % 2 == 1) n_odd_gap++;
        repeat (gaps[s-1]) begin
          @(negedge clk);
          #1 drive(d, 0, 0, 0, 0, 0, 0);
        end
      end
      for (int k = 0; k < M; k++) begin
        @(negedge clk);
        #1 drive(d, 1, k == 0, fr[d][s][k], fi[d][s][k],
                 (s == NS / 2) ? 4096 : cqr[k], (s == NS / 2) ? 0 : cqi[k]);
        q[d].push_back('{s, k, cyc});
      end
    end
    @(negedge clk);
    #1 drive(d, 0, 0, 0, 0, 0, 0);
  endtask

  // ------------------------------------------------------------ link model
  task automatic build_link();
    real Gl [4];
    real G0, S, c;
    real sr [], si [];
    int len;
    len = (NS - 1) * M / 2 + M;
    for (int k = 0; k < M; k++) begin
      cosT[k] = $cos(2.0 * PI * k / M);
      sinT[k] = $sin(2.0 * PI * k / M);
      g[k] = $sqrt(1.0 - 2.0 * (0.564447 * $cos(2.0 * PI * k * 1 / M)
                              - 0.066754 * $cos(2.0 * PI * k * 3 / M)
                              + 0.002300 * $cos(2.0 * PI * k * 5 / M)));
    end
    for (int l = 0; l < 4; l++) begin
      Gl[l] = 0.0;
      for (int k = 0; k < M; k++) Gl[l] += g[k] * cosT[(k * l) % M];
    end
    G0 = Gl[0];
    S = Gl[0] * Gl[0] + 2.0 * (Gl[1] * Gl[1] + Gl[2] * Gl[2] + Gl[3] * Gl[3]);
    c = UNIT * G0 / S;
    for (int m = 0; m < M; m++) begin
      automatic real gain = 0.5 + real'($urandom % 1001) / 1000.0;
      automatic real ph = 2.0 * PI * real'($urandom % 1000) / 1000.0;
      automatic real mag2;
      hr[m] = gain * $cos(ph);
      hi[m] = gain * $sin(ph);
      mag2 = hr[m] * hr[m] + hi[m] * hi[m];
      // C = 1/H = conj(H)/|H|^2 in Q3.12
      cqr[m] = $rtoi(4096.0 * hr[m] / mag2 + ((hr[m] >= 0.0) ? 0.5 : -0.5));
      cqi[m] = $rtoi(-4096.0 * hi[m] / mag2 + ((hi[m] <= 0.0) ? 0.5 : -0.5));
    end
    for (int n = 0; n < NS; n++)
      for (int m = 0; m < M; m++)
        a[n][m] = (m >= A0 && m < A0 + NA) ? 2 * int'($urandom % 4) - 3 : 0;
    // transmitter
    sr = new[len];
    si = new[len];
    for (int i = 0; i < len; i++) begin sr[i] = 0.0; si[i] = 0.0; end
    for (int n = 0; n < NS; n++) begin
      for (int kk = 0; kk < M; kk++) begin
        int kabs = kk + n * M / 2;
        real accr = 0.0, acci = 0.0;
        for (int m = A0; m < A0 + NA; m++) begin
          // a * (-1)^(nm) * i^(n+m) * e^(i 2 pi kabs m / M)
          int rot = (n + m) % 4;
          real pr, pi_, er, ei;
          real av = real'(a[n][m]) * (((n * m) % 2 == 1) ? -1.0 : 1.0);
          case (rot)
            0: begin pr = av;  pi_ = 0.0; end
            1: begin pr = 0.0; pi_ = av;  end
            2: begin pr = -av; pi_ = 0.0; end
            default: begin pr = 0.0; pi_ = -av; end
          endcase
          er = cosT[(kabs * m) % M];
          ei = sinT[(kabs * m) % M];
          accr += pr * er - pi_ * ei;
          acci += pr * ei + pi_ * er;
        end
        sr[kabs] += g[kk] * accr;
        si[kabs] += g[kk] * acci;
      end
    end
    // receiver DFT per symbol, quantised
    for (int n = 0; n < NS; n++) begin
      int d = n % 2;
      int s = n / 2;
      xr[d][s] = new[M];
      xi[d][s] = new[M];
      fr[d][s] = new[M];
      fi[d][s] = new[M];
      for (int m = 0; m < M; m++) begin
        real yr = 0.0, yi = 0.0, zr, zi;
        for (int k = 0; k < M; k++) begin
          int t = (k * m) % M;
          // (sr + i si) * (cos - i sin)
          yr += sr[k + n * M / 2] * cosT[t] + si[k + n * M / 2] * sinT[t];
          yi += si[k + n * M / 2] * cosT[t] - sr[k + n * M / 2] * sinT[t];
        end
        // channel
        zr = yr * hr[m] - yi * hi[m];
        zi = yr * hi[m] + yi * hr[m];
        fr[d][s][m] = int'($rtoi(zr * c + ((zr >= 0.0) ? 0.5 : -0.5)));
        fi[d][s][m] = int'($rtoi(zi * c + ((zi >= 0.0) ? 0.5 : -0.5)));
        if (fr[d][s][m] > 32767 || fr[d][s][m] < -32768 ||
            fi[d][s][m] > 32767 || fi[d][s][m] < -32768) begin
          failures++;
          $display("receiver input out of range");
        end
        xr[d][s][m] = eq_rs(longint'(fr[d][s][m]) * cqr[m] - longint'(fi[d][s][m]) * cqi[m]);
        xi[d][s][m] = eq_rs(longint'(fr[d][s][m]) * cqi[m] + longint'(fi[d][s][m]) * cqr[m]);
      end
    end
    // stress symbols: full-scale values inside the active band
    for (int d = 0; d < 2; d++) begin
      xr[d][NS/2] = new[M];
      xi[d][NS/2] = new[M];
      fr[d][NS/2] = new[M];
      fi[d][NS/2] = new[M];
      for (int m = 0; m < M; m++) begin
        bit act = (m >= A0 && m < A0 + NA);
        xr[d][NS/2][m] = !act ? 0 : (($urandom % 2 != 0) ? 32767 : -32768);
        xi[d][NS/2][m] = !act ? 0 : (($urandom % 2 != 0) ? 32767 : -32768);
        // fed with unit equaliser coefficient 4096: X' = X
        fr[d][NS/2][m] = xr[d][NS/2][m];
        fi[d][NS/2][m] = xi[d][NS/2][m];
      end
    end
  endtask

  // ------------------------------------------------------------------ main
  initial begin
    real sig, err;
    int wrong;
    build_link();
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    fork
      stream(0, '{0, 5, 0, 7, 4});
      stream(1, '{3, 0, 0, 9, 0});
    join
    repeat (LAT + 4) @(negedge clk);

    // symbol recovery over the active sub-carriers
    sig = 0.0;
    err = 0.0;
    wrong = 0;
    for (int n = 0; n < NS; n++) begin
      for (int m = A0; m < A0 + NA; m++) begin
        automatic int y = got[n % 2][n / 2][m];
        automatic int dec;
        automatic real e = real'(y) - real'(a[n][m] * UNIT);
        sig += real'(a[n][m] * UNIT) ** 2;
        err += e * e;
        dec = (y >= 2 * UNIT) ? 3 : (y >= 0) ? 1 : (y >= -2 * UNIT) ? -1 : -3;
        if (dec != a[n][m]) wrong++;
      end
    end
    $display("recovered %0d PAM symbols, %0d wrong decisions, SIR %0.1f dB",
             NS * NA, wrong, 10.0 * $log10(sig / err));
    checks++;
    if (wrong != 0) failures++;
    checks++;
    if (10.0 * $log10(sig / err) < 45.0) failures++;

    for (int d = 0; d < 2; d++) begin
      checks++;
      if (n_out[d] != (NS / 2 + 1) * M || q[d].size() != 0) begin
        failures++;
        $display("branch %0d: %0d outputs, %0d missing", d, n_out[d], q[d].size());
      end
      checks++;
      if (n_sat[d] == 0) begin failures++; $display("branch %0d never saturated", d); end
      for (int r = 0; r < 4; r++) begin
        checks++;
        if (n_rot[d][r] == 0) begin failures++; $display("branch %0d rotation %0d unused", d, r); end
      end
    end
    $display("mechanisms: back-to-back %0d, idle gaps %0d (odd %0d), saturated %0d/%0d, Re/Im/-Re/-Im even %0d/%0d/%0d/%0d odd %0d/%0d/%0d/%0d",
             n_b2b, n_gap, n_odd_gap, n_sat[0], n_sat[1],
             n_rot[0][0], n_rot[0][1], n_rot[0][2], n_rot[0][3],
             n_rot[1][0], n_rot[1][1], n_rot[1][2], n_rot[1][3]);
    checks++;
    if (n_b2b == 0 || n_gap == 0 || n_odd_gap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
