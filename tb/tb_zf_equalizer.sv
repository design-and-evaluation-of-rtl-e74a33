// tb_zf_equalizer: self-checking test of the zero-forcing equaliser. Random
// samples and Q3.12 coefficients (some large enough to clip) are applied one
// per clock with a random valid pattern; one cycle later out_x must equal the
// complex product rounded half up by 2^12 and clipped to 16 bits, and valid and
// first must have followed the sample.
module tb_zf_equalizer;
  import fbmc_fs_pkg::*;

  int checks = 0;
  int failures = 0;
  int n_sat = 0;

  logic clk = 0;
  logic rst_n = 0;
  logic in_valid = 0, in_first = 0;
  cplx_t in_x = '0, in_c = '0;
  logic out_valid, out_first;
  cplx_t out_x;

  zf_equalizer dut (.*);

  always #5 clk = ~clk;

  function automatic int rs(longint v, ref bit clip);
    longint r = (v + 2048) >>> 12;
    if (r > 32767) begin clip = 1; return 32767; end
    if (r < -32768) begin clip = 1; return -32768; end
    return int'(r);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint xr, xi, cr, ci;
    int er, ei;
    bit ev, ef, clip;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_first = ($urandom % 8) == 0;
      in_x.re = sample_t'($urandom);
      in_x.im = sample_t'($urandom);
      // mostly moderate gains, sometimes full range
      in_c.re = (i % 5 == 0) ? sample_t'($urandom) : sample_t'($signed(14'($urandom)));
      in_c.im = (i % 5 == 0) ? sample_t'($urandom) : sample_t'($signed(14'($urandom)));
      xr = longint'(in_x.re); xi = longint'(in_x.im);
      cr = longint'(in_c.re); ci = longint'(in_c.im);
      clip = 0;
      er = in_valid ? rs(xr * cr - xi * ci, clip) : 0;
      ei = in_valid ? rs(xr * ci + xi * cr, clip) : 0;
      ev = in_valid;
      ef = in_valid && in_first;
      @(posedge clk);
      #1;
      checks++;
      if (out_valid != ev || out_first != ef || int'(out_x.re) != er || int'(out_x.im) != ei) begin
        failures++;
        if (failures < 10)
          $display("mismatch %0d: got %0d %0d exp %0d %0d", i, out_x.re, out_x.im, er, ei);
      end
      if (clip) n_sat++;
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
