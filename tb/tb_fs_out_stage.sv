// tb_fs_out_stage: self-checking test of the output combiner. Random data-path
// values, select and negate flags are applied; one cycle later the output must
// equal the selected pair's sum, negated if requested, rounded half up from
// 10 fractional bits and clipped to 16 bits. Large values exercise the
// saturation in both directions.
module tb_fs_out_stage;
  import fbmc_fs_pkg::*;

  int checks = 0;
  int failures = 0;
  int n_sat = 0;

  logic clk = 0;
  logic rst_n = 0;
  logic sel = 0, neg = 0;
  acc_t erdp = '0, ordp = '0, eidp = '0, oidp = '0;
  sample_t a;
  logic sat;

  fs_out_stage dut (.clk, .rst_n, .sel, .neg, .erdp, .ordp, .eidp, .oidp, .a, .sat);

  always #5 clk = ~clk;

  function automatic longint ref_out(longint s, bit ng, output bit clip);
    longint v = ng ? -s : s;
    longint r = (v + 512) >>> 10;
    clip = 0;
    if (r > 32767) begin r = 32767; clip = 1; end
    if (r < -32768) begin r = -32768; clip = 1; end
    return r;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s, e;
    bit c;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      sel = 1'($urandom);
      neg = 1'($urandom);
      if (i % 4 == 0) begin
        // large magnitudes, near and beyond the 16-bit output range
        erdp = acc_t'($signed(26'($urandom)));
        ordp = acc_t'($signed(26'($urandom)));
        eidp = acc_t'($signed(26'($urandom)));
        oidp = acc_t'($signed(26'($urandom)));
      end else begin
        erdp = acc_t'($signed(22'($urandom)));
        ordp = acc_t'($signed(22'($urandom)));
        eidp = acc_t'($signed(22'($urandom)));
        oidp = acc_t'($signed(22'($urandom)));
      end
      s = sel ? longint'(erdp) + longint'(ordp) : longint'(eidp) + longint'(oidp);
      e = ref_out(s, neg, c);
      @(posedge clk);
      #1;
      checks++;
      if (longint'(a) != e || sat != c) begin
        failures++;
        if (failures < 10) $display("mismatch: got %0d/%0b exp %0d/%0b", a, sat, e, c);
      end
      if (c) n_sat++;
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
