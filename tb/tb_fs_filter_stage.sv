// tb_fs_filter_stage: self-checking test of the FS filter stage. The same
// stream of complex samples drives an even-symbol stage (ODD_SYMBOL = 0) and an
// odd-symbol stage (ODD_SYMBOL = 1). The stream holds four 512-sub-carrier
// symbols with 106 zero guard sub-carriers at each end (300 active, as in the
// LTE setting): two back to back, then idle gaps of 5 and 8 cycles. Every
// output is compared with the circular-convolution reference of fs_ref_pkg,
// its sub-carrier index and first flag are checked, and each output must
// appear exactly 6 clock cycles after its input sample (one sample per clock).
// The last symbol uses full-scale inputs so that saturation is exercised.
module tb_fs_filter_stage;
  import fbmc_fs_pkg::*;
  import fs_ref_pkg::*;

  localparam int M = 512;
  localparam int NSYM = 4;
  localparam int GUARD = 106;
  localparam int LAT = 6;

  int checks = 0;
  int failures = 0;

  logic clk = 0;
  logic rst_n = 0;
  logic in_valid = 0, in_first = 0;
  cplx_t in_x = '0;

  logic ov [2], of [2], os [2];
  logic [8:0] ok [2];
  sample_t oa [2];

  fs_filter_stage #(.M(M), .ODD_SYMBOL(1'b0)) u_ev (
    .clk, .rst_n, .in_valid, .in_first, .in_x,
    .out_valid(ov[0]), .out_first(of[0]), .out_k(ok[0]), .out_a(oa[0]), .out_sat(os[0]));
  fs_filter_stage #(.M(M), .ODD_SYMBOL(1'b1)) u_od (
    .clk, .rst_n, .in_valid, .in_first, .in_x,
    .out_valid(ov[1]), .out_first(of[1]), .out_k(ok[1]), .out_a(oa[1]), .out_sat(os[1]));

  always #5 clk = ~clk;

  int re [NSYM][];
  int im [NSYM][];

  typedef struct { int s; int k; int cyc; } ev_t;
  ev_t q [2][$];
  int cyc = 0;
  int n_sat = 0;
  int n_out [2] = '{0, 0};

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker, runs at every falling edge before new inputs are applied.
  always @(negedge clk) begin
    if (rst_n) begin
      for (int d = 0; d < 2; d++) begin
        if (ov[d]) begin
          ev_t e;
          int exp_a;
          bit clip;
          checks++;
          if (q[d].size() == 0) begin
            failures++;
            $display("stage %0d: unexpected output", d);
          end else begin
            e = q[d].pop_front();
            exp_a = ref_a(re[e.s], im[e.s], e.k, e.s, bit'(d), clip);
            if (ok[d] != 9'(e.k) || of[d] != (e.k == 0) || cyc != e.cyc + LAT ||
                int'(oa[d]) != exp_a || os[d] != clip) begin
              failures++;
              if (failures < 10)
                $display("stage %0d sym %0d k %0d: got k=%0d a=%0d sat=%0b cyc=%0d, exp a=%0d sat=%0b cyc=%0d",
                         d, e.s, e.k, ok[d], oa[d], os[d], cyc, exp_a, clip, e.cyc + LAT);
            end
            if (clip) n_sat++;
            n_out[d]++;
          end
        end
      end
    end
  end

  task automatic send_symbol(int s);
    for (int k = 0; k < M; k++) begin
      @(negedge clk);
      #1;
      in_valid = 1;
      in_first = (k == 0);
      in_x.re = sample_t'(re[s][k]);
      in_x.im = sample_t'(im[s][k]);
      for (int d = 0; d < 2; d++) q[d].push_back('{s, k, cyc});
    end
  endtask

  task automatic idle(int n);
    repeat (n) begin
      @(negedge clk);
      #1;
      in_valid = 0;
      in_first = 0;
      in_x = '0;
    end
  endtask

  initial begin
    for (int s = 0; s < NSYM; s++) begin
      automatic int amp = 12000;
      re[s] = new[M];
      im[s] = new[M];
      for (int k = 0; k < M; k++) begin
        if (k < GUARD || k >= M - GUARD) begin
          re[s][k] = 0;
          im[s][k] = 0;
        end else if (s == NSYM - 1) begin
          // full scale with the sign pattern of the taps, to force clipping
          re[s][k] = ($urandom % 2 != 0) ? 32767 : -32768;
          im[s][k] = ($urandom % 2 != 0) ? 32767 : -32768;
        end else begin
          re[s][k] = int'($urandom % (2 * amp + 1)) - amp;
          im[s][k] = int'($urandom % (2 * amp + 1)) - amp;
        end
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    send_symbol(0);
    send_symbol(1);
    idle(5);
    send_symbol(2);
    idle(8);
    send_symbol(3);
    idle(20);
    for (int d = 0; d < 2; d++) begin
      checks++;
      if (n_out[d] != NSYM * M || q[d].size() != 0) begin
        failures++;
        $display("stage %0d: %0d outputs, %0d missing", d, n_out[d], q[d].size());
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
