// zf_equalizer: per-sub-carrier zero-forcing equaliser of the FS-FBMC receiver.
//
// Multiplies every FFT output sample X(k) by its complex equaliser
// coefficient C(k): X'(k) = C(k) * X(k). The coefficient is the inverse of the
// channel's frequency response at sub-carrier k, and may also hold the
// prototype-filter scale G(0) that the FS filter stage leaves out (the filter
// stage works with taps normalised to G'(0) = 1). Equalising before the filter
// stage, per sub-carrier, is the receiver structure of the paper; computing C
// (channel estimation and the division) is outside this block, as the paper
// assumes perfectly known channel state.
//
// Number format (this design's choice; the paper gives none): X and X' are
// 16-bit two's complement, C is 16-bit with COEF_FRAC_EQ = 12 fractional bits
// (range -8 .. +8). The complex product is formed with four multipliers,
// rounded half up and saturated to 16 bits.
//
// Interface: in_valid, in_first, in_x (cplx_t), in_c (cplx_t, Q3.12) in;
// out_valid, out_first, out_x (cplx_t) out, one clock cycle later. No stall.
module zf_equalizer
  import fbmc_fs_pkg::*;
#(
  parameter int unsigned COEF_FRAC_EQ = 12
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  cplx_t in_x,
  input  cplx_t in_c,
  output logic  out_valid,
  output logic  out_first,
  output cplx_t out_x
);

  localparam int unsigned P_W = 2 * DATA_W + 2;
  localparam logic signed [P_W-1:0] MAXV = P_W'((1 <<< (DATA_W - 1)) - 1);
  localparam logic signed [P_W-1:0] MINV = -P_W'(1 <<< (DATA_W - 1));
  localparam logic signed [P_W-1:0] HALF = P_W'(1 <<< (COEF_FRAC_EQ - 1));

  function automatic sample_t round_sat(input logic signed [P_W-1:0] v);
    logic signed [P_W-1:0] r;
    r = (v + HALF) >>> COEF_FRAC_EQ;
    if (r > MAXV) return sample_t'(MAXV);
    if (r < MINV) return sample_t'(MINV);
    return sample_t'(r);
  endfunction

  logic signed [P_W-1:0] pr, pi;

  always_comb begin
    pr = P_W'(in_x.re) * P_W'(in_c.re) - P_W'(in_x.im) * P_W'(in_c.im);
    pi = P_W'(in_x.re) * P_W'(in_c.im) + P_W'(in_x.im) * P_W'(in_c.re);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_x     <= '0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_valid && in_first;
      out_x.re  <= in_valid ? round_sat(pr) : '0;
      out_x.im  <= in_valid ? round_sat(pi) : '0;
    end
  end

endmodule
