// fbmc_fs_filter_top: filter stage of an FS-FBMC receiver for OQAM, built from
// two NPR1 FS filter stages working in parallel.
//
// Because neighbouring FBMC/OQAM symbols overlap by half a symbol, the
// receiver demodulates even-indexed symbols (2n) and odd-indexed symbols
// (2n+1) in two parallel branches, each with its own FFT and equaliser. This
// block is the filtering part of both branches: stage 0 filters the even
// symbol stream and applies the phase term of a'_{2n}(k), stage 1 filters the
// odd symbol stream and applies that of a'_{2n+1}(k). The two-branch structure
// and the use of two FS filter stages side by side (so that the throughput
// matches a two-symbol polyphase-network receiver) are the paper's. Each branch
// first applies the per-sub-carrier zero-forcing equaliser (zf_equalizer),
// as in the paper's receiver, where equalisation comes after the FFT and
// before the frequency-domain filter. The FFTs, the computation of the
// equaliser coefficients and the QAM demapper are not part of this block:
// their streams are its ports.
//
// Interface per branch (ev_ = even symbols, od_ = odd symbols): in_valid,
// in_first (marks sub-carrier 0 of a symbol), in_x complex 16+16-bit FFT
// output sample, in_c its complex equaliser coefficient (Q3.12);
// out_valid, out_first, out_k sub-carrier index, out_a 16-bit real OQAM
// symbol, out_sat saturation flag. One sample per clock per branch, fixed
// latency of 7 clock cycles from X(k) to a(k) (1 in the equaliser, 6 in the
// filter stage).
module fbmc_fs_filter_top
  import fbmc_fs_pkg::*;
#(
  parameter int unsigned M = M_DEFAULT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // even-symbol branch
  input  logic                 ev_in_valid,
  input  logic                 ev_in_first,
  input  cplx_t                ev_in_x,
  input  cplx_t                ev_in_c,
  output logic                 ev_out_valid,
  output logic                 ev_out_first,
  output logic [$clog2(M)-1:0] ev_out_k,
  output sample_t              ev_out_a,
  output logic                 ev_out_sat,
  // odd-symbol branch
  input  logic                 od_in_valid,
  input  logic                 od_in_first,
  input  cplx_t                od_in_x,
  input  cplx_t                od_in_c,
  output logic                 od_out_valid,
  output logic                 od_out_first,
  output logic [$clog2(M)-1:0] od_out_k,
  output sample_t              od_out_a,
  output logic                 od_out_sat
);

  logic  ev_eq_valid, ev_eq_first, od_eq_valid, od_eq_first;
  cplx_t ev_eq_x, od_eq_x;

  zf_equalizer u_even_eq (
    .clk, .rst_n,
    .in_valid(ev_in_valid), .in_first(ev_in_first), .in_x(ev_in_x), .in_c(ev_in_c),
    .out_valid(ev_eq_valid), .out_first(ev_eq_first), .out_x(ev_eq_x)
  );

  zf_equalizer u_odd_eq (
    .clk, .rst_n,
    .in_valid(od_in_valid), .in_first(od_in_first), .in_x(od_in_x), .in_c(od_in_c),
    .out_valid(od_eq_valid), .out_first(od_eq_first), .out_x(od_eq_x)
  );

  fs_filter_stage #(.M(M), .ODD_SYMBOL(1'b0)) u_even (
    .clk, .rst_n,
    .in_valid(ev_eq_valid), .in_first(ev_eq_first), .in_x(ev_eq_x),
    .out_valid(ev_out_valid), .out_first(ev_out_first), .out_k(ev_out_k),
    .out_a(ev_out_a), .out_sat(ev_out_sat)
  );

  fs_filter_stage #(.M(M), .ODD_SYMBOL(1'b1)) u_odd (
    .clk, .rst_n,
    .in_valid(od_eq_valid), .in_first(od_eq_first), .in_x(od_eq_x),
    .out_valid(od_out_valid), .out_first(od_out_first), .out_k(od_out_k),
    .out_a(od_out_a), .out_sat(od_out_sat)
  );

endmodule
