// fs_filter_stage: frequency-spread (FS) filter stage for the NPR1 prototype
// filter, the architecture the paper proposes for the FS-FBMC receiver.
//
// It takes the equalised frequency-domain samples X'_n(k) of one FBMC symbol
// stream, one complex sample per clock in sub-carrier order, and returns the
// real-valued OQAM symbols a'_n(k) = (+/-) sum_{l=-3..3} G'(l) * Part(X'_n(k-l)),
// where Part is the real or imaginary part depending on the parity of the
// symbol and of k. Only the part that OQAM keeps is ever computed: the 7-tap
// filter is split into an even-tap FIR (G'(0), G'(+-2), in the EMCM unit) and an
// odd-tap FIR (G'(+-1), G'(+-3), in the OMCM unit). A one-bit phase register,
// select_DP, alternates every clock. For an even symbol and an even k the
// input mux sends Re(X) to EMCM and Im(X) to OMCM and the ERDP and OIDP data
// paths load; for an odd k, Im goes to EMCM and Re to OMCM and EIDP and ORDP
// load. ERDP+ORDP then hold Re Y(k) for even k and EIDP+OIDP hold Im Y(k) for
// odd k. An odd symbol (ODD_SYMBOL = 1) needs the opposite parts, so its phase
// simply starts the other way round. The mux numbering, the four data paths,
// the coefficient sets and the output sign block follow the paper's figure.
// The signs are those of the paper's demodulation rule a = Re(phi* Y) with
// phi = i^(n+m): for symbol 2n, (-1)^(n+m) Re Y(2m) and (-1)^(n+m) Im Y(2m+1);
// for symbol 2n+1, (-1)^(n+m) Im Y(2m) and (-1)^(n+m+1) Re Y(2m+1). The
// paper's expanded per-parity equation prints (-1)^(n+m+1) for the two mixed
// cases, which would invert half of the recovered symbols; the rule it is
// derived from is followed here.
//
// This design's own choices: in_first restarts the phase and the sub-carrier
// counter at sub-carrier 0 of each symbol; the symbol parity n used by the
// sign term is counted here from the in_first strobes (the first symbol after
// reset has n = 0); a cycle without in_valid feeds a zero sample, so idle gaps
// behave like guard sub-carriers. The pipeline never stalls. The circular
// convolution at the spectrum edges equals the streamed (linear) one when the
// Delta = 3 outermost sub-carriers at each end of the stream are zero, as they
// are when the spectrum is streamed in natural frequency order with guard
// bands at both ends.
//
// Interface: in_valid, in_first (sub-carrier 0), in_x (complex, 16+16 bit).
// Out: out_valid, out_first, out_k (sub-carrier index), out_a (16 bit),
// out_sat (output was saturated). Throughput one sample per clock; out_a for
// sub-carrier k appears LATENCY = 6 clock cycles after X(k) was presented,
// provided the three samples after it follow back to back or the stream has
// gone idle.
module fs_filter_stage
  import fbmc_fs_pkg::*;
#(
  parameter int unsigned M = M_DEFAULT,
  parameter bit ODD_SYMBOL = 1'b0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  in_first,
  input  cplx_t                 in_x,
  output logic                  out_valid,
  output logic                  out_first,
  output logic [$clog2(M)-1:0]  out_k,
  output sample_t               out_a,
  output logic                  out_sat
);

  localparam int unsigned K_W = $clog2(M);
  localparam int unsigned LATENCY = 6;

  // ---------------------------------------------------------------- control
  logic sel_q;       // select_DP: 1 = ERDP/OIDP phase, 0 = EIDP/ORDP phase
  logic sel_next;    // phase of the sample presented now
  logic [K_W-1:0] k_q, k_now;
  logic npar_q, npar_now, started_q;

  always_comb begin
    if (in_valid && in_first) sel_next = ODD_SYMBOL ? 1'b0 : 1'b1;
    else                      sel_next = ~sel_q;
    k_now = (in_first || !in_valid) ? '0 : k_q + 1'b1;
    if (in_valid && in_first) npar_now = started_q ? ~npar_q : 1'b0;
    else                      npar_now = npar_q;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sel_q     <= ODD_SYMBOL ? 1'b1 : 1'b0;
      k_q       <= '0;
      npar_q    <= 1'b0;
      started_q <= 1'b0;
    end else begin
      sel_q <= sel_next;
      if (in_valid) begin
        k_q    <= in_first ? '0 : k_q + 1'b1;
        npar_q <= npar_now;
      end
      if (in_valid && in_first) started_q <= 1'b1;
    end
  end

  // Per-sample tag carried alongside the datapath.
  typedef struct packed {
    logic           valid;
    logic           first;
    logic [K_W-1:0] k;
    logic           neg;
  } tag_t;

  tag_t tag_in;
  tag_t [LATENCY:1] tag_d;

  always_comb begin
    tag_in.valid = in_valid;
    tag_in.first = in_valid && in_first;
    tag_in.k     = in_valid ? k_now : '0;
    // Re(phi* Y) with phi = i^(n+m): (-1)^(n+m), m = k/2, with one more
    // inversion for odd k of an odd symbol.
    tag_in.neg   = npar_now ^ k_now[1] ^ (ODD_SYMBOL & k_now[0]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tag_d <= '0;
    end else begin
      tag_d[1] <= tag_in;
      for (int i = 2; i <= LATENCY; i++) tag_d[i] <= tag_d[i-1];
    end
  end

  // ------------------------------------------------------ input muxes + REG
  sample_t e_in_q, o_in_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      e_in_q <= '0;
      o_in_q <= '0;
    end else if (!in_valid) begin
      e_in_q <= '0;
      o_in_q <= '0;
    end else begin
      e_in_q <= sel_next ? in_x.re : in_x.im;  // mux inputs 1: Re, 0: Im
      o_in_q <= sel_next ? in_x.im : in_x.re;  // mux inputs 0: Re, 1: Im
    end
  end

  // -------------------------------------------------------------- MCM units
  prod_t e_p [N_EVEN];
  prod_t o_p [N_ODD];

  mcm_csd #(.IN_W(DATA_W), .N_COEF(N_EVEN), .COEFS(EVEN_COEFS)) u_emcm (
    .x(e_in_q), .p(e_p)
  );
  mcm_csd #(.IN_W(DATA_W), .N_COEF(N_ODD), .COEFS(ODD_COEFS)) u_omcm (
    .x(o_in_q), .p(o_p)
  );

  // ------------------------------------------------------------- data paths
  acc_t erdp, eidp, ordp, oidp;

  fs_data_path #(.N_TAPS(N_EVEN)) u_erdp (
    .clk, .rst_n, .en(sel_q), .p(e_p), .y(erdp)
  );
  fs_data_path #(.N_TAPS(N_EVEN)) u_eidp (
    .clk, .rst_n, .en(~sel_q), .p(e_p), .y(eidp)
  );
  fs_data_path #(.N_TAPS(N_ODD)) u_oidp (
    .clk, .rst_n, .en(sel_q), .p(o_p), .y(oidp)
  );
  fs_data_path #(.N_TAPS(N_ODD)) u_ordp (
    .clk, .rst_n, .en(~sel_q), .p(o_p), .y(ordp)
  );

  // ---------------------------------------------------- output combination
  // In the cycle where the MCMs hold X(k+4), the selected pair of data paths
  // holds the complete sum for sub-carrier k, whose tag is 5 cycles old.
  fs_out_stage u_out (
    .clk, .rst_n,
    .sel(sel_q),
    .neg(tag_d[LATENCY-1].neg),
    .erdp, .ordp, .eidp, .oidp,
    .a(out_a),
    .sat(out_sat)
  );

  assign out_valid = tag_d[LATENCY].valid;
  assign out_first = tag_d[LATENCY].first;
  assign out_k     = tag_d[LATENCY].k;

endmodule
