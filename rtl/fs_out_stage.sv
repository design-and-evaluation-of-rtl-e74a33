// fs_out_stage: output combiner of the FS filter stage.
//
// Picks one pair of data-path outputs, adds them, registers the sum and
// applies the OQAM sign term. When sel (select_DP) is 1 the even-real and
// odd-real paths (ERDP + ORDP) are chosen, when it is 0 the even-imaginary
// and odd-imaginary paths (EIDP + OIDP); this mux numbering is the one printed
// in the paper's architecture figure. The sum is stored in the output
// register together with a negate flag carrying the (-1)^(n+m) or
// (-1)^(n+m+1) term, and the registered value is then negated if required,
// rounded from the Q.10 coefficient scale back to the sample scale (add half
// an LSB, shift right by COEF_FRAC) and saturated to DATA_W bits. The
// rounding and saturation are this design's choices: the paper only states
// that outputs are 16-bit samples.
//
// Interface: sel, neg, four ACC_W-bit data-path values in; a (DATA_W bits)
// out, one clock cycle after sel/neg and the data-path values were presented.
module fs_out_stage
  import fbmc_fs_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sel,
  input  logic                    neg,
  input  logic signed [ACC_W-1:0] erdp,
  input  logic signed [ACC_W-1:0] ordp,
  input  logic signed [ACC_W-1:0] eidp,
  input  logic signed [ACC_W-1:0] oidp,
  output logic signed [DATA_W-1:0] a,
  output logic                    sat   // a was clipped this cycle
);

  localparam int unsigned V_W = ACC_W + 2;
  localparam logic signed [V_W-1:0] MAXV = V_W'((1 <<< (DATA_W - 1)) - 1);
  localparam logic signed [V_W-1:0] MINV = -V_W'(1 <<< (DATA_W - 1));

  logic signed [ACC_W-1:0] sum_q;
  logic                    neg_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sum_q <= '0;
      neg_q <= 1'b0;
    end else begin
      sum_q <= sel ? (erdp + ordp) : (eidp + oidp);
      neg_q <= neg;
    end
  end

  logic signed [V_W-1:0] v;
  logic signed [V_W-1:0] r;

  always_comb begin
    v = neg_q ? -V_W'(sum_q) : V_W'(sum_q);
    r = (v + V_W'(1 <<< (COEF_FRAC - 1))) >>> COEF_FRAC;
    sat = 1'b0;
    if (r > MAXV) begin
      a = DATA_W'(MAXV);
      sat = 1'b1;
    end else if (r < MINV) begin
      a = DATA_W'(MINV);
      sat = 1'b1;
    end else begin
      a = DATA_W'(r);
    end
  end

endmodule
