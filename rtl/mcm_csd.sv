// mcm_csd: multiple constant multiplier (MCM) built from shifts and adds.
//
// Multiplies one signed input sample by a fixed set of N_COEF constant
// coefficients at once and returns every product. Each coefficient is written
// in canonical signed digit (CSD) form, c = sum_k d_k * 2^k with d_k in
// {-1, 0, +1} and no two adjacent non-zero digits, and its product is the sum
// of the input shifted by k for every non-zero digit (added for +1, subtracted
// for -1). No multiplier is used, as the paper proposes for the EMCM and OMCM
// units of the FS filter stage. The paper generates its MCM units with an
// external code generator that also shares sub-expressions between the
// coefficients; this version forms each product on its own, which gives the
// same numbers with somewhat more adders. Low product bits of a coefficient
// with trailing zero bits (1024, -86, -430) are constant zero by construction.
//
// Interface: x (IN_W bits, signed) in, p[j] = x * COEFS[j] (IN_W+COEF_W bits)
// out. Purely combinational; the register in front of it belongs to the
// filter stage.
module mcm_csd
  import fbmc_fs_pkg::*;
#(
  parameter int unsigned IN_W = DATA_W,
  parameter int unsigned N_COEF = N_EVEN,
  parameter coef_t COEFS [N_COEF] = EVEN_COEFS
) (
  input  logic signed [IN_W-1:0]        x,
  output logic signed [IN_W+COEF_W-1:0] p [N_COEF]
);

  localparam int unsigned OUT_W = IN_W + COEF_W;

  // term[j][k] = d_k(COEFS[j]) * (x << k)
  logic signed [OUT_W-1:0] term [N_COEF][COEF_W+1];

  for (genvar j = 0; j < N_COEF; j++) begin : g_coef
    for (genvar k = 0; k <= COEF_W; k++) begin : g_digit
      localparam int D = csd_digit(int'(COEFS[j]), k);
      if (D == 1) begin : g_pos
        assign term[j][k] = OUT_W'(x) <<< k;
      end else if (D == -1) begin : g_neg
        assign term[j][k] = -(OUT_W'(x) <<< k);
      end else begin : g_zero
        assign term[j][k] = '0;
      end
    end
  end

  always_comb begin
    for (int j = 0; j < N_COEF; j++) begin
      p[j] = '0;
      for (int k = 0; k <= COEF_W; k++) begin
        p[j] = p[j] + term[j][k];
      end
    end
  end

endmodule
