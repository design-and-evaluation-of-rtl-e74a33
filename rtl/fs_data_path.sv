// fs_data_path: one data path of the FS filter stage (ERDP, EIDP, ORDP or
// OIDP in the paper's architecture).
//
// A transposed-form FIR chain of N_TAPS registers: the first register takes
// the product p[0] from the multiple constant multiplier, every later register
// takes the previous register plus its own product, and the last register is
// the data-path output. All registers load only when en is high, so each path
// collects samples of one sub-carrier parity only: the select_DP phase signal
// enables two of the four paths in one clock cycle and the other two in the
// next. Counting only the cycles in which en is high, the output after the
// update with sample x(t) is
//   y = p[N_TAPS-1](x(t)) + p[N_TAPS-2](x(t-1)) + ... + p[0](x(t-N_TAPS+1)),
// so coefficient N_TAPS-1 weights the newest sample. The chain structure
// (register, adder, register, ...) is
// the paper's; register width ACC_W and synchronous reset to zero are this
// design's choices.
//
// Interface: p[N_TAPS] products in, en, y (ACC_W bits) out. One cycle from a
// product to the first register; y is a register output.
module fs_data_path
  import fbmc_fs_pkg::*;
#(
  parameter int unsigned N_TAPS = N_EVEN,
  parameter int unsigned IN_W = PROD_W,
  parameter int unsigned OUT_W = ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic signed [IN_W-1:0]  p [N_TAPS],
  output logic signed [OUT_W-1:0] y
);

  logic [N_TAPS-1:0][OUT_W-1:0] r;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r <= '0;
    end else if (en) begin
      r[0] <= OUT_W'(p[0]);
      for (int j = 1; j < N_TAPS; j++) r[j] <= $signed(r[j-1]) + OUT_W'(p[j]);
    end
  end

  assign y = $signed(r[N_TAPS-1]);

endmodule
