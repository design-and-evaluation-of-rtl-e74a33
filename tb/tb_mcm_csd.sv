// tb_mcm_csd: self-checking test of the multiple constant multiplier.
// Drives random and extreme 16-bit samples into an EMCM-configured and an
// OMCM-configured instance and compares every product with x * c computed by
// ordinary integer multiplication from the coefficient values 1024, -430,
// -86 and 11 written out here.
module tb_mcm_csd;
  import fbmc_fs_pkg::*;

  int checks = 0;
  int failures = 0;

  sample_t x;
  logic signed [DATA_W+COEF_W-1:0] pe [N_EVEN];
  logic signed [DATA_W+COEF_W-1:0] po [N_ODD];

  mcm_csd #(.IN_W(DATA_W), .N_COEF(N_EVEN), .COEFS(EVEN_COEFS)) u_e (.x(x), .p(pe));
  mcm_csd #(.IN_W(DATA_W), .N_COEF(N_ODD), .COEFS(ODD_COEFS)) u_o (.x(x), .p(po));

  // Expected coefficient sets, independent of the package.
  int ce [3] = '{-86, 1024, -86};
  int co [4] = '{11, -430, -430, 11};

  task automatic check_one(input int xv);
    x = sample_t'(xv);
    #1;
    for (int j = 0; j < 3; j++) begin
      checks++;
      if (longint'(pe[j]) != longint'(xv) * ce[j]) begin
        failures++;
        $display("EMCM mismatch x=%0d j=%0d got=%0d exp=%0d", xv, j, pe[j], xv * ce[j]);
      end
    end
    for (int j = 0; j < 4; j++) begin
      checks++;
      if (longint'(po[j]) != longint'(xv) * co[j]) begin
        failures++;
        $display("OMCM mismatch x=%0d j=%0d got=%0d exp=%0d", xv, j, po[j], xv * co[j]);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_one(0);
    check_one(1);
    check_one(-1);
    check_one(32767);
    check_one(-32768);
    check_one(12345);
    for (int i = 0; i < 2000; i++) begin
      check_one(int'($signed(16'($urandom))));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
