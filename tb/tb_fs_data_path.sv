// tb_fs_data_path: self-checking test of one FS data path (transposed FIR
// chain with enable). Random products and a random enable pattern are
// applied; a reference keeps the last N_TAPS enabled product vectors and
// checks y = sum_j p_j taken j updates before the newest, which is what the
// register/adder chain must produce, plus hold behaviour when en is low.
module tb_fs_data_path;
  import fbmc_fs_pkg::*;

  localparam int NT = 4;

  int checks = 0;
  int failures = 0;

  logic clk = 0;
  logic rst_n = 0;
  logic en = 0;
  prod_t p [NT];
  acc_t y;

  fs_data_path #(.N_TAPS(NT)) dut (.clk, .rst_n, .en, .p, .y);

  always #5 clk = ~clk;

  // hist[u][j]: product j presented at the u-th most recent enabled update.
  longint hist [NT][NT];
  int n_upd = 0;

  function automatic longint expected();
    longint s = 0;
    // newest update contributes p[NT-1], the one before p[NT-2], ...
    for (int u = 0; u < NT; u++) begin
      if (u < n_upd) s += hist[u][NT-1-u];
    end
    return s;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < NT; j++) p[j] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (y != 0) begin failures++; $display("not zero after reset"); end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      en = ($urandom % 3) != 0;
      for (int j = 0; j < NT; j++) p[j] = prod_t'($signed(28'($urandom)));
      @(posedge clk);
      if (en) begin
        for (int u = NT - 1; u > 0; u--) hist[u] = hist[u-1];
        for (int j = 0; j < NT; j++) hist[0][j] = longint'(p[j]);
        n_upd++;
      end
      #1;
      checks++;
      if (longint'(y) != expected()) begin
        failures++;
        if (failures < 10) $display("mismatch at %0d: got %0d exp %0d", i, y, expected());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
