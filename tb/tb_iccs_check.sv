// tb_iccs_check: self-checking testbench for the iccs signature checker.
//
// Drives random result states together with predicted signatures of which
// each column is, at random, either the correct signature of the state
// (computed by tb_ref_pkg) or a corrupted one. The expected per-column flag
// is whether the column's predicted and actual signatures differ. Single-bit
// corruptions of the state are also applied to a correct prediction.
module tb_iccs_check;
  import tb_ref_pkg::*;

  logic [63:0] r;
  logic [31:0] p;
  logic [3:0] err_col;
  logic err;
  int checks = 0, failures = 0, n_err = 0;

  iccs_check dut (.r(r), .p(p), .err_col(err_col), .err(err));

  task automatic check_one(input logic [63:0] rv, input logic [31:0] pv);
    logic [31:0] good;
    logic [3:0] exp;
    r = rv;
    p = pv;
    #1;
    good = ref_iccs(rv);
    for (int c = 0; c < 4; c++) exp[c] = (good[8*c +: 8] != pv[8*c +: 8]);
    checks++;
    if (err_col !== exp || err !== |exp) begin
      failures++;
      if (failures < 10) $display("MISMATCH r=%h p=%h err_col=%b expected=%b", rv, pv, err_col, exp);
    end
    if (|exp) n_err++;
  endtask

  initial begin
    #100000;
    failures++;
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [63:0] rv;
      logic [31:0] pv;
      rv = rand_state();
      pv = ref_iccs(rv);
      for (int c = 0; c < 4; c++)
        if ($urandom_range(1, 0) == 1) pv[8*c +: 8] ^= 8'($urandom_range(2**8 - 1, 1));
      check_one(rv, pv);
    end
    for (int b = 0; b < 64; b++) begin
      logic [63:0] rv;
      rv = rand_state();
      check_one(rv ^ (64'd1 << b), ref_iccs(rv));
    end
    if (n_err == 0) begin
      failures++;
      $display("no mismatching signature was ever applied");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
