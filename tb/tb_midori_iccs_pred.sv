// tb_midori_iccs_pred: self-checking testbench for the iccs signature predictor midori_iccs_pred.
//
// The expected signature is not taken from the closed-form prediction: the
// reference multiplies the input by the full MixColumn matrix (tb_ref_pkg)
// and then adds the output rows of each column. Random states, every
// single-cell state and the all-zero/all-one states are applied.
module tb_midori_iccs_pred;
  import tb_ref_pkg::*;

  logic [63:0] a;
  logic [31:0] p;
  int checks = 0, failures = 0;

  midori_iccs_pred dut (.a(a), .p(p));

  task automatic check_one(input logic [63:0] v);
    logic [31:0] exp;
    a = v;
    #1;
    exp = ref_iccs(ref_mix(MAT_MIDORI_MC, v));
    checks++;
    if (p !== exp) begin
      failures++;
      if (failures < 10) $display("MISMATCH a=%h p=%h expected=%h", v, p, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_one('0);
    check_one('1);
    for (int i = 0; i < 16; i++)
      for (int v = 1; v < 16; v++) check_one(64'(v) << (4*i));
    for (int n = 0; n < 2000; n++) check_one(rand_state());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
