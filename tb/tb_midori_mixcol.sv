// tb_midori_mixcol: self-checking testbench for the Midori64 M_C MixColumn.
//
// Applies 2000 random states plus single-cell and all-zero/all-one states,
// and compares the output with a reference matrix multiplication over
// GF(2^4) (tb_ref_pkg). It also checks that applying the
// matrix twice returns the input (the matrix is involutive).
module tb_midori_mixcol;
  import tb_ref_pkg::*;

  logic [63:0] a, r, rr;
  int checks = 0, failures = 0;

  midori_mixcol dut  (.a(a),  .r(r));
  midori_mixcol dut2 (.a(r),  .r(rr));

  task automatic check_one(input logic [63:0] v);
    logic [63:0] exp;
    a = v;
    #1;
    exp = ref_mix(MAT_MIDORI_MC, v);
    checks++;
    if (r !== exp) begin
      failures++;
      if (failures < 10) $display("MISMATCH a=%h r=%h expected=%h", v, r, exp);
    end
    checks++;
    if (rr !== v) begin
      failures++;
      if (failures < 10) $display("NOT INVOLUTIVE a=%h twice=%h", v, rr);
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
