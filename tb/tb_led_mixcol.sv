// tb_led_mixcol: self-checking testbench for the LED MixColumn.
//
// Applies 2000 random states plus single-cell and all-zero/all-one states,
// and compares the output with a reference matrix multiplication over
// GF(2^4) (tb_ref_pkg).
module tb_led_mixcol;
  import tb_ref_pkg::*;

  logic [63:0] a, r;
  int checks = 0, failures = 0;

  led_mixcol dut  (.a(a),  .r(r));

  task automatic check_one(input logic [63:0] v);
    logic [63:0] exp;
    a = v;
    #1;
    exp = ref_mix(MAT_LED, v);
    checks++;
    if (r !== exp) begin
      failures++;
      if (failures < 10) $display("MISMATCH a=%h r=%h expected=%h", v, r, exp);
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
