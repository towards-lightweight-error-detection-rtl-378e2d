// tb_fst_mixcol: self-checking testbench for the FST-protected MixColumn.
//
// Runs the default unit (LED MixColumn, W = Midori64 M_C) with a 10 ns clock.
// Each operation presents a random state with en high for one clock and
// checks, after that edge, that r equals the reference LED MixColumn of the
// input XOR the fault on the original register, and that err matches the
// value the reference predicts: with faults e_o on the original and e_r on
// the redundant register, the two paths differ by e_o + W^-1(e_r). Fault
// classes: none, original only, redundant only, the same fault in both
// registers (a "fault collision"), and a collision on a fixed point of W,
// which FST cannot see. Also checks reset and that en low holds the
// registers. Latency is one clock.
module tb_fst_mixcol;
  import tb_ref_pkg::*;

  logic clk, rst_n = 1'b0, en = 1'b0;
  logic [63:0] a = '0, fault_orig = '0, fault_red = '0, r;
  logic err;
  int checks = 0, failures = 0, collisions_caught = 0, fixed_point_escapes = 0;

  fst_mixcol dut (.clk(clk), .rst_n(rst_n), .en(en), .a(a), .fault_orig(fault_orig),
                  .fault_red(fault_red), .r(r), .err(err));

  initial begin
    clk = 1'b0;
    forever #5 clk = ~clk;
  end

  task automatic op(input logic [63:0] av, input logic [63:0] fo, input logic [63:0] fr);
    logic [63:0] exp_r, diff;
    @(negedge clk);
    a = av; fault_orig = fo; fault_red = fr; en = 1'b1;
    @(negedge clk);
    en = 1'b0; fault_orig = '0; fault_red = '0; a = rand_state();
    exp_r = ref_mix(MAT_LED, av) ^ fo;
    diff = fo ^ ref_mix(MAT_MIDORI_MC, fr);
    checks++;
    if (r !== exp_r || err !== (diff != 0)) begin
      failures++;
      if (failures < 10) $display("MISMATCH a=%h fo=%h fr=%h r=%h exp=%h err=%b exp=%b",
                                  av, fo, fr, r, exp_r, err, diff != 0);
    end
    if (fo != 0 && fo == fr) begin
      if (err) collisions_caught++;
      else fixed_point_escapes++;
    end
    // en low: nothing changes on the next edge
    @(negedge clk);
    checks++;
    if (r !== exp_r) begin
      failures++;
      $display("register changed with en low");
    end
  endtask

  initial begin
    #100us;
    failures++;
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    checks++;
    if (r !== '0 || err !== 1'b0) begin
      failures++;
      $display("reset state wrong");
    end
    rst_n = 1'b1;
    for (int n = 0; n < 200; n++) op(rand_state(), '0, '0);
    for (int n = 0; n < 200; n++) op(rand_state(), rand_state(), '0);
    for (int n = 0; n < 200; n++) op(rand_state(), '0, rand_state());
    // same fault in both registers
    for (int n = 0; n < 200; n++) begin
      logic [63:0] e;
      e = 64'($urandom_range(15, 1)) << (4 * $urandom_range(15, 0));
      op(rand_state(), e, e);
    end
    for (int n = 0; n < 100; n++) begin
      logic [63:0] e;
      e = rand_state();
      op(rand_state(), e, e);
    end
    // fixed points of W: every column of the fault XORs to zero
    for (int n = 0; n < 50; n++) begin
      logic [63:0] e;
      e = rand_state();
      for (int c = 0; c < 4; c++)
        e[4*(12 + c) +: 4] = e[4*c +: 4] ^ e[4*(4 + c) +: 4] ^ e[4*(8 + c) +: 4];
      if (e == 0) e[3:0] = 4'h1;
      op(rand_state(), e, e);
    end
    if (collisions_caught == 0) begin
      failures++;
      $display("no fault collision was detected");
    end
    if (fixed_point_escapes == 0) begin
      failures++;
      $display("no fixed-point collision was applied");
    end
    $display("collisions_caught=%0d fixed_point_escapes=%0d", collisions_caught, fixed_point_escapes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
