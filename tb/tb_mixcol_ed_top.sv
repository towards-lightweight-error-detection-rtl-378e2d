// tb_mixcol_ed_top: end-to-end testbench of the whole design at its default
// configuration.
//
// Streams random states into the top, one per clock while in_valid is high,
// with random gaps. Each state carries a fault scenario for one cipher's
// pair of signature units (the same mask for its CCS and ICCS unit) or the
// FST unit (none, single cell, two equal cells in one column, random mask, or
// for the FST unit a fault in either register or the same fault in both).
// One clock later the testbench compares every unit's result and error flag
// with a reference model: reference MixColumn XOR the fault, and the flags
// predicted from the linear signature of the fault (units 0-3) or from
// e_o + W^-1(e_r) (unit 4). It also checks out_valid timing (one clock) and
// that a cycle without in_valid leaves the results unchanged.
//
// Mechanisms counted, each must occur at least once: a detection by each of
// the five units, a two-cell fault missed by CCS but caught by interleaved
// CCS, an FST fault collision caught, a collision on a fixed point of W that
// escapes, and an idle cycle.
module tb_mixcol_ed_top;
  import tb_ref_pkg::*;

  localparam int NOPS = 4000;

  logic clk, rst_n = 1'b0, in_valid = 1'b0;
  logic [63:0] state_in = '0, fault_fst_red = '0;
  logic [4:0][63:0] fault = '0;
  logic out_valid;
  logic [4:0][63:0] result;
  logic [4:0] err;
  logic [3:0][3:0] err_col;

  mixcol_ed_top dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .state_in(state_in),
                     .fault(fault), .fault_fst_red(fault_fst_red), .out_valid(out_valid),
                     .result(result), .err(err), .err_col(err_col));

  int checks = 0, failures = 0;
  int det[5] = '{0, 0, 0, 0, 0};
  int ccs_miss_iccs_hit = 0, fst_collision_caught = 0, fst_fixed_point_escape = 0, idle_cycles = 0;

  initial begin
    clk = 1'b0;
    forever #5 clk = ~clk;
  end

  initial begin
    #1ms;
    failures++;
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] pick_fault(input int kind);
    logic [63:0] e;
    int c, r1, r2;
    logic [3:0] v;
    case (kind)
      0: e = '0;
      1: e = 64'($urandom_range(15, 1)) << (4 * $urandom_range(15, 0));
      2: begin
        c = $urandom_range(3, 0);
        r1 = $urandom_range(3, 0);
        r2 = (r1 + $urandom_range(3, 1)) % 4;
        v = 4'($urandom_range(15, 1));
        e = (64'(v) << (4*(4*r1 + c))) | (64'(v) << (4*(4*r2 + c)));
      end
      3: begin   // fixed point of M_C: each column XORs to zero
        e = rand_state();
        for (int k = 0; k < 4; k++)
          e[4*(12 + k) +: 4] = e[4*k +: 4] ^ e[4*(4 + k) +: 4] ^ e[4*(8 + k) +: 4];
        if (e == 0) e[3:0] = 4'h1;
      end
      default: e = rand_state();
    endcase
    return e;
  endfunction

  initial begin
    logic [63:0] prev_a;
    logic [4:0][63:0] prev_f;
    logic [63:0] prev_fr;
    repeat (2) @(negedge clk);
    checks++;
    if (out_valid !== 1'b0 || err !== '0 || result !== '0) begin
      failures++;
      $display("reset state wrong");
    end
    rst_n = 1'b1;
    for (int n = 0; n < NOPS; n++) begin
      int unit, kind;
      logic [4:0][63:0] exp_r;
      logic [4:0] exp_e;
      logic [3:0][3:0] exp_ec;
      @(negedge clk);
      if ($urandom_range(7, 0) == 0) begin   // idle cycle: results hold
        logic [4:0][63:0] held;
        held = result;
        in_valid = 1'b0;
        state_in = rand_state();
        fault = '0;
        fault_fst_red = '0;
        @(negedge clk);
        checks++;
        if (out_valid !== 1'b0 || result !== held) begin
          failures++;
          $display("results changed or out_valid set without in_valid");
        end
        idle_cycles++;
        continue;
      end
      in_valid = 1'b1;
      state_in = rand_state();
      fault = '0;
      fault_fst_red = '0;
      unit = $urandom_range(4, 0);
      kind = $urandom_range(5, 0);
      if (unit < 4) begin
        // the CCS and ICCS units of one cipher get the same fault
        if (kind == 3) kind = 2;
        fault[unit & ~1] = pick_fault(kind);
        fault[unit | 1]  = fault[unit & ~1];
      end else begin
        case (kind)
          0: ;
          1: fault[4] = pick_fault(4);
          2: fault_fst_red = pick_fault(4);
          3: begin fault[4] = pick_fault(3); fault_fst_red = fault[4]; end
          default: begin fault[4] = pick_fault(1); fault_fst_red = fault[4]; end
        endcase
      end
      prev_a = state_in;
      prev_f = fault;
      prev_fr = fault_fst_red;
      @(negedge clk);
      in_valid = 1'b0;
      for (int u = 0; u < 5; u++) begin
        logic [63:0] fu;
        fu = prev_f[u];
        exp_r[u] = ref_mix((u < 2) ? MAT_MIDORI_MC : MAT_LED, prev_a) ^ fu;
        if (u < 4)
          for (int c = 0; c < 4; c++)
            exp_ec[u][c] = (u % 2 == 0) ? (ref_ccs(fu) >> (4*c)) % 16 != 0
                                        : (ref_iccs(fu) >> (8*c)) % 256 != 0;
        exp_e[u] = (u < 4) ? |exp_ec[u] : (fu ^ ref_mix(MAT_MIDORI_MC, prev_fr)) != 0;
      end
      checks++;
      if (out_valid !== 1'b1 || result !== exp_r || err !== exp_e || err_col !== exp_ec) begin
        failures++;
        if (failures < 10)
          $display("MISMATCH op %0d unit %0d: out_valid=%b err=%b exp=%b", n, unit, out_valid, err, exp_e);
      end
      for (int u = 0; u < 5; u++) if (err[u]) det[u]++;
      if ((!err[0] && err[1]) || (!err[2] && err[3])) ccs_miss_iccs_hit++;
      if (unit == 4 && prev_f[4] != 0 && prev_f[4] == prev_fr) begin
        if (err[4]) fst_collision_caught++;
        else fst_fixed_point_escape++;
      end
    end
    for (int u = 0; u < 5; u++)
      if (det[u] == 0) begin
        failures++;
        $display("unit %0d never detected a fault", u);
      end
    if (ccs_miss_iccs_hit == 0) begin failures++; $display("no CCS-blind fault seen"); end
    if (fst_collision_caught == 0) begin failures++; $display("no FST collision caught"); end
    if (fst_fixed_point_escape == 0) begin failures++; $display("no FST fixed-point escape"); end
    if (idle_cycles == 0) begin failures++; $display("no idle cycle"); end
    $display("detections per unit: %0d %0d %0d %0d %0d", det[0], det[1], det[2], det[3], det[4]);
    $display("ccs_miss_iccs_hit=%0d fst_collision_caught=%0d fst_fixed_point_escape=%0d idle=%0d",
             ccs_miss_iccs_hit, fst_collision_caught, fst_fixed_point_escape, idle_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
