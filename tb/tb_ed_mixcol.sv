// tb_ed_mixcol: self-checking testbench for the error-detecting MixColumn.
//
// Instantiates all four architectures (Midori64 M_C and LED, each with CCS
// and interleaved CCS) and drives them with the same random states and fault
// masks. The result must equal the reference MixColumn XOR the fault. Since
// every signature is linear, a column's flag must be raised exactly when the
// fault's own signature in that column is nonzero; the testbench works this
// out from the fault mask with the reference signature functions. Fault
// classes: none, a single cell, two equal cells in one column (which CCS
// cannot see), and random multi-bit masks. Counts how often CCS missed a
// fault that ICCS caught.
module tb_ed_mixcol;
  import tb_ref_pkg::*;
  import mixcol_pkg::*;

  logic [63:0] a, fault;
  logic [3:0][63:0] r;
  logic [3:0][3:0] err_col;
  logic [3:0] err;
  int checks = 0, failures = 0, detected = 0, ccs_miss_iccs_hit = 0;

  ed_mixcol #(.CIPHER(MIDORI_MC), .SCHEME(CCS))  u0 (.a(a), .fault(fault), .r(r[0]), .err_col(err_col[0]), .err(err[0]));
  ed_mixcol #(.CIPHER(MIDORI_MC), .SCHEME(ICCS)) u1 (.a(a), .fault(fault), .r(r[1]), .err_col(err_col[1]), .err(err[1]));
  ed_mixcol #(.CIPHER(LED),       .SCHEME(CCS))  u2 (.a(a), .fault(fault), .r(r[2]), .err_col(err_col[2]), .err(err[2]));
  ed_mixcol #(.CIPHER(LED),       .SCHEME(ICCS)) u3 (.a(a), .fault(fault), .r(r[3]), .err_col(err_col[3]), .err(err[3]));

  task automatic check_one(input logic [63:0] av, input logic [63:0] fv);
    logic [15:0] fc;
    logic [31:0] fi;
    logic [3:0] exp_c, exp_i;
    a = av;
    fault = fv;
    #1;
    fc = ref_ccs(fv);
    fi = ref_iccs(fv);
    for (int c = 0; c < 4; c++) begin
      exp_c[c] = |fc[4*c +: 4];
      exp_i[c] = |fi[8*c +: 8];
    end
    for (int u = 0; u < 4; u++) begin
      logic [63:0] exp_r;
      logic [3:0] exp_e;
      exp_r = ref_mix(u < 2 ? MAT_MIDORI_MC : MAT_LED, av) ^ fv;
      exp_e = (u % 2 == 0) ? exp_c : exp_i;
      checks++;
      if (r[u] !== exp_r || err_col[u] !== exp_e || err[u] !== |exp_e) begin
        failures++;
        if (failures < 10)
          $display("MISMATCH unit %0d a=%h fault=%h r=%h exp=%h err_col=%b exp=%b",
                   u, av, fv, r[u], exp_r, err_col[u], exp_e);
      end
      if (err[u]) detected++;
    end
    if (!err[0] && err[1]) ccs_miss_iccs_hit++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("WATCHDOG: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) check_one(rand_state(), '0);
    // single-cell faults: always detected by both schemes
    for (int n = 0; n < 500; n++) begin
      int i;
      i = $urandom_range(15, 0);
      check_one(rand_state(), 64'($urandom_range(15, 1)) << (4*i));
      for (int u = 0; u < 4; u++) begin
        checks++;
        if (!err[u]) begin
          failures++;
          $display("single-cell fault not detected by unit %0d", u);
        end
      end
    end
    // equal faults in two cells of one column
    for (int n = 0; n < 500; n++) begin
      int c, r1, r2;
      logic [3:0] v;
      c = $urandom_range(3, 0);
      r1 = $urandom_range(3, 0);
      r2 = (r1 + $urandom_range(3, 1)) % 4;
      v = 4'($urandom_range(15, 1));
      check_one(rand_state(), (64'(v) << (4*(4*r1 + c))) | (64'(v) << (4*(4*r2 + c))));
    end
    for (int n = 0; n < 500; n++) check_one(rand_state(), rand_state());
    if (detected == 0) begin
      failures++;
      $display("no fault was ever detected");
    end
    if (ccs_miss_iccs_hit == 0) begin
      failures++;
      $display("never saw a fault missed by CCS and caught by ICCS");
    end
    $display("detections=%0d ccs_miss_iccs_hit=%0d", detected, ccs_miss_iccs_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
