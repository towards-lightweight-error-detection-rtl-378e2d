// ed_mixcol: MixColumn with concurrent error detection by column signatures.
//
// One MixColumn (Midori64 M_C or LED, chosen by CIPHER) runs alongside a
// predictor that computes, from the input state only, what the column
// signatures of the result must be (cumulative column signature, CCS, or its
// interleaved form, ICCS, chosen by SCHEME). A checker forms the same
// signatures from the actual result and compares. Any fault that changes a
// signature of a column raises err_col for that column and err. These four
// combinations are the architectures the paper benchmarks in its ASIC table.
//
// The fault input is a test hook: it is XORed onto the MixColumn result, so
// a testbench can model a natural or injected fault in the datapath; tie it
// to zero in normal use.
//
// Interface: a (input state), fault (64-bit error mask), r (result as
// delivered, including the fault), err_col[3:0], err. Purely combinational.
// An immediate assertion states that err never rises while fault is zero.
module ed_mixcol
  import mixcol_pkg::*;
#(
  parameter cipher_e CIPHER = MIDORI_MC,
  parameter scheme_e SCHEME = CCS
) (
  input  state_t     a,
  input  state_t     fault,
  output state_t     r,
  output logic [3:0] err_col,
  output logic       err
);

  state_t r_mc;

  if (CIPHER == MIDORI_MC) begin : g_midori
    midori_mixcol u_mix (.a(a), .r(r_mc));
  end else begin : g_led
    led_mixcol u_mix (.a(a), .r(r_mc));
  end

  assign r = r_mc ^ fault;

  if (SCHEME == CCS) begin : g_ccs
    csig_t p;
    if (CIPHER == MIDORI_MC) begin : g_pred
      midori_ccs_pred u_pred (.a(a), .p(p));
    end else begin : g_pred
      led_ccs_pred u_pred (.a(a), .p(p));
    end
    ccs_check u_chk (.r(r), .p(p), .err_col(err_col), .err(err));
  end else begin : g_iccs
    isig_t p;
    if (CIPHER == MIDORI_MC) begin : g_pred
      midori_iccs_pred u_pred (.a(a), .p(p));
    end else begin : g_pred
      led_iccs_pred u_pred (.a(a), .p(p));
    end
    iccs_check u_chk (.r(r), .p(p), .err_col(err_col), .err(err));
  end

  // No false alarms: a fault-free MixColumn always matches its prediction.
  always_comb
    if (fault == '0) assert (err == 1'b0) else $error("signature mismatch without a fault");

endmodule
