// fst_mixcol: spatial redundancy with fault space transformation (FST).
//
// Two copies of a MixColumn (LED or Midori64 M_C, chosen by CIPHER) compute
// the same result from the same input. The original result is stored as is.
// The redundant result is first mapped by W, an MDS-type matrix, and stored
// in the transformed space. At the output the stored redundant value is
// mapped back by W^-1 and XORed with the original register; any nonzero bit
// raises err. Because the two registers hold different encodings, the same
// fault e injected in both registers shows up as e + W^-1(e), which is
// nonzero unless e is a fixed point of W; plain duplication would miss every
// such "fault collision".
//
// W is Midori64's M_C, applied to each column. M_C is involutive, so W^-1 is
// the same matrix. The paper's own experiment uses KLEIN's MixNibble and
// InvMixNibble, which are not given there; M_C is the involutive matrix it
// does give. The protected computation and the reset are this design's
// choices.
//
// Interface: clk, rst_n (active low, clears both registers), en (register
// update), a (input state), fault_orig / fault_red (test hooks: error masks
// on the D inputs of the original and redundant registers), r (original
// register), err. Timing: a is sampled on a rising edge with en high; r and
// err are valid after that edge (one clock of latency).
module fst_mixcol
  import mixcol_pkg::*;
#(
  parameter cipher_e CIPHER = LED
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  state_t a,
  input  state_t fault_orig,
  input  state_t fault_red,
  output state_t r,
  output logic   err
);

  state_t y_orig, y_red, y_red_w, q_orig, q_red, q_red_winv;

  if (CIPHER == MIDORI_MC) begin : g_midori
    midori_mixcol u_orig (.a(a), .r(y_orig));
    midori_mixcol u_red  (.a(a), .r(y_red));
  end else begin : g_led
    led_mixcol u_orig (.a(a), .r(y_orig));
    led_mixcol u_red  (.a(a), .r(y_red));
  end

  // Transformation W into the fault space of the redundant register.
  midori_mixcol u_w    (.a(y_red), .r(y_red_w));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      q_orig <= '0;
      q_red  <= '0;
    end else if (en) begin
      q_orig <= y_orig  ^ fault_orig;
      q_red  <= y_red_w ^ fault_red;
    end

  // Inverse transformation W^-1 (M_C is its own inverse).
  midori_mixcol u_winv (.a(q_red), .r(q_red_winv));

  assign r   = q_orig;
  assign err = |(q_orig ^ q_red_winv);

endmodule
